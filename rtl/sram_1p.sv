// sram_1p: single-port synchronous SRAM with a registered read.
//
// Used for every on-chip buffer of the CiM accelerator: the 4 MB global buffer
// of a tile and the 32 KB input, 64 KB weight and 128 KB output buffers of a
// core. The capacities come from the published configuration; the 64-bit word
// and the one-access-per-cycle port are this design's choices (the published
// buffer bandwidths are not modelled).
//
// Timing: with en and we the word is written at the clock edge; with en and
// not we, rdata holds the addressed word from the following cycle on.
module sram_1p #(
  parameter int WORDS = 4096,
  parameter int W     = 64,
  localparam int AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
