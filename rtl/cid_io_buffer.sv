// cid_io_buffer: double-buffered input-vector store of one CiD pseudo channel.
//
// The buffer holds the 8-bit input vector of a GEMV (up to 4096 elements) and
// broadcasts it, 32 elements per beat, to every bank of the pseudo channel.
// It has two halves. The compute half is read by the banks while the logic
// die writes the next vector into the fill half; `swap` exchanges the roles,
// so loading the next token's vector overlaps the current GEMV.
//
// The capacity of 4096 inputs per vector and the double buffering follow the
// published design (which quotes 4 KB; that is taken here as 4 KB per half).
// The 32-byte line access and the asynchronous read are this design's choices.
//
// Timing: a write lands at the clock edge; a read returns the addressed line
// of the compute half in the same cycle. A swap takes effect at the clock edge
// and a write in the same cycle still goes to the old fill half.
module cid_io_buffer
  import halo_pkg::*;
#(
  parameter int DEPTH = CID_DEPTH,
  parameter int LANES = CID_LANES,
  parameter int DW    = OPW,
  localparam int LINES = DEPTH / LANES,
  localparam int AW    = $clog2(LINES)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [LANES-1:0][DW-1:0]  wr_data,
  input  logic                      swap,
  input  logic [AW-1:0]             rd_addr,
  output logic [LANES-1:0][DW-1:0]  rd_data,
  output logic                      compute_half
);
  logic [LANES-1:0][DW-1:0] mem [2][LINES];
  logic sel_q;  // compute half

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= 1'b0;
    else if (swap) sel_q <= ~sel_q;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[~sel_q][wr_addr] <= wr_data;
  end

  assign rd_data      = mem[sel_q][rd_addr];
  assign compute_half = sel_q;
endmodule
