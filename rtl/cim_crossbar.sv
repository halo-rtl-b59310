// cim_crossbar: behavioural model of one analog 8T-SRAM compute-in-memory
// crossbar with its wordline decoder, column multiplexer and SAR ADCs.
// This is a behavioural model of an analog macro, not synthesizable logic in
// the sense of the real part: the bitline charge sharing is replaced by an
// integer count.
//
// The array has 128 wordlines by 128 bitlines of one-bit 8T SRAM cells. In a
// compute step every active wordline whose input bit is 1 lets each cell on it
// that stores a 1 discharge its bitline; the analog bitline level is therefore
// proportional to the number of such cells. 48 SAR ADCs of 7 bits digitise
// the bitlines through a column multiplexer, so a full read-out of the 128
// columns takes three conversions (columns 0-47, 48-95, 96-127). A count
// above 127 saturates the 7-bit ADC: this is the accuracy loss that limits how
// many wordlines may be turned on together.
//
// Geometry, cell type, ADC count and resolution follow the published design.
// One conversion per clock and the ideal (noise-free, linear) transfer are
// this model's choices.
//
// Interface and timing: wr_en writes 8 adjacent cells of one row
// (columns wr_col8*8 .. +7) at the clock edge. conv starts a conversion of
// column group mux_sel with wordlines in_bits & wl_mask; adc_code is valid
// (adc_valid) one cycle later and is held until the next conversion. Unused
// ADCs of the last group output 0.
module cim_crossbar
  import halo_pkg::*;
#(
  parameter int ROWS     = XBAR_ROWS,
  parameter int COLS     = XBAR_COLS,
  parameter int NADC     = N_ADC,
  parameter int ABITS    = ADC_BITS,
  localparam int NGRP    = (COLS + NADC - 1) / NADC
) (
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [$clog2(ROWS)-1:0]          wr_row,
  input  logic [$clog2(COLS/8)-1:0]        wr_col8,
  input  logic [7:0]                       wr_bits,
  input  logic                             conv,
  input  logic [ROWS-1:0]                  in_bits,
  input  logic [ROWS-1:0]                  wl_mask,
  input  logic [$clog2(NGRP)-1:0]          mux_sel,
  output logic                             adc_valid,
  output logic [NADC-1:0][ABITS-1:0]       adc_code,
  output logic                             adc_sat     // some ADC clipped
);
  localparam int CMAX = (1 << ABITS) - 1;

  // stored column by column: bitline[col][row] is the cell at (row, col)
  logic [ROWS-1:0] bitline [COLS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < 8; i++) bitline[int'(wr_col8) * 8 + i][wr_row] <= wr_bits[i];
  end

  always_ff @(posedge clk) begin
    adc_valid <= conv;
    if (conv) begin
      logic [ROWS-1:0] wl;
      logic            sat;
      wl  = in_bits & wl_mask;
      sat = 1'b0;
      for (int k = 0; k < NADC; k++) begin
        int col;
        int cnt;
        col = int'(mux_sel) * NADC + k;
        cnt = 0;
        if (col < COLS) cnt = $countones(wl & bitline[col]);
        if (cnt > CMAX) begin
          cnt = CMAX;
          sat = 1'b1;
        end
        adc_code[k] <= ABITS'(cnt);
      end
      adc_sat <= sat;
    end
  end
endmodule
