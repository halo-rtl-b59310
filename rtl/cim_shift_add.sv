// cim_shift_add: shift-and-add reconstruction for one analog CiM unit.
//
// Weights are stored bit-sliced: crossbar j holds bit j of every 8-bit weight.
// Inputs are bit-streamed: cycle b applies bit b of every 8-bit input to the
// wordlines. An ADC code c(j,b,col) is therefore the partial dot product of
// input bit-plane b with weight bit-plane j on one column. The full signed
// product is
//     y[col] = sum_b sum_j s_b * s_j * 2^(b+j) * c(j,b,col),
// with s = -1 for the most significant (sign) bit of a two's-complement
// operand and +1 otherwise. This block forms that sum for the 48 columns of
// the current ADC group each cycle and accumulates it per column.
//
// The shift-and-add of bit-slices and bit-streams follows the published
// design; the two's-complement sign handling and the 32-bit accumulators are
// this design's choices.
//
// Timing: `clear` zeroes all accumulators at the clock edge. A beat with
// in_valid adds into columns mgrp*48 .. mgrp*48+47 at the clock edge; acc is
// the registered running sum.
module cim_shift_add
  import halo_pkg::*;
#(
  parameter int NX     = N_XBAR,
  parameter int NADC   = N_ADC,
  parameter int COLS   = XBAR_COLS,
  parameter int ABITS  = ADC_BITS,
  parameter int AW     = ACC_W,
  localparam int NGRP  = (COLS + NADC - 1) / NADC
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  clear,
  input  logic                                  in_valid,
  input  logic [$clog2(NX)-1:0]                 ibit,
  input  logic [$clog2(NGRP)-1:0]               mgrp,
  input  logic [NX-1:0][NADC-1:0][ABITS-1:0]    codes,
  output logic signed [COLS-1:0][AW-1:0]        acc
);
  // combine the bit slices of each ADC lane, then weight by the input bit
  logic signed [AW-1:0] term [NADC];
  always_comb begin
    for (int k = 0; k < NADC; k++) begin
      logic signed [AW-1:0] t;
      t = '0;
      for (int j = 0; j < NX; j++) begin
        if (j == NX - 1) t -= AW'(codes[j][k]) <<< j;
        else             t += AW'(codes[j][k]) <<< j;
      end
      if (int'(ibit) == NX - 1) term[k] = -(t <<< ibit);
      else                      term[k] =  (t <<< ibit);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clear) begin
      acc <= '0;
    end else if (in_valid) begin
      // column c is served by ADC lane c % NADC in group c / NADC
      for (int c = 0; c < COLS; c++)
        if (int'(mgrp) == c / NADC) acc[c] <= acc[c] + term[c % NADC];
    end
  end
endmodule
