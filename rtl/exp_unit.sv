// exp_unit: look-up-table exponent unit of the logic-die vector unit.
//
// Computes e^x for 512 signed Q8.8 lanes, the exponentials of a softmax. The
// unit rewrites e^x as 2^t with t = x * log2(e). The integer part of t becomes
// a shift; the fractional part indexes a 64-entry table of 2^(k/64) held in
// Q1.14. Both are combined into a Q8.8 result, which saturates at the largest
// 16-bit value; very negative inputs give 0. The table is computed at
// elaboration from its formula, 2^(k/64) * 2^14 rounded.
//
// A LUT-based exponent unit follows the published design; the table size,
// number format and the base-2 decomposition are this design's choices. The
// relative error stays within about 2 % plus one Q8.8 step.
//
// Timing: y and out_valid follow in_valid by one cycle.
module exp_unit
  import halo_pkg::*;
#(
  parameter int LANES    = VEC_LANES,
  parameter int DW       = VEC_DW,
  parameter int LUT_BITS = 6
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [LANES-1:0][DW-1:0]   x,
  output logic                       out_valid,
  output logic [LANES-1:0][DW-1:0]   y
);
  localparam int LUT_N = 1 << LUT_BITS;
  typedef logic [15:0] lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    for (int k = 0; k < LUT_N; k++)
      t[k] = 16'($rtoi(2.0 ** (real'(k) / real'(LUT_N)) * 16384.0 + 0.5));
    return t;
  endfunction

  localparam lut_t LUT = make_lut();
  localparam logic signed [15:0] LOG2E_Q8 = 16'sd369;   // log2(e) in Q8.8

  function automatic logic [DW-1:0] exp_q88(logic signed [DW-1:0] xi);
    logic signed [31:0] t;
    int                 ip;
    logic [7:0]         fp;
    logic [47:0]        v;
    t  = (32'(xi) * 32'(LOG2E_Q8)) >>> 8;      // Q8.8, floor
    ip = int'(t >>> 8);                        // integer part (floor)
    fp = t[7:0];                               // fraction, 1/256 steps
    v  = 48'(LUT[fp[7 -: LUT_BITS]]);          // Q1.14
    // result Q8.8 = v * 2^ip / 2^6
    if (ip >= 8)       return {1'b0, {(DW-1){1'b1}}};
    else if (ip >= 6)  v = v << (ip - 6);
    else if (ip > -40) v = v >> (6 - ip);
    else               v = '0;
    if (v > 48'((1 << (DW - 1)) - 1)) return {1'b0, {(DW-1){1'b1}}};
    return v[DW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++) y[i] <= exp_q88(x[i]);
    end
  end
endmodule
