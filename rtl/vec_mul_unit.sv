// vec_mul_unit: element-wise multiplier of the logic-die vector unit.
//
// Multiplies two vectors of 512 signed 16-bit Q8.8 fixed-point lanes, lane by
// lane, as needed for LayerNorm scaling and activation functions. Each
// product is rounded to nearest, rescaled to Q8.8 and saturated to the
// 16-bit range.
//
// The lane count (vector width 512) and the 16-bit lanes follow the published
// design; the Q8.8 format, rounding and saturation are this design's choices.
//
// Timing: one vector per cycle; y and out_valid follow in_valid by one cycle.
module vec_mul_unit
  import halo_pkg::*;
#(
  parameter int LANES = VEC_LANES,
  parameter int DW    = VEC_DW,
  parameter int FRAC  = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [LANES-1:0][DW-1:0]   a,
  input  logic [LANES-1:0][DW-1:0]   b,
  output logic                       out_valid,
  output logic [LANES-1:0][DW-1:0]   y
);
  localparam logic signed [2*DW-1:0] MAXV = (2*DW)'((1 << (DW - 1)) - 1);
  localparam logic signed [2*DW-1:0] MINV = -(2*DW)'(1 << (DW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++) begin
          logic signed [2*DW-1:0] p;
          p = ($signed(a[i]) * $signed(b[i]) + (2*DW)'(1 << (FRAC - 1))) >>> FRAC;
          if (p > MAXV)      y[i] <= MAXV[DW-1:0];
          else if (p < MINV) y[i] <= MINV[DW-1:0];
          else               y[i] <= p[DW-1:0];
        end
    end
  end
endmodule
