// vec_add_unit: element-wise adder of the logic-die vector unit.
//
// Adds two vectors of 512 signed 16-bit lanes with saturation to the 16-bit
// range (residual additions, bias, normalisation). The lane count and width
// follow the published design; saturation is this design's choice.
//
// Timing: one vector per cycle; y and out_valid follow in_valid by one cycle.
module vec_add_unit
  import halo_pkg::*;
#(
  parameter int LANES = VEC_LANES,
  parameter int DW    = VEC_DW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [LANES-1:0][DW-1:0]   a,
  input  logic [LANES-1:0][DW-1:0]   b,
  output logic                       out_valid,
  output logic [LANES-1:0][DW-1:0]   y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++) begin
          logic signed [DW:0] s;
          s = $signed({a[i][DW-1], a[i]}) + $signed({b[i][DW-1], b[i]});
          if (s[DW] != s[DW-1]) y[i] <= s[DW] ? {1'b1, {(DW-1){1'b0}}} : {1'b0, {(DW-1){1'b1}}};
          else                  y[i] <= s[DW-1:0];
        end
    end
  end
endmodule
