// vector_unit: the vector unit on the HBM logic die.
//
// Non-GEMM work of a transformer layer (LayerNorm, activations, residual
// additions and the exponentials of softmax) runs here, on 512-lane vectors
// of signed 16-bit Q8.8 values. A vector buffer of DEPTH entries feeds an
// element-wise multiplication unit, an element-wise addition unit and a
// LUT-based exponent unit. The general-purpose cores on the logic die (which
// also do divisions and square roots) issue instructions
//   VOP_MUL rd = rs1 * rs2, VOP_ADD rd = rs1 + rs2, VOP_EXP rd = exp(rs1)
// and move vectors in and out through the buffer port.
//
// The three units, the buffer between them and the cores, and the 512-lane
// width follow the published design; the instruction format, the buffer depth
// and the one-instruction-at-a-time issue are this design's choices.
//
// Timing: an instruction is accepted when instr_ready; its result is written
// to the buffer two cycles later, when `done` pulses. Buffer writes through
// the port land at the clock edge; buffer reads are combinational. A port
// write and an instruction result to the same entry in one cycle: the
// instruction result wins.
module vector_unit
  import halo_pkg::*;
#(
  parameter int LANES = VEC_LANES,
  parameter int DW    = VEC_DW,
  parameter int DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  vec_instr_t                 instr,
  input  logic                       instr_valid,
  output logic                       instr_ready,
  output logic                       done,
  input  logic                       buf_wr,
  input  logic [$clog2(DEPTH)-1:0]   buf_waddr,
  input  logic [LANES-1:0][DW-1:0]   buf_wdata,
  input  logic [$clog2(DEPTH)-1:0]   buf_raddr,
  output logic [LANES-1:0][DW-1:0]   buf_rdata,
  output logic [31:0]                n_mul,
  output logic [31:0]                n_add,
  output logic [31:0]                n_exp
);
  localparam int AW = $clog2(DEPTH);
  logic [LANES-1:0][DW-1:0] vbuf [DEPTH];

  logic       busy;
  vec_instr_t ins_q;
  logic [LANES-1:0][DW-1:0] opa, opb, y_mul, y_add, y_exp;
  logic v_mul, v_add, v_exp;

  assign instr_ready = !busy;
  assign opa = vbuf[instr.rs1[AW-1:0]];
  assign opb = vbuf[instr.rs2[AW-1:0]];
  assign buf_rdata = vbuf[buf_raddr];

  wire go = instr_valid && instr_ready;

  vec_mul_unit #(.LANES(LANES), .DW(DW)) u_mul (.clk, .rst_n, .in_valid(go && instr.op == VOP_MUL), .a(opa), .b(opb), .out_valid(v_mul), .y(y_mul));
  vec_add_unit #(.LANES(LANES), .DW(DW)) u_add (.clk, .rst_n, .in_valid(go && instr.op == VOP_ADD), .a(opa), .b(opb), .out_valid(v_add), .y(y_add));
  exp_unit     #(.LANES(LANES), .DW(DW)) u_exp (.clk, .rst_n, .in_valid(go && instr.op == VOP_EXP), .x(opa), .out_valid(v_exp), .y(y_exp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ins_q <= '0; done <= 1'b0;
      n_mul <= '0; n_add <= '0; n_exp <= '0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy <= 1'b1; ins_q <= instr;
      end else if (v_mul || v_add || v_exp) begin
        busy <= 1'b0; done <= 1'b1;
        if (v_mul) n_mul <= n_mul + 32'd1;
        if (v_add) n_add <= n_add + 32'd1;
        if (v_exp) n_exp <= n_exp + 32'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (buf_wr) vbuf[buf_waddr] <= buf_wdata;
    if (v_mul) vbuf[ins_q.rd[AW-1:0]] <= y_mul;
    if (v_add) vbuf[ins_q.rd[AW-1:0]] <= y_add;
    if (v_exp) vbuf[ins_q.rd[AW-1:0]] <= y_exp;
  end

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({v_mul, v_add, v_exp}));
endmodule
