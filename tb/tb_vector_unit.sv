// tb_vector_unit: self-checking test of the logic-die vector unit.
// Loads random vectors through the buffer port, runs a small softmax-style
// program (exp, multiply, add), reads the results back and compares with
// values computed here. Checks that each instruction completes in 2 cycles
// and that each of the three units was used.
module tb_vector_unit;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vec_instr_t instr; logic instr_valid, instr_ready, done, buf_wr;
  logic [4:0] buf_waddr, buf_raddr;
  logic [511:0][15:0] buf_wdata, buf_rdata;
  logic [31:0] n_mul, n_add, n_exp;
  vector_unit dut (.*);

  logic [511:0][15:0] mref [32];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [15:0] sat16(longint v);
    if (v > 32767) return 16'h7fff; if (v < -32768) return 16'h8000; return 16'(v);
  endfunction

  task automatic issue(vec_op_e op, int rd, int rs1, int rs2);
    int t0;
    @(negedge clk); instr = '{op: op, rd: 5'(rd), rs1: 5'(rs1), rs2: 5'(rs2)}; instr_valid = 1; t0 = cyc;
    @(negedge clk); instr_valid = 0;
    while (!done) @(negedge clk);
    checks++; if (cyc - t0 != 2) begin failures++; $display("FAIL instr latency %0d", cyc - t0); end
    for (int i = 0; i < 512; i++) begin
      longint a, b; a = longint'($signed(mref[rs1][i])); b = longint'($signed(mref[rs2][i]));
      unique case (op)
        VOP_MUL: mref[rd][i] = sat16((a * b + 128) >>> 8);
        VOP_ADD: mref[rd][i] = sat16(a + b);
        default: mref[rd][i] = 16'($rtoi($exp(real'(a) / 256.0) * 256.0));
      endcase
    end
  endtask

  task automatic check_reg(int r, bit approx);
    @(negedge clk); buf_raddr = 5'(r); #1;
    for (int i = 0; i < 512; i++) begin
      int d; d = int'($signed(buf_rdata[i])) - int'($signed(mref[r][i]));
      checks++;
      if (approx ? (d > 2 + int'($signed(mref[r][i])) / 50 || d < -2 - int'($signed(mref[r][i])) / 50) : (d != 0)) begin
        failures++; $display("FAIL v%0d lane %0d got %0d exp %0d", r, i, $signed(buf_rdata[i]), $signed(mref[r][i]));
      end
    end
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    instr = '0; instr_valid = 0; buf_wr = 0; buf_waddr = 0; buf_raddr = 0; buf_wdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); buf_wr = 1; buf_waddr = 5'(r);
      for (int i = 0; i < 512; i++) buf_wdata[i] = 16'($urandom_range(0, 2047) - 1536);  // about -6 .. +2
      mref[r] = buf_wdata;
    end
    @(negedge clk); buf_wr = 0;
    issue(VOP_EXP, 4, 0, 0);  check_reg(4, 1);
    mref[4] = buf_rdata;      // continue from the unit's own values
    issue(VOP_MUL, 5, 4, 1);  check_reg(5, 0);
    issue(VOP_ADD, 6, 5, 2);  check_reg(6, 0);
    issue(VOP_ADD, 7, 3, 3);  check_reg(7, 0);
    checks++; if (n_mul != 1 || n_add != 2 || n_exp != 1) begin failures++; $display("FAIL op counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
