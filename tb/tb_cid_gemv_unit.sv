// tb_cid_gemv_unit: self-checking test of the bank GEMV unit.
// Streams rows of random signed int8 beats (with idle gaps) through the unit,
// compares every row result with a dot product computed here, and checks that
// the result appears exactly 3 cycles after the row's last beat.
module tb_cid_gemv_unit;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first, last, out_valid;
  logic signed [31:0][7:0] w, x;
  logic signed [31:0] result;
  cid_gemv_unit dut (.*);

  longint expq[$];
  int     last_cyc[$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int lc;
    e = expq.pop_front(); lc = last_cyc.pop_front();
    checks += 2;
    if (longint'(result) != e) begin failures++; $display("FAIL result %0d exp %0d", result, e); end
    // out_valid rises at the third rising edge counting the one that samples the last beat
    if (cyc - lc != 2) begin failures++; $display("FAIL latency %0d", cyc - lc); end
  end

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; w = '0; x = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int row = 0; row < 20; row++) begin
      int beats; longint acc;
      beats = 1 + $urandom_range(0, 6); acc = 0;
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        for (int i = 0; i < 32; i++) begin
          w[i] = (row == 0) ? 8'sh80 : 8'($urandom);
          x[i] = (row == 0) ? 8'sh80 : 8'($urandom);
          acc += longint'($signed(w[i])) * longint'($signed(x[i]));
        end
        in_valid = 1; first = (b == 0); last = (b == beats - 1);
        if (last) begin expq.push_back(acc); last_cyc.push_back(cyc + 1); end
        if ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; first = 0; last = 0; end
      end
      @(negedge clk); in_valid = 0; first = 0; last = 0;
    end
    repeat (6) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
