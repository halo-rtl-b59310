// tb_vec_add_unit: self-checking test of the 512-lane saturating adder.
// Random vectors plus overflow corner cases; reference computed here with
// clipping; checks the one-cycle latency.
module tb_vec_add_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [511:0][15:0] a, b, y;
  vec_add_unit dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; a = '0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int i = 0; i < 512; i++) begin
        a[i] = (t < 10) ? 16'($urandom_range(0, 4095) - 2048) : 16'($urandom);
        b[i] = 16'($urandom);
      end
      a[0] = 16'h7fff; b[0] = 16'h7fff; a[1] = 16'h8000; b[1] = 16'h7fff;
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < 512; i++) begin
        longint p; p = longint'($signed(a[i])) + longint'($signed(b[i]));
        if (p > 32767) p = 32767; if (p < -32768) p = -32768;
        checks++;
        if ($signed(y[i]) != p) begin failures++; $display("FAIL lane %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
