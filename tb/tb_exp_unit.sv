// tb_exp_unit: self-checking test of the LUT exponent unit.
// Sweeps every Q8.8 input from -16 to +6 across the 512 lanes and compares
// with e^x computed here in floating point: the error must stay within 2 % of
// the true value plus two Q8.8 steps; large inputs must saturate.
module tb_exp_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [511:0][15:0] x, y;
  exp_unit dut (.*);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; x = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int base = -4096; base < 1536 + 512; base += 512) begin
      @(negedge clk);
      for (int i = 0; i < 512; i++) x[i] = 16'(base + i);
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < 512; i++) begin
        real e, got; int xi;
        xi = base + i;
        e = $exp(real'(xi) / 256.0) * 256.0;
        got = real'($signed(y[i]));
        checks++;
        if (e >= 32767.0 * 1.03) begin
          if (y[i] != 16'h7fff) begin failures++; $display("FAIL no saturation x=%0d", xi); end
        end else begin
          if (e > 32767.0) e = 32767.0;
          if ((got - e > 0.02 * e + 2.0) || (e - got > 0.02 * e + 2.0)) begin
          failures++; $display("FAIL x=%0d got %0f exp %0f", xi, got, e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
