// tb_sram_1p: self-checking test of the single-port buffer SRAM.
// Random writes and reads against a reference array; checks the one-cycle
// read latency and that a read with en low leaves rdata unchanged.
module tb_sram_1p;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, we; logic [9:0] addr; logic [63:0] wdata, rdata;
  sram_1p #(.WORDS(1024)) dut (.*);
  logic [63:0] refm [1024];
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(i); wdata = {$urandom, $urandom}; refm[i] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      int a; a = $urandom_range(0, 1023);
      @(negedge clk); en = 1; addr = 10'(a);
      if ($urandom_range(0, 3) == 0) begin we = 1; wdata = {$urandom, $urandom}; refm[a] = wdata; end
      else begin
        logic [63:0] e; e = refm[a]; we = 0;
        @(negedge clk); en = 0; addr = 10'($urandom);
        checks++; if (rdata != e) begin failures++; $display("FAIL addr %0d", a); end
        @(negedge clk);
        checks++; if (rdata != e) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
