// tb_cid_io_buffer: self-checking test of the double-buffered CiD input buffer.
// Fills one half, swaps, checks that the banks read what was written while a
// second vector is written into the other half, then swaps back.
module tb_cid_io_buffer;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, swap, compute_half;
  logic [6:0] wr_addr, rd_addr;
  logic [31:0][7:0] wr_data, rd_data;
  cid_io_buffer dut (.*);

  logic [31:0][7:0] ref_a [128], ref_b [128];

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; swap = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 128; i++) for (int k = 0; k < 32; k++) begin
      ref_a[i][k] = 8'($urandom); ref_b[i][k] = 8'($urandom);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (compute_half != 0) begin failures++; $display("FAIL reset half"); end
    // fill vector A into the fill half (half 1)
    for (int i = 0; i < 128; i++) begin
      wr_en = 1; wr_addr = 7'(i); wr_data = ref_a[i]; @(negedge clk);
    end
    wr_en = 0; swap = 1; @(negedge clk); swap = 0;
    checks++; if (compute_half != 1) begin failures++; $display("FAIL swap"); end
    // read A while writing B into the other half
    for (int i = 0; i < 128; i++) begin
      rd_addr = 7'(127 - i); wr_en = 1; wr_addr = 7'(i); wr_data = ref_b[i];
      #1; checks++;
      if (rd_data != ref_a[127 - i]) begin failures++; $display("FAIL read A line %0d", 127 - i); end
      @(negedge clk);
    end
    wr_en = 0; swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < 128; i++) begin
      rd_addr = 7'(i); #1; checks++;
      if (rd_data != ref_b[i]) begin failures++; $display("FAIL read B line %0d", i); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
