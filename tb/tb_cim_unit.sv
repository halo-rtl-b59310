// tb_cim_unit: self-checking test of one analog CiM unit.
// Programs a random signed 128x128 weight matrix, multiplies random input
// vectors in both wordline modes and compares with an exact integer product.
// Checks the start-to-done latency (26 cycles with 128 wordlines, 50 with 64),
// and that an all-ones pattern clips the 7-bit ADC with 128 wordlines but is
// exact with 64.
module tb_cim_unit;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, start, half_wl, busy, done;
  logic [6:0] wr_row; logic [3:0] wr_col8; logic [7:0][7:0] wr_w;
  logic [127:0][7:0] x;
  logic signed [127:0][31:0] y;
  logic [31:0] sat_events;
  cim_unit dut (.*);

  byte W [128][128];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_weights();
    for (int r = 0; r < 128; r++) for (int g = 0; g < 16; g++) begin
      @(negedge clk); wr_en = 1; wr_row = 7'(r); wr_col8 = 4'(g);
      for (int i = 0; i < 8; i++) wr_w[i] = W[r][g*8 + i];
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic mvm(bit half, bit expect_exact, int exp_lat);
    int t0, lat; int mism;
    @(negedge clk); start = 1; half_wl = half; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0 - 1;   // edges after the one that samples start
    checks++; if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", lat, exp_lat); end
    mism = 0;
    for (int c = 0; c < 128; c++) begin
      int e; e = 0;
      for (int r = 0; r < 128; r++) e += int'(W[r][c]) * int'($signed(x[r]));
      if ($signed(y[c]) != e) mism++;
    end
    checks++;
    if (expect_exact && mism != 0) begin failures++; $display("FAIL %0d columns wrong (half=%0d)", mism, half); end
    if (!expect_exact && mism == 0) begin failures++; $display("FAIL expected ADC clipping error"); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; start = 0; half_wl = 0; wr_row = 0; wr_col8 = 0; wr_w = '0; x = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[r][c] = byte'($urandom);
    load_weights();
    for (int t = 0; t < 2; t++) begin
      for (int r = 0; r < 128; r++) x[r] = 8'($urandom);
      mvm(1'b0, 1'b1, 26);
      mvm(1'b1, 1'b1, 50);
    end
    checks++; if (sat_events != 0) begin failures++; $display("FAIL unexpected clipping"); end
    // all bits set: every bitline counts 128 with all wordlines on
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[r][c] = -1;
    load_weights();
    for (int r = 0; r < 128; r++) x[r] = 8'hFF;
    mvm(1'b0, 1'b0, 26);
    checks++; if (sat_events == 0) begin failures++; $display("FAIL no clipping counted"); end
    mvm(1'b1, 1'b1, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
