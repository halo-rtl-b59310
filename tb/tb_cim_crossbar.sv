// tb_cim_crossbar: self-checking test of the analog crossbar model.
// Writes a random bit pattern, converts every column group with random input
// bits and wordline masks, and compares each ADC code with a bitline count
// computed here (clipped at 127), including an all-ones case that must clip.
module tb_cim_crossbar;
  import halo_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sats = 0;

  logic wr_en, conv, adc_valid, adc_sat;
  logic [6:0] wr_row; logic [3:0] wr_col8; logic [7:0] wr_bits;
  logic [127:0] in_bits, wl_mask; logic [1:0] mux_sel;
  logic [47:0][6:0] adc_code;
  cim_crossbar dut (.*);

  logic [127:0] m [128];

  task automatic check_conv(logic [127:0] ib, logic [127:0] msk, int g);
    @(negedge clk); conv = 1; in_bits = ib; wl_mask = msk; mux_sel = 2'(g);
    @(negedge clk); conv = 0;
    checks++; if (!adc_valid) begin failures++; $display("FAIL no valid"); end
    for (int k = 0; k < 48; k++) begin
      int c, col; col = g * 48 + k; c = 0;
      if (col < 128) for (int r = 0; r < 128; r++) c += (ib[r] & msk[r] & m[r][col]) ? 1 : 0;
      if (c > 127) begin c = 127; sats++; end
      checks++;
      if (int'(adc_code[k]) != c) begin failures++; $display("FAIL g%0d k%0d got %0d exp %0d", g, k, adc_code[k], c); end
    end
  endtask

  initial begin
    #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; conv = 0; wr_row = 0; wr_col8 = 0; wr_bits = 0; in_bits = 0; wl_mask = 0; mux_sel = 0;
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) m[r][c] = ($urandom_range(0, 1) == 1);
    for (int c = 0; c < 128; c++) m[c][5] = 1'b1;   // column 5 all ones
    for (int r = 0; r < 128; r++) for (int g = 0; g < 16; g++) begin
      @(negedge clk); wr_en = 1; wr_row = 7'(r); wr_col8 = 4'(g); wr_bits = m[r][g*8 +: 8];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 6; t++)
      for (int g = 0; g < 3; g++)
        check_conv({$urandom, $urandom, $urandom, $urandom},
                   (t % 3 == 0) ? {128{1'b1}} : (t % 3 == 1) ? {{64{1'b0}}, {64{1'b1}}} : {{64{1'b1}}, {64{1'b0}}}, g);
    check_conv({128{1'b1}}, {128{1'b1}}, 0);   // column 5 counts 128 -> clips
    checks++; if (!adc_sat) begin failures++; $display("FAIL no saturation flag"); end
    check_conv({128{1'b1}}, {{64{1'b0}}, {64{1'b1}}}, 0);   // 64 wordlines: no clip
    checks++; if (adc_sat) begin failures++; $display("FAIL saturation flag with 64 wordlines"); end
    checks++; if (sats == 0) begin failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
