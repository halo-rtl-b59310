// tb_cim_shift_add: self-checking test of the shift-and-add stage.
// Feeds random ADC codes for all 8 input bits and 3 column groups and checks
// the accumulated per-column sums against the signed bit-plane formula.
module tb_cim_shift_add;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid; logic [2:0] ibit; logic [1:0] mgrp;
  logic [7:0][47:0][6:0] codes;
  logic signed [127:0][31:0] acc;
  cim_shift_add dut (.*);

  longint expv [128];

  initial begin
    #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; in_valid = 0; ibit = 0; mgrp = 0; codes = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int c = 0; c < 128; c++) expv[c] = 0;
      for (int b = 0; b < 8; b++) for (int g = 0; g < 3; g++) begin
        in_valid = 1; ibit = 3'(b); mgrp = 2'(g);
        for (int j = 0; j < 8; j++) for (int k = 0; k < 48; k++) begin
          int col; longint t;
          codes[j][k] = (rep == 0) ? 7'd127 : 7'($urandom);
          col = g * 48 + k;
          if (col < 128) begin
            t = longint'(codes[j][k]) <<< (b + j);
            if ((j == 7) != (b == 7)) t = -t;
            expv[col] += t;
          end
        end
        @(negedge clk);
      end
      in_valid = 0; @(negedge clk);
      for (int c = 0; c < 128; c++) begin
        checks++;
        if (longint'($signed(acc[c])) != expv[c]) begin failures++; $display("FAIL col %0d got %0d exp %0d", c, $signed(acc[c]), expv[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
