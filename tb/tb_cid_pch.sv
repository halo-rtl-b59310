// tb_cid_pch: self-checking test of one CiD pseudo channel.
// A behavioural DRAM model holds a random int8 weight matrix in 8 banks (row r
// of bank b is output element r*8+b), answers column reads in order after a
// random latency and sometimes deasserts ready. The test loads an input
// vector, swaps the buffer, runs GEMVs of two sizes and compares every result
// with a matrix-vector product computed here. It also checks that stalls
// happened and that an unstalled run takes rows*kbeats+latency cycles.
module tb_cid_pch;
  import halo_pkg::*;
  localparam int NB = 8, L = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  logic cmd_valid, cmd_ready, buf_wr, buf_swap, dram_req, dram_ready, dram_valid, res_valid, busy;
  logic [15:0] cmd_rows, dram_row, res_row;
  logic [7:0] cmd_kbeats;
  logic [6:0] buf_line, dram_col;
  logic [L-1:0][7:0] buf_data;
  logic [NB-1:0][L-1:0][7:0] dram_data;
  logic [NB-1:0][31:0] res_data;
  cid_pch dut (.*);

  // weights: wgt[bank][row][k]
  byte wgt [NB][8][256];
  byte xin [256];
  int  rnd_lat = 1;       // random latency and ready gaps when 1

  // DRAM model: in-order pipeline of requests
  typedef struct { int row; int col; int due; } rq_t;
  rq_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (dram_req && dram_ready) q.push_back('{int'(dram_row), int'(dram_col), cyc + (rnd_lat ? $urandom_range(2, 5) : 2)});
  end
  always @(negedge clk) begin
    dram_ready <= rnd_lat ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (q.size() > 0 && q[0].due <= cyc) begin
      rq_t r; r = q.pop_front();
      dram_valid <= 1'b1;
      for (int b = 0; b < NB; b++) for (int i = 0; i < L; i++) dram_data[b][i] <= wgt[b][r.row][r.col*L + i];
    end else begin
      dram_valid <= 1'b0;
      if (busy) stalls++;
    end
  end

  int got;
  int nrows_exp, kb_exp;
  always @(posedge clk) if (rst_n && res_valid) begin
    for (int b = 0; b < NB; b++) begin
      int e; e = 0;
      for (int k = 0; k < kb_exp * L; k++) e += int'(wgt[b][res_row][k]) * int'(xin[k]);
      checks++;
      if ($signed(res_data[b]) != e) begin failures++; $display("FAIL row %0d bank %0d got %0d exp %0d", res_row, b, $signed(res_data[b]), e); end
    end
    checks++; if (int'(res_row) != got) begin failures++; $display("FAIL row order"); end
    got++;
  end

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int rows, int kb);
    int t0;
    got = 0; nrows_exp = rows; kb_exp = kb;
    @(negedge clk); cmd_valid = 1; cmd_rows = 16'(rows); cmd_kbeats = 8'(kb);
    t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
    checks++; if (got != rows) begin failures++; $display("FAIL rows %0d", got); end
    if (!rnd_lat) begin
      // one beat per cycle; 2-cycle DRAM latency; 3-cycle GEMV pipeline
      checks++;
      if (cyc - t0 > rows * kb + 8) begin failures++; $display("FAIL slow run %0d cycles", cyc - t0); end
      $display("unstalled GEMV %0dx%0d beats: %0d cycles", rows, kb, cyc - t0);
    end
  endtask

  initial begin
    cmd_valid = 0; buf_wr = 0; buf_swap = 0; cmd_rows = 0; cmd_kbeats = 0; buf_line = 0; buf_data = '0;
    dram_valid = 0; dram_ready = 0; dram_data = '0;
    for (int b = 0; b < NB; b++) for (int r = 0; r < 8; r++) for (int k = 0; k < 256; k++) wgt[b][r][k] = byte'($urandom);
    for (int k = 0; k < 256; k++) xin[k] = byte'($urandom);
    wgt[0][0][0] = -128; xin[0] = -128;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 8; l++) begin
      @(negedge clk); buf_wr = 1; buf_line = 7'(l);
      for (int i = 0; i < L; i++) buf_data[i] = xin[l*L + i];
    end
    @(negedge clk); buf_wr = 0; buf_swap = 1; @(negedge clk); buf_swap = 0;
    run(8, 8);
    run(3, 2);
    rnd_lat = 0;
    run(8, 8);
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
