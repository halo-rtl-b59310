// tb_cim_tile: self-checking test of one CiM tile.
// Through the tile's mesh port: writes a weight matrix and an input vector
// into the global buffer, reads some GB words back, fills a core's weight and
// input buffers from the GB, loads and runs a CiM unit on two different
// cores, and reads the output buffers back. Results are compared with
// matrix-vector products computed here.
module tb_cim_tile;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  noc_flit_t g_in_flit, g_out_flit; logic g_in_valid, g_in_ready, g_out_valid, g_out_ready;
  cim_tile #(.TX(1), .TY(2)) dut (.*);

  byte W [128][128];
  byte X [128];
  noc_flit_t rsp [$];
  always @(posedge clk) if (rst_n && g_out_valid && g_out_ready) rsp.push_back(g_out_flit);
  always @(negedge clk) g_out_ready <= ($urandom_range(0, 3) != 0);

  task automatic send(noc_cmd_e c, bit gb, bit cx, bit cy, int addr, logic [63:0] data);
    @(negedge clk);
    g_in_flit = '0; g_in_flit.tx = 2'd1; g_in_flit.ty = 2'd2; g_in_flit.gb = gb; g_in_flit.cx = cx; g_in_flit.cy = cy;
    g_in_flit.cmd = c; g_in_flit.addr = 24'(addr); g_in_flit.data = data; g_in_valid = 1;
    @(posedge clk); while (!g_in_ready) @(posedge clk);
    @(negedge clk); g_in_valid = 0;
  endtask

  task automatic wait_rsp(noc_cmd_e c, output noc_flit_t f);
    int n; n = 0;
    while (rsp.size() == 0 && n < 50000) begin @(posedge clk); n++; end
    checks++;
    if (rsp.size() == 0) begin failures++; $display("FAIL no reply"); f = '0; end
    else begin
      f = rsp.pop_front();
      if (f.cmd != c || !f.host) begin failures++; $display("FAIL reply type %0d exp %0d", f.cmd, c); end
    end
  endtask

  function automatic logic [63:0] wword(int w);
    for (int i = 0; i < 8; i++) wword[i*8 +: 8] = W[w / 16][(w % 16) * 8 + i];
  endfunction
  function automatic logic [63:0] xword(int w);
    for (int i = 0; i < 8; i++) xword[i*8 +: 8] = X[w * 8 + i];
  endfunction

  task automatic run_on_core(bit cx, bit cy, bit half);
    noc_flit_t f;
    send(CMD_FILL_WB, 1, 0, 0, 0, {22'd0, cy, cx, 24'd0, 16'd2048});
    wait_rsp(CMD_DONE, f);
    send(CMD_FILL_IB, 1, 0, 0, 4096, {22'd0, cy, cx, 24'd32, 16'd16});
    wait_rsp(CMD_DONE, f);
    send(CMD_LOAD_W, 0, cx, cy, 0, 64'd1);
    wait_rsp(CMD_DONE, f);
    checks++; if (f.data[63:56] != {2'd1, 2'd2, cx, cy, 2'b00}) begin failures++; $display("FAIL DONE source"); end
    send(CMD_RUN, 0, cx, cy, 32, {46'd0, 16'd0, half, 1'b1});
    wait_rsp(CMD_DONE, f);
    for (int w = 0; w < 64; w++) begin
      send(CMD_RD_OB, 0, cx, cy, w, '0);
      wait_rsp(CMD_RESP, f);
      for (int h = 0; h < 2; h++) begin
        int e; e = 0;
        for (int r = 0; r < 128; r++) e += int'(W[r][2*w + h]) * int'(X[r]);
        checks++;
        if ($signed(f.data[h*32 +: 32]) != e) begin failures++; $display("FAIL core %0d%0d col %0d", cx, cy, 2*w+h); end
      end
    end
  endtask

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    noc_flit_t f;
    g_in_flit = '0; g_in_valid = 0; g_out_ready = 1;
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[r][c] = byte'($urandom);
    for (int r = 0; r < 128; r++) X[r] = byte'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 2048; w++) send(CMD_WR_GB, 1, 0, 0, w, wword(w));
    for (int w = 0; w < 16; w++)   send(CMD_WR_GB, 1, 0, 0, 4096 + w, xword(w));
    for (int w = 0; w < 2048; w += 311) begin
      send(CMD_RD_GB, 1, 0, 0, w, '0);
      wait_rsp(CMD_RESP, f);
      checks++; if (f.data != wword(w)) begin failures++; $display("FAIL GB word %0d", w); end
    end
    run_on_core(1, 1, 0);
    run_on_core(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
