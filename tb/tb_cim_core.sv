// tb_cim_core: self-checking test of one CiM core driven by NoC commands.
// Writes two random weight matrices into the weight buffer and an input
// vector into the input buffer, loads the matrices into the two CiM units,
// runs one product on each (128- and 64-wordline modes), reads the output
// buffer back and compares with matrix-vector products computed here.
module tb_cim_core;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  noc_flit_t in_flit, out_flit; logic in_valid, in_ready, out_valid, out_ready;
  cim_core #(.TX(2), .TY(3), .CX(1), .CY(0)) dut (.*);

  byte W [2][128][128];
  byte X [128];
  noc_flit_t rsp [$];

  always @(posedge clk) if (rst_n && out_valid && out_ready) rsp.push_back(out_flit);
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  task automatic send(noc_cmd_e c, int addr, logic [63:0] data);
    @(negedge clk);
    in_flit = '0; in_flit.cx = 1'b1; in_flit.tx = 2'd2; in_flit.ty = 2'd3;
    in_flit.cmd = c; in_flit.addr = 24'(addr); in_flit.data = data; in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic wait_rsp(noc_cmd_e c, output noc_flit_t f);
    int n; n = 0;
    while (rsp.size() == 0 && n < 20000) begin @(posedge clk); n++; end
    checks++;
    if (rsp.size() == 0) begin failures++; $display("FAIL no reply"); f = '0; end
    else begin
      f = rsp.pop_front();
      if (f.cmd != c || !f.host) begin failures++; $display("FAIL reply type %0d", f.cmd); end
    end
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    noc_flit_t f;
    in_flit = '0; in_valid = 0; out_ready = 1;
    for (int u = 0; u < 2; u++) for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[u][r][c] = byte'($urandom);
    for (int r = 0; r < 128; r++) X[r] = byte'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int u = 0; u < 2; u++)
      for (int w = 0; w < 2048; w++) begin
        logic [63:0] d;
        for (int i = 0; i < 8; i++) d[i*8 +: 8] = W[u][w / 16][(w % 16) * 8 + i];
        send(CMD_WR_WB, u * 2048 + w, d);
      end
    for (int w = 0; w < 16; w++) begin
      logic [63:0] d;
      for (int i = 0; i < 8; i++) d[i*8 +: 8] = X[w * 8 + i];
      send(CMD_WR_IB, 100 + w, d);
    end
    for (int u = 0; u < 2; u++) begin
      send(CMD_LOAD_W, u * 2048, 64'(u));
      wait_rsp(CMD_DONE, f);
      checks++; if (f.data[63:56] != {2'd2, 2'd3, 1'b1, 1'b0, 2'b00}) begin failures++; $display("FAIL reply source tag"); end
    end
    send(CMD_RUN, 100, {32'd0, 16'd0, 14'd0, 1'b0, 1'b0});     // unit 0, 128 wordlines, OB 0
    wait_rsp(CMD_DONE, f);
    send(CMD_RUN, 100, {32'd0, 16'd64, 14'd0, 1'b1, 1'b1});    // unit 1, 64 wordlines, OB 64
    wait_rsp(CMD_DONE, f);
    for (int u = 0; u < 2; u++)
      for (int w = 0; w < 64; w++) begin
        send(CMD_RD_OB, u * 64 + w, '0);
        wait_rsp(CMD_RESP, f);
        for (int h = 0; h < 2; h++) begin
          int e; e = 0;
          for (int r = 0; r < 128; r++) e += int'(W[u][r][2*w + h]) * int'(X[r]);
          checks++;
          if ($signed(f.data[h*32 +: 32]) != e) begin failures++; $display("FAIL unit %0d col %0d got %0d exp %0d", u, 2*w+h, $signed(f.data[h*32 +: 32]), e); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
