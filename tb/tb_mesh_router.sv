// tb_mesh_router: self-checking test of the mesh router.
// A router at (1,1) of a tile-level mesh gets random flits on all five inputs
// with random destinations and random output back-pressure. Every flit must
// leave on the port dimension-ordered routing gives (X first, host-bound flits
// to (0,0)), exactly once and in order per input/output pair.
module tb_mesh_router;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, blocked = 0;

  noc_flit_t [4:0] in_flit, out_flit;
  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  mesh_router #(.LOCAL(1'b0), .X(1), .Y(1)) dut (.*);

  function automatic int exp_port(noc_flit_t f);
    int dx, dy;
    dx = f.host ? 0 : int'(f.tx); dy = f.host ? 0 : int'(f.ty);
    if (dx > 1) return P_E; if (dx < 1) return P_W;
    if (dy > 1) return P_S; if (dy < 1) return P_N;
    return P_L;
  endfunction

  noc_flit_t expq [5][5][$];   // per input, per output
  int sent = 0, recvd = 0;

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && !out_ready[o]) blocked++;
      if (out_valid[o] && out_ready[o]) begin
        checks++; recvd++;
        begin
          bit hit; hit = 0;
          // the flit must be the oldest outstanding one of some input
          for (int i = 0; i < 5; i++)
            if (!hit && expq[i][o].size() > 0 && expq[i][o][0] == out_flit[o]) begin
              hit = 1; void'(expq[i][o].pop_front());
            end
          if (!hit) begin failures++; $display("FAIL wrong or out-of-order flit on port %0d", o); end
        end
      end
    end
  end

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // drivers: one independent source per input; a source only sends flits whose
  // route does not turn back to itself (as in a real mesh)
  for (genvar i = 0; i < 5; i++) begin : g_src
    initial begin
      in_valid[i] = 0; in_flit[i] = '0;
      wait (rst_n);
      for (int n = 0; n < 200; n++) begin
        noc_flit_t f;
        do begin
          f = '0;
          f.host = ($urandom_range(0, 7) == 0);
          f.tx = 2'($urandom); f.ty = 2'($urandom);
          f.cmd = CMD_WR_GB; f.addr = 24'($urandom); f.data = {$urandom, $urandom};
        end while (exp_port(f) == i && i != P_L);
        @(negedge clk); in_valid[i] = 1; in_flit[i] = f;
        @(posedge clk); while (!in_ready[i]) @(posedge clk);
        expq[i][exp_port(f)].push_back(f); sent++;
        @(negedge clk); in_valid[i] = 0;
      end
    end
  end

  always @(negedge clk) out_ready <= 5'($urandom);

  initial begin
    out_ready = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (sent == 1000);
    repeat (50) @(posedge clk);
    checks++; if (recvd != 1000) begin failures++; $display("FAIL delivered %0d of 1000", recvd); end
    checks++; if (blocked == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
