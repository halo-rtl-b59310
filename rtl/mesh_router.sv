// mesh_router: five-port router of a 2D mesh network-on-chip.
//
// The CiM accelerator uses two levels of 2D mesh: 4x4 tiles, and 2x2 cores
// inside every tile. The same router serves both; LOCAL selects which
// destination coordinates of the flit it routes on (tile tx/ty or core cx/cy).
// Packets are single flits. Routing is dimension-ordered (first X, then Y).
// A flit marked `host` is routed to node (0,0) and leaves there through the
// west port, which is where the mesh attaches to its parent (the interposer
// link for the tile mesh, the tile controller for the core mesh).
//
// Every input port holds one flit. Each output grants among the inputs that
// want it in round-robin order. A flit whose output is free leaves in the
// cycle it is granted.
//
// The 2D mesh at both levels follows the published design. The router
// micro-architecture (single-flit packets, XY routing, one buffer per input,
// round-robin) is this design's choice.
//
// Ports are indexed N=0, E=1, S=2, W=3, L=4 (local). Handshake: a flit moves
// when valid and ready are both high at a clock edge. in_ready depends only on
// the router's own state; out_valid never waits for out_ready.
module mesh_router
  import halo_pkg::*;
#(
  parameter bit LOCAL = 1'b0,
  parameter int X     = 0,
  parameter int Y     = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  noc_flit_t [4:0] in_flit,
  input  logic      [4:0] in_valid,
  output logic      [4:0] in_ready,
  output noc_flit_t [4:0] out_flit,
  output logic      [4:0] out_valid,
  input  logic      [4:0] out_ready
);
  noc_flit_t [4:0] buf_q;
  logic      [4:0] occ_q;

  function automatic logic [2:0] route(noc_flit_t f);
    int dx, dy;
    if (f.host) begin
      dx = 0; dy = 0;
    end else if (LOCAL) begin
      dx = int'(f.cx); dy = int'(f.cy);
    end else begin
      dx = int'(f.tx); dy = int'(f.ty);
    end
    if      (dx > X) return 3'(P_E);
    else if (dx < X) return 3'(P_W);
    else if (dy > Y) return 3'(P_S);
    else if (dy < Y) return 3'(P_N);
    else if (f.host) return 3'(P_W);
    else             return 3'(P_L);
  endfunction

  logic [4:0][2:0] dest;
  logic [4:0][4:0] req;      // req[o][i]
  logic [4:0][2:0] grant;    // input granted per output
  logic [4:0][2:0] rr_q;     // round-robin start per output
  logic [4:0]      take;     // input i leaves this cycle

  always_comb begin
    for (int i = 0; i < 5; i++) dest[i] = route(buf_q[i]);
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        req[o][i] = occ_q[i] && (int'(dest[i]) == o);
    take = '0;
    for (int o = 0; o < 5; o++) begin
      grant[o]     = '0;
      out_valid[o] = 1'b0;
      for (int n = 4; n >= 0; n--) begin
        int i;
        i = (int'(rr_q[o]) + n) % 5;
        if (req[o][i]) begin
          grant[o]     = 3'(i);
          out_valid[o] = 1'b1;
        end
      end
      out_flit[o] = buf_q[grant[o]];
      if (out_valid[o] && out_ready[o]) take[grant[o]] = 1'b1;
    end
  end

  assign in_ready = ~occ_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ_q <= '0;
      buf_q <= '0;
      rr_q  <= '0;
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          occ_q[i] <= 1'b1;
          buf_q[i] <= in_flit[i];
        end else if (take[i]) begin
          occ_q[i] <= 1'b0;
        end
      end
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o]) rr_q[o] <= 3'((int'(grant[o]) + 1) % 5);
    end
  end

  // a flit never turns back the way it came (dimension-ordered routing)
  for (genvar i = 0; i < 4; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
                                 occ_q[i] |-> (int'(dest[i]) != i));
  end
endmodule
