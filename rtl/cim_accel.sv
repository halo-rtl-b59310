// cim_accel: the analog compute-in-memory accelerator die.
//
// A 4x4 mesh of tiles; each tile node has a mesh router whose local port
// leads to the tile (global buffer plus 2x2 cores). The accelerator's single
// external port, which in the package is the interposer link to the HBM logic
// die, attaches to the west port of the router of tile (0,0). Commands enter
// there and are routed X-first to their tile; replies are marked `host` and
// return to tile (0,0), leaving through the same west port.
//
// The 4x4 tile mesh follows the published design; the attachment point of the
// external link and the packet format are this design's choices.
//
// Interface: host_in_* carries flits into the mesh, host_out_* carries replies
// out; valid/ready, a flit moves when both are high.
//
// Lint note: the ready signals of the mesh links are wired through arrays of
// router ports, so a tool that checks loops per array rather than per element
// reports a combinational loop on the ready array. There is none: a router's
// in_ready depends only on its own input-buffer register, never on an
// out_ready.
module cim_accel
  import halo_pkg::*;
#(
  parameter int TXN      = 4,
  parameter int TYN      = 4,
  parameter int GB_BYTES = 4 * 1024 * 1024,
  parameter int IB_BYTES = 32 * 1024,
  parameter int WB_BYTES = 64 * 1024,
  parameter int OB_BYTES = 128 * 1024
) (
  input  logic      clk,
  input  logic      rst_n,
  input  noc_flit_t host_in_flit,
  input  logic      host_in_valid,
  output logic      host_in_ready,
  output noc_flit_t host_out_flit,
  output logic      host_out_valid,
  input  logic      host_out_ready
);
  noc_flit_t [4:0] r_in_f  [TXN][TYN];
  logic      [4:0] r_in_v  [TXN][TYN];
  logic      [4:0] r_in_r  [TXN][TYN];
  noc_flit_t [4:0] r_out_f [TXN][TYN];
  logic      [4:0] r_out_v [TXN][TYN];
  logic      [4:0] r_out_r [TXN][TYN];

  for (genvar x = 0; x < TXN; x++) begin : g_x
    for (genvar y = 0; y < TYN; y++) begin : g_y
      mesh_router #(.LOCAL(1'b0), .X(x), .Y(y)) u_rt (
        .clk, .rst_n,
        .in_flit(r_in_f[x][y]), .in_valid(r_in_v[x][y]), .in_ready(r_in_r[x][y]),
        .out_flit(r_out_f[x][y]), .out_valid(r_out_v[x][y]), .out_ready(r_out_r[x][y])
      );
      cim_tile #(.TX(x), .TY(y), .GB_BYTES(GB_BYTES),
                 .IB_BYTES(IB_BYTES), .WB_BYTES(WB_BYTES), .OB_BYTES(OB_BYTES)) u_tile (
        .clk, .rst_n,
        .g_in_flit(r_out_f[x][y][P_L]), .g_in_valid(r_out_v[x][y][P_L]), .g_in_ready(r_out_r[x][y][P_L]),
        .g_out_flit(r_in_f[x][y][P_L]), .g_out_valid(r_in_v[x][y][P_L]), .g_out_ready(r_in_r[x][y][P_L])
      );
      if (x + 1 < TXN) begin : g_e
        assign r_in_f[x][y][P_E]    = r_out_f[x+1][y][P_W];
        assign r_in_v[x][y][P_E]    = r_out_v[x+1][y][P_W];
        assign r_out_r[x+1][y][P_W] = r_in_r[x][y][P_E];
        assign r_in_f[x+1][y][P_W]  = r_out_f[x][y][P_E];
        assign r_in_v[x+1][y][P_W]  = r_out_v[x][y][P_E];
        assign r_out_r[x][y][P_E]   = r_in_r[x+1][y][P_W];
      end else begin : g_e_edge
        assign r_in_f[x][y][P_E]  = '0;
        assign r_in_v[x][y][P_E]  = 1'b0;
        assign r_out_r[x][y][P_E] = 1'b1;
      end
      if (y + 1 < TYN) begin : g_s
        assign r_in_f[x][y][P_S]    = r_out_f[x][y+1][P_N];
        assign r_in_v[x][y][P_S]    = r_out_v[x][y+1][P_N];
        assign r_out_r[x][y+1][P_N] = r_in_r[x][y][P_S];
        assign r_in_f[x][y+1][P_N]  = r_out_f[x][y][P_S];
        assign r_in_v[x][y+1][P_N]  = r_out_v[x][y][P_S];
        assign r_out_r[x][y][P_S]   = r_in_r[x][y+1][P_N];
      end else begin : g_s_edge
        assign r_in_f[x][y][P_S]  = '0;
        assign r_in_v[x][y][P_S]  = 1'b0;
        assign r_out_r[x][y][P_S] = 1'b1;
      end
      if (y == 0) begin : g_n_edge
        assign r_in_f[x][y][P_N]  = '0;
        assign r_in_v[x][y][P_N]  = 1'b0;
        assign r_out_r[x][y][P_N] = 1'b1;
      end
      if (x == 0 && y == 0) begin : g_host
        assign r_in_f[0][0][P_W]  = host_in_flit;
        assign r_in_v[0][0][P_W]  = host_in_valid;
        assign host_in_ready      = r_in_r[0][0][P_W];
        assign host_out_flit      = r_out_f[0][0][P_W];
        assign host_out_valid     = r_out_v[0][0][P_W];
        assign r_out_r[0][0][P_W] = host_out_ready;
      end else if (x == 0) begin : g_w_edge
        assign r_in_f[x][y][P_W]  = '0;
        assign r_in_v[x][y][P_W]  = 1'b0;
        assign r_out_r[x][y][P_W] = 1'b1;
      end
    end
  end
endmodule
