// cim_tile: one tile of the analog CiM accelerator.
//
// A tile has a 4 MB global buffer (GB) and a 2x2 mesh of cores (each with
// its own buffers and two analog CiM units). A tile controller sits between
// the tile's port on the tile-level mesh and the core-level mesh, which it
// enters through the west port of core router (0,0). It
//   * passes flits addressed to a core into the core mesh, and passes flits
//     leaving the core mesh for the host out to the tile mesh;
//   * serves the GB itself: WR_GB writes GB[addr]; RD_GB replies RESP with
//     GB[addr]; FILL_IB / FILL_WB copy data[15:0] words from GB[addr ...] into
//     the input or weight buffer of core (data[40], data[41]) starting at word
//     data[39:16], then reply DONE. This is the parent-to-child buffer fill of
//     the CiM memory hierarchy.
//
// The GB capacity, the 2x2 core mesh and the GB feeding the cores follow the
// published design. One GB per tile, the command formats and the controller
// are this design's choices. The controller serves one GB command at a time
// and a fill moves one word every two cycles at best.
//
// Interface: g_in_* from the tile router's local output, g_out_* to its
// local input; valid/ready handshakes, a flit moves when both are high.
//
// Lint note: the ready signals of the mesh links are wired through arrays of
// router ports, so a tool that checks loops per array rather than per element
// reports a combinational loop on the ready array. There is none: a router's
// in_ready depends only on its own input-buffer register, never on an
// out_ready.
module cim_tile
  import halo_pkg::*;
#(
  parameter int TX = 0,
  parameter int TY = 0,
  parameter int GB_BYTES = 4 * 1024 * 1024,
  parameter int IB_BYTES = 32 * 1024,
  parameter int WB_BYTES = 64 * 1024,
  parameter int OB_BYTES = 128 * 1024
) (
  input  logic      clk,
  input  logic      rst_n,
  input  noc_flit_t g_in_flit,
  input  logic      g_in_valid,
  output logic      g_in_ready,
  output noc_flit_t g_out_flit,
  output logic      g_out_valid,
  input  logic      g_out_ready
);
  localparam int CXN = 2, CYN = 2;
  localparam int GBW = GB_BYTES / 8;
  localparam int GBA = $clog2(GBW);

  // ---------------- core mesh ----------------
  noc_flit_t [4:0] r_in_f  [CXN][CYN];
  logic      [4:0] r_in_v  [CXN][CYN];
  logic      [4:0] r_in_r  [CXN][CYN];
  noc_flit_t [4:0] r_out_f [CXN][CYN];
  logic      [4:0] r_out_v [CXN][CYN];
  logic      [4:0] r_out_r [CXN][CYN];

  noc_flit_t l_in_f;  logic l_in_v, l_in_r;     // controller -> mesh
  noc_flit_t l_out_f; logic l_out_v, l_out_r;   // mesh -> controller

  for (genvar x = 0; x < CXN; x++) begin : g_x
    for (genvar y = 0; y < CYN; y++) begin : g_y
      mesh_router #(.LOCAL(1'b1), .X(x), .Y(y)) u_rt (
        .clk, .rst_n,
        .in_flit(r_in_f[x][y]), .in_valid(r_in_v[x][y]), .in_ready(r_in_r[x][y]),
        .out_flit(r_out_f[x][y]), .out_valid(r_out_v[x][y]), .out_ready(r_out_r[x][y])
      );
      cim_core #(.TX(TX), .TY(TY), .CX(x), .CY(y),
                 .IB_BYTES(IB_BYTES), .WB_BYTES(WB_BYTES), .OB_BYTES(OB_BYTES)) u_core (
        .clk, .rst_n,
        .in_flit(r_out_f[x][y][P_L]), .in_valid(r_out_v[x][y][P_L]), .in_ready(r_out_r[x][y][P_L]),
        .out_flit(r_in_f[x][y][P_L]), .out_valid(r_in_v[x][y][P_L]), .out_ready(r_in_r[x][y][P_L])
      );
      // east / west links
      if (x + 1 < CXN) begin : g_e
        assign r_in_f[x][y][P_E]   = r_out_f[x+1][y][P_W];
        assign r_in_v[x][y][P_E]   = r_out_v[x+1][y][P_W];
        assign r_out_r[x+1][y][P_W] = r_in_r[x][y][P_E];
        assign r_in_f[x+1][y][P_W] = r_out_f[x][y][P_E];
        assign r_in_v[x+1][y][P_W] = r_out_v[x][y][P_E];
        assign r_out_r[x][y][P_E]  = r_in_r[x+1][y][P_W];
      end else begin : g_e_edge
        assign r_in_f[x][y][P_E] = '0;
        assign r_in_v[x][y][P_E] = 1'b0;
        assign r_out_r[x][y][P_E] = 1'b1;
      end
      // south / north links
      if (y + 1 < CYN) begin : g_s
        assign r_in_f[x][y][P_S]   = r_out_f[x][y+1][P_N];
        assign r_in_v[x][y][P_S]   = r_out_v[x][y+1][P_N];
        assign r_out_r[x][y+1][P_N] = r_in_r[x][y][P_S];
        assign r_in_f[x][y+1][P_N] = r_out_f[x][y][P_S];
        assign r_in_v[x][y+1][P_N] = r_out_v[x][y][P_S];
        assign r_out_r[x][y][P_S]  = r_in_r[x][y+1][P_N];
      end else begin : g_s_edge
        assign r_in_f[x][y][P_S] = '0;
        assign r_in_v[x][y][P_S] = 1'b0;
        assign r_out_r[x][y][P_S] = 1'b1;
      end
      if (y == 0) begin : g_n_edge
        assign r_in_f[x][y][P_N] = '0;
        assign r_in_v[x][y][P_N] = 1'b0;
        assign r_out_r[x][y][P_N] = 1'b1;
      end
      if (x == 0 && y == 0) begin : g_ctl_port
        assign r_in_f[0][0][P_W]  = l_in_f;
        assign r_in_v[0][0][P_W]  = l_in_v;
        assign l_in_r             = r_in_r[0][0][P_W];
        assign l_out_f            = r_out_f[0][0][P_W];
        assign l_out_v            = r_out_v[0][0][P_W];
        assign r_out_r[0][0][P_W] = l_out_r;
      end else if (x == 0) begin : g_w_edge
        assign r_in_f[x][y][P_W] = '0;
        assign r_in_v[x][y][P_W] = 1'b0;
        assign r_out_r[x][y][P_W] = 1'b1;
      end
    end
  end

  // ---------------- global buffer ----------------
  logic gb_en, gb_we;
  logic [GBA-1:0] gb_a;
  logic [63:0] gb_rd;
  sram_1p #(.WORDS(GBW)) u_gb (.clk, .en(gb_en), .we(gb_we), .addr(gb_a), .wdata(g_in_flit.data), .rdata(gb_rd));

  // ---------------- tile controller ----------------
  typedef enum logic [2:0] {T_IDLE, T_RDGB, T_FILL_RD, T_FILL_SEND, T_FILL_DONE, T_WAIT_RESP} tstate_e;
  tstate_e   st;
  noc_flit_t cmd_q;
  logic [15:0] cnt;
  noc_flit_t resp_f; logic resp_v;
  logic        resp_take;

  // exits from the core mesh have priority on the way out
  always_comb begin
    g_out_flit  = l_out_v ? l_out_f : resp_f;
    g_out_valid = l_out_v || resp_v;
    l_out_r     = g_out_ready;
    resp_take   = resp_v && !l_out_v && g_out_ready;
  end

  wire idle_gb_cmd = (st == T_IDLE) && g_in_valid && g_in_flit.gb;

  always_comb begin
    gb_en = 1'b0; gb_we = 1'b0; gb_a = GBA'(g_in_flit.addr);
    l_in_f = '0; l_in_v = 1'b0;
    g_in_ready = 1'b0;
    unique case (st)
      T_IDLE: begin
        if (g_in_valid && !g_in_flit.gb) begin
          l_in_f = g_in_flit; l_in_v = 1'b1; g_in_ready = l_in_r;
        end else if (idle_gb_cmd && !resp_v) begin
          g_in_ready = 1'b1;
          gb_en = (g_in_flit.cmd == CMD_WR_GB) || (g_in_flit.cmd == CMD_RD_GB);
          gb_we = (g_in_flit.cmd == CMD_WR_GB);
        end
      end
      T_FILL_RD: begin
        gb_en = 1'b1; gb_a = GBA'(cmd_q.addr) + GBA'(cnt);
      end
      T_FILL_SEND: begin
        l_in_v = 1'b1;
        l_in_f = '{host: 1'b0, tx: 2'(TX), ty: 2'(TY), cx: cmd_q.data[40], cy: cmd_q.data[41], gb: 1'b0,
                   cmd: (cmd_q.cmd == CMD_FILL_IB) ? CMD_WR_IB : CMD_WR_WB,
                   addr: cmd_q.data[39:16] + 24'(cnt), data: gb_rd};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; cmd_q <= '0; cnt <= '0; resp_f <= '0; resp_v <= 1'b0;
    end else begin
      if (resp_take) resp_v <= 1'b0;
      unique case (st)
        T_IDLE: if (idle_gb_cmd && !resp_v) begin
          cmd_q <= g_in_flit; cnt <= '0;
          unique case (g_in_flit.cmd)
            CMD_RD_GB:   st <= T_RDGB;
            CMD_FILL_IB, CMD_FILL_WB: st <= (g_in_flit.data[15:0] == 0) ? T_FILL_DONE : T_FILL_RD;
            default:     st <= T_IDLE;
          endcase
        end
        T_RDGB: begin
          resp_v <= 1'b1;
          resp_f <= '{host: 1'b1, tx: '0, ty: '0, cx: '0, cy: '0, gb: 1'b0,
                      cmd: CMD_RESP, addr: cmd_q.addr, data: gb_rd};
          st <= T_WAIT_RESP;
        end
        T_FILL_RD: st <= T_FILL_SEND;
        T_FILL_SEND: if (l_in_r) begin
          cnt <= cnt + 16'd1;
          st  <= (cnt + 16'd1 == cmd_q.data[15:0]) ? T_FILL_DONE : T_FILL_RD;
        end
        T_FILL_DONE: if (!resp_v) begin
          resp_v <= 1'b1;
          resp_f <= '{host: 1'b1, tx: '0, ty: '0, cx: '0, cy: '0, gb: 1'b0,
                      cmd: CMD_DONE, addr: cmd_q.addr, data: {2'(TX), 2'(TY), 60'(cmd_q.data[15:0])}};
          st <= T_WAIT_RESP;
        end
        T_WAIT_RESP: if (!resp_v || resp_take) st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end

  // only host-bound flits leave the core mesh
  a_exit_host: assert property (@(posedge clk) disable iff (!rst_n) l_out_v |-> l_out_f.host);
endmodule
