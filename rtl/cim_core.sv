// cim_core: one core of the analog CiM accelerator.
//
// A core holds an input buffer (IB, 32 KB), a weight buffer (WB, 64 KB), an
// output buffer (OB, 128 KB) and two analog CiM units. It is driven by
// single-flit commands from its local mesh router:
//   WR_IB / WR_WB  write one 64-bit word of the input or weight buffer.
//   LOAD_W         program CiM unit data[0] with the 128x128 int8 matrix
//                  stored row-major at WB[addr .. addr+2047] (8 weights per
//                  word, byte i of a word is column 8*(word%16)+i of row
//                  word/16). Replies DONE.
//   RUN            multiply the 128 int8 inputs at IB[addr .. addr+15] by the
//                  matrix of unit data[0]; data[1] selects the 64-wordline
//                  mode. The 128 32-bit results go to OB[data[31:16] ..
//                  +63], two per word (element 2k in the low half of word k).
//                  Replies DONE.
//   RD_OB          reply RESP carrying OB[addr].
// Replies travel to the host and carry the core's position in data[63:56]
// ({tx, ty, cx, cy}) for DONE, and addr is echoed.
//
// The buffer sizes, the two CiM units and their placement between the
// input/weight buffer and the output buffer follow the published design. The
// command set, data layout and the rule that the core serves one command at a
// time (so its two units do not run concurrently) are this design's choices.
//
// Timing: LOAD_W takes about 2050 cycles, RUN about 16 + (26 or 50) + 64
// cycles. in_ready is high only while the core is idle.
module cim_core
  import halo_pkg::*;
#(
  parameter int TX = 0,
  parameter int TY = 0,
  parameter int CX = 0,
  parameter int CY = 0,
  parameter int IB_BYTES = 32 * 1024,
  parameter int WB_BYTES = 64 * 1024,
  parameter int OB_BYTES = 128 * 1024,
  parameter int N_UNITS  = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  noc_flit_t in_flit,
  input  logic      in_valid,
  output logic      in_ready,
  output noc_flit_t out_flit,
  output logic      out_valid,
  input  logic      out_ready
);
  localparam int IBW = IB_BYTES / 8, WBW = WB_BYTES / 8, OBW = OB_BYTES / 8;
  localparam int IBA = $clog2(IBW), WBA = $clog2(WBW), OBA = $clog2(OBW);
  localparam int MAT_WORDS = XBAR_ROWS * XBAR_COLS / 8;   // 2048
  localparam int VEC_WORDS = XBAR_ROWS / 8;               // 16
  localparam int RES_WORDS = XBAR_COLS / 2;               // 64

  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_RDIN, S_START, S_RUN, S_WROUT, S_RDOB, S_REPLY} state_e;
  state_e     st;
  noc_flit_t  cmd_q;
  logic [11:0] cnt;       // words requested
  logic        v_q;       // read data valid next cycle
  logic [11:0] idx_q;     // index of the word in flight
  logic        unit_q;
  logic        done_any;

  // buffers
  logic ib_en, ib_we, wb_en, wb_we, ob_en, ob_we;
  logic [IBA-1:0] ib_a; logic [WBA-1:0] wb_a; logic [OBA-1:0] ob_a;
  logic [63:0] ib_wd, wb_wd, ob_wd, ib_rd, wb_rd, ob_rd;
  sram_1p #(.WORDS(IBW)) u_ib (.clk, .en(ib_en), .we(ib_we), .addr(ib_a), .wdata(ib_wd), .rdata(ib_rd));
  sram_1p #(.WORDS(WBW)) u_wb (.clk, .en(wb_en), .we(wb_we), .addr(wb_a), .wdata(wb_wd), .rdata(wb_rd));
  sram_1p #(.WORDS(OBW)) u_ob (.clk, .en(ob_en), .we(ob_we), .addr(ob_a), .wdata(ob_wd), .rdata(ob_rd));

  // CiM units
  logic [63:0] xw_q [VEC_WORDS];              // input vector, 8 elements per word
  logic [XBAR_ROWS-1:0][OPW-1:0] x_vec;
  for (genvar w = 0; w < VEC_WORDS; w++) begin : g_xv
    assign x_vec[w*8 +: 8] = xw_q[w];
  end
  logic [N_UNITS-1:0] u_wr, u_start, u_done, u_busy;
  logic signed [XBAR_COLS-1:0][ACC_W-1:0] u_y [N_UNITS];
  logic [ACC_W-1:0] ysel [XBAR_COLS];          // results of the selected unit
  logic [N_UNITS-1:0][31:0] u_sat;
  logic [7:0][OPW-1:0] wr_w;
  assign wr_w = wb_rd;
  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    cim_unit u_cim (
      .clk, .rst_n,
      .wr_en(u_wr[u]), .wr_row(idx_q[10:4]), .wr_col8(idx_q[3:0]), .wr_w,
      .start(u_start[u]), .half_wl(cmd_q.data[1]), .x(x_vec),
      .busy(u_busy[u]), .done(u_done[u]), .y(u_y[u]), .sat_events(u_sat[u])
    );
  end
  assign done_any = |u_done;

  wire [$clog2(N_UNITS > 1 ? N_UNITS : 2)-1:0] usel = unit_q;
  always_comb for (int c = 0; c < XBAR_COLS; c++) ysel[c] = u_y[usel][c];

  assign in_ready = (st == S_IDLE);

  always_comb begin
    ib_en = 1'b0; ib_we = 1'b0; ib_a = '0; ib_wd = cmd_q.data;
    wb_en = 1'b0; wb_we = 1'b0; wb_a = '0; wb_wd = cmd_q.data;
    ob_en = 1'b0; ob_we = 1'b0; ob_a = '0; ob_wd = '0;
    u_wr = '0; u_start = '0;
    unique case (st)
      S_IDLE: if (in_valid) begin
        ib_a = IBA'(in_flit.addr); ib_wd = in_flit.data;
        wb_a = WBA'(in_flit.addr); wb_wd = in_flit.data;
        ob_a = OBA'(in_flit.addr);
        if (in_flit.cmd == CMD_WR_IB) begin ib_en = 1'b1; ib_we = 1'b1; end
        if (in_flit.cmd == CMD_WR_WB) begin wb_en = 1'b1; wb_we = 1'b1; end
        if (in_flit.cmd == CMD_RD_OB) ob_en = 1'b1;
      end
      S_LOADW: begin
        wb_en = (int'(cnt) < MAT_WORDS);
        wb_a  = WBA'(cmd_q.addr) + WBA'(cnt);
        u_wr[usel] = v_q;
      end
      S_RDIN: begin
        ib_en = (int'(cnt) < VEC_WORDS);
        ib_a  = IBA'(cmd_q.addr) + IBA'(cnt);
      end
      S_START: u_start[usel] = 1'b1;
      S_WROUT: begin
        ob_en = 1'b1; ob_we = 1'b1;
        ob_a  = OBA'(cmd_q.data[31:16]) + OBA'(cnt);
        ob_wd = {ysel[2*cnt+1], ysel[2*cnt]};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cmd_q <= '0; cnt <= '0; v_q <= 1'b0; idx_q <= '0; unit_q <= 1'b0;
      for (int w = 0; w < VEC_WORDS; w++) xw_q[w] <= '0;
      out_valid <= 1'b0; out_flit <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          cmd_q  <= in_flit;
          unit_q <= in_flit.data[0];
          cnt <= '0; v_q <= 1'b0; idx_q <= '0;
          unique case (in_flit.cmd)
            CMD_LOAD_W: st <= S_LOADW;
            CMD_RUN:    st <= S_RDIN;
            CMD_RD_OB:  st <= S_RDOB;
            default:    st <= S_IDLE;   // buffer writes complete at once
          endcase
        end
        S_LOADW: begin
          v_q <= (int'(cnt) < MAT_WORDS);
          idx_q <= cnt;
          if (int'(cnt) < MAT_WORDS) cnt <= cnt + 12'd1;
          else if (!v_q) st <= S_REPLY;
        end
        S_RDIN: begin
          v_q <= (int'(cnt) < VEC_WORDS);
          idx_q <= cnt;
          if (int'(cnt) < VEC_WORDS) cnt <= cnt + 12'd1;
          if (v_q) xw_q[idx_q[3:0]] <= ib_rd;
          if (v_q && int'(idx_q) == VEC_WORDS - 1) st <= S_START;
        end
        S_START: st <= S_RUN;
        S_RUN: if (u_done[usel]) begin st <= S_WROUT; cnt <= '0; end
        S_WROUT: begin
          cnt <= cnt + 12'd1;
          if (int'(cnt) == RES_WORDS - 1) st <= S_REPLY;
        end
        S_RDOB: begin
          out_valid <= 1'b1;
          out_flit  <= '{host: 1'b1, tx: '0, ty: '0, cx: '0, cy: '0, gb: 1'b0,
                         cmd: CMD_RESP, addr: cmd_q.addr, data: ob_rd};
          st <= S_REPLY;
        end
        S_REPLY: begin
          if (!out_valid) begin
            out_valid <= 1'b1;
            out_flit  <= '{host: 1'b1, tx: '0, ty: '0, cx: '0, cy: '0, gb: 1'b0,
                           cmd: CMD_DONE, addr: cmd_q.addr,
                           data: {2'(TX), 2'(TY), 1'(CX), 1'(CY), 26'd0, u_sat[usel]}};
          end else if (out_ready) begin
            out_valid <= 1'b0;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // a unit is started only when idle, and only the selected unit finishes
  a_unit_idle_on_start: assert property (@(posedge clk) disable iff (!rst_n)
                                         (|u_start) |-> !(|(u_start & u_busy)));
  a_done_known: assert property (@(posedge clk) disable iff (!rst_n) done_any |-> st == S_RUN);
endmodule
