// cid_pch: one compute-in-DRAM pseudo channel (8 banks with GEMV units).
//
// A GEMV of an int8 weight matrix held in DRAM with an int8 input vector runs
// in all-bank lockstep. The controller opens DRAM row r in every bank and
// streams its columns, 32 bytes per bank per beat, through the bank GEMV
// units. The matching 32 input bytes come from the shared double-buffered
// input buffer and are broadcast to all banks over the global bus. After
// `kbeats` beats each bank holds the dot product of one weight row with the
// input vector, so one DRAM row produces 8 results at once: output element
// r*8+b comes from bank b. The controller repeats this for `rows` rows.
//
// The 8 banks per pseudo channel, 32 multipliers per bank, the 4096-entry
// double-buffered input and the in-bank reduction follow the published
// design. The command and DRAM handshakes, the all-bank lockstep and the
// weight layout are this design's choices.
//
// Interface and timing:
//   cmd_valid/cmd_ready  start a GEMV; cmd_ready is high only when idle.
//   dram_req/dram_ready  one column read (dram_row, dram_col) for all banks.
//                        Reads may be outstanding; data must return in order.
//   dram_valid/dram_data the 8 row-buffer slices of the oldest read. Gaps in
//                        dram_valid stall the GEMV units.
//   res_valid            8 results for row res_row, two clock edges after
//                        the edge that took the row's last beat.
//   buf_*                input-buffer fill port and half swap.
module cid_pch
  import halo_pkg::*;
#(
  parameter int N_BANKS = CID_BANKS,
  parameter int LANES   = CID_LANES,
  parameter int DEPTH   = CID_DEPTH,
  localparam int LINES  = DEPTH / LANES,
  localparam int AW     = $clog2(LINES)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // command
  input  logic                                   cmd_valid,
  output logic                                   cmd_ready,
  input  logic [15:0]                            cmd_rows,
  input  logic [7:0]                             cmd_kbeats,
  // input-buffer fill
  input  logic                                   buf_wr,
  input  logic [AW-1:0]                          buf_line,
  input  logic [LANES-1:0][OPW-1:0]              buf_data,
  input  logic                                   buf_swap,
  // DRAM row-buffer side
  output logic                                   dram_req,
  input  logic                                   dram_ready,
  output logic [15:0]                            dram_row,
  output logic [AW-1:0]                          dram_col,
  input  logic                                   dram_valid,
  input  logic [N_BANKS-1:0][LANES-1:0][OPW-1:0] dram_data,
  // results
  output logic                                   res_valid,
  output logic [15:0]                            res_row,
  output logic [N_BANKS-1:0][ACC_W-1:0]          res_data,
  output logic                                   busy
);
  logic [15:0] rows_q, req_row, ret_row, out_row;
  logic [7:0]  kb_q, req_col, ret_col;
  logic        busy_q, req_done;

  assign cmd_ready = !busy_q;
  assign busy      = busy_q;
  assign req_done  = (req_row == rows_q);

  // request side
  assign dram_req = busy_q && !req_done;
  assign dram_row = req_row;
  assign dram_col = AW'(req_col);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0; rows_q <= '0; kb_q <= '0;
      req_row <= '0; req_col <= '0; ret_row <= '0; ret_col <= '0; out_row <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        busy_q <= (cmd_rows != 0) && (cmd_kbeats != 0);
        rows_q <= cmd_rows; kb_q <= cmd_kbeats;
        req_row <= '0; req_col <= '0; ret_row <= '0; ret_col <= '0; out_row <= '0;
      end else if (busy_q) begin
        if (dram_req && dram_ready) begin
          if (req_col == kb_q - 8'd1) begin req_col <= '0; req_row <= req_row + 16'd1; end
          else req_col <= req_col + 8'd1;
        end
        if (dram_valid) begin
          if (ret_col == kb_q - 8'd1) begin ret_col <= '0; ret_row <= ret_row + 16'd1; end
          else ret_col <= ret_col + 8'd1;
        end
        if (res_valid) begin
          out_row <= out_row + 16'd1;
          if (out_row == rows_q - 16'd1) busy_q <= 1'b0;
        end
      end
    end
  end

  // input buffer, broadcast line selected by the returning beat
  logic [LANES-1:0][OPW-1:0] bcast;
  logic                      half_unused;
  cid_io_buffer #(.DEPTH(DEPTH), .LANES(LANES)) u_buf (
    .clk, .rst_n,
    .wr_en(buf_wr), .wr_addr(buf_line), .wr_data(buf_data), .swap(buf_swap),
    .rd_addr(AW'(ret_col)), .rd_data(bcast), .compute_half(half_unused)
  );

  // bank GEMV units
  logic [N_BANKS-1:0] bank_ov;
  logic beat_first, beat_last;
  assign beat_first = (ret_col == 8'd0);
  assign beat_last  = (ret_col == kb_q - 8'd1);

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    cid_gemv_unit #(.LANES(LANES)) u_gemv (
      .clk, .rst_n,
      .in_valid(busy_q && dram_valid), .first(beat_first), .last(beat_last),
      .w(dram_data[b]), .x(bcast),
      .out_valid(bank_ov[b]), .result(res_data[b])
    );
  end

  assign res_valid = bank_ov[0];
  assign res_row   = out_row;

  // the banks run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (bank_ov == '0) || (&bank_ov));
  // no data may return that was not requested
  a_no_spurious: assert property (@(posedge clk) disable iff (!rst_n) dram_valid |-> busy_q);
  // the compute half must not change under a running GEMV
  a_no_swap_busy: assert property (@(posedge clk) disable iff (!rst_n) buf_swap |-> !busy_q);
endmodule
