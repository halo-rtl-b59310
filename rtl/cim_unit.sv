// cim_unit: one analog compute-in-memory unit (8 crossbars of 128x128).
//
// The unit holds a 128x128 matrix of signed 8-bit weights, weight-stationary,
// bit-sliced across eight one-bit 8T-SRAM crossbars (crossbar j holds bit j).
// A matrix-vector product with a 128-element signed 8-bit input vector is
// computed bit-serially: for each input bit b the controller drives bit b of
// every input onto the wordlines, all eight crossbars convert their bitlines
// through the shared 48 ADCs (three column groups), and the shift-and-add
// stage folds the codes into 128 signed dot products.
//
// Wordline activation has two modes, the two configurations evaluated for the
// design. With half_wl = 0 all 128 wordlines are on together (fast, but a
// bitline count above 127 clips in the 7-bit ADC). With half_wl = 1 only 64
// wordlines are on at a time, so each input bit is applied in two halves: the
// count can never exceed 64, the result is exact, and the unit needs twice the
// ADC conversions.
//
// Crossbar count and size, ADCs and the 128/64 wordline modes follow the
// published design; the sequencing order (input bit, then wordline half, then
// column group), the signed arithmetic and the port protocol are this
// design's own.
//
// Timing: weights are written 8 per cycle (wr_*). `start` (when not busy)
// latches x; the unit then performs 8 * (half_wl ? 2 : 1) * 3 conversions,
// one per cycle, and raises `done` for one cycle LAT_TAIL cycles after the
// last conversion: 26 cycles from start to done with 128 wordlines, 50 with
// 64. y holds the result until the next start. sat_events counts the ADC
// conversions that clipped since reset.
module cim_unit
  import halo_pkg::*;
#(
  parameter int NX    = N_XBAR,
  parameter int ROWS  = XBAR_ROWS,
  parameter int COLS  = XBAR_COLS,
  parameter int NADC  = N_ADC,
  localparam int NGRP = (COLS + NADC - 1) / NADC
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // weight programming
  input  logic                             wr_en,
  input  logic [$clog2(ROWS)-1:0]          wr_row,
  input  logic [$clog2(COLS/8)-1:0]        wr_col8,
  input  logic [7:0][OPW-1:0]              wr_w,
  // compute
  input  logic                             start,
  input  logic                             half_wl,
  input  logic [ROWS-1:0][OPW-1:0]         x,
  output logic                             busy,
  output logic                             done,
  output logic signed [COLS-1:0][ACC_W-1:0] y,
  output logic [31:0]                      sat_events
);
  logic [OPW-1:0] x_q [ROWS];
  logic       half_q;
  logic [2:0] b_q;                         // input bit
  logic       g_q;                         // wordline half
  logic [$clog2(NGRP)-1:0] m_q;            // column group
  logic       conv;
  logic [2:0] b_d; logic [$clog2(NGRP)-1:0] m_d; logic last_d, acc_last;

  wire last_step = (b_q == 3'd7) && (g_q == half_q) && (int'(m_q) == NGRP - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; conv <= 1'b0; half_q <= 1'b0;
      for (int r = 0; r < ROWS; r++) x_q[r] <= '0;
      b_q <= '0; g_q <= '0; m_q <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; conv <= 1'b1; half_q <= half_wl;
        for (int r = 0; r < ROWS; r++) x_q[r] <= x[r];
        b_q <= '0; g_q <= '0; m_q <= '0;
      end
    end else if (conv) begin
      if (last_step) conv <= 1'b0;
      if (int'(m_q) == NGRP - 1) begin
        m_q <= '0;
        if (g_q == half_q) begin g_q <= 1'b0; b_q <= b_q + 3'd1; end
        else g_q <= 1'b1;
      end else m_q <= m_q + 1'b1;
    end else if (done) begin
      busy <= 1'b0;
    end
  end

  // wordline drive for this step
  logic [ROWS-1:0] in_bits, wl_mask;
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      in_bits[r] = x_q[r][b_q];
      if (!half_q)    wl_mask[r] = 1'b1;
      else if (g_q)   wl_mask[r] = (r >= ROWS / 2);
      else            wl_mask[r] = (r <  ROWS / 2);
    end
  end

  logic [NX-1:0][NADC-1:0][ADC_BITS-1:0] codes;
  logic [NX-1:0] sat, vld;
  for (genvar j = 0; j < NX; j++) begin : g_xbar
    logic [7:0] bits;
    for (genvar i = 0; i < 8; i++) begin : g_bit
      assign bits[i] = wr_w[i][j];
    end
    cim_crossbar #(.ROWS(ROWS), .COLS(COLS), .NADC(NADC)) u_xbar (
      .clk, .wr_en, .wr_row, .wr_col8, .wr_bits(bits),
      .conv, .in_bits, .wl_mask, .mux_sel(m_q),
      .adc_valid(vld[j]), .adc_code(codes[j]), .adc_sat(sat[j])
    );
  end

  // tags of the conversion in flight
  logic conv_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_d <= 1'b0; b_d <= '0; m_d <= '0; last_d <= 1'b0; acc_last <= 1'b0; done <= 1'b0;
      sat_events <= '0;
    end else begin
      conv_d   <= conv;
      b_d      <= b_q;
      m_d      <= m_q;
      last_d   <= conv && last_step;
      acc_last <= last_d;
      done     <= acc_last;
      if (conv_d && (|sat)) sat_events <= sat_events + 32'd1;
    end
  end

  cim_shift_add #(.NX(NX), .NADC(NADC), .COLS(COLS)) u_sa (
    .clk, .rst_n, .clear(start && !busy), .in_valid(conv_d),
    .ibit(b_d), .mgrp(m_d), .codes, .acc(y)
  );

  // every conversion issued returns ADC codes one cycle later
  a_adc_returns: assert property (@(posedge clk) disable iff (!rst_n) conv_d |-> &vld);
endmodule
