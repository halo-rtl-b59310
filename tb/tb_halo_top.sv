// tb_halo_top: end-to-end test of HALO through its phase-tagged command port.
// Run with one CiM tile, a 64 KB global buffer and two CiD pseudo channels to
// keep the build short; every engine is otherwise full size.
//   Prefill: matrix commands tagged PREFILL must reach the CiM accelerator.
//     A 128x128 int8 weight matrix and an input vector are written to the
//     global buffer, filled into a core, loaded into a CiM unit and run in
//     the 128-wordline and the 64-wordline mode; a second run with all-ones
//     operands must clip the ADC with 128 wordlines and be exact with 64.
//   Decode: matrix commands tagged DECODE must reach the CiD pseudo channels.
//     An input vector is written to the fill half, the halves swapped, and a
//     GEMV runs against per-channel DRAM models with random latency (stalls).
//   Non-GEMM: vector instructions run exp, multiply and add on the logic die.
// All results are checked against values computed here. Each mechanism
// (both wordline modes, ADC clipping, CiD stall, buffer swap, NoC reply
// back-pressure, each vector op, each dispatcher route) must occur at least
// once.
module tb_halo_top;
  import halo_pkg::*;
  localparam int NP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  halo_cmd_t cmd; logic cmd_valid, cmd_ready;
  noc_flit_t cim_rsp_flit; logic cim_rsp_valid, cim_rsp_ready;
  logic [NP-1:0] dram_req, dram_ready, dram_valid, cid_res_valid, cid_busy;
  logic [NP-1:0][15:0] dram_row, cid_res_row;
  logic [NP-1:0][6:0] dram_col;
  logic [NP-1:0][7:0][31:0][7:0] dram_data;
  logic [NP-1:0][7:0][31:0] cid_res_data;
  logic vbuf_wr, vec_done; logic [4:0] vbuf_waddr, vbuf_raddr;
  logic [511:0][15:0] vbuf_wdata, vbuf_rdata;
  logic [31:0] n_cim, n_cid, n_vec, n_vmul, n_vadd, n_vexp;

  halo_top #(.N_PCH(NP), .TXN(1), .TYN(1), .GB_BYTES(65536)) dut (.*);

  // mechanism counters
  int m_wl128 = 0, m_wl64 = 0, m_clip = 0, m_stall = 0, m_swap = 0, m_backpressure = 0;

  // ---------------- CiM reply collection ----------------
  noc_flit_t rsp [$];
  always @(posedge clk) if (rst_n) begin
    if (cim_rsp_valid && cim_rsp_ready) rsp.push_back(cim_rsp_flit);
    if (cim_rsp_valid && !cim_rsp_ready) m_backpressure++;
  end
  always @(negedge clk) cim_rsp_ready <= ($urandom_range(0, 2) != 0);

  // ---------------- CiD DRAM models ----------------
  byte wgt [NP][8][4][256];   // [pch][bank][row][k]
  typedef struct { int row; int col; int due; } rq_t;
  rq_t dq [NP][$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  for (genvar p = 0; p < NP; p++) begin : g_dram
    always @(posedge clk) if (dram_req[p] && dram_ready[p])
      dq[p].push_back('{int'(dram_row[p]), int'(dram_col[p]), cyc + $urandom_range(2, 6)});
    always @(negedge clk) begin
      dram_ready[p] <= ($urandom_range(0, 3) != 0);
      if (dq[p].size() > 0 && dq[p][0].due <= cyc) begin
        rq_t r; r = dq[p].pop_front();
        dram_valid[p] <= 1'b1;
        for (int b = 0; b < 8; b++) for (int i = 0; i < 32; i++) dram_data[p][b][i] <= wgt[p][b][r.row][r.col*32 + i];
      end else begin
        dram_valid[p] <= 1'b0;
        if (cid_busy[p]) m_stall++;
      end
    end
  end

  // ---------------- command helpers ----------------
  task automatic issue(halo_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic cim(noc_cmd_e c, bit gb, bit cx, bit cy, int addr, logic [63:0] data);
    halo_cmd_t h; h = '0;
    h.phase = PH_PREFILL; h.cls = OC_MATMUL;
    h.flit.gb = gb; h.flit.cx = cx; h.flit.cy = cy; h.flit.cmd = c; h.flit.addr = 24'(addr); h.flit.data = data;
    issue(h);
  endtask

  task automatic wait_rsp(noc_cmd_e c, output noc_flit_t f);
    int n; n = 0;
    while (rsp.size() == 0 && n < 50000) begin @(posedge clk); n++; end
    checks++;
    if (rsp.size() == 0) begin failures++; $display("FAIL no CiM reply"); f = '0; end
    else begin
      f = rsp.pop_front();
      if (f.cmd != c) begin failures++; $display("FAIL reply type %0d exp %0d", f.cmd, c); end
    end
  endtask

  byte W [128][128];
  byte X [128];

  task automatic prefill_gemm(bit half, bit expect_exact);
    noc_flit_t f; int mism; int sat0;
    for (int w = 0; w < 2048; w++) begin
      logic [63:0] d;
      for (int i = 0; i < 8; i++) d[i*8 +: 8] = W[w / 16][(w % 16) * 8 + i];
      cim(CMD_WR_GB, 1, 0, 0, w, d);
    end
    for (int w = 0; w < 16; w++) begin
      logic [63:0] d;
      for (int i = 0; i < 8; i++) d[i*8 +: 8] = X[w * 8 + i];
      cim(CMD_WR_GB, 1, 0, 0, 4096 + w, d);
    end
    cim(CMD_FILL_WB, 1, 0, 0, 0,    {22'd0, 1'b0, 1'b1, 24'd0, 16'd2048}); wait_rsp(CMD_DONE, f);
    cim(CMD_FILL_IB, 1, 0, 0, 4096, {22'd0, 1'b0, 1'b1, 24'd0, 16'd16});   wait_rsp(CMD_DONE, f);
    cim(CMD_LOAD_W, 0, 1, 0, 0, 64'd0); wait_rsp(CMD_DONE, f);
    sat0 = int'(f.data[31:0]);
    cim(CMD_RUN, 0, 1, 0, 0, {46'd0, 16'd0, half, 1'b0}); wait_rsp(CMD_DONE, f);
    if (half) m_wl64++; else m_wl128++;
    if (int'(f.data[31:0]) > sat0) m_clip++;
    mism = 0;
    for (int w = 0; w < 64; w++) begin
      cim(CMD_RD_OB, 0, 1, 0, w, '0); wait_rsp(CMD_RESP, f);
      for (int h = 0; h < 2; h++) begin
        int e; e = 0;
        for (int r = 0; r < 128; r++) e += int'(W[r][2*w + h]) * int'(X[r]);
        if ($signed(f.data[h*32 +: 32]) != e) mism++;
      end
    end
    checks++;
    if (expect_exact && mism != 0) begin failures++; $display("FAIL prefill GEMM: %0d columns wrong", mism); end
    if (!expect_exact && mism == 0) begin failures++; $display("FAIL expected 7-bit ADC clipping"); end
  endtask

  task automatic decode_gemv(int rows, int kb);
    halo_cmd_t h; byte xv [256]; int got;
    for (int k = 0; k < 256; k++) xv[k] = byte'($urandom);
    for (int l = 0; l < kb; l++) begin
      h = '0; h.phase = PH_DECODE; h.cls = OC_MATMUL; h.cid.op = CID_WR_BUF; h.cid.line = 7'(l);
      for (int i = 0; i < 32; i++) h.cid.data[i*8 +: 8] = xv[l*32 + i];
      issue(h);
    end
    h = '0; h.phase = PH_DECODE; h.cls = OC_MATMUL; h.cid.op = CID_SWAP; issue(h); m_swap++;
    h = '0; h.phase = PH_DECODE; h.cls = OC_MATMUL; h.cid.op = CID_GEMV; h.cid.rows = 16'(rows); h.cid.kbeats = 8'(kb);
    issue(h);
    got = 0;
    @(negedge clk);
    while (cid_busy != '0) begin
      for (int p = 0; p < NP; p++) if (cid_res_valid[p]) begin
        for (int b = 0; b < 8; b++) begin
          int e; e = 0;
          for (int k = 0; k < kb * 32; k++) e += int'(wgt[p][b][cid_res_row[p]][k]) * int'(xv[k]);
          checks++;
          if ($signed(cid_res_data[p][b]) != e) begin failures++; $display("FAIL decode GEMV pch %0d row %0d bank %0d", p, cid_res_row[p], b); end
        end
        got++;
      end
      @(negedge clk);
    end
    checks++; if (got != rows * NP) begin failures++; $display("FAIL decode rows %0d", got); end
  endtask

  task automatic vec_op(vec_op_e op, int rd, int rs1, int rs2);
    halo_cmd_t h; h = '0; h.phase = PH_DECODE; h.cls = OC_NONGEMM;
    h.vec = '{op: op, rd: 5'(rd), rs1: 5'(rs1), rs2: 5'(rs2)};
    issue(h);
    while (!vec_done) @(negedge clk);
  endtask

  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd = '0; cmd_valid = 0; cim_rsp_ready = 1; dram_ready = '0; dram_valid = '0; dram_data = '0;
    vbuf_wr = 0; vbuf_waddr = 0; vbuf_raddr = 0; vbuf_wdata = '0;
    for (int p = 0; p < NP; p++) for (int b = 0; b < 8; b++) for (int r = 0; r < 4; r++) for (int k = 0; k < 256; k++)
      wgt[p][b][r][k] = byte'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- prefill on the CiM accelerator ----
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[r][c] = byte'($urandom);
    for (int r = 0; r < 128; r++) X[r] = byte'($urandom);
    prefill_gemm(1'b0, 1'b1);
    prefill_gemm(1'b1, 1'b1);
    for (int r = 0; r < 128; r++) for (int c = 0; c < 128; c++) W[r][c] = -1;
    for (int r = 0; r < 128; r++) X[r] = -1;
    prefill_gemm(1'b0, 1'b0);
    prefill_gemm(1'b1, 1'b1);

    // ---- decode on the CiD ----
    decode_gemv(4, 8);
    decode_gemv(2, 3);

    // ---- non-GEMM on the logic-die vector unit ----
    begin
      logic [511:0][15:0] a, b, e1, e2;
      for (int i = 0; i < 512; i++) begin a[i] = 16'($urandom_range(0, 1023) - 768); b[i] = 16'($urandom_range(0, 511)); end
      @(negedge clk); vbuf_wr = 1; vbuf_waddr = 0; vbuf_wdata = a;
      @(negedge clk); vbuf_waddr = 1; vbuf_wdata = b;
      @(negedge clk); vbuf_wr = 0;
      vec_op(VOP_EXP, 2, 0, 0);
      vbuf_raddr = 2; #1; e1 = vbuf_rdata;
      for (int i = 0; i < 512; i++) begin
        real ex; ex = $exp(real'($signed(a[i])) / 256.0) * 256.0;
        checks++;
        if (real'($signed(e1[i])) > ex * 1.02 + 2.0 || real'($signed(e1[i])) < ex * 0.98 - 2.0) begin failures++; $display("FAIL exp lane %0d", i); end
      end
      vec_op(VOP_MUL, 3, 2, 1);
      vec_op(VOP_ADD, 4, 3, 0);
      vbuf_raddr = 4; #1; e2 = vbuf_rdata;
      for (int i = 0; i < 512; i++) begin
        longint m, s;
        m = (longint'($signed(e1[i])) * longint'($signed(b[i])) + 128) >>> 8;
        if (m > 32767) m = 32767; if (m < -32768) m = -32768;
        s = m + longint'($signed(a[i]));
        if (s > 32767) s = 32767; if (s < -32768) s = -32768;
        checks++;
        if (longint'($signed(e2[i])) != s) begin failures++; $display("FAIL mul/add lane %0d", i); end
      end
    end

    // ---- every mechanism must have happened ----
    $display("mechanisms: wl128=%0d wl64=%0d adc_clip=%0d cid_stall=%0d swap=%0d noc_backpressure=%0d",
             m_wl128, m_wl64, m_clip, m_stall, m_swap, m_backpressure);
    $display("routes: cim=%0d cid=%0d vec=%0d  vector ops: mul=%0d add=%0d exp=%0d", n_cim, n_cid, n_vec, n_vmul, n_vadd, n_vexp);
    checks++; if (m_wl128 == 0) begin failures++; $display("FAIL no 128-wordline run"); end
    checks++; if (m_wl64 == 0) begin failures++; $display("FAIL no 64-wordline run"); end
    checks++; if (m_clip == 0) begin failures++; $display("FAIL no ADC clipping"); end
    checks++; if (m_stall == 0) begin failures++; $display("FAIL no CiD stall"); end
    checks++; if (m_swap == 0) begin failures++; $display("FAIL no buffer swap"); end
    checks++; if (m_backpressure == 0) begin failures++; $display("FAIL no reply back-pressure"); end
    checks++; if (n_cim == 0 || n_cid == 0 || n_vec == 0) begin failures++; $display("FAIL a dispatcher route unused"); end
    checks++; if (n_vmul != 1 || n_vadd != 1 || n_vexp != 1) begin failures++; $display("FAIL vector op counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
