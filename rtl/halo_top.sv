// halo_top: HALO, a heterogeneous accelerator for low-batch LLM inference.
//
// Two compute engines share one package. Compute-in-DRAM (CiD) GEMV units sit
// at the banks of the HBM3 stack, where the weights already are. An analog
// SRAM compute-in-memory (CiM) accelerator sits next to the stack on the
// interposer. A phase-aware dispatcher sends prefill matrix products (GEMM,
// compute-bound) to the CiM accelerator and decode matrix products (GEMV,
// memory-bound) to the CiD units. Non-GEMM operations go to the vector unit on
// the HBM logic die.
//
// Contents:
//   phase_dispatch  routes each tagged command to its engine.
//   cim_accel       4x4 tiles x 2x2 cores x 2 CiM units of 8 crossbars, with
//                   the mesh networks and buffers; replies leave on cim_rsp_*.
//   cid_pch x N_PCH pseudo channels of 8 banks with 32 multipliers each. All
//                   channels receive the same command and the same broadcast
//                   input vector and work on their own weight rows in
//                   lockstep. The DRAM arrays themselves are outside this RTL:
//                   each channel's row-buffer port is a top-level port.
//   vector_unit     512-lane vector unit; the logic-die RISC-V cores that
//                   would use its buffer port are outside this RTL, so that
//                   port is a top-level port.
//
// The engines, their sizes and the mapping rule follow the published design.
// N_PCH = 160 covers the 5 HBM3 stacks of the published system at 32 pseudo
// channels per stack (16 channels x 2, from the HBM3 standard; the pseudo
// channel count per stack is this design's assumption). CiD row results leave on cid_res_*; the published design sends
// them to the vector unit, which here is left to the cores that read them.
//
// Timing: command handshake cmd_valid/cmd_ready. A CiD command is accepted when
// every channel is idle (a buffer write at any time).
module halo_top
  import halo_pkg::*;
#(
  parameter int N_PCH    = 160,
  parameter int TXN      = 4,
  parameter int TYN      = 4,
  parameter int GB_BYTES = 4 * 1024 * 1024
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  // tagged commands
  input  halo_cmd_t                                       cmd,
  input  logic                                            cmd_valid,
  output logic                                            cmd_ready,
  // CiM replies
  output noc_flit_t                                       cim_rsp_flit,
  output logic                                            cim_rsp_valid,
  input  logic                                            cim_rsp_ready,
  // CiD row-buffer ports, one per pseudo channel
  output logic [N_PCH-1:0]                                dram_req,
  input  logic [N_PCH-1:0]                                dram_ready,
  output logic [N_PCH-1:0][15:0]                          dram_row,
  output logic [N_PCH-1:0][6:0]                           dram_col,
  input  logic [N_PCH-1:0]                                dram_valid,
  input  logic [N_PCH-1:0][CID_BANKS-1:0][CID_LANES-1:0][OPW-1:0] dram_data,
  // CiD results
  output logic [N_PCH-1:0]                                cid_res_valid,
  output logic [N_PCH-1:0][15:0]                          cid_res_row,
  output logic [N_PCH-1:0][CID_BANKS-1:0][ACC_W-1:0]      cid_res_data,
  // vector buffer port of the logic-die cores
  input  logic                                            vbuf_wr,
  input  logic [4:0]                                      vbuf_waddr,
  input  logic [VEC_LANES-1:0][VEC_DW-1:0]                vbuf_wdata,
  input  logic [4:0]                                      vbuf_raddr,
  output logic [VEC_LANES-1:0][VEC_DW-1:0]                vbuf_rdata,
  output logic                                            vec_done,
  // activity counters
  output logic [31:0]                                     n_cim,
  output logic [31:0]                                     n_cid,
  output logic [31:0]                                     n_vec,
  output logic [31:0]                                     n_vmul,
  output logic [31:0]                                     n_vadd,
  output logic [31:0]                                     n_vexp,
  output logic [N_PCH-1:0]                                cid_busy
);
  noc_flit_t  cim_flit;  logic cim_valid, cim_ready;
  cid_cmd_t   cid_cmd;   logic cid_valid, cid_ready;
  vec_instr_t vec_instr; logic vec_valid, vec_ready;

  phase_dispatch u_disp (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready,
    .cim_flit, .cim_valid, .cim_ready,
    .cid_cmd, .cid_valid, .cid_ready,
    .vec_instr, .vec_valid, .vec_ready,
    .n_cim, .n_cid, .n_vec
  );

  // ---------------- analog CiM accelerator ----------------
  cim_accel #(.TXN(TXN), .TYN(TYN), .GB_BYTES(GB_BYTES)) u_cim (
    .clk, .rst_n,
    .host_in_flit(cim_flit), .host_in_valid(cim_valid), .host_in_ready(cim_ready),
    .host_out_flit(cim_rsp_flit), .host_out_valid(cim_rsp_valid), .host_out_ready(cim_rsp_ready)
  );

  // ---------------- compute-in-DRAM ----------------
  logic [N_PCH-1:0] pch_ready;
  wire all_idle = &pch_ready;
  always_comb begin
    unique case (cid_cmd.op)
      CID_WR_BUF: cid_ready = 1'b1;
      default:    cid_ready = all_idle;
    endcase
  end
  wire go      = cid_valid && cid_ready;
  wire do_wr   = go && (cid_cmd.op == CID_WR_BUF);
  wire do_swap = go && (cid_cmd.op == CID_SWAP);
  wire do_gemv = go && (cid_cmd.op == CID_GEMV);

  for (genvar p = 0; p < N_PCH; p++) begin : g_pch
    cid_pch u_pch (
      .clk, .rst_n,
      .cmd_valid(do_gemv), .cmd_ready(pch_ready[p]),
      .cmd_rows(cid_cmd.rows), .cmd_kbeats(cid_cmd.kbeats),
      .buf_wr(do_wr), .buf_line(cid_cmd.line), .buf_data(cid_cmd.data), .buf_swap(do_swap),
      .dram_req(dram_req[p]), .dram_ready(dram_ready[p]), .dram_row(dram_row[p]), .dram_col(dram_col[p]),
      .dram_valid(dram_valid[p]), .dram_data(dram_data[p]),
      .res_valid(cid_res_valid[p]), .res_row(cid_res_row[p]), .res_data(cid_res_data[p]),
      .busy(cid_busy[p])
    );
  end

  // ---------------- logic-die vector unit ----------------
  vector_unit u_vec (
    .clk, .rst_n,
    .instr(vec_instr), .instr_valid(vec_valid), .instr_ready(vec_ready), .done(vec_done),
    .buf_wr(vbuf_wr), .buf_waddr(vbuf_waddr), .buf_wdata(vbuf_wdata),
    .buf_raddr(vbuf_raddr), .buf_rdata(vbuf_rdata),
    .n_mul(n_vmul), .n_add(n_vadd), .n_exp(n_vexp)
  );
endmodule
