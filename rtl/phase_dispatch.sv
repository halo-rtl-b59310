// phase_dispatch: phase-aware mapping of operations onto HALO's engines.
//
// The prefill phase of LLM inference processes the whole prompt, so its
// matrix products are matrix-matrix (GEMM) and compute-bound; the decode phase
// produces one token at a time, so its matrix products are matrix-vector
// (GEMV) and memory-bound. HALO maps them differently: every matrix operation
// of the prefill phase goes to the analog CiM accelerator, every matrix
// operation of the decode phase goes to the compute-in-DRAM units, and all
// non-GEMM operations (normalisation, activation, softmax) go to the vector
// unit on the HBM logic die, whatever the phase. This block applies that rule
// to a stream of tagged commands and counts the commands sent to each engine.
//
// The mapping rule follows the published design; doing it with a hardware
// router on tagged commands is this design's choice (the published work
// describes it as a mapping strategy).
//
// Timing: combinational; the command is accepted in the cycle the selected
// engine is ready. Counters update at the clock edge.
module phase_dispatch
  import halo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  halo_cmd_t   cmd,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  output noc_flit_t   cim_flit,
  output logic        cim_valid,
  input  logic        cim_ready,
  output cid_cmd_t    cid_cmd,
  output logic        cid_valid,
  input  logic        cid_ready,
  output vec_instr_t  vec_instr,
  output logic        vec_valid,
  input  logic        vec_ready,
  output logic [31:0] n_cim,
  output logic [31:0] n_cid,
  output logic [31:0] n_vec
);
  logic to_cim, to_cid, to_vec;
  always_comb begin
    to_vec = (cmd.cls == OC_NONGEMM);
    to_cim = (cmd.cls == OC_MATMUL) && (cmd.phase == PH_PREFILL);
    to_cid = (cmd.cls == OC_MATMUL) && (cmd.phase == PH_DECODE);
    cim_flit  = cmd.flit;  cim_valid = cmd_valid && to_cim;
    cid_cmd   = cmd.cid;   cid_valid = cmd_valid && to_cid;
    vec_instr = cmd.vec;   vec_valid = cmd_valid && to_vec;
    cmd_ready = (to_cim && cim_ready) || (to_cid && cid_ready) || (to_vec && vec_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cim <= '0; n_cid <= '0; n_vec <= '0;
    end else if (cmd_valid && cmd_ready) begin
      if (to_cim) n_cim <= n_cim + 32'd1;
      if (to_cid) n_cid <= n_cid + 32'd1;
      if (to_vec) n_vec <= n_vec + 32'd1;
    end
  end

  a_one_target: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> $onehot({to_cim, to_cid, to_vec}));
endmodule
