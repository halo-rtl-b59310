// tb_phase_dispatch: self-checking test of the phase-aware dispatcher.
// Sends random tagged commands with random engine back-pressure and checks
// that prefill matrix operations reach the CiM port, decode matrix operations
// the CiD port and non-GEMM operations the vector port, with payload intact,
// and that the counters match. Every route must be exercised.
module tb_phase_dispatch;
  import halo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  halo_cmd_t cmd; logic cmd_valid, cmd_ready;
  noc_flit_t cim_flit; logic cim_valid, cim_ready;
  cid_cmd_t cid_cmd; logic cid_valid, cid_ready;
  vec_instr_t vec_instr; logic vec_valid, vec_ready;
  logic [31:0] n_cim, n_cid, n_vec;
  phase_dispatch dut (.*);

  int ecim = 0, ecid = 0, evec = 0;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd = '0; cmd_valid = 0; cim_ready = 0; cid_ready = 0; vec_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      cmd.phase = phase_e'($urandom_range(0, 1));
      cmd.cls   = opclass_e'($urandom_range(0, 1));
      cmd.flit.addr = 24'($urandom); cmd.cid.rows = 16'($urandom); cmd.vec.rd = 5'($urandom);
      cmd_valid = 1;
      cim_ready = $urandom_range(0, 1); cid_ready = $urandom_range(0, 1); vec_ready = $urandom_range(0, 1);
      #1;
      checks++;
      if (cmd.cls == OC_NONGEMM) begin
        if (!vec_valid || cim_valid || cid_valid || vec_instr != cmd.vec || cmd_ready != vec_ready) begin failures++; $display("FAIL non-GEMM route"); end
        if (vec_ready) evec++;
      end else if (cmd.phase == PH_PREFILL) begin
        if (!cim_valid || vec_valid || cid_valid || cim_flit != cmd.flit || cmd_ready != cim_ready) begin failures++; $display("FAIL prefill route"); end
        if (cim_ready) ecim++;
      end else begin
        if (!cid_valid || vec_valid || cim_valid || cid_cmd != cmd.cid || cmd_ready != cid_ready) begin failures++; $display("FAIL decode route"); end
        if (cid_ready) ecid++;
      end
    end
    @(negedge clk); cmd_valid = 0; @(negedge clk);
    checks++; if (n_cim != ecim || n_cid != ecid || n_vec != evec) begin failures++; $display("FAIL counters"); end
    checks++; if (ecim == 0 || ecid == 0 || evec == 0) begin failures++; $display("FAIL a route never used"); end
    $display("routed: cim=%0d cid=%0d vec=%0d", ecim, ecid, evec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
