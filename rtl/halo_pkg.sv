// halo_pkg: types and constants shared by the HALO accelerator RTL.
//
// HALO pairs compute-in-DRAM GEMV units inside an HBM3 stack with an analog
// SRAM compute-in-memory (CiM) accelerator on the same interposer. The sizes
// below are the configuration of the published design (crossbar geometry, ADC
// count and resolution, mesh sizes, vector width, CiD multipliers per bank).
// The network flit format and the command codes are this implementation's own
// choice: single-flit packets on both the tile mesh and the core mesh.
package halo_pkg;

  // Analog CiM crossbar geometry
  localparam int XBAR_ROWS = 128;   // wordlines
  localparam int XBAR_COLS = 128;   // bitlines
  localparam int N_XBAR    = 8;     // crossbars per CiM unit = 8 one-bit weight slices
  localparam int ADC_BITS  = 7;     // SAR ADC resolution
  localparam int N_ADC     = 48;    // ADCs per crossbar
  localparam int N_MGRP    = (XBAR_COLS + N_ADC - 1) / N_ADC;  // column groups behind the MUX
  localparam int OPW       = 8;     // operand precision (weights, inputs)
  localparam int ACC_W     = 32;    // dot-product accumulator width

  // Compute-in-DRAM
  localparam int CID_LANES = 32;    // multipliers per bank
  localparam int CID_BANKS = 8;     // banks per pseudo channel
  localparam int CID_DEPTH = 4096;  // input vector length held by the input buffer

  // Logic-die vector unit
  localparam int VEC_LANES = 512;
  localparam int VEC_DW    = 16;    // Q8.8 fixed point

  // ---------------------------------------------------------------------
  // Network-on-chip
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    CMD_WR_GB   = 4'd0,  // tile: GB[addr] = data
    CMD_RD_GB   = 4'd1,  // tile: reply GB[addr]
    CMD_FILL_IB = 4'd2,  // tile: copy GB[addr +: len] to a core's IB
    CMD_FILL_WB = 4'd3,  // tile: copy GB[addr +: len] to a core's WB
    CMD_WR_IB   = 4'd4,  // core: IB[addr] = data
    CMD_WR_WB   = 4'd5,  // core: WB[addr] = data
    CMD_LOAD_W  = 4'd6,  // core: program a CiM unit from WB[addr ...]
    CMD_RUN     = 4'd7,  // core: one matrix-vector product on a CiM unit
    CMD_RD_OB   = 4'd8,  // core: reply OB[addr]
    CMD_RESP    = 4'd9,  // reply carrying data, to the host
    CMD_DONE    = 4'd10  // completion notice, to the host
  } noc_cmd_e;

  typedef struct packed {
    logic       host;   // travelling to the host port
    logic [1:0] tx;     // destination tile column
    logic [1:0] ty;     // destination tile row
    logic       cx;     // destination core column inside the tile
    logic       cy;     // destination core row inside the tile
    logic       gb;     // destination is the tile's global buffer controller
    noc_cmd_e   cmd;
    logic [23:0] addr;
    logic [63:0] data;
  } noc_flit_t;

  // Router port numbering
  localparam int P_N = 0, P_E = 1, P_S = 2, P_W = 3, P_L = 4;

  // ---------------------------------------------------------------------
  // Logic-die vector instructions
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {VOP_MUL = 2'd0, VOP_ADD = 2'd1, VOP_EXP = 2'd2} vec_op_e;

  typedef struct packed {
    vec_op_e    op;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
  } vec_instr_t;

  // ---------------------------------------------------------------------
  // Top-level command, routed by the phase-aware dispatcher
  // ---------------------------------------------------------------------
  typedef enum logic {PH_PREFILL = 1'b0, PH_DECODE = 1'b1} phase_e;
  typedef enum logic {OC_MATMUL = 1'b0, OC_NONGEMM = 1'b1} opclass_e;

  typedef enum logic [1:0] {CID_WR_BUF = 2'd0, CID_SWAP = 2'd1, CID_GEMV = 2'd2} cid_op_e;

  typedef struct packed {
    cid_op_e      op;
    logic [6:0]   line;     // input-buffer line for CID_WR_BUF
    logic [255:0] data;     // 32 int8 inputs for CID_WR_BUF
    logic [15:0]  rows;     // DRAM rows per bank for CID_GEMV
    logic [7:0]   kbeats;   // 32-element beats per row for CID_GEMV
  } cid_cmd_t;

  typedef struct packed {
    phase_e     phase;
    opclass_e   cls;
    noc_flit_t  flit;   // payload when routed to the CiM accelerator
    cid_cmd_t   cid;    // payload when routed to the CiD
    vec_instr_t vec;    // payload when routed to the vector unit
  } halo_cmd_t;

endpackage
