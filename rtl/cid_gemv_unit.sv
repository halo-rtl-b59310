// cid_gemv_unit: bank-level GEMV engine of the compute-in-DRAM side.
//
// Each DRAM bank carries 32 signed 8-bit multipliers. One operand of every
// multiplier is a byte of the open row (the weights, straight from the row
// buffer); the other is the matching byte of the input vector broadcast from
// the pseudo channel's input buffer. The 32 products are summed by a binary
// adder tree (16, 8, 4, 2, 1 adders) inside the bank, and successive beats of
// one output row are accumulated so that the bank hands a finished dot product
// to the logic die.
//
// The multiplier count, the 8-bit operands and the in-bank reduction tree
// follow the published design. Signed operands, the 32-bit accumulator and the
// three pipeline registers are this design's choices.
//
// Timing: a beat is registered after the multipliers at the edge that samples
// it, after the tree at the next edge and in the accumulator at the one after.
// For the beat flagged `last`, out_valid and the row's result therefore appear
// two clock edges after the edge that sampled the beat. `first` restarts the
// accumulation. A new beat may be presented every cycle.
module cid_gemv_unit
  import halo_pkg::*;
#(
  parameter int LANES  = CID_LANES,
  parameter int DW     = OPW,
  parameter int ACC_WD = ACC_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         first,
  input  logic                         last,
  input  logic signed [LANES-1:0][DW-1:0] w,   // row-buffer bytes
  input  logic signed [LANES-1:0][DW-1:0] x,   // broadcast input bytes
  output logic                         out_valid,
  output logic signed [ACC_WD-1:0]     result
);
  localparam int PW = 2 * DW;                    // product width
  localparam int SW = PW + $clog2(LANES);        // tree sum width

  // Stage 1: multipliers
  logic signed [PW-1:0] prod_q [LANES];
  logic                 v1, f1, l1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      for (int i = 0; i < LANES; i++) prod_q[i] <= '0;
    end else begin
      v1 <= in_valid; f1 <= first; l1 <= last;
      if (in_valid)
        for (int i = 0; i < LANES; i++)
          prod_q[i] <= PW'($signed(w[i]) * $signed(x[i]));
    end
  end

  // Stage 2: reduction tree (written as a sum; synthesis builds the tree)
  logic signed [SW-1:0] tree_sum;
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < LANES; i++) tree_sum += SW'(prod_q[i]);
  end

  logic signed [SW-1:0] sum_q;
  logic                 v2, f2, l2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; sum_q <= '0;
    end else begin
      v2 <= v1; f2 <= f1; l2 <= l1;
      if (v1) sum_q <= tree_sum;
    end
  end

  // Stage 3: row accumulator
  logic signed [ACC_WD-1:0] acc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= v2 && l2;
      if (v2) acc_q <= (f2 ? '0 : acc_q) + ACC_WD'(sum_q);
    end
  end
  assign result = acc_q;

endmodule
