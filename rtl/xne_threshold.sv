// Threshold (activation + binarization) unit of the XNE.
//
// Compares every accumulator with its own 8-bit threshold, shifted left by
// a configurable amount so that a small threshold can be compared with a
// 16-bit accumulator: y[k] = 0 if acc[k] < (thr[k] << shift) else 1, the
// rule the paper gives. Thresholds and accumulators are treated as unsigned
// (a choice of this design). The comparison is made on ACC_W+THR_W bits so
// a large shift never wraps.
//
// Timing: combinational; all N outputs are produced in the same cycle.
module xne_threshold #(
  parameter int unsigned N     = 128,
  parameter int unsigned ACC_W = 16,
  parameter int unsigned THR_W = 8
) (
  input  logic [N-1:0][ACC_W-1:0] acc,
  input  logic [N-1:0][THR_W-1:0] thr,
  input  logic [3:0]              shift,
  output logic [N-1:0]            y
);

  localparam int unsigned CMP_W = ACC_W + THR_W;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic [CMP_W-1:0] t;
      t    = CMP_W'(thr[k]) << shift;
      y[k] = (CMP_W'(acc[k]) < t) ? 1'b0 : 1'b1;
    end
  end

endmodule
