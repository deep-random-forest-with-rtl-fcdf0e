// final_predict: "average, then max" stage after the last cascade level.
//
// The class distributions produced by the forests of the last level are
// averaged per class and the class with the largest average is the
// prediction. Dividing by the number of forests does not change which class
// is largest, so the stage keeps the per-class sums (class_sum = FORESTS times
// the average) and compares those. Ties go to the lowest class index; the
// paper does not say how ties are broken.
//
// Interface and timing: purely combinational from the registered vote
// vectors of the last level.
module final_predict #(
  parameter int unsigned FORESTS   = 2,
  parameter int unsigned TREES     = 8,
  parameter int unsigned N_CLASSES = 6,
  localparam int unsigned CLASS_W  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned VOTE_W   = drf_pkg::width_of(TREES),
  localparam int unsigned SUM_W    = drf_pkg::width_of(TREES * FORESTS)
) (
  input  logic [FORESTS-1:0][N_CLASSES-1:0][VOTE_W-1:0] votes,
  output logic [N_CLASSES-1:0][SUM_W-1:0]               class_sum,
  output logic [CLASS_W-1:0]                            pred_class
);
  logic [SUM_W-1:0] best;

  always_comb begin
    for (int c = 0; c < N_CLASSES; c++) begin
      class_sum[c] = '0;
      for (int f = 0; f < FORESTS; f++) class_sum[c] = class_sum[c] + SUM_W'(votes[f][c]);
    end
    best       = class_sum[0];
    pred_class = '0;
    for (int c = 1; c < N_CLASSES; c++) begin
      if (class_sum[c] > best) begin
        best       = class_sum[c];
        pred_class = CLASS_W'(c);
      end
    end
  end
endmodule
