// vote_counter: per-class vote count of one random forest.
//
// Each tree of the forest votes for one class (or abstains when no branch
// matched). The counter adds the votes per class into the forest's vote
// vector, e.g. [2, 12, 6] for classes [A, B, C] with 20 trees. This vector is
// the forest's class distribution that the next cascade level searches on.
//
// Interface and timing: votes is a register loaded from the tree outputs in
// a cycle with load = 1 (one cycle after the sense amplifiers were sampled);
// reset clears it. The count itself is a combinational population count per
// class, the simplest circuit for the function.
module vote_counter #(
  parameter int unsigned TREES     = 8,
  parameter int unsigned N_CLASSES = 6,
  localparam int unsigned CLASS_W  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned VOTE_W   = drf_pkg::width_of(TREES)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              load,
  input  logic [TREES-1:0]                  vote_valid,
  input  logic [TREES-1:0][CLASS_W-1:0]     vote_class,
  output logic [N_CLASSES-1:0][VOTE_W-1:0]  votes
);
  logic [N_CLASSES-1:0][VOTE_W-1:0] count;

  always_comb begin
    count = '0;
    for (int t = 0; t < TREES; t++) begin
      for (int c = 0; c < N_CLASSES; c++) begin
        if (vote_valid[t] && vote_class[t] == CLASS_W'(c)) count[c] = count[c] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    votes <= '0;
    else if (load) votes <= count;
  end
endmodule
