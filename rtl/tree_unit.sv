// tree_unit: one decision tree mapped onto ACAM arrays.
//
// Each row of the tree's ACAM holds one root-to-leaf branch, so the number of
// rows is the number of leaves and the columns are the features. When a tree
// needs more features than one array has columns, SUBARRAYS arrays are placed
// side by side and all searched at once: a branch matches when its row
// matches in every subarray (the AND of the per-subarray match lines). A
// leaf table gives the class each branch votes for; a priority encoder turns
// the matching row into the tree's vote.
//
// The leaf table (class plus valid bit per row) and the encoder are this
// design's choice; the paper only says that each tree's array votes for a
// class. A correctly mapped tree has exactly one matching valid row; should
// several match, the lowest row wins, and if none matches the tree casts no
// vote (vote_valid = 0).
//
// Interface and timing: prog_we writes one word of subarray prog_sub, row
// prog_row; leaf_we writes the class and valid bit of row prog_row. Reset
// clears the valid bits. vote_valid/vote_class are combinational from the
// registered sense-amplifier outputs, so they are valid from the cycle after
// sample.
module tree_unit #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned SUBARRAYS = 1,
  parameter int unsigned N_CLASSES = 6,
  parameter int unsigned VTH_BITS  = drf_pkg::VTH_BITS_DEFAULT,
  localparam int unsigned ROW_W    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SUB_W    = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned CLASS_W  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned TCOLS    = SUBARRAYS * COLS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // ACAM word programming
  input  logic                           prog_we,
  input  logic [SUB_W-1:0]               prog_sub,
  input  logic [ROW_W-1:0]               prog_row,
  input  logic [COLS-1:0][VTH_BITS-1:0]  prog_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0]  prog_vth_f1,
  // leaf table programming
  input  logic                           leaf_we,
  input  logic [CLASS_W-1:0]             leaf_class,
  input  logic                           leaf_valid,
  // search
  input  logic [TCOLS-1:0][VTH_BITS-1:0] sl,
  input  logic                           precharge,
  input  logic                           evaluate,
  input  logic                           sample,
  output logic                           vote_valid,
  output logic [CLASS_W-1:0]             vote_class
);
  logic [SUBARRAYS-1:0][ROWS-1:0] sub_ml;
  logic [ROWS-1:0]                row_match;
  logic [ROWS-1:0][CLASS_W-1:0]   leaf_cls_q;
  logic [ROWS-1:0]                leaf_vld_q;

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sub
    acam_array #(.ROWS(ROWS), .COLS(COLS), .VTH_BITS(VTH_BITS)) u_array (
      .clk      (clk),
      .rst_n    (rst_n),
      .we       (prog_we && (SUBARRAYS == 1 || prog_sub == SUB_W'(s))),
      .wr_row   (prog_row),
      .wr_vth_f0(prog_vth_f0),
      .wr_vth_f1(prog_vth_f1),
      .sl       (sl[s*COLS +: COLS]),
      .precharge(precharge),
      .evaluate (evaluate),
      .sample   (sample),
      .ml_out   (sub_ml[s])
    );
  end

  always_comb begin
    row_match = '1;
    for (int s = 0; s < SUBARRAYS; s++) row_match &= sub_ml[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      leaf_vld_q <= '0;
    end else if (leaf_we) begin
      leaf_vld_q[prog_row] <= leaf_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (leaf_we) leaf_cls_q[prog_row] <= leaf_class;
  end

  // Lowest matching valid row wins.
  always_comb begin
    vote_valid = 1'b0;
    vote_class = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (row_match[r] && leaf_vld_q[r]) begin
        vote_valid = 1'b1;
        vote_class = leaf_cls_q[r];
      end
    end
  end
endmodule
