// forest: one random forest of TREES ACAM-mapped decision trees and its vote
// counter.
//
// All trees receive the same search vector and are searched in parallel;
// each votes for the class of its matching leaf, and the vote counter turns
// the votes into the forest's per-class vote vector. Eight trees per forest
// is the default, the point beyond which the paper's accuracy stops rising.
//
// Interface and timing: prog_tree selects the tree that prog_we / leaf_we
// write. The search phases (precharge, evaluate, sample) go to every tree;
// vote_load registers the vote vector one cycle after sample, so votes is
// valid from the cycle after vote_load.
module forest #(
  parameter int unsigned TREES     = 8,
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned SUBARRAYS = 1,
  parameter int unsigned N_CLASSES = 6,
  parameter int unsigned VTH_BITS  = drf_pkg::VTH_BITS_DEFAULT,
  localparam int unsigned ROW_W    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SUB_W    = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned TREE_W   = (TREES > 1) ? $clog2(TREES) : 1,
  localparam int unsigned CLASS_W  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned VOTE_W   = drf_pkg::width_of(TREES),
  localparam int unsigned TCOLS    = SUBARRAYS * COLS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             prog_we,
  input  logic                             leaf_we,
  input  logic [TREE_W-1:0]                prog_tree,
  input  logic [SUB_W-1:0]                 prog_sub,
  input  logic [ROW_W-1:0]                 prog_row,
  input  logic [COLS-1:0][VTH_BITS-1:0]    prog_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0]    prog_vth_f1,
  input  logic [CLASS_W-1:0]               leaf_class,
  input  logic                             leaf_valid,
  input  logic [TCOLS-1:0][VTH_BITS-1:0]   sl,
  input  logic                             precharge,
  input  logic                             evaluate,
  input  logic                             sample,
  input  logic                             vote_load,
  output logic [N_CLASSES-1:0][VOTE_W-1:0] votes
);
  logic [TREES-1:0]              t_valid;
  logic [TREES-1:0][CLASS_W-1:0] t_class;

  for (genvar t = 0; t < TREES; t++) begin : g_tree
    logic sel;
    assign sel = (TREES == 1) || (prog_tree == TREE_W'(t));
    tree_unit #(
      .ROWS(ROWS), .COLS(COLS), .SUBARRAYS(SUBARRAYS),
      .N_CLASSES(N_CLASSES), .VTH_BITS(VTH_BITS)
    ) u_tree (
      .clk        (clk),
      .rst_n      (rst_n),
      .prog_we    (prog_we && sel),
      .prog_sub   (prog_sub),
      .prog_row   (prog_row),
      .prog_vth_f0(prog_vth_f0),
      .prog_vth_f1(prog_vth_f1),
      .leaf_we    (leaf_we && sel),
      .leaf_class (leaf_class),
      .leaf_valid (leaf_valid),
      .sl         (sl),
      .precharge  (precharge),
      .evaluate   (evaluate),
      .sample     (sample),
      .vote_valid (t_valid[t]),
      .vote_class (t_class[t])
    );
  end

  vote_counter #(.TREES(TREES), .N_CLASSES(N_CLASSES)) u_votes (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (vote_load),
    .vote_valid(t_valid),
    .vote_class(t_class),
    .votes     (votes)
  );
endmodule
