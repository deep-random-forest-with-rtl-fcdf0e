// drf_top: deep-random-forest inference accelerator built from ferroelectric
// analog CAM (ACAM) arrays.
//
// Every decision tree of every forest of every cascade level is mapped onto
// its own ACAM array (ROWS branches x COLS features, SUBARRAYS arrays side by
// side when more columns are needed). A classification searches level 1 with
// the input features; each tree's matching branch votes for a class; the
// per-forest vote vectors are concatenated with the input features and
// searched by level 2, and so on. After the last level the forests' vote
// vectors are averaged and the largest class is the prediction.
//
// Defaults: 128 x 128 arrays and 8 trees per forest follow the paper; the
// number of levels (2), forests per level (2), classes (6, as in the
// six-movement sEMG task) and input features (116, so that features plus
// 2 x 6 vote columns fill one 128-column array) are this design's choices.
//
// Interface and timing:
//  * Programming (while idle): prog_we writes one ACAM word (all COLS cells
//    of one row of one subarray) addressed by prog_layer / prog_forest /
//    prog_tree / prog_sub / prog_row; leaf_we writes that row's leaf class and
//    valid bit. One word per cycle.
//  * Classification: start with busy = 0 captures features. out_valid rises
//    LAYERS * (EVAL_CYCLES + 3) cycles after the accepting edge and lasts one
//    cycle; pred_class and class_sum are valid then and hold until the next
//    classification.
//  * layer_votes exposes every level's vote vectors for observation.
module drf_top #(
  parameter int unsigned LAYERS      = 2,
  parameter int unsigned FORESTS     = 2,
  parameter int unsigned TREES       = 8,
  parameter int unsigned ROWS        = 128,
  parameter int unsigned COLS        = 128,
  parameter int unsigned SUBARRAYS   = 1,
  parameter int unsigned N_CLASSES   = 6,
  parameter int unsigned N_FEATURES  = 116,
  parameter int unsigned VTH_BITS    = drf_pkg::VTH_BITS_DEFAULT,
  parameter int unsigned EVAL_CYCLES = 10,
  localparam int unsigned ROW_W      = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SUB_W      = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned TREE_W     = (TREES > 1) ? $clog2(TREES) : 1,
  localparam int unsigned FOREST_W   = (FORESTS > 1) ? $clog2(FORESTS) : 1,
  localparam int unsigned LAYER_W    = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int unsigned CLASS_W    = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned VOTE_W     = drf_pkg::width_of(TREES),
  localparam int unsigned SUM_W      = drf_pkg::width_of(TREES * FORESTS),
  localparam int unsigned TCOLS      = SUBARRAYS * COLS
) (
  input  logic                                                       clk,
  input  logic                                                       rst_n,
  // model programming
  input  logic                                                       prog_we,
  input  logic                                                       leaf_we,
  input  logic [LAYER_W-1:0]                                         prog_layer,
  input  logic [FOREST_W-1:0]                                        prog_forest,
  input  logic [TREE_W-1:0]                                          prog_tree,
  input  logic [SUB_W-1:0]                                           prog_sub,
  input  logic [ROW_W-1:0]                                           prog_row,
  input  logic [COLS-1:0][VTH_BITS-1:0]                              prog_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0]                              prog_vth_f1,
  input  logic [CLASS_W-1:0]                                         leaf_class,
  input  logic                                                       leaf_valid,
  // classification
  input  logic                                                       start,
  input  logic [N_FEATURES-1:0][VTH_BITS-1:0]                        features,
  output logic                                                       busy,
  output logic                                                       out_valid,
  output logic [CLASS_W-1:0]                                         pred_class,
  output logic [N_CLASSES-1:0][SUM_W-1:0]                            class_sum,
  output logic [LAYERS-1:0][FORESTS-1:0][N_CLASSES-1:0][VOTE_W-1:0] layer_votes
);
  logic [N_FEATURES-1:0][VTH_BITS-1:0]  feat_q;
  logic [TCOLS-1:0][VTH_BITS-1:0]      first_sl;
  logic [LAYERS-1:0] precharge, evaluate, sample, vote_load;

  // Input feature register, captured when a classification is accepted and
  // held while the levels are searched.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              feat_q <= '0;
    else if (start && !busy) feat_q <= features;
  end

  always_comb begin
    first_sl = '0;
    for (int c = 0; c < N_FEATURES; c++) first_sl[c] = feat_q[c];
  end

  drf_ctrl #(.LAYERS(LAYERS), .EVAL_CYCLES(EVAL_CYCLES)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .busy     (busy),
    .done     (out_valid),
    .precharge(precharge),
    .evaluate (evaluate),
    .sample   (sample),
    .vote_load(vote_load)
  );

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    logic sel;
    // Search vector of this level and the one it builds for the next level.
    logic [TCOLS-1:0][VTH_BITS-1:0] sl_in, sl_next;
    if (l == 0) begin : g_first
      assign sl_in = first_sl;
    end else begin : g_next
      assign sl_in = g_layer[l-1].sl_next;
    end
    assign sel = (LAYERS == 1) || (prog_layer == LAYER_W'(l));
    drf_layer #(
      .FORESTS(FORESTS), .TREES(TREES), .ROWS(ROWS), .COLS(COLS),
      .SUBARRAYS(SUBARRAYS), .N_CLASSES(N_CLASSES), .N_FEATURES(N_FEATURES),
      .VTH_BITS(VTH_BITS)
    ) u_layer (
      .clk        (clk),
      .rst_n      (rst_n),
      .prog_we    (prog_we && sel),
      .leaf_we    (leaf_we && sel),
      .prog_forest(prog_forest),
      .prog_tree  (prog_tree),
      .prog_sub   (prog_sub),
      .prog_row   (prog_row),
      .prog_vth_f0(prog_vth_f0),
      .prog_vth_f1(prog_vth_f1),
      .leaf_class (leaf_class),
      .leaf_valid (leaf_valid),
      .sl         (sl_in),
      .precharge  (precharge[l]),
      .evaluate   (evaluate[l]),
      .sample     (sample[l]),
      .vote_load  (vote_load[l]),
      .votes      (layer_votes[l]),
      .next_sl    (sl_next)
    );
  end

  final_predict #(.FORESTS(FORESTS), .TREES(TREES), .N_CLASSES(N_CLASSES)) u_final (
    .votes     (layer_votes[LAYERS-1]),
    .class_sum (class_sum),
    .pred_class(pred_class)
  );

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(prog_we || leaf_we))
    else $error("drf_top: model programmed during a classification");
endmodule
