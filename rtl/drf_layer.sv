// drf_layer: one cascade level of the deep random forest.
//
// FORESTS forests receive the same search vector and are searched in
// parallel. Their vote vectors are concatenated and, together with the
// original input features, form the search vector of the next level
// (in-model feature transformation).
//
// Search-vector layout (this design's choice): columns 0 .. N_FEATURES-1
// hold the input features; column N_FEATURES + f*N_CLASSES + c holds the
// vote of forest f for class c; remaining columns are 0 and are meant to be
// programmed "don't care". Because a FeFET cell resolves only VTH_BITS-bit
// levels, a vote count v (0..TREES) is requantised to the code
// round(v * (2^VTH_BITS - 1) / TREES) before it drives the next level's
// search lines; the paper does not say how votes are encoded. Every level is
// offered all input features; a level that should see only a portion of them
// has the other feature columns programmed "don't care".
//
// Interface and timing: prog_forest selects the forest for programming.
// votes is registered by vote_load; next_sl is combinational from votes and
// the feature columns of sl, so it is stable from the cycle after vote_load
// for as long as sl's feature columns are held.
module drf_layer #(
  parameter int unsigned FORESTS    = 2,
  parameter int unsigned TREES      = 8,
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 128,
  parameter int unsigned SUBARRAYS  = 1,
  parameter int unsigned N_CLASSES  = 6,
  parameter int unsigned N_FEATURES = 116,
  parameter int unsigned VTH_BITS   = drf_pkg::VTH_BITS_DEFAULT,
  localparam int unsigned ROW_W     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SUB_W     = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned TREE_W    = (TREES > 1) ? $clog2(TREES) : 1,
  localparam int unsigned FOREST_W  = (FORESTS > 1) ? $clog2(FORESTS) : 1,
  localparam int unsigned CLASS_W   = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned VOTE_W    = drf_pkg::width_of(TREES),
  localparam int unsigned TCOLS     = SUBARRAYS * COLS
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          prog_we,
  input  logic                                          leaf_we,
  input  logic [FOREST_W-1:0]                           prog_forest,
  input  logic [TREE_W-1:0]                             prog_tree,
  input  logic [SUB_W-1:0]                              prog_sub,
  input  logic [ROW_W-1:0]                              prog_row,
  input  logic [COLS-1:0][VTH_BITS-1:0]                 prog_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0]                 prog_vth_f1,
  input  logic [CLASS_W-1:0]                            leaf_class,
  input  logic                                          leaf_valid,
  input  logic [TCOLS-1:0][VTH_BITS-1:0]                sl,
  input  logic                                          precharge,
  input  logic                                          evaluate,
  input  logic                                          sample,
  input  logic                                          vote_load,
  output logic [FORESTS-1:0][N_CLASSES-1:0][VOTE_W-1:0] votes,
  output logic [TCOLS-1:0][VTH_BITS-1:0]                next_sl
);
  localparam int unsigned VMAX = (1 << VTH_BITS) - 1;

  if (N_FEATURES + FORESTS * N_CLASSES > TCOLS) begin : g_size_check
    $error("drf_layer: features plus concatenated votes exceed the tree's columns");
  end

  for (genvar f = 0; f < FORESTS; f++) begin : g_forest
    logic sel;
    assign sel = (FORESTS == 1) || (prog_forest == FOREST_W'(f));
    forest #(
      .TREES(TREES), .ROWS(ROWS), .COLS(COLS), .SUBARRAYS(SUBARRAYS),
      .N_CLASSES(N_CLASSES), .VTH_BITS(VTH_BITS)
    ) u_forest (
      .clk        (clk),
      .rst_n      (rst_n),
      .prog_we    (prog_we && sel),
      .leaf_we    (leaf_we && sel),
      .prog_tree  (prog_tree),
      .prog_sub   (prog_sub),
      .prog_row   (prog_row),
      .prog_vth_f0(prog_vth_f0),
      .prog_vth_f1(prog_vth_f1),
      .leaf_class (leaf_class),
      .leaf_valid (leaf_valid),
      .sl         (sl),
      .precharge  (precharge),
      .evaluate   (evaluate),
      .sample     (sample),
      .vote_load  (vote_load),
      .votes      (votes[f])
    );
  end

  // Concatenation: original features, then requantised vote vectors.
  always_comb begin
    next_sl = '0;
    for (int c = 0; c < N_FEATURES; c++) next_sl[c] = sl[c];
    for (int f = 0; f < FORESTS; f++) begin
      for (int k = 0; k < N_CLASSES; k++) begin
        next_sl[N_FEATURES + f * N_CLASSES + k] =
          VTH_BITS'(drf_pkg::vote_to_code(int'(votes[f][k]), TREES, VMAX));
      end
    end
  end
endmodule
