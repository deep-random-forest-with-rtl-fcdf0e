// tb_drf_top_full: the end-to-end test of tb_drf_top, run on the accelerator
// with every parameter at its default (2 levels x 2 forests x 8 trees,
// 128 x 128 arrays, 6 classes, 116 features): 32 trees, 4096 words.
//
// The testbench builds one random tree per ACAM array. Level-1 trees split only on feature
// columns; level-2 trees split on feature columns and, with 60 % probability,
// on the level-1 vote columns. In every level one tree has a leaf disabled,
// so that tree sometimes abstains. All 4096 words and leaf entries are
// programmed through the top's programming port. Each query is then run
// through the testbench's own model (interval lookup per tree, vote count,
// round(v * 7 / 8) requantisation, concatenation, sum and arg-max) and the
// DUT's per-level votes, class sums, prediction and latency
// (LAYERS * (EVAL_CYCLES + 3) cycles) are compared with it.
//
// Mechanisms counted, each must occur at least once: a level-2 decision that
// depended on a level-1 vote column; a tree abstaining; the two last-level
// forests disagreeing on their best class; a start request ignored while
// busy.
module tb_drf_top_full;
  import drf_tb_pkg::*;
  localparam int L = 2, F = 2, T = 8, R = 128, C = 128, NC = 6, NF = 116, VB = 3;
  localparam int VMAX = 7, EVAL = 10, NQ = 40;
  localparam int VW = $clog2(T + 1), SW = $clog2(T * F + 1), CW = $clog2(NC);
  localparam int RW = $clog2(R), TW = $clog2(T);
  localparam int LATENCY = L * (EVAL + 3);

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_vote_dep = 0, n_abstain = 0, n_disagree = 0, n_busy_start = 0;

  logic rst_n, prog_we, leaf_we, leaf_valid, start, busy, out_valid;
  logic [0:0] prog_layer, prog_forest, prog_sub;
  logic [TW-1:0] prog_tree;
  logic [CW-1:0] leaf_class, pred_class;
  logic [RW-1:0] prog_row;
  logic [C-1:0][VB-1:0] prog_vth_f0, prog_vth_f1;
  logic [NF-1:0][VB-1:0] features;
  logic [NC-1:0][SW-1:0] class_sum;
  logic [L-1:0][F-1:0][NC-1:0][VW-1:0] layer_votes;

  drf_top dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rand_tree tr[L][F][T];
  int bad[L], bad_leaf[L];

  initial begin
    int x[MAXC];
    rst_n = 0; prog_we = 0; leaf_we = 0; start = 0; features = '0;
    prog_layer = '0; prog_forest = '0; prog_tree = '0; prog_sub = '0; prog_row = '0;
    leaf_class = '0; leaf_valid = 0; prog_vth_f0 = '0; prog_vth_f1 = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // Build and program the model.
    for (int l = 0; l < L; l++) begin
      bad[l] = $urandom_range(F * T - 1);
      for (int f = 0; f < F; f++) for (int t = 0; t < T; t++) begin
        rand_tree h;
        h = new(VMAX);
        if (l == 0) h.build(R, C, NC, 0, NF, 0, 0, 100);
        else        h.build(R, C, NC, 0, NF, NF, NF + F * NC, 40);
        if (f * T + t == bad[l]) begin
          bad_leaf[l] = $urandom_range(h.n_leaves - 1);
          h.vld[bad_leaf[l]] = 0;
        end
        tr[l][f][t] = h;
        for (int r = 0; r < R; r++) begin
          @(negedge clk);
          prog_layer = 1'(l); prog_forest = 1'(f); prog_tree = TW'(t); prog_row = RW'(r);
          for (int c = 0; c < C; c++) begin
            prog_vth_f0[c] = VB'(h.f0_code(r, c)); prog_vth_f1[c] = VB'(h.f1_code(r, c));
          end
          prog_we = 1; leaf_we = 1; leaf_class = CW'(h.cls[r]); leaf_valid = h.vld[r];
        end
      end
    end
    @(negedge clk); prog_we = 0; leaf_we = 0;

    for (int q = 0; q < NQ; q++) begin
      int votes[L][F][NC], sum[NC], best, bi, cyc, bf[F];
      // Query: random features; every 4th query is drawn from the box of the
      // disabled level-1 leaf, so that its tree abstains.
      for (int c = 0; c < MAXC; c++) x[c] = 0;
      for (int c = 0; c < NF; c++) begin
        if (q % 4 == 1) begin
          automatic rand_tree b = tr[0][bad[0] / T][bad[0] % T];
          x[c] = b.lo[bad_leaf[0]][c] + $urandom_range(b.hi[bad_leaf[0]][c] - b.lo[bad_leaf[0]][c]);
        end else x[c] = $urandom_range(VMAX);
      end
      // Reference model, level by level.
      for (int l = 0; l < L; l++) begin
        for (int f = 0; f < F; f++) for (int k = 0; k < NC; k++) votes[l][f][k] = 0;
        for (int f = 0; f < F; f++) for (int t = 0; t < T; t++) begin
          automatic int lf = tr[l][f][t].find_leaf(x, C);
          if (lf >= 0 && tr[l][f][t].vld[lf]) votes[l][f][tr[l][f][t].cls[lf]]++;
          else n_abstain++;
          if (l > 0 && lf >= 0) begin
            for (int c = NF; c < NF + F * NC; c++)
              if (tr[l][f][t].lo[lf][c] != 0 || tr[l][f][t].hi[lf][c] != VMAX) begin
                n_vote_dep++; break;
              end
          end
        end
        // Next level's search vector: features, then requantised votes.
        for (int f = 0; f < F; f++) for (int k = 0; k < NC; k++)
          x[NF + f * NC + k] = int'($floor(real'(votes[l][f][k]) * VMAX / T + 0.5));
      end
      for (int k = 0; k < NC; k++) begin
        sum[k] = 0;
        for (int f = 0; f < F; f++) sum[k] += votes[L-1][f][k];
      end
      best = -1; bi = 0;
      for (int k = 0; k < NC; k++) if (sum[k] > best) begin best = sum[k]; bi = k; end
      for (int f = 0; f < F; f++) begin
        automatic int b = -1;
        for (int k = 0; k < NC; k++) if (votes[L-1][f][k] > b) begin b = votes[L-1][f][k]; bf[f] = k; end
      end
      if (bf[0] != bf[1]) n_disagree++;

      // Run the DUT.
      @(negedge clk);
      for (int c = 0; c < NF; c++) features[c] = VB'(x[c]);
      start = 1;
      @(negedge clk);
      start = (q % 5 == 0);   // extra request while busy must be ignored
      if (start && busy) n_busy_start++;
      features = ~features;   // must not disturb the running classification
      cyc = 1;
      while (!out_valid && cyc < 1000) begin @(negedge clk); start = 0; cyc++; end
      start = 0;
      checks++;
      if (cyc - 1 != LATENCY) begin failures++; $display("FAIL latency %0d exp %0d", cyc - 1, LATENCY); end
      for (int l = 0; l < L; l++) for (int f = 0; f < F; f++) for (int k = 0; k < NC; k++) begin
        checks++;
        if (layer_votes[l][f][k] != VW'(votes[l][f][k])) begin
          failures++;
          $display("FAIL q%0d level %0d forest %0d class %0d: %0d exp %0d", q, l, f, k,
                   layer_votes[l][f][k], votes[l][f][k]);
        end
      end
      for (int k = 0; k < NC; k++) begin checks++; if (class_sum[k] != SW'(sum[k])) failures++; end
      checks++;
      if (pred_class != CW'(bi)) begin failures++; $display("FAIL q%0d pred %0d exp %0d", q, pred_class, bi); end
      @(negedge clk);
      checks++; if (busy || out_valid) failures++;
    end

    $display("mechanisms: vote-dependent level-2 decisions=%0d abstentions=%0d forest disagreements=%0d ignored starts=%0d",
             n_vote_dep, n_abstain, n_disagree, n_busy_start);
    checks += 4;
    if (n_vote_dep == 0) failures++;
    if (n_abstain == 0) failures++;
    if (n_disagree == 0) failures++;
    if (n_busy_start == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
