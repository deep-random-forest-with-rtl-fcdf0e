// tb_drf_layer: one cascade level of 2 forests x 3 trees over 4 features
// plus 2 x 3 vote columns. Checks both vote vectors against the testbench's
// own tree lookups and the concatenated next-level search vector: features
// copied, each vote v turned into round(v * 7 / TREES), unused columns 0.
module tb_drf_layer;
  import drf_tb_pkg::*;
  localparam int VB = 3, VMAX = 7, F = 2, T = 3, R = 8, C = 12, NC = 3, NF = 4, EVAL = 2, VW = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, prog_we, leaf_we, leaf_valid, precharge, evaluate, sample, vote_load;
  logic [0:0] prog_forest, prog_sub;
  logic [1:0] prog_tree, leaf_class;
  logic [2:0] prog_row;
  logic [C-1:0][VB-1:0] prog_vth_f0, prog_vth_f1, sl, next_sl;
  logic [F-1:0][NC-1:0][VW-1:0] votes;

  drf_layer #(.FORESTS(F), .TREES(T), .ROWS(R), .COLS(C), .SUBARRAYS(1), .N_CLASSES(NC),
              .N_FEATURES(NF), .VTH_BITS(VB)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rand_tree tr[F][T];

  initial begin
    int x[MAXC];
    rst_n = 0; prog_we = 0; leaf_we = 0; precharge = 0; evaluate = 0; sample = 0; vote_load = 0;
    sl = '0; prog_sub = '0; prog_row = '0; prog_tree = '0; prog_forest = '0; leaf_class = '0; leaf_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < F; f++) for (int i = 0; i < T; i++) begin rand_tree h; h = new(VMAX); tr[f][i] = h; end
    for (int k = 0; k < 3; k++) begin
      for (int f = 0; f < F; f++) for (int i = 0; i < T; i++) begin
        tr[f][i].build(R, C, NC, 0, C, 0, 0, 100);
        for (int r = 0; r < R; r++) begin
          @(negedge clk);
          prog_forest = 1'(f); prog_tree = 2'(i); prog_row = 3'(r);
          for (int c = 0; c < C; c++) begin
            prog_vth_f0[c] = VB'(tr[f][i].f0_code(r, c)); prog_vth_f1[c] = VB'(tr[f][i].f1_code(r, c));
          end
          prog_we = 1; leaf_we = 1; leaf_class = 2'(tr[f][i].cls[r]); leaf_valid = tr[f][i].vld[r];
        end
      end
      @(negedge clk); prog_we = 0; leaf_we = 0;
      for (int q = 0; q < 50; q++) begin
        int exp[F][NC];
        for (int c = 0; c < MAXC; c++) x[c] = 0;
        for (int c = 0; c < C; c++) begin x[c] = $urandom_range(VMAX); sl[c] = VB'(x[c]); end
        for (int f = 0; f < F; f++) for (int c = 0; c < NC; c++) exp[f][c] = 0;
        for (int f = 0; f < F; f++) for (int i = 0; i < T; i++) begin
          automatic int l = tr[f][i].find_leaf(x, C);
          if (l >= 0) exp[f][tr[f][i].cls[l]]++;
        end
        precharge = 1; @(negedge clk); precharge = 0; evaluate = 1;
        repeat (EVAL) @(negedge clk);
        evaluate = 0; sample = 1; @(negedge clk); sample = 0; vote_load = 1;
        @(negedge clk); vote_load = 0;
        for (int f = 0; f < F; f++) for (int c = 0; c < NC; c++) begin
          automatic int code = int'($floor(real'(exp[f][c]) * VMAX / T + 0.5));
          checks++;
          if (votes[f][c] != VW'(exp[f][c])) failures++;
          checks++;
          if (next_sl[NF + f * NC + c] != VB'(code)) begin
            failures++; $display("FAIL vote code f%0d c%0d got %0d exp %0d", f, c, next_sl[NF + f * NC + c], code);
          end
        end
        for (int c = 0; c < NF; c++) begin checks++; if (next_sl[c] != VB'(x[c])) failures++; end
        for (int c = NF + F * NC; c < C; c++) begin checks++; if (next_sl[c] != 0) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
