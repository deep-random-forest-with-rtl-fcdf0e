// tb_tree_unit: a random tree of up to 8 leaves over 8 features, split
// across two 4-column subarrays. Random queries must return the class of the
// leaf whose box holds the query; a leaf marked invalid in the leaf table
// must make the tree abstain (vote_valid = 0). Queries are counted that
// needed both subarrays to reject a row.
module tb_tree_unit;
  import drf_tb_pkg::*;
  localparam int VB = 3, VMAX = 7, R = 8, C = 4, S = 2, NC = 6, EVAL = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_abstain = 0;
  logic rst_n, prog_we, leaf_we, leaf_valid, precharge, evaluate, sample, vote_valid;
  logic [0:0] prog_sub;
  logic [2:0] prog_row, leaf_class, vote_class;
  logic [C-1:0][VB-1:0] prog_vth_f0, prog_vth_f1;
  logic [S*C-1:0][VB-1:0] sl;

  tree_unit #(.ROWS(R), .COLS(C), .SUBARRAYS(S), .N_CLASSES(NC), .VTH_BITS(VB)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rand_tree t;

  initial begin
    int x[MAXC];
    rst_n = 0; prog_we = 0; leaf_we = 0; precharge = 0; evaluate = 0; sample = 0;
    sl = '0; prog_sub = '0; prog_row = '0; leaf_class = '0; leaf_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    t = new(VMAX);
    for (int k = 0; k < 12; k++) begin
      automatic int bad = (k % 3 == 2) ? $urandom_range(R - 1) : -1;
      t.build(R - (k % 2), S * C, NC, 0, S * C, 0, 0, 100);
      for (int r = 0; r < R; r++) begin
        for (int s = 0; s < S; s++) begin
          @(negedge clk);
          prog_sub = s[0:0]; prog_row = r[2:0];
          for (int c = 0; c < C; c++) begin
            prog_vth_f0[c] = VB'(t.f0_code(r, s * C + c));
            prog_vth_f1[c] = VB'(t.f1_code(r, s * C + c));
          end
          prog_we = 1;
          leaf_we = (s == 0); leaf_class = 3'(t.cls[r]); leaf_valid = t.vld[r] && (r != bad);
        end
      end
      @(negedge clk); prog_we = 0; leaf_we = 0;
      for (int q = 0; q < 40; q++) begin
        int leaf;
        bit ev;
        // Half the queries aim at a chosen leaf (the disabled one first).
        automatic int aim = (q < 4 && bad >= 0 && bad < t.n_leaves) ? bad :
                  ($urandom_range(1) ? $urandom_range(t.n_leaves - 1) : -1);
        for (int c = 0; c < S * C; c++) begin
          x[c] = (aim >= 0) ? t.lo[aim][c] + $urandom_range(t.hi[aim][c] - t.lo[aim][c])
                            : $urandom_range(VMAX);
          sl[c] = VB'(x[c]);
        end
        for (int c = S * C; c < MAXC; c++) x[c] = 0;
        precharge = 1; @(negedge clk); precharge = 0; evaluate = 1;
        repeat (EVAL) @(negedge clk);
        evaluate = 0; sample = 1; @(negedge clk); sample = 0;
        leaf = t.find_leaf(x, S * C);
        ev = (leaf >= 0) && (leaf != bad);
        checks++;
        if (vote_valid !== ev || (ev && vote_class !== 3'(t.cls[leaf]))) begin
          failures++;
          $display("FAIL leaf %0d valid %0b class %0d", leaf, vote_valid, vote_class);
        end
        if (!ev) n_abstain++;
      end
    end
    checks++; if (n_abstain == 0) failures++;
    $display("abstentions: %0d", n_abstain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
