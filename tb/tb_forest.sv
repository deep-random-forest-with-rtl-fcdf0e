// tb_forest: four random trees (8 leaves, 6 features) form one forest. For
// random queries the registered vote vector must equal the per-class count of
// the testbench's own tree lookups, available one cycle after vote_load.
module tb_forest;
  import drf_tb_pkg::*;
  localparam int VB = 3, VMAX = 7, T = 4, R = 8, C = 6, NC = 3, EVAL = 2, VW = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, prog_we, leaf_we, leaf_valid, precharge, evaluate, sample, vote_load;
  logic [1:0] prog_tree, leaf_class;
  logic [0:0] prog_sub;
  logic [2:0] prog_row;
  logic [C-1:0][VB-1:0] prog_vth_f0, prog_vth_f1, sl;
  logic [NC-1:0][VW-1:0] votes;

  forest #(.TREES(T), .ROWS(R), .COLS(C), .SUBARRAYS(1), .N_CLASSES(NC), .VTH_BITS(VB)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rand_tree tr[T];

  initial begin
    int x[MAXC];
    rst_n = 0; prog_we = 0; leaf_we = 0; precharge = 0; evaluate = 0; sample = 0; vote_load = 0;
    sl = '0; prog_sub = '0; prog_row = '0; prog_tree = '0; leaf_class = '0; leaf_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (tr[i]) begin rand_tree h; h = new(VMAX); tr[i] = h; end
    for (int k = 0; k < 4; k++) begin
      for (int i = 0; i < T; i++) begin
        tr[i].build(R, C, NC, 0, C, 0, 0, 100);
        for (int r = 0; r < R; r++) begin
          @(negedge clk);
          prog_tree = 2'(i); prog_row = 3'(r);
          for (int c = 0; c < C; c++) begin
            prog_vth_f0[c] = VB'(tr[i].f0_code(r, c)); prog_vth_f1[c] = VB'(tr[i].f1_code(r, c));
          end
          prog_we = 1; leaf_we = 1; leaf_class = 2'(tr[i].cls[r]); leaf_valid = tr[i].vld[r];
        end
      end
      @(negedge clk); prog_we = 0; leaf_we = 0;
      for (int q = 0; q < 50; q++) begin
        int exp[NC];
        for (int c = 0; c < MAXC; c++) x[c] = 0;
        for (int c = 0; c < C; c++) begin x[c] = $urandom_range(VMAX); sl[c] = VB'(x[c]); end
        for (int c = 0; c < NC; c++) exp[c] = 0;
        for (int i = 0; i < T; i++) begin
          automatic int l = tr[i].find_leaf(x, C);
          if (l >= 0) exp[tr[i].cls[l]]++;
        end
        precharge = 1; @(negedge clk); precharge = 0; evaluate = 1;
        repeat (EVAL) @(negedge clk);
        evaluate = 0; sample = 1; @(negedge clk); sample = 0; vote_load = 1;
        @(negedge clk); vote_load = 0;
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (votes[c] != VW'(exp[c])) begin failures++; $display("FAIL class %0d got %0d exp %0d", c, votes[c], exp[c]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
