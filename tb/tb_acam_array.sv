// tb_acam_array: a 16 x 6 array holding one random tree (leaves partition
// the space, so exactly one row matches each query) is searched with random
// queries; every row's sense output is compared with the interval model.
// A second round rewrites single rows to check row addressing.
module tb_acam_array;
  import drf_tb_pkg::*;
  localparam int VB = 3, VMAX = 7, R = 16, C = 6, EVAL = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, we, precharge, evaluate, sample;
  logic [$clog2(R)-1:0] wr_row;
  logic [C-1:0][VB-1:0] wr_vth_f0, wr_vth_f1, sl;
  logic [R-1:0] ml_out;

  acam_array #(.ROWS(R), .COLS(C), .VTH_BITS(VB)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rand_tree t;

  task automatic program_all();
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wr_row = r[$clog2(R)-1:0];
      for (int c = 0; c < C; c++) begin
        wr_vth_f0[c] = VB'(t.f0_code(r, c)); wr_vth_f1[c] = VB'(t.f1_code(r, c));
      end
      we = 1;
    end
    @(negedge clk); we = 0;
  endtask

  task automatic search_check(int nq);
    int x[MAXC];
    for (int q = 0; q < nq; q++) begin
      int leaf;
      for (int c = 0; c < MAXC; c++) x[c] = 0;
      for (int c = 0; c < C; c++) begin x[c] = $urandom_range(VMAX); sl[c] = VB'(x[c]); end
      precharge = 1; @(negedge clk); precharge = 0; evaluate = 1;
      repeat (EVAL) @(negedge clk);
      evaluate = 0; sample = 1; @(negedge clk); sample = 0;
      leaf = t.find_leaf(x, C);
      for (int r = 0; r < R; r++) begin
        checks++;
        if (ml_out[r] !== (r == leaf)) begin
          failures++; $display("FAIL row %0d got %0b leaf %0d", r, ml_out[r], leaf);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; we = 0; precharge = 0; evaluate = 0; sample = 0; sl = '0; wr_row = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    t = new(VMAX);
    for (int k = 0; k < 5; k++) begin
      t.build(k == 0 ? R - 3 : R, C, 4, 0, C, 0, 0, 100);
      program_all();
      search_check(60);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
