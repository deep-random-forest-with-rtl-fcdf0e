// tb_acam_word: random branches programmed into one 8-column word and
// searched with random queries (biased to land inside the range half the
// time). Expected: the word matches iff every column's code lies in that
// column's interval.
module tb_acam_word;
  localparam int VB = 3, VMAX = 7, C = 8, EVAL = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_match = 0;
  logic rst_n, we, precharge, evaluate, sample, sa_out;
  logic [C-1:0][VB-1:0] wr_vth_f0, wr_vth_f1, sl;

  acam_word #(.COLS(C), .VTH_BITS(VB)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo[C], hi[C], x[C];
    rst_n = 0; we = 0; precharge = 0; evaluate = 0; sample = 0; sl = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (400) begin
      bit exp;
      for (int c = 0; c < C; c++) begin
        automatic int a = $urandom_range(VMAX), b = $urandom_range(VMAX);
        if ($urandom_range(2) == 0) begin a = 0; b = VMAX; end   // don't care
        lo[c] = (a < b) ? a : b; hi[c] = (a < b) ? b : a;
        wr_vth_f0[c] = VB'(hi[c]); wr_vth_f1[c] = VB'(VMAX - lo[c]);
      end
      @(negedge clk); we = 1; @(negedge clk); we = 0;
      for (int q = 0; q < 4; q++) begin
        exp = 1;
        for (int c = 0; c < C; c++) begin
          x[c] = ($urandom_range(1)) ? lo[c] + $urandom_range(hi[c] - lo[c]) : $urandom_range(VMAX);
          if ($urandom_range(3) != 0) x[c] = lo[c] + $urandom_range(hi[c] - lo[c]);
          sl[c] = VB'(x[c]);
          if (x[c] < lo[c] || x[c] > hi[c]) exp = 0;
        end
        precharge = 1; @(negedge clk); precharge = 0; evaluate = 1;
        repeat (EVAL) @(negedge clk);
        evaluate = 0; sample = 1; @(negedge clk); sample = 0;
        checks++;
        if (exp) n_match++;
        if (sa_out !== exp) begin failures++; $display("FAIL exp=%0b got=%0b", exp, sa_out); end
      end
    end
    checks++; if (n_match == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
