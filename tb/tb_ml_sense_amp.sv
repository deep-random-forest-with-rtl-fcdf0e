// tb_ml_sense_amp: precharge / evaluate / sample sequences on one match line.
// A word that matches throughout evaluation reads 1; a mismatch in any single
// evaluation cycle discharges the line for good (reads 0 even if the cells
// match again); mismatches outside evaluation do not discharge it; sa_out
// holds between samples.
module tb_ml_sense_amp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, precharge, evaluate, sample, cells_match, sa_out;

  ml_sense_amp dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // glitch_at: evaluation cycle with a mismatch (-1 none); pre_mis: mismatch
  // during precharge.
  task automatic search(input int n_eval, input int glitch_at, input bit pre_mis,
                        input bit exp);
    @(negedge clk); precharge = 1; cells_match = !pre_mis;
    @(negedge clk); precharge = 0; evaluate = 1;
    for (int i = 0; i < n_eval; i++) begin
      cells_match = (i != glitch_at);
      @(negedge clk);
    end
    evaluate = 0; cells_match = 0; sample = 1;
    @(negedge clk); sample = 0;
    checks++;
    if (sa_out !== exp) begin
      failures++;
      $display("FAIL n_eval=%0d glitch=%0d sa_out=%0b exp=%0b", n_eval, glitch_at, sa_out, exp);
    end
    repeat (3) @(negedge clk);
    checks++; if (sa_out !== exp) failures++;   // holds
  endtask

  initial begin
    rst_n = 0; precharge = 0; evaluate = 0; sample = 0; cells_match = 0;
    repeat (2) @(negedge clk);
    checks++; if (sa_out !== 0) failures++;
    rst_n = 1;
    search(10, -1, 0, 1);
    search(10, 0, 0, 0);
    search(10, 9, 0, 0);
    search(10, 4, 0, 0);
    search(1, -1, 1, 1);
    search(3, -1, 0, 1);
    for (int k = 0; k < 50; k++) begin
      automatic int n = 1 + $urandom_range(12);
      automatic int g = $urandom_range(1) ? $urandom_range(n - 1) : -1;
      search(n, g, $urandom_range(1), g < 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
