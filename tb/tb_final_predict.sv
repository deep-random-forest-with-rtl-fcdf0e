// tb_final_predict: random vote vectors of 3 forests; the per-class sums and
// the arg-max (lowest class on ties) are recomputed in the testbench.
module tb_final_predict;
  localparam int F = 3, T = 8, NC = 6, VW = 4, SW = 5, CW = 3;
  int checks = 0, failures = 0;
  logic [F-1:0][NC-1:0][VW-1:0] votes;
  logic [NC-1:0][SW-1:0] class_sum;
  logic [CW-1:0] pred_class;

  final_predict #(.FORESTS(F), .TREES(T), .N_CLASSES(NC)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      int s[NC], best, bi;
      for (int c = 0; c < NC; c++) s[c] = 0;
      for (int f = 0; f < F; f++) for (int c = 0; c < NC; c++) begin
        automatic int v = (k < 20) ? 2 : $urandom_range(T);   // first cases: all ties
        votes[f][c] = VW'(v); s[c] += v;
      end
      #1;
      best = -1; bi = 0;
      for (int c = 0; c < NC; c++) if (s[c] > best) begin best = s[c]; bi = c; end
      for (int c = 0; c < NC; c++) begin checks++; if (class_sum[c] != SW'(s[c])) failures++; end
      checks++;
      if (pred_class != CW'(bi)) begin failures++; $display("FAIL pred %0d exp %0d", pred_class, bi); end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
