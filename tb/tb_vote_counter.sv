// tb_vote_counter: random tree votes (some trees abstaining) are counted per
// class; the registered vote vector must equal a count made in the testbench,
// load must be needed to update it, and reset must clear it.
module tb_vote_counter;
  localparam int T = 8, NC = 6, CW = 3, VW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, load;
  logic [T-1:0] vote_valid;
  logic [T-1:0][CW-1:0] vote_class;
  logic [NC-1:0][VW-1:0] votes;

  vote_counter #(.TREES(T), .N_CLASSES(NC)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp[NC];
    rst_n = 0; load = 0; vote_valid = '0; vote_class = '0;
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin checks++; if (votes[c] != 0) failures++; end
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      for (int c = 0; c < NC; c++) exp[c] = 0;
      for (int t = 0; t < T; t++) begin
        automatic int cl = (k < 10) ? (k % NC) : $urandom_range(NC - 1);
        automatic bit v = (k < 10) ? 1'b1 : ($urandom_range(4) != 0);
        vote_valid[t] = v; vote_class[t] = CW'(cl);
        if (v) exp[cl]++;
      end
      load = 1; @(negedge clk); load = 0;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (votes[c] != VW'(exp[c])) begin failures++; $display("FAIL class %0d got %0d exp %0d", c, votes[c], exp[c]); end
      end
      // without load the vector holds
      vote_valid = ~vote_valid; @(negedge clk);
      for (int c = 0; c < NC; c++) begin checks++; if (votes[c] != VW'(exp[c])) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
