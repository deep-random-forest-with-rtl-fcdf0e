// tb_drf_ctrl: the phase sequence of the sequencer. For each level it must
// give exactly one precharge cycle, EVAL_CYCLES evaluate cycles, one sample
// and one vote-load cycle, in that order and level after level; done must
// come LAYERS*(EVAL_CYCLES+3) cycles after the accepting edge, and start is
// ignored while busy.
module tb_drf_ctrl;
  localparam int L = 3, E = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, busy, done;
  logic [L-1:0] precharge, evaluate, sample, vote_load;

  drf_ctrl #(.LAYERS(L), .EVAL_CYCLES(E)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int onehot_idx(logic [L-1:0] v);
    for (int i = 0; i < L; i++) if (v == (1 << i)) return i;
    return -1;
  endfunction

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int cyc;
      repeat ($urandom_range(3)) @(negedge clk);
      checks++; if (busy) failures++;
      start = 1; @(negedge clk); start = ($urandom_range(1) == 1);   // extra start while busy
      cyc = 1;
      for (int l = 0; l < L; l++) begin
        checks++; if (onehot_idx(precharge) != l || evaluate || sample || vote_load) failures++;
        @(negedge clk); cyc++; start = 0;
        for (int e = 0; e < E; e++) begin
          checks++; if (onehot_idx(evaluate) != l || precharge || sample || vote_load) failures++;
          @(negedge clk); cyc++;
        end
        checks++; if (onehot_idx(sample) != l || precharge || evaluate || vote_load) failures++;
        @(negedge clk); cyc++;
        checks++; if (onehot_idx(vote_load) != l || precharge || evaluate || sample) failures++;
        checks++; if (!busy || done) failures++;
        @(negedge clk); cyc++;
      end
      checks++;
      if (!done || (cyc - 1) != L * (E + 3)) begin
        failures++; $display("FAIL done=%0b latency %0d", done, cyc - 1);
      end
      @(negedge clk);
      checks++; if (done || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
