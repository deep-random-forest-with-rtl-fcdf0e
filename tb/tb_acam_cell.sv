// tb_acam_cell: exhaustive check of the ACAM cell's matching range.
// Every pair of threshold codes (F0, F1) is programmed and every search code
// is applied; the expected match is the interval test
// lower = VMAX - F1 <= sl <= upper = F0. A second instance with four cells
// checks that neighbouring cells are independent.
module tb_acam_cell;
  localparam int VB = 3;
  localparam int VMAX = (1 << VB) - 1;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we;
  logic [VB-1:0] f0, f1, sl;
  logic          match;
  logic [VB-1:0] q0, q1;
  acam_cell #(.VTH_BITS(VB)) dut (.clk, .we, .wr_vth_f0(f0), .wr_vth_f1(f1),
                                  .sl, .match, .vth_f0(q0), .vth_f1(q1));

  logic            we4;
  logic [3:0][VB-1:0] f04, f14, sl4, q04, q14;
  logic [3:0]      match4;
  acam_cell #(.CELLS(4), .VTH_BITS(VB)) dut4 (.clk, .we(we4), .wr_vth_f0(f04), .wr_vth_f1(f14),
                                              .sl(sl4), .match(match4), .vth_f0(q04), .vth_f1(q14));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; we4 = 0;
    for (int a = 0; a <= VMAX; a++) begin
      for (int b = 0; b <= VMAX; b++) begin
        @(negedge clk); f0 = VB'(a); f1 = VB'(b); we = 1;
        @(negedge clk); we = 0;
        checks++; if (q0 != VB'(a) || q1 != VB'(b)) failures++;
        for (int s = 0; s <= VMAX; s++) begin
          bit exp;
          sl = VB'(s); #1;
          exp = (s >= VMAX - b) && (s <= a);
          checks++;
          if (match !== exp) begin
            failures++;
            $display("FAIL f0=%0d f1=%0d sl=%0d match=%0b exp=%0b", a, b, s, match, exp);
          end
        end
      end
    end
    // less-than split x < 5: F1 high (VMAX), F0 = 4
    @(negedge clk); f0 = 4; f1 = VMAX; we = 1; @(negedge clk); we = 0;
    for (int s = 0; s <= VMAX; s++) begin sl = VB'(s); #1; checks++; if (match != (s < 5)) failures++; end
    // greater-than split x > 2: F0 high, F1 = VMAX - 3
    @(negedge clk); f0 = VMAX; f1 = VB'(VMAX - 3); we = 1; @(negedge clk); we = 0;
    for (int s = 0; s <= VMAX; s++) begin sl = VB'(s); #1; checks++; if (match != (s > 2)) failures++; end
    // independence of side-by-side cells
    repeat (200) begin
      int lo[4], hi[4], x[4];
      @(negedge clk);
      for (int c = 0; c < 4; c++) begin
        lo[c] = $urandom_range(VMAX); hi[c] = $urandom_range(VMAX);
        f04[c] = VB'(hi[c]); f14[c] = VB'(VMAX - lo[c]);
      end
      we4 = 1; @(negedge clk); we4 = 0;
      for (int c = 0; c < 4; c++) begin x[c] = $urandom_range(VMAX); sl4[c] = VB'(x[c]); end
      #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (match4[c] != (x[c] >= lo[c] && x[c] <= hi[c])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
