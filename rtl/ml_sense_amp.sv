// ml_sense_amp: match-line precharge and voltage-domain sense amplifier of
// one ACAM word, reduced to its logic function.
//
// In the circuit a pMOS driven by the clock precharges the ML to VDD; during
// the search every cell that conducts discharges it, and a two-stage buffer
// turns the ML voltage into a binary "SA output" at the chosen sense time.
// Here the ML voltage is one state bit: precharge sets it, and during
// evaluation it is cleared in any cycle in which the cells do not all match
// (a discharged ML does not recover until the next precharge). sample copies
// the ML into sa_out, which then holds until the next sample.
//
// Interface and timing: precharge, evaluate and sample are one-cycle phases
// driven by the sequencer (precharge, then EVAL_CYCLES of evaluate, then
// sample). Reset clears both bits. The analog margins of the buffer and the
// column-count-dependent search time are represented only by the number of
// evaluation cycles, which is this design's choice.
module ml_sense_amp (
  input  logic clk,
  input  logic rst_n,
  input  logic precharge,
  input  logic evaluate,
  input  logic sample,
  input  logic cells_match,
  output logic sa_out
);
  logic ml;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml     <= 1'b0;
      sa_out <= 1'b0;
    end else begin
      if (precharge)                    ml <= 1'b1;
      else if (evaluate && !cells_match) ml <= 1'b0;
      if (sample) sa_out <= ml;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(precharge && evaluate))
    else $error("ml_sense_amp: precharge and evaluate asserted together");
endmodule
