// acam_word: one ACAM word (row) of COLS 2FeFET cells on a shared match line,
// with its precharge/sense amplifier.
//
// A word stores one root-to-leaf branch of a decision tree: each cell holds
// the split condition on one feature (or "don't care"), and the word matches
// only when every cell matches, because any conducting cell discharges the
// common ML. The cells are independent, so the matching region of the word is
// the intersection of the per-feature ranges.
//
// Interface and timing: we writes all COLS cells at once (one cycle; this
// word-wide write is this design's choice). sl carries one search code per
// column. precharge / evaluate / sample follow ml_sense_amp; sa_out is valid
// from the cycle after sample.
module acam_word #(
  parameter int unsigned COLS     = 128,
  parameter int unsigned VTH_BITS = drf_pkg::VTH_BITS_DEFAULT
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [COLS-1:0][VTH_BITS-1:0] wr_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0] wr_vth_f1,
  input  logic [COLS-1:0][VTH_BITS-1:0] sl,
  input  logic                          precharge,
  input  logic                          evaluate,
  input  logic                          sample,
  output logic                          sa_out
);
  logic [COLS-1:0] cell_match;
  // Stored codes, kept visible for debug.
  logic [COLS-1:0][VTH_BITS-1:0] vth_f0_q, vth_f1_q;

  acam_cell #(.CELLS(COLS), .VTH_BITS(VTH_BITS)) u_cells (
    .clk      (clk),
    .we       (we),
    .wr_vth_f0(wr_vth_f0),
    .wr_vth_f1(wr_vth_f1),
    .sl       (sl),
    .match    (cell_match),
    .vth_f0   (vth_f0_q),
    .vth_f1   (vth_f1_q)
  );

  ml_sense_amp u_sa (
    .clk        (clk),
    .rst_n      (rst_n),
    .precharge  (precharge),
    .evaluate   (evaluate),
    .sample     (sample),
    .cells_match(&cell_match),
    .sa_out     (sa_out)
  );
endmodule
