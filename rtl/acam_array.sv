// acam_array: ROWS x COLS ferroelectric analog CAM array.
//
// All ROWS words share the COLS search-line pairs, so one search compares the
// query with every stored branch in parallel; each word has its own match
// line and sense amplifier and reports one bit in ml_out. The paper's basic
// module is a 128 x 128 array, which are the defaults.
//
// Interface and timing: a word is programmed in one cycle by we with its row
// address wr_row (row-wide write is this design's choice). A search is
// precharge (1 cycle), evaluate (held while sl is stable), sample; ml_out is
// valid from the cycle after sample and holds until the next sample.
module acam_array #(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned COLS     = 128,
  parameter int unsigned VTH_BITS = drf_pkg::VTH_BITS_DEFAULT,
  localparam int unsigned ROW_W   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [ROW_W-1:0]              wr_row,
  input  logic [COLS-1:0][VTH_BITS-1:0] wr_vth_f0,
  input  logic [COLS-1:0][VTH_BITS-1:0] wr_vth_f1,
  input  logic [COLS-1:0][VTH_BITS-1:0] sl,
  input  logic                          precharge,
  input  logic                          evaluate,
  input  logic                          sample,
  output logic [ROWS-1:0]               ml_out
);
  for (genvar r = 0; r < ROWS; r++) begin : g_word
    acam_word #(.COLS(COLS), .VTH_BITS(VTH_BITS)) u_word (
      .clk      (clk),
      .rst_n    (rst_n),
      .we       (we && (wr_row == ROW_W'(r))),
      .wr_vth_f0(wr_vth_f0),
      .wr_vth_f1(wr_vth_f1),
      .sl       (sl),
      .precharge(precharge),
      .evaluate (evaluate),
      .sample   (sample),
      .sa_out   (ml_out[r])
    );
  end
endmodule
