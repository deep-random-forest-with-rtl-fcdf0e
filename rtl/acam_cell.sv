// acam_cell: 2FeFET analog CAM cells, reduced to their logic function.
//
// A cell holds two FeFETs on a shared match line (ML). F0 is gated by the
// search line SL and F1 by its complement SL-bar (an inverter derives SL-bar).
// A FeFET that turns on pulls the ML down, i.e. signals a mismatch. F0's
// threshold therefore sets the upper bound of the matching range and F1's
// threshold sets the lower bound. Setting one FeFET to the highest threshold
// (cut-off over the whole search range) gives a one-sided less-than or
// greater-than branch split; setting both to the highest threshold gives the
// "don't care" state used for features a branch does not test.
//
// Voltages become level codes of VTH_BITS bits (0 .. VMAX): the code VMAX is
// the high-threshold state. SL-bar is VMAX - sl. F0 conducts when
// sl > vth_f0; F1 conducts when (VMAX - sl) > vth_f1. A cell matches when
//     VMAX - vth_f1 <= sl <= vth_f0 .
// Treating equality as a match is this design's choice.
//
// The module holds CELLS independent cells side by side (default 1, a single
// cell); an ACAM word uses one instance with CELLS = its column count, which
// keeps large arrays manageable for simulators. match has one bit per cell.
//
// Interface and timing: the threshold codes of all CELLS cells are written on
// a clock edge with we = 1 (one cycle stands in for the FeFET program
// pulses); match is combinational from sl and the stored codes. There is no
// reset: the storage is non-volatile and only defined after programming.
module acam_cell #(
  parameter int unsigned CELLS    = 1,
  parameter int unsigned VTH_BITS = drf_pkg::VTH_BITS_DEFAULT
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [CELLS-1:0][VTH_BITS-1:0] wr_vth_f0,
  input  logic [CELLS-1:0][VTH_BITS-1:0] wr_vth_f1,
  input  logic [CELLS-1:0][VTH_BITS-1:0] sl,
  output logic [CELLS-1:0]               match,
  output logic [CELLS-1:0][VTH_BITS-1:0] vth_f0,
  output logic [CELLS-1:0][VTH_BITS-1:0] vth_f1
);
  localparam logic [VTH_BITS-1:0] VMAX = '1;

  always_ff @(posedge clk) begin
    if (we) begin
      vth_f0 <= wr_vth_f0;
      vth_f1 <= wr_vth_f1;
    end
  end

  always_comb begin
    for (int c = 0; c < CELLS; c++) begin
      // F0 (gate on SL) or F1 (gate on SL-bar) conducting discharges the ML.
      match[c] = !((sl[c] > vth_f0[c]) || ((VMAX - sl[c]) > vth_f1[c]));
    end
  end
endmodule
