// idelaye2_model: behavioural model of a 7-series IDELAYE2 tapped delay element
// (kind: behavioural model, not synthesizable logic; on the FPGA the vendor
// primitive is placed instead).
//
// The element passes a 1-bit signal through a delay set by a 5-bit tap count,
// 31 taps plus the zero setting, larger counts giving longer delays. The real
// primitive is calibrated against a reference clock and so does not drift with
// voltage or temperature; this model therefore ignores laser heating. The
// intrinsic delay (600 ps) and tap step (78 ps, the step at a 200 MHz
// reference clock) are typical data-sheet figures, not values from the
// LaserEscape description. Only the pass-through in VAR_LOAD-like use is
// modelled: CNTVALUEIN takes effect at once.
//
// Timing: transport delay, every edge of IDATAIN reaches DATAOUT after
// INTRINSIC_PS + TAP_PS * CNTVALUEIN picoseconds.
module idelaye2_model #(
  parameter int unsigned INTRINSIC_PS = 600,
  parameter int unsigned TAP_PS       = 78
) (
  input  logic       IDATAIN,
  input  logic [4:0] CNTVALUEIN,
  output logic       DATAOUT
);
  timeunit 1ps;
  timeprecision 1ps;

  int unsigned delay_ps;

  initial DATAOUT = 1'b0;

  always_comb delay_ps = INTRINSIC_PS + TAP_PS * 32'(CNTVALUEIN);

  // Each edge is scheduled on its own, so pulses shorter than the delay pass.
  always @(IDATAIN) begin
    automatic logic        v = IDATAIN;
    automatic int unsigned d = delay_ps;
    fork
      #(d) DATAOUT = v;
    join_none
  end
endmodule
