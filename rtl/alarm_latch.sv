// alarm_latch: turns the window readings of the zero and pulse counters into
// the latched attack alarm that drives LaserEscape's responses.
//
// At the end of every detection window (win_valid) the window is flagged as a
// detection when zero_count > zc_thresh or max_pulse > pl_thresh. A detection
// sets the alarm latch, which stays set until clear is pulsed; a detection in
// the same cycle as clear wins, so a continuing attack keeps the alarm up.
// detect pulses for each detecting window and alarm_count counts them
// (saturating). With en low nothing is flagged. Threshold comparison on both
// counters, its strictness and the clear input are this design's choices;
// the described design only says the counter readings feed a latch.
//
// Timing: alarm rises on the clock edge after win_valid of the first
// detecting window.
module alarm_latch #(
  parameter int unsigned W = laser_escape_pkg::CNT_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic         clear,
  input  logic         win_valid,
  input  logic [W-1:0] zero_count,
  input  logic [W-1:0] max_pulse,
  input  logic [W-1:0] zc_thresh,
  input  logic [W-1:0] pl_thresh,
  output logic         detect,
  output logic         alarm,
  output logic [W-1:0] alarm_count
);
  always_comb
    detect = en && win_valid && ((zero_count > zc_thresh) || (max_pulse > pl_thresh));

  always_ff @(posedge clk) begin
    if (rst) begin
      alarm       <= 1'b0;
      alarm_count <= '0;
    end else begin
      if (detect)     alarm <= 1'b1;
      else if (clear) alarm <= 1'b0;
      if (detect && alarm_count != '1) alarm_count <= alarm_count + 1'b1;
    end
  end
endmodule
