// pulse_counter: measures the length, in clock cycles, of the runs of 0 that
// the sensor output produces, and reports the longest run seen in each
// detection window.
//
// run counts consecutive zero cycles (saturating). When a run ends (s returns
// to 1) its length is compared with the window maximum. On win_end (from
// zero_counter) the window maximum, including a run still in progress, is
// copied to max_pulse and the maximum restarts; a run that straddles two
// windows is counted in both. While en is low everything holds at zero.
//
// Timing: max_pulse is registered and updates on the cycle after win_end is
// seen high; max_valid pulses with it. zero_counter's zero_count of the same
// window is still held then, so max_valid marks both readings as valid.
module pulse_counter #(
  parameter int unsigned W = laser_escape_pkg::CNT_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic         s,
  input  logic         win_end,
  output logic [W-1:0] run,
  output logic [W-1:0] max_pulse,
  output logic         max_valid
);
  logic [W-1:0] win_max;
  logic [W-1:0] cur_max;

  // Longest run so far in this window, counting the run in progress.
  assign cur_max = (run > win_max) ? run : win_max;

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      run       <= '0;
      win_max   <= '0;
      max_valid <= 1'b0;
      if (rst) max_pulse <= '0;
    end else begin
      if (!s) run <= (run == '1) ? run : run + 1'b1;
      else    run <= '0;

      max_valid <= win_end;
      if (win_end) begin
        max_pulse <= cur_max;
        win_max   <= '0;
      end else begin
        win_max   <= cur_max;
      end
    end
  end
endmodule
