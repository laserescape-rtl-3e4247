// zero_counter: counts, over a detection window of t_detect clock cycles, the
// cycles in which the (resynchronised) sensor output is 0.
//
// A window counter runs from 1 to t_detect; each cycle with s == 0 adds one to
// an accumulator. On the last cycle of the window the total (including that
// cycle) is copied to zero_count and win_end pulses for one cycle; the next
// window starts on the following cycle. With t_detect = 255 (the value that fits
// one byte) zero_count therefore ranges 0..255. While en is low the counters
// hold at the start of a window. A t_detect of 0 is treated as 1.
//
// Timing: zero_count and win_end are registered; they change on the clock edge
// that ends the window, t_detect cycles after the window's first cycle.
module zero_counter #(
  parameter int unsigned W = laser_escape_pkg::CNT_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic         s,
  input  logic [W-1:0] t_detect,
  output logic [W-1:0] zero_count,
  output logic         win_end
);
  logic [W-1:0] cyc;
  logic [W-1:0] acc;
  logic [W-1:0] acc_next;
  logic         last;

  assign acc_next = acc + W'(!s);
  assign last     = (cyc + 1'b1 >= t_detect);

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc        <= '0;
      acc        <= '0;
      zero_count <= '0;
      win_end    <= 1'b0;
    end else begin
      win_end <= 1'b0;
      if (!en) begin
        cyc <= '0;
        acc <= '0;
      end else if (last) begin
        cyc        <= '0;
        acc        <= '0;
        zero_count <= acc_next;
        win_end    <= 1'b1;
      end else begin
        cyc <= cyc + 1'b1;
        acc <= acc_next;
      end
    end
  end
endmodule
