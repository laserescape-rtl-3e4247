// sync2: two-flop synchroniser. Brings the 1LUT sensor's register output,
// which toggles on the delayed sensor clock, into the sensor_clk domain.
// Output follows the input two clock edges later. Reset value is 1, the
// sensor's idle reading, so that start-up does not count as zeros.
module sync2 #(
  parameter logic RESET_VAL = 1'b1
) (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic q
);
  logic meta;
  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= RESET_VAL;
      q    <= RESET_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
