// route_delay_model: behavioural model of a short fabric route plus LUT input
// pin on the sensor's data path (kind: behavioural model; on the FPGA this is
// just a wire into a LUT pin).
//
// Unlike the IDELAYE2 taps, ordinary routing and LUT delays grow with local
// temperature. This is the effect the 1LUT sensor relies on to see a probing
// laser. The model delays its input by BASE_PS, plus the heating term
// laser_env_pkg::heat_ps that a testbench sets while it "illuminates" the
// sensor, plus a pseudo-random jitter of up to laser_env_pkg::jitter_ps
// drawn from a per-instance linear congruential generator (SEED). The jitter
// is what makes a sensor tuned near the setup boundary produce the
// occasional zero. All figures are assumptions of the model.
//
// Timing: transport delay of BASE_PS + heat_ps + jitter on every edge.
module route_delay_model #(
  parameter int unsigned BASE_PS = 500,
  parameter int unsigned SEED    = 1
) (
  input  logic i,
  output logic o
);
  timeunit 1ps;
  timeprecision 1ps;

  int unsigned lcg;
  int unsigned delay_ps;

  initial begin
    o   = 1'b0;
    lcg = SEED;
  end

  always @(i) begin
    lcg      = lcg * 32'd1103515245 + 32'd12345;
    delay_ps = BASE_PS + laser_env_pkg::heat_ps
               + ((lcg >> 8) % (laser_env_pkg::jitter_ps + 1));
    fork
      automatic logic        v = i;
      automatic int unsigned d = delay_ps;
      #(d) o = v;
    join_none
  end
endmodule
