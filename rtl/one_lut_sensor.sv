// one_lut_sensor: the 1LUT delay sensor that LaserEscape uses to notice laser
// irradiation of the fabric around it.
//
// The sensor clock drives both the data input and the clock input of one
// register. On the data side it passes one IDELAYE2 (data_tap) and a LUT; on
// the clock side an IDELAYE2 chain (clk_tune, an 8-long chain by default). The
// clocked signal fans out to LUT pins i0, i1, i4 and i5, while lut_sel[0] and
// lut_sel[1] drive pins i2 and i3; the LUT passes one of the four data pins to
// the register, so the select picks a slightly different pin delay. The tune is
// chosen so that the data's rising edge reaches the register just before its
// delayed clock edge: the output then reads 1. Heating from a probing laser
// slows the LUT and route, the data edge slips past the clock edge and the
// register samples 0 more and more often.
//
// The pin assignment is the one printed in the block diagram. Which data pin
// each select value passes (0->i0, 1->i1, 2->i4, 3->i5) is this design's
// choice. Each LUT input pin is reached through a route_delay_model instance
// whose base delay differs slightly per pin (an assumption standing in for the
// real pin-to-output delays).
//
// Interface: sensor_clk is the sensor's own clock; sample is the register
// output, which changes on the delayed clock (clk_d), so a consumer in the
// sensor_clk domain must resynchronise it.
module one_lut_sensor
  import laser_escape_pkg::*;
#(
  parameter int unsigned N_LOG2 = CHAIN_LOG2
) (
  input  logic                sensor_clk,
  input  logic [TAP_W-1:0]    data_tap,
  input  logic [N_LOG2+4:0]   clk_tune,
  input  logic [SEL_W-1:0]    lut_sel,
  output logic                clk_d,
  output logic                sample
);
  // LUT contents: output = selected data pin, select = {i3, i2}.
  function automatic logic [63:0] sensor_init();
    logic [63:0] t;
    for (int a = 0; a < 64; a++) begin
      case ({a[3], a[2]})
        2'd0:    t[a] = a[0];
        2'd1:    t[a] = a[1];
        2'd2:    t[a] = a[4];
        default: t[a] = a[5];
      endcase
    end
    return t;
  endfunction

  localparam logic [63:0] SENSOR_INIT = sensor_init();

  logic        d_dly;
  logic [3:0]  pin;       // routed copies for i0, i1, i4, i5
  logic        lut_o;
  logic [(2**N_LOG2)-1:0][4:0] chain_taps;

  idelaye2_model u_data_dly (
    .IDATAIN   (sensor_clk),
    .CNTVALUEIN(data_tap),
    .DATAOUT   (d_dly)
  );

  route_delay_model #(.BASE_PS(450), .SEED(11)) u_pin0 (.i(d_dly), .o(pin[0]));
  route_delay_model #(.BASE_PS(500), .SEED(23)) u_pin1 (.i(d_dly), .o(pin[1]));
  route_delay_model #(.BASE_PS(550), .SEED(37)) u_pin4 (.i(d_dly), .o(pin[2]));
  route_delay_model #(.BASE_PS(600), .SEED(41)) u_pin5 (.i(d_dly), .o(pin[3]));

  lut6 #(.INIT(SENSOR_INIT)) u_lut (
    .i({pin[3], pin[2], lut_sel[1], lut_sel[0], pin[1], pin[0]}),
    .o(lut_o)
  );

  idelay_chain #(.N_LOG2(N_LOG2)) u_clk_chain (
    .in  (sensor_clk),
    .tune(clk_tune),
    .out (clk_d),
    .taps(chain_taps)
  );

  always_ff @(posedge clk_d) sample <= lut_o;
endmodule
