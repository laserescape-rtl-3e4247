// tb_one_lut_sensor: runs the 1LUT sensor at 100 MHz and compares its zero
// counts over 255-cycle windows with a prediction worked out from the delay
// figures of the models: clock path 8 x 600 ps + 78 ps per decoded tap, data
// path 600 ps + 78 ps x data_tap + pin base delay (450/500/550/600 ps for
// select 0..3) + heating + uniform jitter of 0..150 ps. The register reads 1
// when the data's rising edge beats the delayed clock edge one period later.
// Checked: the clock-path delay, always-one and always-zero tunes, a
// metastable tune, and that heating (the laser) raises the zero count.
module tb_one_lut_sensor;
  int checks = 0, failures = 0;
  logic       clk = 1'b0;
  logic [4:0] dt = '0;
  logic [7:0] ct = '0;
  logic [1:0] sel = '0;
  logic       clk_d, sample;

  always #5 clk = ~clk;

  one_lut_sensor dut (.sensor_clk(clk), .data_tap(dt), .clk_tune(ct), .lut_sel(sel), .clk_d, .sample);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic meas(output int z);
    z = 0;
    repeat (4) @(posedge clk);
    repeat (255) begin
      @(posedge clk);
      if (!sample) z++;
    end
  endtask

  // Expected fraction of zeros (x255) from the delay budget.
  function automatic int predict(input int d, input int c, input int s, input int heat);
    int base[4] = '{450, 500, 550, 600};
    int taps    = 31 * (c >> 5) + (c & 31);
    int dc      = 4800 + 78 * taps;
    int dd      = 600 + 78 * d + base[s];
    int m       = dc - dd - 10000 - heat;   // jitter below m -> reads 1
    if (m <= 0)   return 255;
    if (m > 150)  return 0;
    return (255 * (151 - m)) / 151;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int z, zi, zh, p;
    realtime t0;
    // clock-path delay at clk_tune 84 (2 x 31 + 20 = 82 taps)
    ct = 8'd84;
    repeat (4) @(posedge clk);
    @(posedge clk); t0 = $realtime;
    @(posedge clk_d);
    check(($realtime - t0 + 10.0) > 11.195 && ($realtime - t0 + 10.0) < 11.197,
          $sformatf("clock path delay %0.3f ns (mod one period)", $realtime - t0));

    ct = 8'd0;  meas(z);  check(z == 0,   $sformatf("tune 0 always one, zc=%0d", z));
    ct = 8'd80; meas(z);  check(z == 255, $sformatf("tune 80 always zero, zc=%0d", z));
    // metastable settings: within 40 of the prediction and strictly between
    for (int c = 83; c <= 85; c++)
      for (int s = 0; s < 4; s++) begin
        ct = 8'(c); sel = 2'(s);
        meas(z);
        p = predict(0, c, s, 0);
        check(z >= p - 40 && z <= p + 40, $sformatf("tune %0d sel %0d zc=%0d predicted %0d", c, s, z, p));
      end
    // laser: tune 84, sel 0 is mostly ones when idle
    ct = 8'd84; sel = 2'd0;
    laser_env_pkg::heat_ps = 0;
    meas(zi);
    laser_env_pkg::heat_ps = 100;
    meas(zh);
    laser_env_pkg::heat_ps = 0;
    check(zi < 32,  $sformatf("idle zero count %0d", zi));
    check(zh > 128, $sformatf("heated zero count %0d", zh));
    check(zh >= predict(0, 84, 0, 100) - 40, "heated count near prediction");
    // a different data tap shifts the boundary by one clock-tune step
    dt = 5'd1; ct = 8'd85; sel = 2'd0;
    meas(z);
    p = predict(1, 85, 0, 0);
    check(z >= p - 40 && z <= p + 40, $sformatf("data tap 1: zc=%0d predicted %0d", z, p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
