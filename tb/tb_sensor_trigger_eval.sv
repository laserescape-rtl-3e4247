// tb_sensor_trigger_eval: the sensor-trigger experiment. The 1LUT sensor,
// its synchroniser and the zero counter run at their default sizes (100 MHz,
// 255-cycle windows, 8-long clock chain) with the tune used in the end-to-end
// tests (data tap 0, clock tune 84, select 0). The testbench collects 60
// windows at each heating level 0, 25, 50, 75 and 100 ps. At rest the
// heating is 0; the strongest level stands for the probing laser.
//
// Checked: the mean zero count grows with the heating; every window under the
// strongest heating reads more zeros than every window at rest, so a trigger
// threshold fits between the two with a margin; and the default zero-count
// threshold (32) lies inside that gap. The minimum, mean and maximum count of
// each level are printed, normalised to the window length.
module tb_sensor_trigger_eval;
  import laser_escape_pkg::*;
  int checks = 0, failures = 0;
  localparam int N_WIN   = 60;
  localparam int N_LEVEL = 5;
  localparam int HEAT_STEP_PS = 25;
  localparam int THRESH  = 32;     // default zero-count threshold of the register file

  logic             clk = 1'b0, rst = 1'b1;
  logic             clk_d, sample, s_sync;
  logic [CNT_W-1:0] zero_count;
  logic             win_end;

  always #5 clk = ~clk;

  one_lut_sensor u_sensor (
    .sensor_clk(clk), .data_tap(5'd0), .clk_tune(8'd84), .lut_sel(2'd0), .clk_d, .sample
  );
  sync2 u_sync (.clk, .rst, .d(sample), .q(s_sync));
  zero_counter u_zc (.clk, .rst, .en(1'b1), .s(s_sync), .t_detect(8'd255), .zero_count, .win_end);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (N_LEVEL * (N_WIN + 3) * 256 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mn[N_LEVEL], mx[N_LEVEL], sum[N_LEVEL];
    automatic int mono = 1;
    laser_env_pkg::heat_ps = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int l = 0; l < N_LEVEL; l++) begin
      laser_env_pkg::heat_ps = l * HEAT_STEP_PS;
      mn[l] = 255; mx[l] = 0; sum[l] = 0;
      // drop the window that straddles the change of heating, and the next
      repeat (2) @(posedge clk iff win_end);
      for (int w = 0; w < N_WIN; w++) begin
        @(posedge clk iff win_end);
        #1;
        if (int'(zero_count) < mn[l]) mn[l] = int'(zero_count);
        if (int'(zero_count) > mx[l]) mx[l] = int'(zero_count);
        sum[l] += int'(zero_count);
      end
      $display("heating %3d ps: zero count min %0.3f mean %0.3f max %0.3f (of the window)",
               l * HEAT_STEP_PS, mn[l] / 255.0, sum[l] / (255.0 * N_WIN), mx[l] / 255.0);
      if (l > 0 && sum[l] <= sum[l-1]) mono = 0;
    end
    check(mono == 1, "mean zero count grows with the heating");
    check(mx[0] < mn[N_LEVEL-1], $sformatf("rest max %0d below laser min %0d", mx[0], mn[N_LEVEL-1]));
    check(mx[0] < THRESH && THRESH < mn[N_LEVEL-1],
          $sformatf("threshold %0d between rest max %0d and laser min %0d", THRESH, mx[0], mn[N_LEVEL-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
