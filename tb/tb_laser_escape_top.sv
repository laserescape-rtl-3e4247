// tb_laser_escape_top: end-to-end run of LaserEscape through its I2C port,
// with the tuner's t_sense shortened to 2 windows and its sweep to data taps
// 0..1 so that an automatic tuning run fits in the simulation.
//
// Sequence: manual tune (data tap 0, clock tune 84, select 0: mostly ones at
// rest), key load, XOR operands 0101/1010. At rest no alarm may rise. Then the
// "laser" (extra data-path delay of 100 ps in the delay models) must raise the
// alarm, zeroise the XOR output and relocate the key without changing it; the
// alarm must stay latched until cleared. Then detection by pulse length alone,
// a manual relocation, and an automatic tuning run whose result is used for a
// second detection. Every mechanism is counted and must occur at least once.
module tb_laser_escape_top;
  import laser_escape_pkg::*;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1;
  logic       scl, sda, sda_oe;
  logic [7:0] key_out;
  logic [3:0] poly_c;
  logic       alarm, pr_trigger, sensor_sample;
  int         n_pr = 0;
  // mechanism counters
  int n_zc_detect = 0, n_pulse_detect = 0, n_zeroise = 0, n_reloc_alarm = 0, n_reloc_manual = 0,
      n_tune_run = 0, n_auto_tune_used = 0, n_clear = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (pr_trigger && !rst) n_pr++;

  laser_escape_top #(.T_SENSE_WINDOWS(2), .DATA_TAP_LAST(1)) dut (
    .clk, .rst, .scl, .sda_i(sda), .sda_oe, .key_out, .poly_c, .alarm, .pr_trigger, .sensor_sample
  );
  i2c_master_bfm #(.HALF(8)) bfm (.clk, .scl, .sda, .target_oe(sda_oe));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic windows(input int n);
    repeat (n * 255) @(posedge clk);
  endtask

  task automatic rd(input reg_addr_e a, output logic [7:0] d);
    bfm.read_reg(a, d);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d, loc0, rc0;
    laser_env_pkg::heat_ps = 0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    repeat (10) @(posedge clk);
    bfm.write_reg(REG_DATA_TAP, 8'd0);
    bfm.write_reg(REG_CLK_TUNE, 8'd84);
    bfm.write_reg(REG_LUT_SEL, 8'd0);
    bfm.write_reg(REG_CMD, 8'b0001);           // clear anything seen while tuning up
    bfm.write_reg(REG_KEY, 8'hB6);
    bfm.write_reg(REG_CMD, 8'b0100);           // load key
    bfm.write_reg(REG_POLY_A, 8'h05);
    bfm.write_reg(REG_POLY_B, 8'h0A);
    check(bfm.nacks == 0, "I2C transfers acknowledged");
    check(key_out == 8'hB6, "key loaded");
    check(poly_c == 4'b1111, "XOR target 0101^1010 = 1111");
    rd(REG_POLY_C, d);  check(d == 8'h0F, "XOR output readable over I2C");

    // --- at rest ---
    windows(6);
    check(!alarm, "no alarm at rest");
    rd(REG_ZERO_CNT, d); check(d < 8'd32, $sformatf("resting zero count %0d", d));
    rd(REG_LOC, loc0);

    // --- laser on: zero-count detection ---
    laser_env_pkg::heat_ps = 100;
    windows(3);
    check(alarm, "alarm under laser");
    if (alarm) n_zc_detect++;
    rd(REG_ZERO_CNT, d); check(d > 8'd32, $sformatf("zero count under laser %0d", d));
    check(poly_c == 4'b0000, "XOR output zeroised");
    if (poly_c == 4'b0000 && alarm) n_zeroise++;
    rd(REG_RELOC_CNT, d); check(d == 8'd1, $sformatf("one relocation (%0d)", d));
    rd(REG_LOC, d);       check(d != loc0, "key moved to another location");
    if (d != loc0) n_reloc_alarm++;
    check(key_out == 8'hB6, "key unchanged after the move");
    rd(REG_KEY_OUT, d);   check(d == 8'hB6, "key readable over I2C");
    check(n_pr == 1, "one pr_trigger pulse");

    // --- laser off: alarm stays latched until cleared ---
    laser_env_pkg::heat_ps = 0;
    windows(3);
    check(alarm, "alarm latched after the laser left");
    bfm.write_reg(REG_CMD, 8'b0001);
    windows(2);
    check(!alarm, "alarm cleared");
    if (!alarm) n_clear++;
    check(poly_c == 4'b1111, "XOR function back");

    // --- pulse-length detection alone ---
    bfm.write_reg(REG_ZC_THRESH, 8'd255);
    bfm.write_reg(REG_PL_THRESH, 8'd3);
    windows(3);
    check(!alarm, "no pulse alarm at rest");
    laser_env_pkg::heat_ps = 100;
    windows(3);
    rd(REG_MAX_PULSE, d);
    check(alarm && d > 8'd3, $sformatf("pulse-length alarm, longest pulse %0d", d));
    if (alarm) n_pulse_detect++;
    laser_env_pkg::heat_ps = 0;
    bfm.write_reg(REG_PL_THRESH, 8'd255);
    bfm.write_reg(REG_ZC_THRESH, 8'd32);
    windows(2);
    bfm.write_reg(REG_CMD, 8'b0001);
    windows(2);
    check(!alarm, "cleared again");

    // --- manual relocation ---
    rd(REG_RELOC_CNT, rc0);
    rd(REG_LOC, loc0);
    bfm.write_reg(REG_CMD, 8'b1000);
    repeat (20) @(posedge clk);
    rd(REG_RELOC_CNT, d); check(d == rc0 + 1, "manual relocation counted");
    rd(REG_LOC, d);       check(d != loc0, "manual relocation moved the key");
    if (d != loc0) n_reloc_manual++;
    check(key_out == 8'hB6, "key unchanged after manual move");

    // --- automatic tuning ---
    bfm.write_reg(REG_CMD, 8'b0010);
    rd(REG_STATUS, d);
    check(d[1], "tuner busy");
    do begin
      windows(20);
      rd(REG_STATUS, d);
    end while (d[1]);
    n_tune_run++;
    check(d[2], "tuner found a tune");
    check(!alarm, "no alarm raised while tuning");
    rd(REG_BEST_MAXZC, d);
    check(d > 0 && d < 8'd32, $sformatf("best tune's max zero count %0d", d));
    bfm.write_reg(REG_CTRL, 8'b1111);          // use the tuner's result
    windows(4);
    bfm.write_reg(REG_CMD, 8'b0001);
    windows(4);
    check(!alarm, "auto tune quiet at rest");
    laser_env_pkg::heat_ps = 100;
    windows(3);
    check(alarm, "auto tune detects the laser");
    if (alarm) n_auto_tune_used++;
    laser_env_pkg::heat_ps = 0;

    $display("mechanisms: zc_detect=%0d pulse_detect=%0d zeroise=%0d reloc_alarm=%0d reloc_manual=%0d clear=%0d tune_run=%0d auto_tune_used=%0d",
             n_zc_detect, n_pulse_detect, n_zeroise, n_reloc_alarm, n_reloc_manual, n_clear, n_tune_run, n_auto_tune_used);
    check(n_zc_detect > 0,      "mechanism: zero-count detection");
    check(n_pulse_detect > 0,   "mechanism: pulse-length detection");
    check(n_zeroise > 0,        "mechanism: polymorphic zeroisation");
    check(n_reloc_alarm > 0,    "mechanism: relocation on alarm");
    check(n_reloc_manual > 0,   "mechanism: manual relocation");
    check(n_clear > 0,          "mechanism: alarm clear");
    check(n_tune_run > 0,       "mechanism: automatic tuning");
    check(n_auto_tune_used > 0, "mechanism: detection with the tuned value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
