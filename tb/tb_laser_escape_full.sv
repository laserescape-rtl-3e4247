// tb_laser_escape_full: one complete detect-and-respond operation of
// LaserEscape with every parameter at its default (8-long clock chain, 8-bit
// key in 8 locations, 4-bit XOR target, 255-cycle windows, t_sense of 100 ms).
//
// Through the I2C port: manual tune (data tap 0, clock tune 84, select 0),
// key load and XOR operands 0101/1010; no alarm at rest; the "laser" (extra
// 100 ps on the sensor's data path) raises the alarm, zeroises the XOR output
// and relocates the key without changing it; the alarm stays latched after
// the laser leaves and is cleared over I2C, after which the XOR returns. The
// automatic tuner is not run here: at the default t_sense one tuning run
// takes on the order of 10^10 cycles; tb_laser_escape_top runs it shortened.
module tb_laser_escape_full;
  import laser_escape_pkg::*;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1;
  logic       scl, sda, sda_oe;
  logic [7:0] key_out;
  logic [3:0] poly_c;
  logic       alarm, pr_trigger, sensor_sample;
  int         n_pr = 0;
  // mechanism counters
  int n_zc_detect = 0, n_zeroise = 0, n_reloc_alarm = 0, n_clear = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (pr_trigger && !rst) n_pr++;

  laser_escape_top dut (
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
    repeat (100000) @(posedge clk);
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

    $display("mechanisms: zc_detect=%0d zeroise=%0d reloc_alarm=%0d clear=%0d",
             n_zc_detect, n_zeroise, n_reloc_alarm, n_clear);
    check(n_zc_detect > 0,   "mechanism: zero-count detection");
    check(n_zeroise > 0,     "mechanism: polymorphic zeroisation");
    check(n_reloc_alarm > 0, "mechanism: relocation on alarm");
    check(n_clear > 0,       "mechanism: alarm clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
