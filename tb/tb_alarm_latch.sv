// tb_alarm_latch: threshold decisions on zero count and pulse length, the
// latch holding the alarm between windows, clear, a detection overriding a
// simultaneous clear, the enable and the alarm counter.
module tb_alarm_latch;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, en = 1'b1, clear = 1'b0, win_valid = 1'b0;
  logic [7:0] zero_count = '0, max_pulse = '0, zc_thresh = 8'd32, pl_thresh = 8'd255, alarm_count;
  logic       detect, alarm;

  always #5 clk = ~clk;

  alarm_latch dut (.clk, .rst, .en, .clear, .win_valid, .zero_count, .max_pulse, .zc_thresh,
                   .pl_thresh, .detect, .alarm, .alarm_count);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic win(input int zc, input int mp);
    @(posedge clk);
    zero_count <= 8'(zc); max_pulse <= 8'(mp); win_valid <= 1'b1;
    @(posedge clk);
    win_valid <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    win(5, 2);    check(!alarm, "below threshold");
    win(32, 2);   check(!alarm, "equal to threshold is not a detection");
    win(33, 2);   check(alarm, "above threshold");
    check(alarm_count == 8'd1, "count 1");
    win(0, 0);    check(alarm, "latched over a quiet window");
    @(posedge clk); clear <= 1'b1; @(posedge clk); clear <= 1'b0; @(posedge clk);
    check(!alarm, "cleared");
    pl_thresh <= 8'd6;
    win(3, 7);    check(alarm, "pulse-length detection");
    check(alarm_count == 8'd2, "count 2");
    // detect and clear together: detect wins
    @(posedge clk);
    zero_count <= 8'd200; win_valid <= 1'b1; clear <= 1'b1;
    @(posedge clk);
    win_valid <= 1'b0; clear <= 1'b0;
    @(posedge clk);
    check(alarm, "detect beats clear");
    @(posedge clk); clear <= 1'b1; @(posedge clk); clear <= 1'b0;
    en <= 1'b0;
    win(250, 250); check(!alarm, "disabled: no detection");
    check(alarm_count == 8'd3, "count 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
