// tb_zero_counter: feeds a random sensor stream and checks every window's
// zero count against a count kept by the testbench, the window period
// (t_detect cycles between win_end pulses) for t_detect = 10 and 255, and
// that a disabled counter reports nothing.
module tb_zero_counter;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, en = 1'b0, s = 1'b1;
  logic [7:0] t_detect = 8'd10;
  logic [7:0] zero_count;
  logic       win_end;

  always #5 clk = ~clk;

  zero_counter dut (.clk, .rst, .en, .s, .t_detect, .zero_count, .win_end);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: the window starts on the first enabled cycle.
  int ref_cnt = 0, ref_cyc = 0, exp_q[$];
  int last_end = -1, cyc = 0, periods_ok = 0, windows = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && en) begin
      ref_cnt += (s == 1'b0);
      ref_cyc++;
      if (ref_cyc == int'(t_detect)) begin
        exp_q.push_back(ref_cnt);
        ref_cnt = 0;
        ref_cyc = 0;
      end
    end
    if (win_end && !rst) begin
      windows++;
      check(exp_q.size() > 0, "win_end without a finished window");
      if (exp_q.size() > 0) begin
        automatic int e = exp_q.pop_front();
        check(int'(zero_count) == e, $sformatf("zero_count %0d expected %0d", zero_count, e));
      end
      if (last_end >= 0) check(cyc - last_end == int'(t_detect), $sformatf("window period %0d", cyc - last_end));
      last_end = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);
    check(!win_end, "no window while disabled");
    en <= 1'b1;
    repeat (200) begin
      @(posedge clk);
      s <= ($urandom_range(0, 3) != 0);
    end
    en <= 1'b0;
    @(posedge clk); @(posedge clk);
    last_end = -1;
    exp_q.delete();
    t_detect <= 8'd255;
    @(posedge clk);
    en <= 1'b1;
    repeat (255 * 4 + 2) begin
      @(posedge clk);
      s <= ($urandom_range(0, 9) < 7);
    end
    check(windows >= 20 + 4, $sformatf("windows seen %0d", windows));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
