// tb_pulse_counter: drives zero pulses of known lengths into the pulse counter
// with a window-end pulse every 40 cycles and checks the reported longest
// pulse per window against the lengths the testbench produced, including a
// window that ends in the middle of its longest pulse.
module tb_pulse_counter;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, en = 1'b1, s = 1'b1, win_end = 1'b0;
  logic [7:0] run, max_pulse;
  logic       max_valid;

  always #5 clk = ~clk;

  pulse_counter dut (.clk, .rst, .en, .s, .win_end, .run, .max_pulse, .max_valid);

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

  // One window = 40 cycles; inside it, pulses of the given lengths separated
  // by two ones, then ones until the window ends; win_end on the last cycle.
  task automatic window(input int lens[$], output int longest);
    int used = 0;
    longest = 0;
    foreach (lens[k]) begin
      repeat (lens[k]) begin @(posedge clk); s <= 1'b0; win_end <= 1'b0; used++; end
      repeat (2)       begin @(posedge clk); s <= 1'b1; win_end <= 1'b0; used++; end
      if (lens[k] > longest) longest = lens[k];
    end
    while (used < 39) begin @(posedge clk); s <= 1'b1; win_end <= 1'b0; used++; end
    @(posedge clk); win_end <= 1'b1;
    @(posedge clk); win_end <= 1'b0;
  endtask

  initial begin
    int lg;
    int seen;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    window('{3, 1, 7, 2}, lg);
    @(posedge clk);
    seen = 0;
    repeat (3) begin if (max_valid) begin seen = 1; check(max_pulse == 8'(lg), $sformatf("max %0d expected %0d", max_pulse, lg)); end @(posedge clk); end
    check(seen == 1, "max_valid after window 1");
    for (int w = 0; w < 10; w++) begin
      int l[$];
      repeat ($urandom_range(1, 4)) l.push_back($urandom_range(1, 6));
      window(l, lg);
      seen = 0;
      repeat (3) begin if (max_valid) begin seen = 1; check(max_pulse == 8'(lg), $sformatf("window %0d max %0d expected %0d", w, max_pulse, lg)); end @(posedge clk); end
      check(seen == 1, "max_valid seen");
    end
    // a window with no zero at all
    window('{}, lg);
    seen = 0;
    repeat (3) begin if (max_valid) begin seen = 1; check(max_pulse == 8'd0, "empty window max 0"); end @(posedge clk); end
    check(seen == 1, "max_valid for empty window");
    // a window whose longest zero run is still in progress at its end:
    // 30 ones, then zeros from cycle 31 through the win_end cycle (9 cycles)
    for (int k = 0; k < 30; k++) begin @(posedge clk); s <= (k == 5 || k == 6) ? 1'b0 : 1'b1; end
    repeat (9) @(posedge clk) s <= 1'b0;
    @(posedge clk); win_end <= 1'b1;
    @(posedge clk); win_end <= 1'b0; s <= 1'b1;
    seen = 0;
    repeat (3) begin if (max_valid) begin seen = 1; check(max_pulse == 8'd9, $sformatf("run open at window end: max %0d expected 9", max_pulse)); end @(posedge clk); end
    check(seen == 1, "max_valid for open-run window");
    window('{}, lg);
    // current run counter
    s <= 1'b0;
    repeat (5) @(posedge clk);
    #1 check(run == 8'd4 || run == 8'd5, $sformatf("run %0d after 5 zero cycles", run));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
