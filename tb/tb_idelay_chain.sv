// tb_idelay_chain: checks the tune decode of the IDELAYE2 chain against the
// rule (5 LSBs on one element, k = MSBs elements at 11111, the rest 00000,
// laid out as in the 4-long example) for every tune value of a 4-long and
// an 8-long chain, the printed example 7'b1000101, and the total delay.
module tb_idelay_chain;
  int checks = 0, failures = 0;
  logic clk_in = 1'b0;
  logic [6:0] tune4;
  logic [7:0] tune8;
  logic out4, out8;
  logic [3:0][4:0] taps4;
  logic [7:0][4:0] taps8;

  idelay_chain #(.N_LOG2(2)) dut4 (.in(clk_in), .tune(tune4), .out(out4), .taps(taps4));
  idelay_chain #(.N_LOG2(3)) dut8 (.in(clk_in), .tune(tune8), .out(out8), .taps(taps8));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, dly;
    int nmax, nmin, nfine, total;
    tune4 = 7'b1000101;
    tune8 = '0;
    #1;
    check(taps4[0] == 5'b00000 && taps4[1] == 5'b00101 && taps4[2] == 5'b11111 && taps4[3] == 5'b11111,
          "printed example 7'b1000101");
    for (int t = 0; t < 256; t++) begin
      tune8 = 8'(t);
      #1;
      nmax = 0; nmin = 0; nfine = 0; total = 0;
      for (int e = 0; e < 8; e++) begin
        total += int'(taps8[e]);
        if (e == 7 - (t >> 5)) nfine += (taps8[e] == 5'(t)) ? 1 : 0;
        else if (taps8[e] == 5'b11111) nmax++;
        else if (taps8[e] == 5'b00000) nmin++;
      end
      check(nfine == 1 && nmax == (t >> 5) && nmin == 7 - (t >> 5) && total == 31 * (t >> 5) + (t & 31),
            $sformatf("tune %0d decode", t));
      for (int e = 1; e < 8; e++)
        check(taps8[e] >= taps8[e-1], $sformatf("tune %0d: taps non-decreasing towards output", t));
    end
    for (int t = 0; t < 128; t += 9) begin
      tune4 = 7'(t);
      #30;
      t0 = $realtime;
      clk_in = ~clk_in;
      @(out4);
      dly = $realtime - t0;
      check(dly > (2400 + 78 * (31 * (t >> 5) + (t & 31)) - 1) / 1000.0 &&
            dly < (2400 + 78 * (31 * (t >> 5) + (t & 31)) + 1) / 1000.0,
            $sformatf("4-chain tune %0d delay %0.3f", t, dly));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
