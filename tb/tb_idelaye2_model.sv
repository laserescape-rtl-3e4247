// tb_idelaye2_model: checks that the IDELAYE2 model delays each edge by
// 600 ps + 78 ps per tap, for every tap count, and that it is a transport
// delay (a pulse shorter than the delay still gets through).
module tb_idelaye2_model;
  int checks = 0, failures = 0;
  logic       in = 1'b0;
  logic [4:0] cnt = '0;
  logic       out;

  idelaye2_model dut (.IDATAIN(in), .CNTVALUEIN(cnt), .DATAOUT(out));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, dly;
    for (int tap = 0; tap < 32; tap++) begin
      cnt = 5'(tap);
      #10;
      t0 = $realtime;
      in = ~in;
      @(out);
      dly = $realtime - t0;
      check(dly > (600 + 78 * tap - 1) / 1000.0 && dly < (600 + 78 * tap + 1) / 1000.0,
            $sformatf("tap %0d delay %0.3f ns", tap, dly));
    end
    // transport: a 0.3 ns pulse through a 3 ns delay
    cnt = 5'd31;
    #10;
    in = 1'b1; #10;
    in = 1'b0; #0.3; in = 1'b1;
    #2.0;
    check(out == 1'b1, "before the pulse arrives");
    #0.8;
    check(out == 1'b0, "pulse low reached the output");
    #0.4;
    check(out == 1'b1, "pulse ended at the output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
