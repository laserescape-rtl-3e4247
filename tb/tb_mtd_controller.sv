// tb_mtd_controller: one relocation per rising edge of the alarm when enabled,
// none when disabled or while the alarm stays high, a manual request, a
// request that arrives while the store is busy waiting until it is idle, and
// the relocation counter.
module tb_mtd_controller;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, en = 1'b1, alarm = 1'b0, manual = 1'b0, busy = 1'b0;
  logic       reloc, pr_trigger;
  logic [7:0] reloc_count;
  int         pulses = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (reloc && !rst) pulses++;

  mtd_controller dut (.clk, .rst, .en, .alarm, .manual, .busy, .reloc, .pr_trigger, .reloc_count);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
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
    @(posedge clk); alarm <= 1'b1;
    repeat (2) @(posedge clk);
    #1 check(pulses == 1, "one relocation on alarm edge");
    repeat (20) @(posedge clk);
    #1 check(pulses == 1, "none while alarm stays high");
    alarm <= 1'b0; repeat (2) @(posedge clk);
    en <= 1'b0; alarm <= 1'b1; repeat (5) @(posedge clk);
    #1 check(pulses == 1, "disabled: none");
    alarm <= 1'b0; en <= 1'b1; repeat (2) @(posedge clk);
    manual <= 1'b1; @(posedge clk); manual <= 1'b0;
    repeat (2) @(posedge clk);
    #1 check(pulses == 2, "manual relocation");
    busy <= 1'b1;
    @(posedge clk); alarm <= 1'b1;
    repeat (10) @(posedge clk);
    #1 check(pulses == 2, "waits while busy");
    busy <= 1'b0;
    repeat (3) @(posedge clk);
    #1 check(pulses == 3, "issued once idle");
    check(reloc_count == 8'd3, "relocation count");
    check(pr_trigger == reloc, "pr_trigger follows reloc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
