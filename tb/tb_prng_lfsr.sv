// tb_prng_lfsr: compares 500 LFSR steps with a bit-level reference of the
// polynomial x^32+x^22+x^2+x+1 (shift right, fold the bit that falls out back
// in at the tap positions), and checks holding without next, seed loading and
// the replacement of a zero seed.
module tb_prng_lfsr;
  int checks = 0, failures = 0;
  logic        clk = 1'b0, rst = 1'b1, seed_load = 1'b0, next = 1'b0;
  logic [31:0] seed = '0, rnd;

  always #5 clk = ~clk;

  prng_lfsr dut (.clk, .rst, .seed_load, .seed, .next, .rnd);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Shift right; when a 1 falls out, fold it back in at the polynomial's
  // taps 32, 22, 2, 1 (bit positions 31, 21, 1, 0).
  function automatic logic [31:0] step(input logic [31:0] s);
    logic out = s[0];
    logic [31:0] n = s >> 1;
    if (out) begin
      n[31] = ~n[31];
      n[21] = ~n[21];
      n[1]  = ~n[1];
      n[0]  = ~n[0];
    end
    return n;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    #1 check(rnd == 32'hACE1_2468, "reset seed");
    e = rnd;
    repeat (3) @(posedge clk);
    #1 check(rnd == e, "holds without next");
    next <= 1'b1;
    for (int k = 0; k < 500; k++) begin
      @(posedge clk);
      #1;
      e = step(e);
      check(rnd == e && rnd != '0, $sformatf("step %0d", k));
    end
    next <= 1'b0;
    seed <= 32'h1234_5678; seed_load <= 1'b1;
    @(posedge clk); seed_load <= 1'b0;
    #1 check(rnd == 32'h1234_5678, "seed load");
    seed <= '0; seed_load <= 1'b1;
    @(posedge clk); seed_load <= 1'b0;
    #1 check(rnd == 32'd1, "zero seed replaced by 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
