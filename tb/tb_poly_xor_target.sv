// tb_poly_xor_target: the printed case a = 0101, b = 1010 gives c = 1111, and
// c = 0000 while the polymorphic control is high; then random operands, with
// c checked one cycle after the operands or the control change.
module tb_poly_xor_target;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, load_a = 1'b0, load_b = 1'b0, poly_ctrl = 1'b0;
  logic [3:0] d = '0, a, b, c;

  always #5 clk = ~clk;

  poly_xor_target dut (.clk, .rst, .load_a, .load_b, .d, .poly_ctrl, .a, .b, .c);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic load(input logic [3:0] va, input logic [3:0] vb);
    @(posedge clk); d <= va; load_a <= 1'b1;
    @(posedge clk); load_a <= 1'b0; d <= vb; load_b <= 1'b1;
    @(posedge clk); load_b <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] ra, rb;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    load(4'b0101, 4'b1010);
    #1 check(c == 4'b1111, $sformatf("0101^1010 = %b", c));
    poly_ctrl <= 1'b1;
    @(posedge clk); @(posedge clk);
    #1 check(c == 4'b0000, "zeroised under alarm");
    check(a == 4'b0101 && b == 4'b1010, "operands kept");
    poly_ctrl <= 1'b0;
    @(posedge clk); @(posedge clk);
    #1 check(c == 4'b1111, "restored after alarm");
    for (int k = 0; k < 20; k++) begin
      ra = 4'($urandom); rb = 4'($urandom);
      poly_ctrl <= k[0];
      load(ra, rb);
      #1 check(c == (k[0] ? 4'b0 : (ra ^ rb)), $sformatf("random %b %b ctrl %0d -> %b", ra, rb, k[0], c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
