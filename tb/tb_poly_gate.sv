// tb_poly_gate: exhaustive check of three polymorphic gates: 2-input XOR and
// 3-input AND, both zeroised when ctrl is high, and a 2-input gate that turns
// from AND into OR (non-zero alternative function).
module tb_poly_gate;
  int checks = 0, failures = 0;
  logic [2:0] v;
  logic       ctrl;
  logic       o_xor, o_and3, o_andor;

  poly_gate #(.N_IN(2), .FUNC(4'b0110))                       u_xor   (.in(v[1:0]), .ctrl, .out(o_xor));
  poly_gate #(.N_IN(3), .FUNC(8'b1000_0000))                  u_and3  (.in(v),      .ctrl, .out(o_and3));
  poly_gate #(.N_IN(2), .FUNC(4'b1000), .ALT_FUNC(4'b1110))   u_andor (.in(v[1:0]), .ctrl, .out(o_andor));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2; c++)
      for (int k = 0; k < 8; k++) begin
        v = 3'(k); ctrl = c[0];
        #1;
        checks += 3;
        if (o_xor   != (ctrl ? 1'b0 : (v[0] ^ v[1])))       begin failures++; $display("FAIL xor c=%0d v=%0d", c, k); end
        if (o_and3  != (ctrl ? 1'b0 : (&v)))                begin failures++; $display("FAIL and3 c=%0d v=%0d", c, k); end
        if (o_andor != (ctrl ? (v[0] | v[1]) : (v[0] & v[1]))) begin failures++; $display("FAIL andor c=%0d v=%0d", c, k); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
