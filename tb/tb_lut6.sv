// tb_lut6: random truth tables and all 64 input combinations; the output
// must equal the addressed truth-table bit.
module tb_lut6;
  int checks = 0, failures = 0;
  logic [5:0] a;
  logic o_and, o_xor, o_rand;
  localparam logic [63:0] R = 64'hDEAD_BEEF_0123_4567;

  lut6 #(.INIT(64'h8000_0000_0000_0000)) u_and (.i(a), .o(o_and));
  lut6 #(.INIT(64'h6996_9669_9669_6996)) u_xor (.i(a), .o(o_xor));
  lut6 #(.INIT(R))                       u_rnd (.i(a), .o(o_rand));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      a = 6'(v);
      #1;
      checks += 3;
      if (o_and  != (&a))     begin failures++; $display("FAIL and %0d", v); end
      if (o_xor  != (^a))     begin failures++; $display("FAIL xor %0d", v); end
      if (o_rand != R[v])     begin failures++; $display("FAIL rnd %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
