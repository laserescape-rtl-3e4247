// poly_xor_target: the protected function of the function-recovery scenario,
// a W-bit bitwise XOR c = a ^ b between input and output registers, each bit
// computed by a polymorphic XOR gate (poly_gate).
//
// a and b are flip-flops with clock enable and synchronous reset (FDRE-like),
// loaded by load_a / load_b. The output register c captures the gate outputs
// every cycle. While poly_ctrl is high (the sensor's alarm with the response
// enabled) every gate outputs 0, so c is cleared and the XOR can no longer be
// read from the registers' optical activity. W = 4 matches the printed
// example (in1 = 0101, in2 = 1010, out = 1111).
//
// Timing: c shows the gate result one clock after a, b or poly_ctrl change.
module poly_xor_target #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load_a,
  input  logic         load_b,
  input  logic [W-1:0] d,
  input  logic         poly_ctrl,
  output logic [W-1:0] a,
  output logic [W-1:0] b,
  output logic [W-1:0] c
);
  logic [W-1:0] g;

  for (genvar k = 0; k < W; k++) begin : g_bit
    poly_gate #(.N_IN(2), .FUNC(4'b0110), .ALT_FUNC(4'b0000)) u_gate (
      .in  ({b[k], a[k]}),
      .ctrl(poly_ctrl),
      .out (g[k])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a <= '0;
      b <= '0;
      c <= '0;
    end else begin
      if (load_a) a <= d;
      if (load_b) b <= d;
      c <= g;
    end
  end
endmodule
