// poly_gate: a polymorphic logic gate built from one look-up table.
//
// A LUT with N_IN + 1 inputs holds the union of two truth tables: with the
// control input low it computes FUNC of its N_IN data inputs, with the control
// input high it computes ALT_FUNC (constant zero by default). Connecting ctrl
// to the sensor's alarm latch makes the gate silently change function when a
// probing attack is detected, without rewriting the LUT or rerouting. The
// control input is the LUT's highest used input, so the table splits into two
// halves of 2**N_IN cells, as with a 4-input LUT seen as two 3-input LUTs and a
// 2-to-1 multiplexer. Defaults give the polymorphic 2-input XOR of the
// function-recovery experiment. Purely combinational.
module poly_gate #(
  parameter int unsigned           N_IN     = 2,
  parameter logic [2**N_IN-1:0]    FUNC     = 4'b0110,   // XOR
  parameter logic [2**N_IN-1:0]    ALT_FUNC = '0         // zeroised
) (
  input  logic [N_IN-1:0] in,
  input  logic            ctrl,
  output logic            out
);
  // Truth table of the 6-input LUT: unused upper inputs are tied low.
  function automatic logic [63:0] poly_init();
    logic [63:0] t = '0;
    for (int a = 0; a < 2 ** (N_IN + 1); a++) begin
      if (a >= 2 ** N_IN) t[a] = ALT_FUNC[a - 2 ** N_IN];
      else                t[a] = FUNC[a];
    end
    return t;
  endfunction

  localparam logic [63:0] INIT = poly_init();

  logic [5:0] lut_in;
  always_comb begin
    lut_in          = '0;
    lut_in[N_IN-1:0] = in;
    lut_in[N_IN]     = ctrl;
  end

  lut6 #(.INIT(INIT)) u_lut (.i(lut_in), .o(out));

  initial assert (N_IN >= 1 && N_IN <= 5) else $error("poly_gate: N_IN must be 1..5");
endmodule
