// tb_idelay_chain_ro: characterises the 8-long IDELAYE2 clock chain the way
// it is done on silicon, by putting it in series with an 11-stage ring
// oscillator and measuring the oscillation period for chain values 0..255.
//
// The ring's 11 inverting LUT stages are lumped into one NAND (the enable)
// followed by a route delay model of STAGES_PS (475 ps per stage, an assumed
// LUT-plus-route figure, jitter and heating set to zero), so the loop is:
// chain -> NAND -> stage delay -> chain. The period is
// twice the loop delay. For a chain value with k = value[7:5] elements at
// maximum and fine count f = value[4:0], the chain holds 31*k + f taps, so the
// expected period is 2 * (STAGES_PS + 8 * 600 + 78 * (31*k + f)) ps with the
// element model's intrinsic delay and tap step. The testbench measures the
// period at every chain value, compares it with that formula to within 1 ps
// (time-to-real rounding), checks
// that it never decreases as the value grows, and prints a few points of the
// curve (about 20 ns at 0 and 59 ns at 255 with these figures).
module tb_idelay_chain_ro;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  localparam int STAGES     = 11;
  localparam int STAGE_PS   = 475;
  localparam int STAGES_PS  = STAGES * STAGE_PS;
  localparam int INTR_PS    = 600;
  localparam int TAP_PS     = 78;

  logic       en = 1'b0;
  logic       ro_in, ro_out;
  logic [7:0] tune = '0;
  logic [7:0][4:0] taps;

  idelay_chain #(.N_LOG2(3)) dut (.in(ro_in), .tune, .out(ro_out), .taps);

  // lumped inverting stages with enable (a NAND as the ring's first stage)
  logic nand_o;
  assign nand_o = ~(ro_out & en);
  route_delay_model #(.BASE_PS(STAGES_PS), .SEED(5)) u_stages (.i(nand_o), .o(ro_in));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint expected_ps(input int v);
    int k = v / 32, f = v % 32;
    int loop_ps = STAGES_PS + 8 * INTR_PS + TAP_PS * (31 * k + f);
    return longint'(2 * loop_ps);
  endfunction

  initial begin
    #25ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, t1;
    automatic longint per, prev = 0;
    automatic int     bad = 0, nondec = 0;
    laser_env_pkg::jitter_ps = 0;
    laser_env_pkg::heat_ps   = 0;
    #10ns en = 1'b1;
    for (int v = 0; v < 256; v++) begin
      tune = 8'(v);
      // let edges launched with the old setting leave the loop
      repeat (4) @(posedge ro_out);
      @(posedge ro_out) t0 = $realtime;
      @(posedge ro_out) t1 = $realtime;
      per = longint'((t1 - t0) * 1000.0 + 0.5);
      if (per > expected_ps(v) + 1 || per + 1 < expected_ps(v)) begin
        bad++;
        if (bad <= 5) $display("FAIL: chain %0d period %0d ps expected %0d", v, per, expected_ps(v));
      end
      if (per + 1 < prev) nondec++;
      if (taps[7 - v / 32] != 5'(v % 32)) bad++;
      prev = per;
      if (v % 64 == 0 || v == 255) $display("chain value %3d: RO period %0.3f ns", v, per / 1000.0);
    end
    check(bad == 0, $sformatf("%0d chain values off the expected period", bad));
    check(nondec == 0, "period never decreases with the chain value");
    // the enable stops the ring
    en = 1'b0;
    #300ns;
    check(ro_out == 1'b1, "ring stopped with enable low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
