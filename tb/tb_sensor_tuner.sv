// tb_sensor_tuner: the tuner against a behavioural sensor whose zero count per
// window is a fixed function of the applied tune: with
// m = 10*clk_tune - 7*data_tap + 2*sel - 500, the window reads all zeros for
// m <= 0, no zero for m >= 40 and 255*(40-m)/40 zeros in between (scaled to
// t_detect). The testbench repeats the search itself (binary search per data
// tap, then +-1 clock tune with every select) and checks that the tuner ends
// with the same best tune and maximum zero count, and that its result is
// metastable. A larger select shortens the data path here, so the best
// tune needs a non-zero select.
module tb_sensor_tuner;
  import laser_escape_pkg::*;
  int checks = 0, failures = 0;
  localparam int TD = 20;            // t_detect
  localparam int TS = 2;             // t_sense windows
  localparam int LAST = 3;           // data taps 0..3
  logic             clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic             win_valid = 1'b0;
  logic [CNT_W-1:0] zero_count = '0;
  tune_t            tune, best;
  logic             busy, found;
  logic [CNT_W-1:0] best_maxzc;

  always #5 clk = ~clk;

  sensor_tuner #(.T_SENSE_WINDOWS(TS), .SEARCH_WINDOWS(1), .ADJ(1), .DATA_TAP_LAST(LAST)) dut (
    .clk, .rst, .start, .win_valid, .zero_count, .t_detect(8'(TD)),
    .tune, .busy, .found, .best, .best_maxzc
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int f(input int d, input int c, input int s);
    int m = 10 * c - 7 * d + 2 * s - 500;
    if (m <= 0)  return TD;
    if (m >= 40) return 0;
    return (TD * (40 - m) + 39) / 40;
  endfunction

  // sensor + zero counter model: one window every 8 cycles
  always begin
    repeat (7) @(posedge clk);
    zero_count <= 8'(f(int'(tune.data_tap), int'(tune.clk_tune), int'(tune.lut_sel)));
    win_valid  <= 1'b1;
    @(posedge clk);
    win_valid  <= 1'b0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best_v = 255, bd = -1, bc = -1, bs = -1, lo, hi, mid, v;
    bit met;
    // reference search
    for (int d = 0; d <= LAST; d++) begin
      lo = 0; hi = 255; met = 0;
      while (lo <= hi && !met) begin
        mid = (lo + hi) / 2;
        v = f(d, mid, 0);
        if (v >= TD) lo = mid + 1;
        else if (v == 0) hi = mid - 1;
        else met = 1;
      end
      if (met)
        for (int o = -1; o <= 1; o++)
          for (int s = 0; s < 4; s++) begin
            if (mid + o < 0 || mid + o > 255) continue;
            v = f(d, mid + o, s);
            if (v != 0 && v < TD && v < best_v) begin best_v = v; bd = d; bc = mid + o; bs = s; end
          end
    end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    check(!busy && !found, "idle after reset");
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    check(busy, "busy after start");
    wait (!busy);
    @(posedge clk);
    check(found, "a tune was found");
    check(int'(best_maxzc) == best_v, $sformatf("best max zero count %0d expected %0d", best_maxzc, best_v));
    check(int'(best.data_tap) == bd && int'(best.clk_tune) == bc && int'(best.lut_sel) == bs,
          $sformatf("best tune (%0d,%0d,%0d) expected (%0d,%0d,%0d)", best.data_tap, best.clk_tune,
                    best.lut_sel, bd, bc, bs));
    v = f(int'(best.data_tap), int'(best.clk_tune), int'(best.lut_sel));
    check(v > 0 && v < TD, "best tune is metastable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
