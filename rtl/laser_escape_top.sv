// laser_escape_top: LaserEscape, an on-chip detector of optical (laser)
// probing with two real-time responses, assembled from its blocks.
//
// Detection: a 1LUT delay sensor (one_lut_sensor) sits next to the protected
// registers and is clocked by the chip's internal clock. Its register output is
// resynchronised (sync2) and post-processed by a zero counter and a zero-pulse
// counter over windows of t_detect cycles; alarm_latch compares the window
// readings with thresholds and latches the alarm. The sensor's tune comes from
// the I2C registers, or from the automatic tuner (sensor_tuner) while it runs
// and, once it has found a tune, when use_auto_tune is set.
// Responses: (1) polymorphism: the alarm (with poly_en) drives the control
// input of the polymorphic XOR gates of poly_xor_target, which then output 0;
// (2) moving target: each new alarm (with mtd_en) makes mtd_controller relocate
// the key registers of mtd_key_store to a random location with a random bit
// order drawn from prng_lfsr, and pulses pr_trigger for an external processor
// doing the partial-reconfiguration variant. The alarm stays latched until the
// controller clears it over I2C.
//
// Interface: one clock clk (also the sensor clock; the described prototype
// uses an internal, tamper-proof clock source, which is outside this RTL) and a
// synchronous active-high reset. I2C: scl, sda_i in, sda_oe (pull SDA low).
// key_out is the protected key as used by the circuit it protects, poly_c the
// XOR target's output. The key is written over I2C one byte at a time, so
// KEY_W may be raised (32 for one word of AES state) without changing the
// register map. alarm, pr_trigger and the raw sensor sample are
// brought out for observation. The default parameters are the prototype's:
// 8-long clock chain, 8-bit key, 8 LOCs, 4-bit XOR target, t_sense of 100 ms.
// Some block outputs are observation signals for tests and stay unconnected
// here: the sensor's delayed clock, the current zero-run length, the
// per-window detect flag, the key store's permutation and raw banks and the
// XOR operand registers.
module laser_escape_top
  import laser_escape_pkg::*;
#(
  parameter int unsigned KEY_W           = 8,
  parameter int unsigned N_LOC           = 8,
  parameter int unsigned POLY_W          = 4,
  parameter int unsigned T_SENSE_WINDOWS = 39216,
  parameter int unsigned DATA_TAP_LAST   = 31
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              scl,
  input  logic              sda_i,
  output logic              sda_oe,
  output logic [KEY_W-1:0]  key_out,
  output logic [POLY_W-1:0] poly_c,
  output logic              alarm,
  output logic              pr_trigger,
  output logic              sensor_sample
);
  // register interface
  logic             wr_en;
  logic [7:0]       wr_addr, wr_data, rd_addr, rd_data;
  logic             sensor_en, use_auto_tune, poly_en, mtd_en;
  tune_t            man_tune, tuner_tune, best_tune, sensor_tune;
  logic [CNT_W-1:0] t_detect, zc_thresh, pl_thresh, best_maxzc;
  logic [KEY_W-1:0] key_word;
  logic [7:0]       poly_d;
  logic             alarm_clear, tune_start, key_load, reloc_cmd, poly_load_a, poly_load_b;
  // sensing
  logic             clk_d, s_sync;
  logic [CNT_W-1:0] zero_count, run, max_pulse, alarm_count;
  logic             win_end, max_valid, detect;
  logic             tune_busy, tune_found;
  // responses
  logic [31:0]      rnd;
  logic             rnd_next, reloc, reloc_busy;
  logic [7:0]       reloc_count;
  logic [$clog2(N_LOC)-1:0] loc;
  logic [KEY_W-1:0][$clog2(KEY_W)-1:0] perm;
  logic [N_LOC*KEY_W-1:0] bank_flat;
  logic [POLY_W-1:0] poly_a, poly_b;

  i2c_slave u_i2c (
    .clk, .rst, .scl_i(scl), .sda_i, .sda_oe,
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data
  );

  le_regs #(.KEY_W(KEY_W)) u_regs (
    .clk, .rst, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .sensor_en, .use_auto_tune, .poly_en, .mtd_en, .man_tune,
    .t_detect, .zc_thresh, .pl_thresh, .key_word, .poly_d,
    .alarm_clear, .tune_start, .key_load, .reloc_cmd, .poly_load_a, .poly_load_b,
    .alarm, .tune_busy, .tune_found, .reloc_busy, .zero_count, .max_pulse,
    .best_tune, .best_maxzc, .loc(8'(loc)), .reloc_count, .poly_c(8'(poly_c)),
    .key_out, .alarm_count
  );

  // Tune selection: the tuner while searching, its result when asked for.
  always_comb begin
    if (tune_busy)                        sensor_tune = tuner_tune;
    else if (use_auto_tune && tune_found) sensor_tune = best_tune;
    else                                  sensor_tune = man_tune;
  end

  one_lut_sensor u_sensor (
    .sensor_clk(clk),
    .data_tap  (sensor_tune.data_tap),
    .clk_tune  (sensor_tune.clk_tune),
    .lut_sel   (sensor_tune.lut_sel),
    .clk_d,
    .sample    (sensor_sample)
  );

  sync2 u_sync (.clk, .rst, .d(sensor_sample), .q(s_sync));

  zero_counter u_zc (
    .clk, .rst, .en(sensor_en), .s(s_sync), .t_detect, .zero_count, .win_end
  );

  pulse_counter u_pc (
    .clk, .rst, .en(sensor_en), .s(s_sync), .win_end, .run, .max_pulse, .max_valid
  );

  // Detection is suspended while the tuner sweeps the sensor through tunes
  // that read mostly zeros.
  alarm_latch u_alarm (
    .clk, .rst, .en(sensor_en && !tune_busy), .clear(alarm_clear), .win_valid(max_valid),
    .zero_count, .max_pulse, .zc_thresh, .pl_thresh, .detect, .alarm, .alarm_count
  );

  sensor_tuner #(
    .T_SENSE_WINDOWS(T_SENSE_WINDOWS), .DATA_TAP_LAST(DATA_TAP_LAST)
  ) u_tuner (
    .clk, .rst, .start(tune_start), .win_valid(max_valid), .zero_count, .t_detect,
    .tune(tuner_tune), .busy(tune_busy), .found(tune_found), .best(best_tune), .best_maxzc
  );

  poly_xor_target #(.W(POLY_W)) u_poly (
    .clk, .rst, .load_a(poly_load_a), .load_b(poly_load_b), .d(poly_d[POLY_W-1:0]),
    .poly_ctrl(alarm && poly_en), .a(poly_a), .b(poly_b), .c(poly_c)
  );

  prng_lfsr u_prng (
    .clk, .rst, .seed_load(1'b0), .seed(32'h0), .next(rnd_next), .rnd
  );

  mtd_controller u_mtdc (
    .clk, .rst, .en(mtd_en), .alarm, .manual(reloc_cmd), .busy(reloc_busy),
    .reloc, .pr_trigger, .reloc_count
  );

  mtd_key_store #(.KEY_W(KEY_W), .N_LOC(N_LOC)) u_keys (
    .clk, .rst, .load(key_load), .key_in(key_word), .relocate(reloc),
    .rnd, .rnd_next, .busy(reloc_busy), .key_out, .loc, .perm, .bank_flat
  );
endmodule
