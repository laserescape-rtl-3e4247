// laser_escape_pkg: constants and types shared by the LaserEscape blocks.
//
// Sizes that come from the described prototype: an 8-long IDELAYE2 chain on the
// sensor clock path (n = 3, so an 8-bit clock tune), 5-bit IDELAYE2 tap values,
// a detection window of 255 (one byte), 8 protected key flip-flops, 8 candidate
// locations (LOCs) for the moved key and a 4-bit polymorphic XOR target. The
// register map of the I2C interface and the status bits are this design's own.
package laser_escape_pkg;

  // IDELAYE2: 31-tap element with a 5-bit count.
  localparam int unsigned TAP_W     = 5;
  // Clock-path chain length is 2**CHAIN_LOG2 (8-long in the prototype).
  localparam int unsigned CHAIN_LOG2 = 3;
  localparam int unsigned CLK_TUNE_W = CHAIN_LOG2 + TAP_W;
  localparam int unsigned SEL_W      = 2;
  localparam int unsigned CNT_W      = 8;   // byte-wide counters and window

  // One sensor tune value: data-path delay, clock-path delay, LUT select.
  typedef struct packed {
    logic [TAP_W-1:0]      data_tap;
    logic [CLK_TUNE_W-1:0] clk_tune;
    logic [SEL_W-1:0]      lut_sel;
  } tune_t;

  // I2C register map (8-bit address, 8-bit data).
  typedef enum logic [7:0] {
    REG_CTRL       = 8'h00, // [0] sensor_en [1] use_auto_tune [2] poly_en [3] mtd_en
    REG_CMD        = 8'h01, // write-1 pulses: [0] alarm_clear [1] tune_start [2] key_load [3] relocate
    REG_DATA_TAP   = 8'h02,
    REG_CLK_TUNE   = 8'h03,
    REG_LUT_SEL    = 8'h04,
    REG_T_DETECT   = 8'h05,
    REG_ZC_THRESH  = 8'h06,
    REG_PL_THRESH  = 8'h07,
    REG_KEY        = 8'h08, // write shifts a key byte in (last byte written = least significant)
    REG_POLY_A     = 8'h09,
    REG_POLY_B     = 8'h0A,
    REG_KEY_SEL    = 8'h0B, // byte of the key that REG_KEY_OUT returns (0 = least significant)
    REG_STATUS     = 8'h10, // [0] alarm [1] tune_busy [2] tune_found [3] reloc_busy
    REG_ZERO_CNT   = 8'h11,
    REG_MAX_PULSE  = 8'h12,
    REG_BEST_TAP   = 8'h13,
    REG_BEST_CLK   = 8'h14,
    REG_BEST_SEL   = 8'h15,
    REG_BEST_MAXZC = 8'h16,
    REG_LOC        = 8'h17,
    REG_RELOC_CNT  = 8'h18,
    REG_POLY_C     = 8'h19,
    REG_KEY_OUT    = 8'h1A,
    REG_ALARM_CNT  = 8'h1B
  } reg_addr_e;

  localparam logic [6:0] I2C_DEV_ADDR = 7'h42;

endpackage
