// le_regs: LaserEscape's control and status registers, written and read over
// the I2C target (i2c_slave). One byte per address; the map is in
// laser_escape_pkg (reg_addr_e).
//
// Control registers hold the manual sensor tune (data tap, 8-bit clock tune,
// LUT select), the detection window t_detect (reset value 255, the prototype's
// setting), the zero-count and pulse-length thresholds, the key word to load,
// the two polymorphic-target operands and the enables. The key word is KEY_W
// bits wide: each write to REG_KEY shifts one byte in at the bottom, so a
// 32-bit key is written as four bytes, most significant first. REG_KEY_SEL
// picks which byte of the moving-target store's key output REG_KEY_OUT shows.
// Writing REG_CMD produces one-cycle command pulses (alarm clear, tuner start,
// key load, manual relocation); writing REG_POLY_A / REG_POLY_B also pulses
// poly_load_a / _b.
// Status registers read back the alarm, tuner and relocation state, the last
// window's zero count and longest zero pulse, the tuner's best tune, the key
// location, the relocation and alarm counts, the XOR target's output and the
// key seen through the moving-target store. Reset values other than t_detect
// (zero-count threshold 32, pulse threshold 255 i.e. off, sensor enabled,
// responses enabled) are this design's choices.
//
// Timing: writes take effect on the clock edge after wr_en; reads are
// combinational.
module le_regs
  import laser_escape_pkg::*;
#(
  parameter int unsigned KEY_W = 8,
  localparam int unsigned KB   = (KEY_W + 7) / 8   // key bytes
) (
  input  logic              clk,
  input  logic              rst,
  // register port
  input  logic              wr_en,
  input  logic [7:0]        wr_addr,
  input  logic [7:0]        wr_data,
  input  logic [7:0]        rd_addr,
  output logic [7:0]        rd_data,
  // control
  output logic              sensor_en,
  output logic              use_auto_tune,
  output logic              poly_en,
  output logic              mtd_en,
  output tune_t             man_tune,
  output logic [CNT_W-1:0]  t_detect,
  output logic [CNT_W-1:0]  zc_thresh,
  output logic [CNT_W-1:0]  pl_thresh,
  output logic [KEY_W-1:0]  key_word,
  output logic [7:0]        poly_d,
  output logic              alarm_clear,
  output logic              tune_start,
  output logic              key_load,
  output logic              reloc_cmd,
  output logic              poly_load_a,
  output logic              poly_load_b,
  // status
  input  logic              alarm,
  input  logic              tune_busy,
  input  logic              tune_found,
  input  logic              reloc_busy,
  input  logic [CNT_W-1:0]  zero_count,
  input  logic [CNT_W-1:0]  max_pulse,
  input  tune_t             best_tune,
  input  logic [CNT_W-1:0]  best_maxzc,
  input  logic [7:0]        loc,
  input  logic [7:0]        reloc_count,
  input  logic [7:0]        poly_c,
  input  logic [KEY_W-1:0]  key_out,
  input  logic [7:0]        alarm_count
);
  logic [8*KB-1:0] key_sr;      // key shift register, whole bytes
  logic [8*KB-1:0] key_out_b;   // key output padded to whole bytes
  logic [7:0]      key_sel;

  assign key_word  = key_sr[KEY_W-1:0];
  assign key_out_b = (8*KB)'(key_out);

  always_ff @(posedge clk) begin
    if (rst) begin
      sensor_en     <= 1'b1;
      use_auto_tune <= 1'b0;
      poly_en       <= 1'b1;
      mtd_en        <= 1'b1;
      man_tune      <= '0;
      t_detect      <= 8'd255;
      zc_thresh     <= 8'd32;
      pl_thresh     <= 8'd255;
      key_sr        <= '0;
      key_sel       <= '0;
      poly_d        <= '0;
      alarm_clear   <= 1'b0;
      tune_start    <= 1'b0;
      key_load      <= 1'b0;
      reloc_cmd     <= 1'b0;
      poly_load_a   <= 1'b0;
      poly_load_b   <= 1'b0;
    end else begin
      alarm_clear <= 1'b0;
      tune_start  <= 1'b0;
      key_load    <= 1'b0;
      reloc_cmd   <= 1'b0;
      poly_load_a <= 1'b0;
      poly_load_b <= 1'b0;
      if (wr_en) begin
        case (wr_addr)
          REG_CTRL: begin
            sensor_en     <= wr_data[0];
            use_auto_tune <= wr_data[1];
            poly_en       <= wr_data[2];
            mtd_en        <= wr_data[3];
          end
          REG_CMD: begin
            alarm_clear <= wr_data[0];
            tune_start  <= wr_data[1];
            key_load    <= wr_data[2];
            reloc_cmd   <= wr_data[3];
          end
          REG_DATA_TAP:  man_tune.data_tap <= wr_data[TAP_W-1:0];
          REG_CLK_TUNE:  man_tune.clk_tune <= wr_data[CLK_TUNE_W-1:0];
          REG_LUT_SEL:   man_tune.lut_sel  <= wr_data[SEL_W-1:0];
          REG_T_DETECT:  t_detect  <= wr_data;
          REG_ZC_THRESH: zc_thresh <= wr_data;
          REG_PL_THRESH: pl_thresh <= wr_data;
          REG_KEY:       key_sr    <= (8*KB)'({key_sr, wr_data});
          REG_KEY_SEL:   key_sel   <= wr_data;
          REG_POLY_A: begin
            poly_d      <= wr_data;
            poly_load_a <= 1'b1;
          end
          REG_POLY_B: begin
            poly_d      <= wr_data;
            poly_load_b <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_addr)
      REG_CTRL:       rd_data = {4'b0, mtd_en, poly_en, use_auto_tune, sensor_en};
      REG_DATA_TAP:   rd_data = 8'(man_tune.data_tap);
      REG_CLK_TUNE:   rd_data = 8'(man_tune.clk_tune);
      REG_LUT_SEL:    rd_data = 8'(man_tune.lut_sel);
      REG_T_DETECT:   rd_data = t_detect;
      REG_ZC_THRESH:  rd_data = zc_thresh;
      REG_PL_THRESH:  rd_data = pl_thresh;
      REG_KEY:        rd_data = key_sr[7:0];
      REG_KEY_SEL:    rd_data = key_sel;
      REG_STATUS:     rd_data = {4'b0, reloc_busy, tune_found, tune_busy, alarm};
      REG_ZERO_CNT:   rd_data = zero_count;
      REG_MAX_PULSE:  rd_data = max_pulse;
      REG_BEST_TAP:   rd_data = 8'(best_tune.data_tap);
      REG_BEST_CLK:   rd_data = 8'(best_tune.clk_tune);
      REG_BEST_SEL:   rd_data = 8'(best_tune.lut_sel);
      REG_BEST_MAXZC: rd_data = best_maxzc;
      REG_LOC:        rd_data = loc;
      REG_RELOC_CNT:  rd_data = reloc_count;
      REG_POLY_C:     rd_data = poly_c;
      REG_KEY_OUT:    rd_data = (int'(key_sel) < KB) ? key_out_b[8*key_sel +: 8] : 8'h00;
      REG_ALARM_CNT:  rd_data = alarm_count;
      default:        rd_data = 8'h00;
    endcase
  end
endmodule
