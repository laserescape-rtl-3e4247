// sensor_tuner: automatic search for the 1LUT sensor's tune value, following
// the tuning procedure described for LaserEscape.
//
// A tune value is (data-path tap, clock-path chain tune, LUT select). For every
// data tap from 0 to DATA_TAP_LAST the tuner binary-searches the clock tune
// with the LUT select at 0: a window that is all zeros (zero count equal to
// t_detect) means the clock edge comes too early, so the lower bound moves up;
// a window with no zero means it comes too late, so the upper bound moves
// down; anything in between is metastable. When a metastable clock tune is
// found, the tuner tries the clock tunes within +-ADJ of it with every LUT
// select value, and measures each for T_SENSE_WINDOWS detection windows (the
// t_sense interval). The best tune is the metastable one with the lowest
// maximum zero count over its t_sense interval; a tune counts as metastable
// when that maximum is above 0 and below t_detect. After the last data tap
// the search ends with found set if any tune qualified.
//
// Before each measurement the first window after a tune change is thrown away,
// since it was partly taken with the old tune. The +-ADJ neighbourhood, the
// number of windows per binary-search step (SEARCH_WINDOWS) and the
// metastability test are this design's reading of the procedure.
//
// Interface: start (pulse) begins a search; busy is high until it ends. While
// busy, tune is the value to apply to the sensor. win_valid/zero_count are the
// zero counter's per-window results. best/best_maxzc/found hold the result.
// Timing: a search takes roughly (DATA_TAP_LAST+1) x (CLK_TUNE_W x
// (SEARCH_WINDOWS+1) + (2 ADJ+1) x 4 x (T_SENSE_WINDOWS+1)) windows.
module sensor_tuner
  import laser_escape_pkg::*;
#(
  parameter int unsigned T_SENSE_WINDOWS = 39216, // 100 ms of 255-cycle windows at 100 MHz
  parameter int unsigned SEARCH_WINDOWS  = 1,
  parameter int unsigned ADJ             = 1,
  parameter int unsigned DATA_TAP_LAST   = 31
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic             win_valid,
  input  logic [CNT_W-1:0] zero_count,
  input  logic [CNT_W-1:0] t_detect,
  output tune_t            tune,
  output logic             busy,
  output logic             found,
  output tune_t            best,
  output logic [CNT_W-1:0] best_maxzc
);
  typedef enum logic [2:0] {S_IDLE, S_BS_SET, S_BS_MEAS, S_ADJ_SET, S_ADJ_MEAS, S_NEXT} state_e;

  localparam int CT_MAX = (1 << CLK_TUNE_W) - 1;
  localparam int NW_W   = $clog2(T_SENSE_WINDOWS + SEARCH_WINDOWS + 1);

  state_e             state;
  logic [TAP_W-1:0]   dtap;
  int                 lo, hi, mid, center, off;
  logic [SEL_W-1:0]   sel;
  logic               skip;
  logic [NW_W-1:0]    nwin;
  logic [CNT_W-1:0]   mmax, mmin;
  logic [CNT_W-1:0]   zc_max_next, zc_min_next;
  logic               meas_done;

  assign zc_max_next = (zero_count > mmax) ? zero_count : mmax;
  assign zc_min_next = (zero_count < mmin) ? zero_count : mmin;

  always_comb begin
    if (state == S_BS_MEAS) meas_done = win_valid && !skip && (int'(nwin) + 1 >= int'(SEARCH_WINDOWS));
    else                    meas_done = win_valid && !skip && (int'(nwin) + 1 >= int'(T_SENSE_WINDOWS));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      dtap       <= '0;
      lo         <= 0;
      hi         <= 0;
      mid        <= 0;
      center     <= 0;
      off        <= 0;
      sel        <= '0;
      skip       <= 1'b1;
      nwin       <= '0;
      mmax       <= '0;
      mmin       <= '1;
      tune       <= '0;
      found      <= 1'b0;
      best       <= '0;
      best_maxzc <= '1;
    end else begin
      // Per-window bookkeeping shared by both measuring states.
      if ((state == S_BS_MEAS || state == S_ADJ_MEAS) && win_valid) begin
        if (skip) skip <= 1'b0;
        else begin
          nwin <= nwin + 1'b1;
          mmax <= zc_max_next;
          mmin <= zc_min_next;
        end
      end

      unique case (state)
        S_IDLE: if (start) begin
          dtap       <= '0;
          found      <= 1'b0;
          best_maxzc <= '1;
          state      <= S_BS_SET;
          lo         <= 0;
          hi         <= CT_MAX;
        end

        S_BS_SET: begin
          if (lo > hi) state <= S_NEXT;
          else begin
            mid   <= (lo + hi) / 2;
            tune  <= '{data_tap: dtap, clk_tune: CLK_TUNE_W'((lo + hi) / 2), lut_sel: '0};
            skip  <= 1'b1;
            nwin  <= '0;
            mmax  <= '0;
            mmin  <= '1;
            state <= S_BS_MEAS;
          end
        end

        S_BS_MEAS: if (meas_done) begin
          if (zc_min_next >= t_detect) begin        // always zero: clock too early
            lo    <= mid + 1;
            state <= S_BS_SET;
          end else if (zc_max_next == '0) begin     // always one: clock too late
            hi    <= mid - 1;
            state <= S_BS_SET;
          end else begin                            // metastable
            center <= mid;
            off    <= -int'(ADJ);
            sel    <= '0;
            state  <= S_ADJ_SET;
          end
        end

        S_ADJ_SET: begin
          if (center + off < 0 || center + off > CT_MAX) begin
            // outside the chain's range: skip this neighbour
            if (off >= int'(ADJ)) state <= S_NEXT;
            else                  off   <= off + 1;
          end else begin
            tune  <= '{data_tap: dtap, clk_tune: CLK_TUNE_W'(center + off), lut_sel: sel};
            skip  <= 1'b1;
            nwin  <= '0;
            mmax  <= '0;
            mmin  <= '1;
            state <= S_ADJ_MEAS;
          end
        end

        S_ADJ_MEAS: if (meas_done) begin
          if (zc_max_next != '0 && zc_max_next < t_detect && zc_max_next < best_maxzc) begin
            best       <= tune;
            best_maxzc <= zc_max_next;
            found      <= 1'b1;
          end
          if (sel != '1) begin
            sel   <= sel + 1'b1;
            state <= S_ADJ_SET;
          end else if (off < int'(ADJ)) begin
            sel   <= '0;
            off   <= off + 1;
            state <= S_ADJ_SET;
          end else begin
            state <= S_NEXT;
          end
        end

        S_NEXT: begin
          if (int'(dtap) >= int'(DATA_TAP_LAST)) state <= S_IDLE;
          else begin
            dtap  <= dtap + 1'b1;
            lo    <= 0;
            hi    <= CT_MAX;
            state <= S_BS_SET;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
