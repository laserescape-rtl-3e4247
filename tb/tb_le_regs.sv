// tb_le_regs: reset values, write/read-back of every control register, the
// command and operand-load pulses (one cycle each), and that status inputs
// appear at their read addresses. A second instance with a 32-bit key checks
// that four KEY writes assemble the key word (first byte most significant)
// and that KEY_SEL picks the byte of the key output that KEY_OUT returns.
module tb_le_regs;
  import laser_escape_pkg::*;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1, wr_en = 1'b0;
  logic [7:0] wr_addr = '0, wr_data = '0, rd_addr = '0, rd_data;
  logic       sensor_en, use_auto_tune, poly_en, mtd_en;
  tune_t      man_tune;
  logic [7:0] t_detect, zc_thresh, pl_thresh, key_byte, poly_d;
  logic [7:0] rd_data32;
  logic [31:0] key_word32;
  logic       alarm_clear, tune_start, key_load, reloc_cmd, poly_load_a, poly_load_b;
  int         npulse = 0;

  always #5 clk = ~clk;
  always @(posedge clk) npulse += int'(alarm_clear) + int'(tune_start) + int'(key_load) + int'(reloc_cmd)
                                  + int'(poly_load_a) + int'(poly_load_b);

  le_regs dut (
    .clk, .rst, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
    .sensor_en, .use_auto_tune, .poly_en, .mtd_en, .man_tune, .t_detect, .zc_thresh, .pl_thresh,
    .key_word(key_byte), .poly_d, .alarm_clear, .tune_start, .key_load, .reloc_cmd, .poly_load_a, .poly_load_b,
    .alarm(1'b1), .tune_busy(1'b0), .tune_found(1'b1), .reloc_busy(1'b0),
    .zero_count(8'd77), .max_pulse(8'd9),
    .best_tune('{data_tap: 5'd3, clk_tune: 8'd84, lut_sel: 2'd2}), .best_maxzc(8'd5),
    .loc(8'd6), .reloc_count(8'd4), .poly_c(8'h0F), .key_out(8'hB6), .alarm_count(8'd12)
  );

  // 32-bit key instance; its other outputs are not examined
  logic       x_sensor_en, x_auto, x_poly_en, x_mtd_en;
  tune_t      x_tune;
  logic [7:0] x_td, x_zt, x_pt, x_pd;
  logic       x_p0, x_p1, x_p2, x_p3, x_p4, x_p5;
  le_regs #(.KEY_W(32)) dut32 (
    .clk, .rst, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data(rd_data32),
    .sensor_en(x_sensor_en), .use_auto_tune(x_auto), .poly_en(x_poly_en), .mtd_en(x_mtd_en),
    .man_tune(x_tune), .t_detect(x_td), .zc_thresh(x_zt), .pl_thresh(x_pt),
    .key_word(key_word32), .poly_d(x_pd), .alarm_clear(x_p0), .tune_start(x_p1), .key_load(x_p2),
    .reloc_cmd(x_p3), .poly_load_a(x_p4), .poly_load_b(x_p5),
    .alarm(1'b0), .tune_busy(1'b0), .tune_found(1'b0), .reloc_busy(1'b0),
    .zero_count(8'd0), .max_pulse(8'd0), .best_tune('0), .best_maxzc(8'd0),
    .loc(8'd0), .reloc_count(8'd0), .poly_c(8'h00), .key_out(32'h2B7E_1516), .alarm_count(8'd0)
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input reg_addr_e a, input logic [7:0] d);
    @(posedge clk); wr_en <= 1'b1; wr_addr <= a; wr_data <= d;
    @(posedge clk); wr_en <= 1'b0;
    @(posedge clk);
    #1;
  endtask


  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    rd_addr = REG_T_DETECT; #1 check(rd_data == 8'd255, "t_detect resets to 255");
    rd_addr = REG_CTRL;     #1 check(rd_data == 8'b1101, "ctrl reset value");
    wr(REG_CTRL, 8'b0110);
    check(!sensor_en && use_auto_tune && poly_en && !mtd_en, "ctrl fields");
    wr(REG_DATA_TAP, 8'd17);  wr(REG_CLK_TUNE, 8'd201); wr(REG_LUT_SEL, 8'd3);
    check(man_tune.data_tap == 5'd17 && man_tune.clk_tune == 8'd201 && man_tune.lut_sel == 2'd3, "manual tune");
    wr(REG_T_DETECT, 8'd40); wr(REG_ZC_THRESH, 8'd12); wr(REG_PL_THRESH, 8'd7); wr(REG_KEY, 8'h5E);
    check(t_detect == 8'd40 && zc_thresh == 8'd12 && pl_thresh == 8'd7 && key_byte == 8'h5E, "config registers");
    rd_addr = REG_CLK_TUNE; #1 check(rd_data == 8'd201, "read back clock tune");
    rd_addr = REG_KEY;      #1 check(rd_data == 8'h5E, "read back key byte");
    p0 = npulse;
    wr(REG_CMD, 8'b1111);
    check(npulse == p0 + 4, $sformatf("four one-cycle command pulses (%0d)", npulse - p0));
    wr(REG_POLY_A, 8'h05);
    check(poly_d == 8'h05 && npulse == p0 + 5, "poly A load pulse");
    wr(REG_POLY_B, 8'h0A);
    check(poly_d == 8'h0A && npulse == p0 + 6, "poly B load pulse");
    rd_addr = REG_STATUS;    #1 check(rd_data == 8'b0101, "status bits");
    rd_addr = REG_ZERO_CNT;  #1 check(rd_data == 8'd77, "zero count");
    rd_addr = REG_MAX_PULSE; #1 check(rd_data == 8'd9, "max pulse");
    rd_addr = REG_BEST_CLK;  #1 check(rd_data == 8'd84, "best clock tune");
    rd_addr = REG_BEST_SEL;  #1 check(rd_data == 8'd2, "best select");
    rd_addr = REG_LOC;       #1 check(rd_data == 8'd6, "location");
    rd_addr = REG_KEY_OUT;   #1 check(rd_data == 8'hB6, "key out");
    rd_addr = REG_ALARM_CNT; #1 check(rd_data == 8'd12, "alarm count");
    rd_addr = 8'hEE;         #1 check(rd_data == 8'h00, "unmapped reads 0");
    // wide key: the 8-bit instance keeps only the last byte written
    wr(REG_KEY, 8'hDE); wr(REG_KEY, 8'hAD); wr(REG_KEY, 8'hBE); wr(REG_KEY, 8'hEF);
    check(key_word32 == 32'hDEAD_BEEF, $sformatf("32-bit key word %h", key_word32));
    check(key_byte == 8'hEF, "8-bit key keeps the last byte");
    for (int b = 0; b < 5; b++) begin
      automatic logic [7:0] exp = (b < 4) ? 8'(32'h2B7E_1516 >> (8 * b)) : 8'h00;
      wr(REG_KEY_SEL, 8'(b));
      rd_addr = REG_KEY_SEL; #1 check(rd_data32 == 8'(b), "key select read back");
      rd_addr = REG_KEY_OUT; #1 check(rd_data32 == exp, $sformatf("key out byte %0d: %h", b, rd_data32));
      check(rd_data == ((b == 0) ? 8'hB6 : 8'h00), $sformatf("8-bit key out byte %0d", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
