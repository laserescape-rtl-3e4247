// tb_i2c_slave: an I2C controller model writes and reads a 256-byte register
// array behind the target: single writes, a burst write with pointer
// auto-increment, single reads, a two-byte burst read, and a transfer to a
// foreign address that must be ignored (not acknowledged, nothing written).
module tb_i2c_slave;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1;
  logic       scl, sda, sda_oe;
  logic       wr_en;
  logic [7:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [7:0] mem [256];
  int         writes = 0;

  always #5 clk = ~clk;

  i2c_slave dut (.clk, .rst, .scl_i(scl), .sda_i(sda), .sda_oe, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  i2c_master_bfm #(.HALF(6)) bfm (.clk, .scl, .sda, .target_oe(sda_oe));

  always @(posedge clk) if (wr_en) begin mem[wr_addr] <= wr_data; writes++; end
  assign rd_data = mem[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d, d2;
    for (int k = 0; k < 256; k++) mem[k] = 8'(k ^ 8'h5A);
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (10) @(posedge clk);
    bfm.write_reg(8'h10, 8'hA5);
    check(mem[8'h10] == 8'hA5, "single write");
    bfm.write_reg(8'h11, 8'h3C);
    check(mem[8'h11] == 8'h3C, "second write");
    // burst write 0x20..0x23
    bfm.start_c();
    bfm.wbyte({7'h42, 1'b0}); bfm.wbyte(8'h20);
    bfm.wbyte(8'h01); bfm.wbyte(8'h02); bfm.wbyte(8'h03); bfm.wbyte(8'h04);
    bfm.stop_c();
    check(mem[8'h20] == 8'h01 && mem[8'h21] == 8'h02 && mem[8'h22] == 8'h03 && mem[8'h23] == 8'h04,
          "burst write with auto-increment");
    check(bfm.nacks == 0, "all bytes acknowledged");
    bfm.read_reg(8'h10, d);
    check(d == 8'hA5, $sformatf("read 0x10 = %h", d));
    bfm.read_reg(8'h77, d);
    check(d == (8'h77 ^ 8'h5A), $sformatf("read 0x77 = %h", d));
    // burst read 0x22, 0x23
    bfm.start_c();
    bfm.wbyte({7'h42, 1'b0}); bfm.wbyte(8'h22);
    bfm.rstart_c();
    bfm.wbyte({7'h42, 1'b1});
    bfm.rbyte(d, 1'b1);
    bfm.rbyte(d2, 1'b0);
    bfm.stop_c();
    check(d == 8'h03 && d2 == 8'h04, $sformatf("burst read %h %h", d, d2));
    check(bfm.nacks == 0, "no NACK so far");
    // foreign address
    begin
      automatic int w0 = writes;
      bfm.start_c();
      bfm.wbyte({7'h13, 1'b0}); bfm.wbyte(8'h10); bfm.wbyte(8'hFF);
      bfm.stop_c();
      check(bfm.nacks == 3, $sformatf("foreign address not acknowledged (%0d NACKs)", bfm.nacks));
      check(writes == w0 && mem[8'h10] == 8'hA5, $sformatf("foreign address wrote nothing (%0d writes, mem %h)", writes - w0, mem[8'h10]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
