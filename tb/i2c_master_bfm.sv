// i2c_master_bfm: simulation-only I2C controller used by the testbenches.
// It drives SCL and its side of the open-drain SDA line and offers tasks for
// register writes and reads in the convention of i2c_slave:
//   write_reg(reg, data)  S, addr+W, reg, data, P
//   read_reg(reg, data)   S, addr+W, reg, Sr, addr+R, data (NACK), P
// The line value is sda = !(bfm_low || target_oe). HALF is the number of clk
// cycles per SCL half period. nacks counts address/data bytes not
// acknowledged by the target.
module i2c_master_bfm #(
  parameter int unsigned HALF = 8,
  parameter logic [6:0]  ADDR = 7'h42
) (
  input  logic clk,
  output logic scl,
  output logic sda,        // resolved line value, to the target's sda_i
  input  logic target_oe
);
  logic drv_low = 1'b0;
  int   nacks   = 0;

  initial scl = 1'b1;
  assign sda = !(drv_low || target_oe);

  task automatic hw();
    repeat (HALF) @(posedge clk);
  endtask

  task automatic start_c();
    drv_low = 1'b0; scl = 1'b1; hw();
    drv_low = 1'b1; hw();
    scl = 1'b0; hw();
  endtask

  task automatic rstart_c();
    drv_low = 1'b0; hw();
    scl = 1'b1; hw();
    drv_low = 1'b1; hw();
    scl = 1'b0; hw();
  endtask

  task automatic stop_c();
    drv_low = 1'b1; hw();
    scl = 1'b1; hw();
    drv_low = 1'b0; hw();
  endtask

  task automatic wbyte(input logic [7:0] b);
    for (int k = 7; k >= 0; k--) begin
      drv_low = !b[k]; hw();
      scl = 1'b1; hw();
      scl = 1'b0;
    end
    drv_low = 1'b0; hw();
    scl = 1'b1; hw();
    if (sda) nacks++;
    scl = 1'b0;
  endtask

  task automatic rbyte(output logic [7:0] b, input logic ack);
    drv_low = 1'b0;
    for (int k = 7; k >= 0; k--) begin
      hw();
      scl = 1'b1; hw();
      b[k] = sda;
      scl = 1'b0;
    end
    drv_low = ack; hw();
    scl = 1'b1; hw();
    scl = 1'b0; hw();
    drv_low = 1'b0;
  endtask

  task automatic write_reg(input logic [7:0] r, input logic [7:0] d);
    start_c();
    wbyte({ADDR, 1'b0});
    wbyte(r);
    wbyte(d);
    stop_c();
  endtask

  task automatic read_reg(input logic [7:0] r, output logic [7:0] d);
    start_c();
    wbyte({ADDR, 1'b0});
    wbyte(r);
    rstart_c();
    wbyte({ADDR, 1'b1});
    rbyte(d, 1'b0);
    stop_c();
  endtask
endmodule
