// i2c_slave: I2C target that gives an external controller register access to
// LaserEscape (tune values, detection window, thresholds, key loading, status).
//
// The bus is oversampled with the system clock: SCL and SDA pass a two-flop
// synchroniser and START, STOP and SCL edges are detected from the synchronised
// samples, so SCL must stay high and low for at least four clock cycles each.
// Protocol (standard 7-bit addressing, this design's register convention):
//   write: S, DEV_ADDR+W, A, reg, A, data, A, data, A ... P
//          (each data byte is written to reg, reg+1, ...)
//   read:  S, DEV_ADDR+W, A, reg, A, Sr, DEV_ADDR+R, A, data, A, data, N, P
//          (bytes come from reg, reg+1, ...; the controller NACKs the last)
// The target acknowledges only its own address. SDA is open drain: sda_oe high
// pulls the line low. Clock stretching is not used.
//
// Register side: wr_en pulses for one cycle with wr_addr/wr_data after each
// received data byte; rd_addr is the current pointer and rd_data must be its
// combinational read value (sampled when a read byte is loaded).
module i2c_slave #(
  parameter logic [6:0] DEV_ADDR = laser_escape_pkg::I2C_DEV_ADDR
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       scl_i,
  input  logic       sda_i,
  output logic       sda_oe,
  output logic       wr_en,
  output logic [7:0] wr_addr,
  output logic [7:0] wr_data,
  output logic [7:0] rd_addr,
  input  logic [7:0] rd_data
);
  typedef enum logic [3:0] {
    I_IDLE, I_ADDR, I_ADDR_ACK, I_REG, I_REG_ACK, I_WDATA, I_WDATA_ACK, I_RDATA, I_RDATA_ACK
  } istate_e;

  logic [2:0] scl_s, sda_s;
  logic       scl_rise, scl_fall, start_c, stop_c;
  istate_e    st;
  logic [7:0] sh;
  logic [3:0] nbit;
  logic [7:0] ptr;
  logic [7:0] tx;
  logic       rw;
  logic       mack;     // controller's acknowledge of a read byte (1 = ACK)

  always_ff @(posedge clk) begin
    if (rst) begin
      scl_s <= 3'b111;
      sda_s <= 3'b111;
    end else begin
      scl_s <= {scl_s[1:0], scl_i};
      sda_s <= {sda_s[1:0], sda_i};
    end
  end

  assign scl_rise = scl_s[1] && !scl_s[2];
  assign scl_fall = !scl_s[1] && scl_s[2];
  assign start_c  = scl_s[1] && scl_s[2] && !sda_s[1] && sda_s[2];
  assign stop_c   = scl_s[1] && scl_s[2] && sda_s[1] && !sda_s[2];
  assign rd_addr  = ptr;

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= I_IDLE;
      sh      <= '0;
      nbit    <= '0;
      ptr     <= '0;
      tx      <= '0;
      rw      <= 1'b0;
      mack    <= 1'b0;
      sda_oe  <= 1'b0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start_c) begin
        st     <= I_ADDR;
        nbit   <= '0;
        sda_oe <= 1'b0;
      end else if (stop_c) begin
        st     <= I_IDLE;
        sda_oe <= 1'b0;
      end else begin
        unique case (st)
          I_IDLE: ;

          I_ADDR, I_REG, I_WDATA: begin
            if (scl_rise) begin
              sh   <= {sh[6:0], sda_s[1]};
              nbit <= nbit + 1'b1;
            end else if (scl_fall && nbit == 4'd8) begin
              nbit <= '0;
              if (st == I_ADDR) begin
                if (sh[7:1] == DEV_ADDR) begin
                  rw     <= sh[0];
                  sda_oe <= 1'b1;
                  st     <= I_ADDR_ACK;
                end else begin
                  st <= I_IDLE;
                end
              end else if (st == I_REG) begin
                ptr    <= sh;
                sda_oe <= 1'b1;
                st     <= I_REG_ACK;
              end else begin
                wr_en   <= 1'b1;
                wr_addr <= ptr;
                wr_data <= sh;
                ptr     <= ptr + 1'b1;
                sda_oe  <= 1'b1;
                st      <= I_WDATA_ACK;
              end
            end
          end

          I_ADDR_ACK: if (scl_fall) begin
            if (rw) begin
              tx     <= rd_data;
              sda_oe <= !rd_data[7];
              nbit   <= '0;
              st     <= I_RDATA;
            end else begin
              sda_oe <= 1'b0;
              st     <= I_REG;
            end
          end

          I_REG_ACK, I_WDATA_ACK: if (scl_fall) begin
            sda_oe <= 1'b0;
            st     <= I_WDATA;
          end

          I_RDATA: begin
            if (scl_rise) nbit <= nbit + 1'b1;
            else if (scl_fall) begin
              if (nbit == 4'd8) begin
                sda_oe <= 1'b0;           // release for the controller's ACK
                st     <= I_RDATA_ACK;
              end else begin
                sda_oe <= !tx[3'd7 - nbit[2:0]];
              end
            end
          end

          I_RDATA_ACK: begin
            if (scl_rise) mack <= !sda_s[1];
            else if (scl_fall) begin
              if (mack) begin
                tx     <= rd_data;        // rd_addr already advanced
                sda_oe <= !rd_data[7];
                nbit   <= '0;
                st     <= I_RDATA;
              end else begin
                st <= I_IDLE;
              end
            end
          end

          default: st <= I_IDLE;
        endcase
      end
      // advance the read pointer once a byte has been sent
      if (!start_c && !stop_c && st == I_RDATA && scl_fall && nbit == 4'd8) ptr <= ptr + 1'b1;
    end
  end
endmodule
