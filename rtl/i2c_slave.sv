// i2c_slave: generic I2C slave with triplicated configuration registers.
//
// The chip carries two instances. Each gives the chip 32 configuration bytes
// (written by the I2C master, read by the chip logic on cfg) and takes 16
// status bytes from the chip (stat, read-only on the bus), plus a read-only
// byte with the 4-bit chip revision and 4-bit chip ID. These sizes and the
// triplication against single-event upsets are the source's; the bus
// protocol details below are this design's choice.
//
// Protocol: 7-bit slave address SLAVE_ADDR. A write transfer sends a
// register pointer byte, then data bytes to consecutive registers. A read
// transfer (usually after a write of the pointer and a repeated START)
// returns consecutive registers until the master answers NACK. Map:
// 0x00-0x1F config, 0x20-0x2F status, 0x30 {chip_rev, chip_id}; others read
// 0 and ignore writes.
//
// SEU protection: each config byte is a tmr_reg, three flip-flops per bit.
// The chip sees the majority of the three, and every clock all three are
// rewritten with that majority (or with new bus data), so a single upset is
// outvoted at once and repaired on the next clock.
//
// Timing: SCL and SDA are synchronised to clk (40 MHz) by two flip-flops, so
// each SCL phase must last at least 4 clk periods (up to about 4 MHz SCL).
// sda_oe high pulls SDA low; it changes a few clk cycles after SCL falls.
// A written byte reaches cfg three clocks after the SCL edge of its last bit.
module i2c_slave
  import etroc1_pkg::*;
#(
  parameter logic [6:0] SLAVE_ADDR = 7'h10,
  parameter int unsigned N_CFG = 32,
  parameter int unsigned N_STAT = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  scl,
  input  logic                  sda_in,
  output logic                  sda_oe,
  input  logic [3:0]            chip_id,
  input  logic [3:0]            chip_rev,
  output logic [N_CFG-1:0][7:0] cfg,
  input  logic [N_STAT-1:0][7:0] stat
);
  timeunit 1ps; timeprecision 1fs;

  // ---------------------------------------------------------- synchroniser
  logic [2:0] scl_s, sda_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s <= '1;
      sda_s <= '1;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_in};
    end
  end
  logic scl_rise, scl_fall, start_c, stop_c, sda_v;
  assign sda_v    = sda_s[1];
  assign scl_rise = scl_s[1] && !scl_s[2];
  assign scl_fall = !scl_s[1] && scl_s[2];
  assign start_c  = scl_s[1] && scl_s[2] && !sda_s[1] && sda_s[2];
  assign stop_c   = scl_s[1] && scl_s[2] && sda_s[1] && !sda_s[2];

  // ------------------------------------------------------ TMR config bank
  logic       wr_en;
  logic [7:0] wr_addr, wr_data;

  for (genvar i = 0; i < N_CFG; i++) begin : g_cfg
    tmr_reg #(.W(8)) u_tmr (
      .clk(clk), .rst_n(rst_n), .we(wr_en && wr_addr == 8'(i)), .d(wr_data), .q(cfg[i])
    );
  end

  function automatic logic [7:0] rd(input logic [7:0] a);
    if (a < 8'(N_CFG))                                    return cfg[a[4:0]];
    if (a >= I2C_STAT_BASE && a < I2C_STAT_BASE + 8'(N_STAT)) return stat[4'(a - I2C_STAT_BASE)];
    if (a == I2C_ID_ADDR)                                 return {chip_rev, chip_id};
    return 8'h00;
  endfunction

  // ------------------------------------------------------- protocol engine
  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_REG, S_WDATA, S_RDATA} state_t;
  state_t     state;
  logic [3:0] bitc;      // bits of the current byte seen (8 = ack slot)
  logic       ack_slot;  // in the 9th clock
  logic [7:0] sh, tx, ptr;
  logic       rw;
  logic [7:0] rd_now;
  assign rd_now = rd(ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bitc     <= '0;
      ack_slot <= 1'b0;
      sh       <= '0;
      tx       <= '0;
      ptr      <= '0;
      rw       <= 1'b0;
      sda_oe   <= 1'b0;
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start_c) begin
        state    <= S_ADDR;
        bitc     <= '0;
        ack_slot <= 1'b0;
        sda_oe   <= 1'b0;
      end else if (stop_c) begin
        state    <= S_IDLE;
        sda_oe   <= 1'b0;
      end else if (state != S_IDLE) begin
        if (scl_rise) begin
          if (!ack_slot) begin
            sh   <= {sh[6:0], sda_v};
            bitc <= bitc + 1'b1;
          end else if (state == S_RDATA && sda_v) begin
            state <= S_IDLE;   // master NACK ends the read
          end
        end else if (scl_fall) begin
          if (!ack_slot && bitc == 4'd8) begin
            // a byte has ended: acknowledge it, or release SDA for the master
            ack_slot <= 1'b1;
            unique case (state)
              S_ADDR: begin
                if (sh[7:1] == SLAVE_ADDR) begin
                  rw     <= sh[0];
                  sda_oe <= 1'b1;
                end else begin
                  state  <= S_IDLE;
                  sda_oe <= 1'b0;
                end
              end
              S_REG: begin
                ptr    <= sh;
                sda_oe <= 1'b1;
              end
              S_WDATA: begin
                wr_en   <= 1'b1;
                wr_addr <= ptr;
                wr_data <= sh;
                ptr     <= ptr + 1'b1;
                sda_oe  <= 1'b1;
              end
              default: sda_oe <= 1'b0;   // S_RDATA: master acknowledges
            endcase
          end else if (ack_slot) begin
            // end of the acknowledge clock: start the next byte
            ack_slot <= 1'b0;
            bitc     <= '0;
            if ((state == S_ADDR && rw) || state == S_RDATA) begin
              tx     <= rd_now;
              ptr    <= ptr + 1'b1;
              sda_oe <= !rd_now[7];
              state  <= S_RDATA;
            end else begin
              sda_oe <= 1'b0;
              if (state == S_ADDR) state <= S_REG;
              else                 state <= S_WDATA;
            end
          end else if (state == S_RDATA) begin
            sda_oe <= !tx[3'(7 - bitc)];
          end
        end
      end
    end
  end
endmodule
