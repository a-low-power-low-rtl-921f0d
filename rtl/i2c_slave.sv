// i2c_slave: configuration port of LOCx2.
//
// A plain I2C slave, oversampled by the chip's 40 MHz reference clock, with a
// small register file. Its 7-bit device address is ADDR_HI followed by the
// chip's address pins, so several chips can share one bus. Protocol:
//
//   write: S | dev,W | A | ptr | A | data | A | data | A ... | P
//   read : S | dev,W | A | ptr | A | Sr | dev,R | A | data | A ... data | N | P
//
// The register pointer increments after every data byte. Registers (reset
// value 0): REG_MODE [1:0] calibration mode of channel 0 and 1; REG_PLL and
// REG_DRIVER settings handed to the PLL and the two CML drivers; REG_STATUS,
// read only, [0] PLL lock. Writes to REG_STATUS or a pointer beyond the map
// are ignored; reads beyond the map return 0.
//
// The paper names the I2C slave, its SDA, SCL and Address pins and its
// connections to the PLL and the drivers, and says that the user can turn the
// CRC off (the calibration mode); the register map, address width, protocol
// details and oversampling are this design's choices.
//
// Timing: SCL and SDA pass through two synchronizer flip-flops; bits are
// taken on SCL rising and SDA is changed on SCL falling, about 3 clk cycles
// after the pin edge, so SCL may run at up to clk/10 (4 MHz with 40 MHz).
// sda_oe_o = 1 pulls SDA low (open drain).
module i2c_slave
  import locx2_pkg::*;
#(
  parameter int unsigned ADDR_PINS = 3,
  parameter logic [6-ADDR_PINS:0] ADDR_HI = '0   // upper address bits, fixed
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADDR_PINS-1:0] addr_i,
  input  logic                 scl_i,
  input  logic                 sda_i,
  output logic                 sda_oe_o,
  input  logic [7:0]           status_i,
  output logic [1:0]           cal_mode_o,
  output logic [7:0]           pll_cfg_o,
  output logic [7:0]           drv_cfg_o
);
  timeunit 1ps;
  timeprecision 1fs;

  typedef enum logic [2:0] {
    S_IDLE, S_ADDR, S_ACK, S_PTR, S_WDATA, S_RDATA, S_RACK
  } state_e;

  logic [1:0] scl_s, sda_s;
  logic       scl_d, sda_d;
  logic       scl_rise, scl_fall, start_c, stop_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s <= 2'b11;
      sda_s <= 2'b11;
      scl_d <= 1'b1;
      sda_d <= 1'b1;
    end else begin
      scl_s <= {scl_s[0], scl_i};
      sda_s <= {sda_s[0], sda_i};
      scl_d <= scl_s[1];
      sda_d <= sda_s[1];
    end
  end

  assign scl_rise = scl_s[1] & ~scl_d;
  assign scl_fall = ~scl_s[1] & scl_d;
  assign start_c  = scl_s[1] & scl_d & sda_d & ~sda_s[1];
  assign stop_c   = scl_s[1] & scl_d & ~sda_d & sda_s[1];

  state_e     state, after_ack;
  logic [7:0] sreg;
  logic [3:0] nbit;
  logic [7:0] ptr;
  logic [7:0] regs [N_REGS-1];   // writable registers

  logic [6:0] dev_addr;
  logic [7:0] rd_byte;
  assign dev_addr = {ADDR_HI, addr_i};
  assign rd_byte  = read_reg(ptr);

  function automatic logic [7:0] read_reg(input logic [7:0] p);
    if (p == REG_STATUS)                 return status_i;
    else if (p < 8'(N_REGS - 1))         return regs[p[1:0]];
    else                                 return 8'h00;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      after_ack <= S_IDLE;
      sreg      <= '0;
      nbit      <= '0;
      ptr       <= '0;
      sda_oe_o  <= 1'b0;
      for (int i = 0; i < int'(N_REGS) - 1; i++) regs[i] <= '0;
    end else if (start_c) begin
      state    <= S_ADDR;
      nbit     <= '0;
      sda_oe_o <= 1'b0;
    end else if (stop_c) begin
      state    <= S_IDLE;
      sda_oe_o <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: sda_oe_o <= 1'b0;

        // Receive a byte: device address, register pointer or write data.
        S_ADDR, S_PTR, S_WDATA: begin
          if (scl_rise) begin
            sreg <= {sreg[6:0], sda_s[1]};
            nbit <= nbit + 4'd1;
          end else if (scl_fall && nbit == 4'd8) begin
            nbit <= '0;
            if (state == S_ADDR) begin
              if (sreg[7:1] == dev_addr) begin
                sda_oe_o  <= 1'b1;
                state     <= S_ACK;
                after_ack <= sreg[0] ? S_RDATA : S_PTR;
              end else begin
                state <= S_IDLE;
              end
            end else if (state == S_PTR) begin
              ptr       <= sreg;
              sda_oe_o  <= 1'b1;
              state     <= S_ACK;
              after_ack <= S_WDATA;
            end else begin
              if (ptr < 8'(N_REGS - 1)) regs[ptr[1:0]] <= sreg;
              ptr       <= ptr + 8'd1;
              sda_oe_o  <= 1'b1;
              state     <= S_ACK;
              after_ack <= S_WDATA;
            end
          end
        end

        // Slave acknowledge: release SDA at the end of the ninth clock, or
        // put the first read bit on it.
        S_ACK: begin
          if (scl_fall) begin
            state <= after_ack;
            nbit  <= '0;
            if (after_ack == S_RDATA) begin
              sreg     <= rd_byte;
              sda_oe_o <= ~rd_byte[7];
              ptr      <= ptr + 8'd1;
            end else begin
              sda_oe_o <= 1'b0;
            end
          end
        end

        // Send a byte, most significant bit first.
        S_RDATA: begin
          if (scl_fall) begin
            if (nbit == 4'd7) begin
              sda_oe_o <= 1'b0;          // release for the master's (N)ACK
              nbit     <= '0;
              state    <= S_RACK;
            end else begin
              sreg     <= {sreg[6:0], 1'b0};
              sda_oe_o <= ~sreg[6];
              nbit     <= nbit + 4'd1;
            end
          end
        end

        // Master acknowledge: ACK continues the read, NACK ends it.
        S_RACK: begin
          if (scl_rise) begin
            if (sda_s[1]) state <= S_IDLE;
            else          state <= S_ACK;
            after_ack <= S_RDATA;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign cal_mode_o = regs[0][1:0];
  assign pll_cfg_o  = regs[1];
  assign drv_cfg_o  = regs[2];

  // The slave never drives SDA low while the master generates a start or a
  // stop (SDA changing while SCL is high).
  a_no_drive_on_start : assert property (@(posedge clk) disable iff (!rst_n)
                                         start_c |=> !sda_oe_o);
endmodule
