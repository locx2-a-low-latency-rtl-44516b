// i2c_slave: I2C slave holding the 32 configuration bits of LOCx2.
//
// SCL and SDA are sampled with the 40 MHz reference clock through two-flop
// synchronizers; START and STOP are SDA edges while SCL is high. The 7-bit
// device address is {DEV_PREFIX, addr_pins}. Protocol (standard register
// access): a write sends the address with R/W=0, a register pointer byte, then
// data bytes that go to the pointed register with auto-increment; a read sets
// the pointer with a write, then a (repeated) START with R/W=1 returns bytes
// from the pointer on, auto-incrementing, until the master NACKs. Registers
// 0..3 hold the 32 bits (cfg, see locx2_pkg::cfg_t); other pointers read 0 and
// ignore writes. SDA is open drain: sda_oe=1 pulls it low. The slave changes
// SDA only after SCL falls. SCL must stay high and low for at least 3 clk
// cycles (up to ~4 MHz SCL at 40 MHz). The paper gives the I2C slave and the
// 32 register bits; the address split, register map and reset values are
// this design's.
module i2c_slave
  import locx2_pkg::*;
#(
  parameter logic [3:0] DEV_PREFIX = 4'b1100
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       scl,
  input  logic       sda_in,
  input  logic [2:0] addr_pins,
  output logic       sda_oe,
  output cfg_t       cfg
);
  typedef enum logic [3:0] {
    IDLE, ADDR, ADDR_ACK, PTR, PTR_ACK, WR, WR_ACK, RD, RD_ACK
  } state_t;

  state_t     state;
  logic [2:0] scl_s, sda_s;
  logic       scl_rise, scl_fall, start_c, stop_c;
  logic [7:0] shreg, ptr;
  logic [3:0] bitcnt;
  logic       master_ack;
  logic [3:0][7:0] regs;
  logic [7:0] cur_byte;

  assign cfg      = cfg_t'(regs);
  assign scl_rise =  scl_s[1] & ~scl_s[2];
  assign scl_fall = ~scl_s[1] &  scl_s[2];
  assign start_c  =  scl_s[1] &  scl_s[2] &  sda_s[2] & ~sda_s[1];
  assign stop_c   =  scl_s[1] &  scl_s[2] & ~sda_s[2] &  sda_s[1];

  function automatic logic [7:0] rd_byte(input logic [7:0] p);
    return (p < 8'd4) ? regs[p[1:0]] : 8'h00;
  endfunction

  assign cur_byte = rd_byte(ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s      <= '1;
      sda_s      <= '1;
      state      <= IDLE;
      shreg      <= '0;
      ptr        <= '0;
      bitcnt     <= '0;
      master_ack <= 1'b0;
      sda_oe     <= 1'b0;
      regs       <= CFG_RESET;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_in};
      if (start_c) begin
        state  <= ADDR;
        bitcnt <= '0;
        sda_oe <= 1'b0;
      end else if (stop_c) begin
        state  <= IDLE;
        sda_oe <= 1'b0;
      end else if (scl_rise) begin
        unique case (state)
          ADDR, PTR, WR: begin
            shreg  <= {shreg[6:0], sda_s[1]};
            bitcnt <= bitcnt + 4'd1;
          end
          RD_ACK: master_ack <= ~sda_s[1];
          default: ;
        endcase
      end else if (scl_fall) begin
        unique case (state)
          ADDR: if (bitcnt == 4'd8) begin
            if (shreg[7:1] == {DEV_PREFIX, addr_pins}) begin
              sda_oe <= 1'b1;
              state  <= ADDR_ACK;
            end else begin
              state  <= IDLE;
            end
          end
          ADDR_ACK: begin
            bitcnt <= '0;
            if (shreg[0]) begin
              state  <= RD;
              shreg  <= cur_byte;
              sda_oe <= ~cur_byte[7];
            end else begin
              state  <= PTR;
              sda_oe <= 1'b0;
            end
          end
          PTR: if (bitcnt == 4'd8) begin
            ptr    <= shreg;
            sda_oe <= 1'b1;
            state  <= PTR_ACK;
          end
          PTR_ACK, WR_ACK: begin
            sda_oe <= 1'b0;
            bitcnt <= '0;
            state  <= WR;
          end
          WR: if (bitcnt == 4'd8) begin
            if (ptr < 8'd4) regs[ptr[1:0]] <= shreg;
            ptr    <= ptr + 8'd1;
            sda_oe <= 1'b1;
            state  <= WR_ACK;
          end
          RD: begin
            if (bitcnt == 4'd7) begin
              sda_oe <= 1'b0;
              ptr    <= ptr + 8'd1;
              state  <= RD_ACK;
            end else begin
              shreg  <= {shreg[6:0], 1'b0};
              sda_oe <= ~shreg[6];
              bitcnt <= bitcnt + 4'd1;
            end
          end
          RD_ACK: begin
            if (master_ack) begin
              state  <= RD;
              bitcnt <= '0;
              shreg  <= cur_byte;
              sda_oe <= ~cur_byte[7];
            end else begin
              state  <= IDLE;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
