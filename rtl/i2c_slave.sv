// i2c_slave: I2C interface of the chip, a slave that bridges to the PE bus.
//
// An external I2C master reads and writes 32-bit words anywhere in the PE's
// address space (SRAM, timer, wake-up controller), e.g. to load a program
// and read results. SCL and SDA are sampled with the system clock through
// two-flop synchronizers, so the system clock must be at least ~10x the SCL
// rate; the slave never stretches the clock. SDA is open drain: sda_oe_o=1
// pulls the line low.
//
// Transactions (device address DEV_ADDR, bytes most significant first):
//   write : S [DEV_ADDR,W] A3 A2 A1 A0 D3 D2 D1 D0 [D3 .. D0 ...] P
//           every four data bytes are written as one word; the address
//           then advances by 4.
//   read  : S [DEV_ADDR,W] A3 A2 A1 A0 Sr [DEV_ADDR,R] D3 D2 D1 D0 ... P
//           the word at the current address is read over the bus when the
//           device is addressed for reading; after four bytes acknowledged
//           by the master the address advances by 4 and the next word is
//           fetched. The master ends with a NACK and a stop.
// Bus: PE bus master; one access at a time, started by the I2C traffic.
//
// The paper only names an I2C interface in the top-level domain, connected to
// the PE's crossbar; the protocol above is this design's choice.
module i2c_slave
  import pe_pkg::*;
#(
  parameter logic [6:0] DEV_ADDR = 7'h50
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     scl_i,
  input  logic     sda_i,
  output logic     sda_oe_o,
  output bus_req_t req_o,
  input  bus_rsp_t rsp_i
);

  typedef enum logic [2:0] {
    I_IDLE, I_ADDR, I_ACK_ADDR, I_RX, I_ACK_RX, I_TX, I_ACK_TX
  } istate_e;

  istate_e     state_q;
  logic [2:0]  scl_q, sda_q;
  logic        scl_rise, scl_fall, start_c, stop_c;
  logic [3:0]  bit_q;
  logic [7:0]  sh_q;
  logic [2:0]  bidx_q;      // byte index: 0..3 address, 4..7 data
  logic        rw_q;
  logic [31:0] addr_q, wdata_q, rdata_q;
  logic        bus_pend_q, bus_wait_q, bus_we_q, adv_q;
  logic        sda_ack_q;
  logic [7:0]  tx_byte;

  assign scl_rise = scl_q[1] && !scl_q[2];
  assign scl_fall = !scl_q[1] && scl_q[2];
  assign start_c  = scl_q[1] && scl_q[2] && !sda_q[1] && sda_q[2];
  assign stop_c   = scl_q[1] && scl_q[2] && sda_q[1] && !sda_q[2];
  assign tx_byte  = rdata_q[8*(3 - int'(bidx_q[1:0])) +: 8];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      scl_q <= '1; sda_q <= '1;
      state_q <= I_IDLE; bit_q <= '0; sh_q <= '0; bidx_q <= '0; rw_q <= 1'b0;
      addr_q <= '0; wdata_q <= '0; rdata_q <= '0;
      bus_pend_q <= 1'b0; bus_wait_q <= 1'b0; bus_we_q <= 1'b0; adv_q <= 1'b0;
      sda_oe_o <= 1'b0; sda_ack_q <= 1'b0;
    end else begin
      scl_q <= {scl_q[1:0], scl_i};
      sda_q <= {sda_q[1:0], sda_i};

      // bus side
      if (bus_pend_q && rsp_i.gnt) begin
        bus_pend_q <= 1'b0;
        bus_wait_q <= 1'b1;
      end
      if (bus_wait_q && rsp_i.rvalid) begin
        bus_wait_q <= 1'b0;
        if (!bus_we_q) rdata_q <= rsp_i.rdata;
        if (adv_q) addr_q <= addr_q + 32'd4;
        adv_q <= 1'b0;
      end

      // I2C side
      if (start_c) begin
        state_q  <= I_ADDR;
        bit_q    <= '0;
        sda_oe_o <= 1'b0;
      end else if (stop_c) begin
        state_q  <= I_IDLE;
        sda_oe_o <= 1'b0;
      end else if (scl_rise) begin
        unique case (state_q)
          I_ADDR, I_RX: begin
            sh_q  <= {sh_q[6:0], sda_q[1]};
            bit_q <= bit_q + 1'b1;
          end
          I_ACK_TX: sda_ack_q <= !sda_q[1];
          default: ;
        endcase
      end else if (scl_fall) begin
        unique case (state_q)
          I_ADDR: if (bit_q == 4'd8) begin
            if (sh_q[7:1] == DEV_ADDR) begin
              sda_oe_o <= 1'b1;
              rw_q     <= sh_q[0];
              state_q  <= I_ACK_ADDR;
              if (sh_q[0]) begin          // read: fetch the word now
                bus_pend_q <= 1'b1;
                bus_we_q   <= 1'b0;
              end
            end else begin
              state_q <= I_IDLE;          // not for us
            end
          end
          I_ACK_ADDR: begin
            bit_q <= '0;
            if (rw_q) begin
              state_q  <= I_TX;
              bidx_q   <= 3'd0;
              sda_oe_o <= !tx_byte[7];
              bit_q    <= 4'd1;
            end else begin
              state_q  <= I_RX;
              bidx_q   <= 3'd0;
              sda_oe_o <= 1'b0;
            end
          end
          I_RX: if (bit_q == 4'd8) begin
            sda_oe_o <= 1'b1;
            state_q  <= I_ACK_RX;
            if (bidx_q < 3'd4) begin
              addr_q <= {addr_q[23:0], sh_q};
            end else begin
              wdata_q <= {wdata_q[23:0], sh_q};
              if (bidx_q == 3'd7) begin
                bus_pend_q <= 1'b1;
                bus_we_q   <= 1'b1;
                adv_q      <= 1'b1;
              end
            end
            bidx_q <= (bidx_q == 3'd7) ? 3'd4 : bidx_q + 1'b1;
          end
          I_ACK_RX: begin
            sda_oe_o <= 1'b0;
            state_q  <= I_RX;
            bit_q    <= '0;
          end
          I_TX: begin
            if (bit_q == 4'd8) begin
              sda_oe_o <= 1'b0;           // master acknowledges
              state_q  <= I_ACK_TX;
            end else begin
              sda_oe_o <= !tx_byte[7 - bit_q[2:0]];
              bit_q    <= bit_q + 1'b1;
            end
          end
          I_ACK_TX: begin
            if (sda_ack_q) begin
              state_q  <= I_TX;
              sda_oe_o <= !tx_byte[7];
              bit_q    <= 4'd1;
            end else begin
              state_q  <= I_IDLE;         // NACK: wait for stop
              sda_oe_o <= 1'b0;
            end
          end
          default: ;
        endcase
      end

      // next byte of a read: on the master's ACK of the 4th byte fetch the next word
      if (!start_c && !stop_c && scl_rise && state_q == I_ACK_TX) begin
        if (!sda_q[1]) begin
          bidx_q <= {1'b0, bidx_q[1:0] + 2'd1};
          if (bidx_q[1:0] == 2'd3) begin
            addr_q     <= addr_q + 32'd4;
            bus_pend_q <= 1'b1;
            bus_we_q   <= 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    req_o.req   = bus_pend_q;
    req_o.addr  = addr_q;
    req_o.we    = bus_we_q;
    req_o.be    = 4'hF;
    req_o.wdata = wdata_q;
  end

endmodule
