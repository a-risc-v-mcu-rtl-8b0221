// pe_timer: memory-mapped timer of the processing element.
//
// A 32-bit counter that counts PE clock cycles while enabled. When it reaches
// the compare value it restarts from zero and sets its pending flag, which
// (if enabled) is the timer interrupt; the wake-up controller uses it to end
// sleep or retention. The timer keeps counting while the core's clock is
// gated.
//
// Registers (word offsets from the timer base):
//   0x0 CTRL   [0] enable, [1] interrupt enable
//   0x4 COUNT  current count (writable)
//   0x8 CMP    compare value
//   0xC STATUS [0] pending, write 1 to clear
// Bus: PE bus slave, always grants, answers one cycle later.
//
// The paper only names the timer; everything here is this design's choice.
module pe_timer
  import pe_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t req_i,
  output bus_rsp_t rsp_o,
  output logic     irq_o
);

  logic        en_q, irq_en_q, pend_q;
  logic [31:0] cnt_q, cmp_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic [1:0]  reg_idx;
  logic        wr, match;

  assign reg_idx = req_i.addr[3:2];
  assign wr      = req_i.req && req_i.we;
  assign match   = en_q && (cnt_q == cmp_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0; irq_en_q <= 1'b0; pend_q <= 1'b0;
      cnt_q <= '0;  cmp_q <= '1;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      if (match)     cnt_q <= '0;
      else if (en_q) cnt_q <= cnt_q + 1'b1;
      if (match) pend_q <= 1'b1;

      if (wr) begin
        unique case (reg_idx)
          2'd0: begin en_q <= req_i.wdata[0]; irq_en_q <= req_i.wdata[1]; end
          2'd1: cnt_q <= req_i.wdata;
          2'd2: cmp_q <= req_i.wdata;
          2'd3: if (req_i.wdata[0]) pend_q <= match;
        endcase
      end

      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        unique case (reg_idx)
          2'd0: rdata_q <= {30'b0, irq_en_q, en_q};
          2'd1: rdata_q <= cnt_q;
          2'd2: rdata_q <= cmp_q;
          2'd3: rdata_q <= {31'b0, pend_q};
        endcase
      end else begin
        rdata_q <= '0;
      end
    end
  end

  assign rsp_o.gnt    = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign irq_o        = pend_q && irq_en_q;

endmodule
