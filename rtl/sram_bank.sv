// sram_bank: one 32 KiB SRAM bank of the processing element, built from
// eight 4 KiB macros with data bus gating.
//
// The bank's logic sits in the central logic region and drives a separate
// address/data bus to each macro. From the word address it activates exactly
// one macro per access; the buses of all other macros in the bank are tied
// low, so they see no toggling and their buffer columns stay quiet. Read data
// is taken from the macro that was selected in the previous cycle.
//
// Interface: PE bus slave (pe_pkg::bus_req_t / bus_rsp_t). A request is
// granted in the same cycle when all macros are awake (ready_o), and its
// response (rvalid, and rdata for a read) follows one cycle later. The
// power-state request pdret_i (A_PDRET encoding, see sram_macro) goes to all
// macros of the bank at once.
//
// From the paper: 32 KiB banks split into 4 KiB macros, one active macro per
// access chosen by address, unused macro buses tied low. This design's
// choices: the bus protocol and that the macro is chosen by the upper word
// address bits (addr[14:12]), so each macro holds a contiguous 4 KiB.
module sram_bank
  import pe_pkg::*;
#(
  parameter int unsigned MACROS        = MACROS_PER_BANK,      // 8
  parameter int unsigned MACRO_WORDS   = MACRO_BYTES / 4,      // 1024
  parameter int unsigned WAKEUP_CYCLES = SRAM_WAKEUP_CYCLES    // 10
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  bus_req_t   req_i,
  output bus_rsp_t   rsp_o,
  input  logic [1:0] pdret_i,
  output logic       ready_o
);

  localparam int unsigned WAW = $clog2(MACRO_WORDS);
  localparam int unsigned MSW = (MACROS > 1) ? $clog2(MACROS) : 1;

  logic [MACROS-1:0]   me, rdy;
  logic [WAW-1:0]      m_addr [MACROS];
  logic [31:0]         m_din  [MACROS];
  logic [3:0]          m_bm   [MACROS];
  logic [MACROS-1:0]   m_we;
  logic [31:0]         m_dout [MACROS];

  logic [MSW-1:0]      sel, sel_q;
  logic                take, rvalid_q, read_q;

  assign ready_o = &rdy;
  assign take    = req_i.req && ready_o;
  assign sel     = (MACROS > 1) ? MSW'(req_i.addr[2+WAW +: MSW]) : '0;

  // bus gating: only the addressed macro sees the request, the rest get zeros
  always_comb begin
    for (int m = 0; m < MACROS; m++) begin
      if (take && sel == MSW'(m)) begin
        me[m]     = 1'b1;
        m_we[m]   = req_i.we;
        m_addr[m] = req_i.addr[2 +: WAW];
        m_din[m]  = req_i.wdata;
        m_bm[m]   = req_i.be;
      end else begin
        me[m]     = 1'b0;
        m_we[m]   = 1'b0;
        m_addr[m] = '0;
        m_din[m]  = '0;
        m_bm[m]   = '0;
      end
    end
  end

  for (genvar m = 0; m < MACROS; m++) begin : g_macro
    sram_macro #(.WORDS(MACRO_WORDS), .WAKEUP_CYCLES(WAKEUP_CYCLES)) u_macro (
      .clk_i    (clk_i),
      .rst_ni   (rst_ni),
      .A_ME_I   (me[m]),
      .A_WE_I   (m_we[m]),
      .A_ADDR_I (m_addr[m]),
      .A_DIN_I  (m_din[m]),
      .A_BM_I   (m_bm[m]),
      .A_PDRET_I(pdret_i),
      .A_DR_O   (m_dout[m]),
      .A_RDY_O  (rdy[m])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      read_q   <= 1'b0;
      sel_q    <= '0;
    end else begin
      rvalid_q <= take;
      read_q   <= take && !req_i.we;
      if (take) sel_q <= sel;
    end
  end

  assign rsp_o.gnt    = take;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = read_q ? m_dout[sel_q] : 32'h0;

endmodule
