// pe_xbar: the crossbar of the processing element.
//
// Connects NM bus masters (core instruction port, core data port, I2C
// bridge, MBIST) to the PE slaves (four SRAM banks, timer, wake-up
// controller). Every slave has its own round-robin arbiter, so masters that
// address different slaves proceed in the same cycle; only masters that
// address the same slave take turns. An address that hits no slave is
// granted at once and answered with zero data (there is no bus error).
//
// Timing: a master's request is granted combinationally in the cycle it wins
// arbitration and the slave accepts it; slaves answer exactly one cycle
// later, and the crossbar returns that answer to the master that was granted,
// from a one-entry record per master.
//
// From the paper: a crossbar between the CV32E40P instruction and data ports
// and the four SRAM banks, timer and wake-up controller. Its arbitration,
// protocol and address decode (pe_pkg::slave_of) are this design's choices.
module pe_xbar
  import pe_pkg::*;
#(
  parameter int unsigned NM = N_MASTERS,     // 4
  parameter int unsigned NS = N_SLAVES - 1   // 6 slave ports, plus the built-in empty slave
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t m_req_i [NM],
  output bus_rsp_t m_rsp_o [NM],
  output bus_req_t s_req_o [NS],
  input  bus_rsp_t s_rsp_i [NS]
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = $clog2(NS + 1);

  logic [SW-1:0] tgt [NM];          // slave addressed by each master
  logic [MW-1:0] rr_q [NS+1];       // round-robin pointer per slave
  logic [NM-1:0] win;               // master granted this cycle
  logic [MW-1:0] owner [NS+1];
  logic [NS:0]   owner_vld;
  bus_rsp_t      s_rsp [NS+1];
  logic          none_rvalid_q;

  logic [NM-1:0] pend_q;
  logic [SW-1:0] pend_slave_q [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) tgt[m] = SW'(slave_of(m_req_i[m].addr));
  end

  // per-slave round-robin arbitration
  always_comb begin
    for (int s = 0; s <= NS; s++) begin
      owner[s]     = '0;
      owner_vld[s] = 1'b0;
      for (int k = 0; k < NM; k++) begin
        logic [MW-1:0] m;
        m = MW'((int'(rr_q[s]) + k) % NM);
        if (!owner_vld[s] && m_req_i[m].req && tgt[m] == SW'(s)) begin
          owner[s]     = MW'(m);
          owner_vld[s] = 1'b1;
        end
      end
    end
  end

  // slave request forwarding
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_req_o[s]     = m_req_i[owner[s]];
      s_req_o[s].req = owner_vld[s];
      s_rsp[s]       = s_rsp_i[s];
    end
    // built-in slave for unmapped addresses
    s_rsp[NS].gnt    = owner_vld[NS];
    s_rsp[NS].rvalid = none_rvalid_q;
    s_rsp[NS].rdata  = '0;
  end

  // grants and responses back to the masters
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      win[m] = m_req_i[m].req && owner_vld[tgt[m]] && owner[tgt[m]] == MW'(m)
               && s_rsp[tgt[m]].gnt;
      m_rsp_o[m].gnt    = win[m];
      m_rsp_o[m].rvalid = pend_q[m] && s_rsp[pend_slave_q[m]].rvalid;
      m_rsp_o[m].rdata  = pend_q[m] ? s_rsp[pend_slave_q[m]].rdata : '0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q        <= '0;
      none_rvalid_q <= 1'b0;
      for (int m = 0; m < NM; m++) pend_slave_q[m] <= '0;
      for (int s = 0; s <= NS; s++) rr_q[s] <= '0;
    end else begin
      none_rvalid_q <= owner_vld[NS];
      for (int m = 0; m < NM; m++) begin
        pend_q[m] <= win[m];
        if (win[m]) pend_slave_q[m] <= tgt[m];
      end
      for (int s = 0; s <= NS; s++) begin
        if (owner_vld[s] && s_rsp[s].gnt)
          rr_q[s] <= MW'((int'(owner[s]) + 1) % NM);
      end
    end
  end

  // a slave answers every accepted request exactly one cycle later
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_resp_latency: assert property (@(posedge clk_i) disable iff (!rst_ni)
      pend_q[m] |-> m_rsp_o[m].rvalid)
      else $error("pe_xbar: slave did not answer master %0d in one cycle", m);
  end

endmodule
