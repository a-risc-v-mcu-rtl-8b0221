// tb_pe_xbar: self-checking test of the PE crossbar.
// Four masters issue random reads and writes to six slave models (random
// grant stalls, one-cycle response) and to an unmapped address. Each master
// uses its own address range, so a per-master reference model predicts every
// read. Also checked: the response arrives one cycle after the grant,
// contention for a slave actually occurs and every master is served under it,
// and at most one master is granted per slave and cycle.
module tb_pe_xbar;
  import pe_pkg::*;
  localparam int NM = 4, NS = 6, OPS = 400;

  logic clk = 0, rst_n = 0;
  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t s_req [NS];
  bus_rsp_t s_rsp [NS];
  logic [NS-1:0] s_gnt_en;
  logic [31:0] smem [logic [31:0]];
  int checks = 0, failures = 0, contention = 0;
  int served [NM];
  int done_cnt = 0;

  always #5 clk = ~clk;

  pe_xbar #(.NM(NM), .NS(NS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp),
    .s_req_o(s_req), .s_rsp_i(s_rsp));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave models
  for (genvar s = 0; s < NS; s++) begin : g_slv
    logic rv_q; logic [31:0] rd_q;
    assign s_rsp[s].gnt    = s_req[s].req && s_gnt_en[s];
    assign s_rsp[s].rvalid = rv_q;
    assign s_rsp[s].rdata  = rd_q;
    always @(posedge clk) begin
      rv_q <= rst_n && s_rsp[s].gnt;
      rd_q <= '0;
      if (rst_n && s_rsp[s].gnt) begin
        check(slave_of(s_req[s].addr) == s, "request routed to the right slave");
        if (s_req[s].we) smem[s_req[s].addr] = s_req[s].wdata;
        else rd_q <= smem.exists(s_req[s].addr) ? smem[s_req[s].addr] : 32'h0;
      end
      s_gnt_en[s] <= ($urandom_range(3) != 0);
    end
  end

  // contention and one-grant-per-slave checks
  always @(negedge clk) if (rst_n) begin
    #2;
    for (int s = 0; s <= NS; s++) begin
      int nreq, ngnt;
      nreq = 0; ngnt = 0;
      for (int m = 0; m < NM; m++) if (m_req[m].req && slave_of(m_req[m].addr) == s) begin
        nreq++; if (m_rsp[m].gnt) ngnt++;
      end
      if (nreq > 1) contention++;
      if (nreq > 0) check(ngnt <= 1, "at most one grant per slave");
    end
  end

  function automatic logic [31:0] pick_addr(int m, int s, int w);
    if (s < 4)       return (32'(s) << 15) | (32'(m) << 8) | (32'(w) << 2);
    else if (s == 4) return TIMER_BASE  | (32'(m) << 8) | (32'(w) << 2);
    else if (s == 5) return WAKEUP_BASE | (32'(m) << 8) | (32'(w) << 2);
    else             return 32'h8000_0000 | (32'(m) << 8) | (32'(w) << 2);
  endfunction

  for (genvar gm = 0; gm < NM; gm++) begin : g_mst
    initial begin
      logic [31:0] refm [logic [31:0]];
      m_req[gm] = '0;
      served[gm] = 0;
      @(posedge rst_n);
      for (int k = 0; k < OPS; k++) begin
        int s, w; logic [31:0] a, exp;
        // a quarter of the time all masters hammer bank 0
        s = ($urandom_range(3) == 0) ? 0 : $urandom_range(NS);
        w = $urandom_range(7);
        a = pick_addr(gm, s, w);
        @(negedge clk);
        m_req[gm].req = 1; m_req[gm].addr = a; m_req[gm].be = 4'hF;
        m_req[gm].we = 1'($urandom_range(1)); m_req[gm].wdata = $urandom;
        #2;
        while (!m_rsp[gm].gnt) begin @(negedge clk); #2; end
        if (m_req[gm].we && s < NS) refm[a] = m_req[gm].wdata;
        exp = (s < NS && !m_req[gm].we && refm.exists(a)) ? refm[a] : 32'h0;
        @(negedge clk);
        m_req[gm].req = 0;
        #1;
        check(m_rsp[gm].rvalid, "rvalid one cycle after grant");
        if (!m_req[gm].we || s == NS)
          check(m_rsp[gm].rdata == exp,
                $sformatf("master %0d read %h = %h, expected %h", gm, a, m_rsp[gm].rdata, exp));
        served[gm]++;
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done_cnt == NM);
    for (int m = 0; m < NM; m++) check(served[m] == OPS, "every master served");
    check(contention > 0, "contention for a slave occurred");
    $display("contention cycles: %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
