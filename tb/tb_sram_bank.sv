// tb_sram_bank: self-checking test of an SRAM bank with bus gating.
// Random reads and writes against a reference model, a one-cycle response
// latency, a check in every access cycle that exactly the addressed macro is
// enabled and all other macro buses are tied low, and a retention round trip
// in which grants stop until the macros are awake again.
module tb_sram_bank;
  import pe_pkg::*;
  localparam int unsigned MW    = 64;            // words per macro (reduced)
  localparam int unsigned NW    = 8 * MW;

  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [1:0] pdret = 2'b00;
  logic ready;
  int checks = 0, failures = 0, gated = 0;
  logic [31:0] ref_mem [NW];

  always #5 clk = ~clk;

  sram_bank #(.MACROS(8), .MACRO_WORDS(MW), .WAKEUP_CYCLES(10)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .pdret_i(pdret), .ready_o(ready));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // exactly the addressed macro active, the others' buses all zero
  always @(negedge clk) if (rst_n && req.req && rsp.gnt) begin
    int sel;
    sel = int'(req.addr[2 + $clog2(MW) +: 3]);
    for (int m = 0; m < 8; m++) begin
      if (m == sel) check(dut.me[m] == 1'b1, "addressed macro enabled");
      else begin
        check(dut.me[m] == 0 && dut.m_addr[m] == 0 && dut.m_din[m] == 0 && dut.m_bm[m] == 0,
              $sformatf("macro %0d bus tied low", m));
        gated++;
      end
    end
  end

  task automatic access(input logic w, input int word, input logic [31:0] d,
                        input logic [3:0] be, output logic [31:0] rd);
    @(negedge clk);
    req.req = 1; req.we = w; req.addr = 32'(word) << 2; req.wdata = d; req.be = be;
    #1;
    while (!rsp.gnt) @(negedge clk);
    // taken at the next edge; response one cycle later
    @(negedge clk); req.req = 0;
    check(rsp.rvalid, "response one cycle after grant");
    rd = rsp.rdata;
  endtask

  initial begin
    logic [31:0] rd;
    int n;
    req = '0;
    for (int i = 0; i < NW; i++) ref_mem[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 1500; k++) begin
      int a; logic [31:0] d; logic [3:0] be;
      a = $urandom_range(NW-1); d = $urandom; be = 4'($urandom);
      if ($urandom_range(1) != 0) begin
        access(1, a, d, be, rd);
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[a][8*b +: 8] = d[8*b +: 8];
      end else begin
        access(0, a, 0, 4'hF, rd);
        check(rd == ref_mem[a], $sformatf("read %0d: %h vs %h", a, rd, ref_mem[a]));
      end
    end
    // retention: no grant while the macros sleep and wake
    @(negedge clk); pdret = 2'b01;
    repeat (5) @(negedge clk);
    check(!ready, "bank not ready in retention");
    req.req = 1; req.we = 0; req.addr = 32'h10;
    #1 check(!rsp.gnt, "no grant in retention");
    pdret = 2'b00; n = 0;
    #1;
    while (!rsp.gnt) begin @(negedge clk); n++; end
    check(n == 10, $sformatf("grant %0d cycles after wake request", n));
    @(negedge clk); req.req = 0;
    check(rsp.rvalid && rsp.rdata == ref_mem[4], "data kept over retention");
    for (int a = 0; a < NW; a++) begin
      access(0, a, 0, 4'hF, rd);
      check(rd == ref_mem[a], $sformatf("retained %0d", a));
    end
    check(gated > 0, "bus gating observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
