// tb_pe_timer: self-checking test of the PE timer.
// Register write/read-back, interrupt period of CMP+1 cycles measured over
// several periods, write-1-to-clear of the pending flag, interrupt enable,
// and that a disabled timer holds its count.
module tb_pe_timer;
  import pe_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic irq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe_timer dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .irq_o(irq));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus(input logic w, input logic [3:0] off, input logic [31:0] d,
                     output logic [31:0] rd);
    @(negedge clk);
    req.req = 1; req.we = w; req.addr = TIMER_BASE | 32'(off); req.wdata = d; req.be = 4'hF;
    #1 check(rsp.gnt, "timer always grants");
    @(negedge clk); req.req = 0;
    check(rsp.rvalid, "timer answers after one cycle");
    rd = rsp.rdata;
  endtask

  initial begin
    logic [31:0] rd;
    time t0, t1;
    int per;
    req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    bus(1, 4'h8, 32'd24, rd);           // CMP
    bus(0, 4'h8, 0, rd); check(rd == 24, "CMP read-back");
    bus(1, 4'h4, 32'd0, rd);            // COUNT = 0
    bus(0, 4'h4, 0, rd); check(rd == 0, "COUNT held while disabled");
    repeat (5) @(negedge clk);
    bus(0, 4'h4, 0, rd); check(rd == 0, "disabled timer does not count");
    bus(1, 4'h0, 32'h3, rd);            // enable + irq enable
    bus(0, 4'h0, 0, rd); check(rd == 3, "CTRL read-back");
    // measure the period between interrupts
    wait (irq); t0 = $time;
    for (int p = 0; p < 4; p++) begin
      bus(1, 4'hC, 32'h1, rd);            // clear pending
      check(!irq, "pending cleared");
      wait (irq); t1 = $time;
      per = int'((t1 - t0) / 10);
      check(per == 25, $sformatf("interrupt period %0d cycles, expected 25", per));
      t0 = t1;
    end
    bus(0, 4'hC, 0, rd); check(rd == 1, "STATUS shows pending");
    bus(1, 4'h0, 32'h1, rd);            // irq disabled: pending but no irq
    #1 check(!irq, "interrupt masked by enable");
    bus(1, 4'h0, 32'h0, rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
