// tb_wakeup_ctrl: self-checking test of the wake-up and IRQ controller.
// Sleep entry and exit, retention entry (SRAM banks to retention, a masked
// bank to power-down, lowered ABB target, slow clock), and the retention
// wake-up order: ABB target restored and lock awaited, then SRAM powered up,
// then the core clock enabled once the banks are ready. Simple models stand
// in for the ABB lock (LOCK_DLY cycles after the target rises) and the SRAM
// wake-up (10 cycles).
module tb_wakeup_ctrl;
  import pe_pkg::*;
  localparam int LOCK_DLY = 20, SRAM_WAKE = 10;

  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [3:0] irq = '0, core_irq;
  logic core_sleep = 0, clk_en, abb_low, abb_lock, clk_slow;
  logic [1:0] pdret [4];
  logic [3:0] ready;
  pe_mode_e mode;
  int checks = 0, failures = 0;
  int lock_cnt;
  int wake_cnt [4];

  always #5 clk = ~clk;

  wakeup_ctrl #(.NIRQ(4), .NBANK(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .irq_i(irq),
    .core_irq_o(core_irq), .core_sleep_i(core_sleep), .core_clk_en_o(clk_en),
    .sram_pdret_o(pdret), .sram_ready_i(ready), .abb_target_low_o(abb_low),
    .abb_lock_i(abb_lock), .clk_slow_o(clk_slow), .mode_o(mode));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ABB lock model: lock lost when the target changes, regained later
  logic abb_low_q;
  always @(posedge clk) begin
    abb_low_q <= abb_low;
    if (!rst_n || abb_low != abb_low_q) begin lock_cnt <= 0; abb_lock <= 0; end
    else if (lock_cnt == LOCK_DLY) abb_lock <= 1;
    else lock_cnt <= lock_cnt + 1;
  end
  // SRAM bank model
  for (genvar b = 0; b < 4; b++) begin : g_b
    always @(posedge clk) begin
      if (!rst_n) begin ready[b] <= 1; wake_cnt[b] <= 0; end
      else if (pdret[b] != 2'b00) begin ready[b] <= 0; wake_cnt[b] <= 0; end
      else if (!ready[b]) begin
        wake_cnt[b] <= wake_cnt[b] + 1;
        if (wake_cnt[b] == SRAM_WAKE - 1) ready[b] <= 1;
      end
    end
  end

  // order rules checked every cycle
  always @(negedge clk) if (rst_n) begin
    if (clk_en) check(&(ready | 4'b1000), "core clock only with all used banks ready");
    if (pdret[0] == 2'b00 && mode == PE_RETENTION) check(abb_lock && !abb_low, "SRAM wakes only after ABB lock");
    check(pdret[3] == 2'b10 || dut.pd_q[3] == 0, "masked bank powered down");
  end

  task automatic wr(input logic [4:0] off, input logic [31:0] d);
    @(negedge clk);
    req.req = 1; req.we = 1; req.addr = WAKEUP_BASE | 32'(off); req.wdata = d; req.be = 4'hF;
    @(negedge clk); req.req = 0;
  endtask

  task automatic rdchk(input logic [4:0] off, input logic [31:0] exp);
    @(negedge clk);
    req.req = 1; req.we = 0; req.addr = WAKEUP_BASE | 32'(off); req.be = 4'hF;
    @(negedge clk); req.req = 0;
    check(rsp.rvalid && rsp.rdata == exp, $sformatf("reg %h = %h, expected %h", off, rsp.rdata, exp));
  endtask

  initial begin
    time t0;
    int n;
    req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (LOCK_DLY + 3) @(negedge clk);
    wr(5'h04, 32'h1);  rdchk(5'h04, 32'h1);           // enable timer irq only
    // ---- sleep ----
    wr(5'h00, 32'h0);
    core_sleep = 1;
    @(negedge clk);
    check(!clk_en && mode == PE_SLEEP, "sleep: core clock gated");
    check(pdret[0] == 2'b00 && !abb_low && !clk_slow, "sleep: SRAM on, ABB and clock unchanged");
    irq[1] = 1; repeat (3) @(negedge clk); irq[1] = 0;
    check(!clk_en, "disabled interrupt does not wake");
    irq[0] = 1; @(negedge clk); irq[0] = 0;
    @(negedge clk);
    check(clk_en && mode == PE_ACTIVE, "sleep: woken by enabled interrupt");
    check(core_irq == 4'b0001, "interrupt forwarded to the core");
    @(negedge clk);
    check(clk_en, "no re-entry while an interrupt is pending");
    core_sleep = 0;
    rdchk(5'h08, 32'h3);
    wr(5'h08, 32'h3);  rdchk(5'h08, 32'h0);
    // ---- retention ----
    wr(5'h0C, 32'h8);                                  // bank 3 powered down
    wr(5'h00, 32'h7);                                  // retention, ABB low, 5 MHz
    core_sleep = 1;
    @(negedge clk);
    check(!clk_en && mode == PE_RETENTION, "retention entered");
    check(pdret[0] == 2'b01 && pdret[1] == 2'b01 && pdret[2] == 2'b01, "banks in retention");
    check(pdret[3] == 2'b10, "bank 3 powered down");
    check(abb_low && clk_slow, "ABB target lowered, slow clock requested");
    rdchk(5'h10, 32'd2);
    repeat (50) @(negedge clk);
    check(!clk_en, "stays in retention");
    irq[0] = 1; @(negedge clk); irq[0] = 0;
    t0 = $time;
    @(negedge clk); @(negedge clk);
    check(!abb_low && !clk_slow && pdret[0] == 2'b01, "ABB target restored first, SRAM still retained");
    while (pdret[0] != 2'b00) @(negedge clk);
    n = 0;
    while (!clk_en) begin @(negedge clk); n++; end
    check(n == SRAM_WAKE + 1, $sformatf("core clock %0d cycles after SRAM power-up", n));
    check(int'(($time - t0) / 10) >= LOCK_DLY + SRAM_WAKE, "wake-up waited for lock and SRAM");
    core_sleep = 0;
    wr(5'h08, 32'h1);
    // ---- retention without the ABB/clock options ----
    wr(5'h00, 32'h1);
    core_sleep = 1;
    @(negedge clk);
    check(mode == PE_RETENTION && !abb_low && !clk_slow, "retention without options");
    irq[0] = 1; @(negedge clk); irq[0] = 0;
    while (!clk_en) @(negedge clk);
    check(mode == PE_ACTIVE, "back to active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
