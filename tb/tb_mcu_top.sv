// tb_mcu_top: end-to-end test of the MCU at its full size (128 KiB SRAM).
// The testbench plays the parts that are not in the RTL: the core (bus
// accesses on the instruction and data ports, WFI through core_sleep_i),
// the I2C host, and the ring oscillator of the ABB speed monitor (period
// 20 ns + 2 ns per bias code step). It walks through:
//   program load over I2C and fetch through the instruction port,
//   data traffic to all four banks with concurrent instruction fetches,
//   an unmapped access, sleep woken by the timer and by an external IRQ,
//   retention with lowered ABB target and the PE clock switched to 5 MHz,
//   woken by the timer
//   (SRAM contents checked afterwards, SRAM wake-up time checked),
//   a bank powered down (its contents lost) and back,
//   and a full MBIST run over the 128 KiB.
// Every mechanism is counted; one that never happened counts as a failure.
module tb_mcu_top;
  import pe_pkg::*;
  localparam int Q = 10;

  logic clk = 0, clk_ref = 0, rst_n = 0;   // 50 MHz PLL clock, 5 MHz reference
  logic core_clk;
  int   n_core_edges = 0;
  bus_req_t ireq, dreq;
  bus_rsp_t irsp, drsp;
  logic core_sleep = 0, clk_en, clk_slow, abb_lock, ro = 0;
  logic [3:0] core_irq;
  logic [2:0] ext_irq = '0;
  pe_mode_e mode;
  logic [5:0] code;
  logic scl = 1, m_oe = 0, s_oe, sda;
  logic mb_start = 0, mb_busy, mb_done, mb_pass;
  logic [31:0] mb_fail;
  int checks = 0, failures = 0;
  logic [31:0] refm [logic [31:0]];

  // mechanism counters
  int n_i2c_wr = 0, n_i2c_rd = 0, n_fetch = 0, n_contention = 0, n_gated = 0;
  int n_sleep = 0, n_ret = 0, n_timer_wake = 0, n_ext_wake = 0, n_abb_relock = 0;
  int n_cg = 0, n_slow_edges = 0;
  int n_slow = 0, n_pd = 0, n_mbist = 0, n_unmapped = 0, n_sram_wake = 0;

  always #5 clk = ~clk;
  always #100 clk_ref = ~clk_ref;
  always @(posedge core_clk) n_core_edges++;
  // ring oscillator: half period 10 ns + 1 ns per code step, built from 1 ns ticks
  int ro_cnt = 0;
  always #1 begin
    if (ro_cnt >= 9 + int'(code)) begin ro = ~ro; ro_cnt = 0; end
    else ro_cnt++;
  end
  assign sda = !(m_oe || s_oe);

  mcu_top dut (
    .clk_pll_i(clk), .clk_ref_i(clk_ref), .rst_ni(rst_n), .core_clk_o(core_clk),
    .instr_req_i(ireq), .instr_rsp_o(irsp), .data_req_i(dreq), .data_rsp_o(drsp),
    .core_sleep_i(core_sleep), .core_clk_en_o(clk_en), .core_irq_o(core_irq),
    .ext_irq_i(ext_irq), .mode_o(mode), .clk_slow_o(clk_slow), .ro_i(ro),
    .abb_bias_code_o(code), .abb_lock_o(abb_lock),
    .scl_i(scl), .sda_i(sda), .sda_oe_o(s_oe),
    .mbist_start_i(mb_start), .mbist_busy_o(mb_busy), .mbist_done_o(mb_done),
    .mbist_pass_o(mb_pass), .mbist_fail_addr_o(mb_fail));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // observers: contention between the two core ports, bus gating in the banks
  always @(posedge clk) if (rst_n) begin
    if (ireq.req && dreq.req && slave_of(ireq.addr) == slave_of(dreq.addr)) n_contention++;
    if (dut.g_bank[0].u_bank.take && dut.g_bank[0].u_bank.me != 8'hFF &&
        $countones(dut.g_bank[0].u_bank.me) == 1) n_gated++;
    if (clk_slow) n_slow++;
  end

  // ---------------- core port models ----------------
  task automatic dbus(input logic w, input logic [31:0] a, input logic [31:0] d, output logic [31:0] rd);
    check(clk_en, "core accesses only with its clock enabled");
    @(negedge clk);
    dreq.req = 1; dreq.we = w; dreq.addr = a; dreq.wdata = d; dreq.be = 4'hF;
    #2;
    while (!drsp.gnt) begin @(negedge clk); #2; end
    @(negedge clk); dreq.req = 0; #1;
    check(drsp.rvalid, "data response one cycle after grant");
    rd = drsp.rdata;
  endtask

  task automatic dwrite(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] rd;
    dbus(1, a, d, rd);
    refm[a] = d;
  endtask

  task automatic dread_check(input logic [31:0] a, input logic [31:0] exp, input string what);
    logic [31:0] rd;
    dbus(0, a, 0, rd);
    check(rd == exp, $sformatf("%s: [%h] = %h, expected %h", what, a, rd, exp));
  endtask

  task automatic fetch(input logic [31:0] a, output logic [31:0] rd);
    @(negedge clk);
    ireq.req = 1; ireq.we = 0; ireq.addr = a; ireq.be = 4'hF; ireq.wdata = 0;
    #2;
    while (!irsp.gnt) begin @(negedge clk); #2; end
    @(negedge clk); ireq.req = 0; #1;
    check(irsp.rvalid, "fetch response one cycle after grant");
    rd = irsp.rdata;
    n_fetch++;
  endtask

  task automatic wfi_until_awake();
    @(negedge clk); core_sleep = 1;
    @(negedge clk);
    check(!clk_en, "core clock gated after WFI");
    while (!clk_en) @(negedge clk);
    core_sleep = 0;
  endtask

  // ---------------- I2C host ----------------
  task automatic wq(int n = 1); repeat (n * Q) @(posedge clk); endtask
  task automatic i2c_start(); m_oe = 0; wq(); scl = 1; wq(); m_oe = 1; wq(); scl = 0; wq(); endtask
  task automatic i2c_stop();  m_oe = 1; wq(); scl = 1; wq(); m_oe = 0; wq(2); endtask
  task automatic i2c_wb(input logic [7:0] b);
    logic ack;
    for (int i = 7; i >= 0; i--) begin m_oe = !b[i]; wq(); scl = 1; wq(2); scl = 0; wq(); end
    m_oe = 0; wq(); scl = 1; wq(); ack = !sda; wq(); scl = 0; wq();
    check(ack, "I2C byte acknowledged");
  endtask
  task automatic i2c_rb(input logic ack, output logic [7:0] b);
    m_oe = 0;
    for (int i = 7; i >= 0; i--) begin wq(); scl = 1; wq(); b[i] = sda; wq(); scl = 0; wq(); end
    m_oe = ack; wq(); scl = 1; wq(2); scl = 0; wq(); m_oe = 0;
  endtask
  task automatic i2c_write(input logic [31:0] a, input logic [31:0] d);
    i2c_start(); i2c_wb({7'h50, 1'b0});
    for (int i = 3; i >= 0; i--) i2c_wb(a[8*i +: 8]);
    for (int i = 3; i >= 0; i--) i2c_wb(d[8*i +: 8]);
    i2c_stop();
    refm[a] = d; n_i2c_wr++;
  endtask
  task automatic i2c_read(input logic [31:0] a, output logic [31:0] d);
    i2c_start(); i2c_wb({7'h50, 1'b0});
    for (int i = 3; i >= 0; i--) i2c_wb(a[8*i +: 8]);
    i2c_start(); i2c_wb({7'h50, 1'b1});
    for (int i = 3; i >= 0; i--) begin logic [7:0] b; i2c_rb(i != 0, b); d[8*i +: 8] = b; end
    i2c_stop();
    n_i2c_rd++;
  endtask

  // ---------------- the run ----------------
  initial begin
    logic [31:0] rd;
    logic [31:0] prog [8];
    int edges0;
    time t_a;
    int code_full;
    time t_sram, t_en;
    ireq = '0; dreq = '0;
    repeat (5) @(negedge clk); rst_n = 1;

    // ABB locks at the full performance target
    wait (abb_lock);
    code_full = int'(code);
    $display("ABB locked at code %0d", code_full);

    // program load over I2C into bank 2, fetched by the instruction port
    foreach (prog[k]) begin prog[k] = $urandom; i2c_write(32'h0001_0000 + 4 * k, prog[k]); end
    foreach (prog[k]) begin fetch(32'h0001_0000 + 4 * k, rd); check(rd == prog[k], "fetch of I2C-loaded word"); end
    i2c_read(32'h0001_0008, rd);
    check(rd == prog[2], "I2C read-back");

    // data traffic to all banks, fetches in parallel
    fork
      for (int k = 0; k < 400; k++)
        dwrite(32'($urandom_range(32767)) << 2, $urandom);
      for (int k = 0; k < 400; k++) begin
        fetch(32'h0001_0000 + 4 * (k % 8), rd);
        check(rd == prog[k % 8], "fetch during data traffic");
      end
    join
    foreach (refm[a]) dread_check(a, refm[a], "data read-back");

    // unmapped address reads zero
    dread_check(32'h2000_0000, 32'h0, "unmapped"); n_unmapped++;

    // ---- sleep, woken by the timer ----
    dwrite(TIMER_BASE + 8, 32'd300); refm.delete(TIMER_BASE + 8);
    dwrite(TIMER_BASE + 4, 32'd0);   refm.delete(TIMER_BASE + 4);
    dwrite(WAKEUP_BASE + 4, 32'h3);  refm.delete(WAKEUP_BASE + 4);   // timer + ext_irq[0]
    dwrite(WAKEUP_BASE + 0, 32'h0);  refm.delete(WAKEUP_BASE + 0);   // sleep
    dwrite(TIMER_BASE + 0, 32'h3);   refm.delete(TIMER_BASE + 0);
    @(negedge clk); core_sleep = 1;
    @(negedge clk);
    check(mode == PE_SLEEP && !clk_en, "sleep entered");
    check(dut.pdret[0] == PDRET_ACTIVE, "SRAM stays on in sleep");
    @(negedge clk); edges0 = n_core_edges;
    while (!clk_en) @(negedge clk);
    check(n_core_edges == edges0, "no processor clock edges in sleep");
    n_cg++;
    core_sleep = 0;
    check(core_irq[0], "timer interrupt wakes and is forwarded"); n_sleep++; n_timer_wake++;
    dwrite(TIMER_BASE + 0, 32'h0);   refm.delete(TIMER_BASE + 0);
    dwrite(TIMER_BASE + 12, 32'h1);  refm.delete(TIMER_BASE + 12);
    dwrite(WAKEUP_BASE + 8, 32'hF);  refm.delete(WAKEUP_BASE + 8);

    // ---- sleep, woken by an external interrupt ----
    fork
      wfi_until_awake();
      begin repeat (100) @(negedge clk); ext_irq[0] = 1; @(negedge clk); ext_irq[0] = 0; end
    join
    check(core_irq[1], "external interrupt wakes"); n_sleep++; n_ext_wake++;
    dwrite(WAKEUP_BASE + 8, 32'hF);  refm.delete(WAKEUP_BASE + 8);

    // ---- retention with lowered ABB target and 5 MHz wake-up clock ----
    dwrite(TIMER_BASE + 8, 32'd1500); refm.delete(TIMER_BASE + 8);   // 300 us at 5 MHz
    dwrite(TIMER_BASE + 4, 32'd0);     refm.delete(TIMER_BASE + 4);
    dwrite(WAKEUP_BASE + 0, 32'h7);    refm.delete(WAKEUP_BASE + 0);
    dwrite(TIMER_BASE + 0, 32'h3);     refm.delete(TIMER_BASE + 0);
    @(negedge clk); core_sleep = 1;
    @(negedge clk);
    check(mode == PE_RETENTION && dut.slow_req, "retention entered, slow clock requested");
    for (int b = 0; b < 4; b++) check(dut.pdret[b] == PDRET_RETENTION, "bank in retention");
    @(negedge clk);
    check(dut.bank_ready == 4'h0 && dut.g_bank[1].u_bank.rsp_o.rdata == 0, "SRAM periphery off");
    while (!clk_slow) @(negedge clk);
    // the PE clock now runs at 5 MHz: period 200 ns
    edges0 = n_core_edges;
    @(posedge dut.clk_pe); t_a = $time;
    @(posedge dut.clk_pe);
    check($time - t_a == 200, $sformatf("PE clock period %0t in retention, expected 200 ns", $time - t_a));
    if ($time - t_a == 200) n_slow_edges++;
    wait (abb_lock);
    check(n_core_edges == edges0, "no processor clock edges in retention");
    check(int'(code) > code_full, $sformatf("more reverse bias in retention (%0d > %0d)", code, code_full));
    if (int'(code) > code_full) n_abb_relock++;
    while (dut.pdret[0] != PDRET_ACTIVE) @(negedge clk);
    t_sram = $time;
    check(abb_lock && int'(code) <= code_full + 1, "SRAM wakes after ABB relock at full target");
    if (abb_lock) n_abb_relock++;
    while (!clk_en) @(negedge clk);
    t_en = $time;
    core_sleep = 0;
    check(int'((t_en - t_sram) / 10) == int'(SRAM_WAKEUP_CYCLES) + 1,
          $sformatf("core clock %0d cycles after SRAM power-up (200 ns wake-up + 1)", (t_en - t_sram) / 10));
    n_ret++; n_timer_wake++; n_sram_wake++;
    dwrite(TIMER_BASE + 0, 32'h0);   refm.delete(TIMER_BASE + 0);
    dwrite(TIMER_BASE + 12, 32'h1);  refm.delete(TIMER_BASE + 12);
    dwrite(WAKEUP_BASE + 8, 32'hF);  refm.delete(WAKEUP_BASE + 8);
    foreach (refm[a]) dread_check(a, refm[a], "retained over retention");

    // ---- power-down of bank 3 ----
    dwrite(WAKEUP_BASE + 12, 32'h8); refm.delete(WAKEUP_BASE + 12);
    @(negedge clk);
    check(dut.pdret[3] == PDRET_POWERDOWN, "bank 3 powered down");
    dwrite(WAKEUP_BASE + 12, 32'h0); refm.delete(WAKEUP_BASE + 12);
    n_pd++;
    foreach (refm[a]) begin
      if (a[16:15] == 2'd3) dread_check(a, 32'h0, "bank 3 contents lost");
      else                  dread_check(a, refm[a], "other banks kept");
    end

    // ---- MBIST over the whole 128 KiB ----
    @(negedge clk); mb_start = 1; @(negedge clk); mb_start = 0;
    wait (mb_done);
    check(mb_pass, $sformatf("MBIST pass (fail address %h)", mb_fail));
    n_mbist++;

    // every mechanism happened
    check(n_i2c_wr > 0 && n_i2c_rd > 0, "I2C write and read");
    check(n_fetch > 0, "instruction fetches");
    check(n_contention > 0, "instruction/data contention on a bank");
    check(n_gated > 0, "bus gating");
    check(n_sleep > 0, "sleep mode");
    check(n_ret > 0, "retention mode");
    check(n_timer_wake > 0 && n_ext_wake > 0, "timer and external wake-ups");
    check(n_abb_relock >= 2, "ABB relock at lowered and full target");
    check(n_slow > 0 && n_slow_edges > 0, "PE switched to the 5 MHz clock");
    check(n_cg > 0, "processor clock gated");
    check(n_pd > 0, "bank power-down");
    check(n_sram_wake > 0, "SRAM wake-up");
    check(n_mbist > 0, "MBIST run");
    check(n_unmapped > 0, "unmapped access");
    $display("counts: i2c_wr=%0d i2c_rd=%0d fetch=%0d contention=%0d gated=%0d sleep=%0d ret=%0d",
             n_i2c_wr, n_i2c_rd, n_fetch, n_contention, n_gated, n_sleep, n_ret);
    $display("counts: timer_wake=%0d ext_wake=%0d abb_relock=%0d slow=%0d pd=%0d mbist=%0d",
             n_timer_wake, n_ext_wake, n_abb_relock, n_slow, n_pd, n_mbist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
