// tb_clk_switch: self-checking test of the glitch-free clock switch and the
// processor clock gate.
// Switches between a 50 MHz and a ~5 MHz clock (unrelated phase) many times at random moments
// and measures every high and low phase of the output: none may be shorter
// than the half period of the fast clock (10 ns). After each switch the
// output period must settle to the selected clock's period, and the two
// clock enables may never be on together. The clock gate
// must pass no edge while disabled, pass every edge while enabled, and never
// produce a shortened pulse.
module tb_clk_switch;
  logic fast = 0, slow = 0, rst_n = 0, sel = 0, clk, slow_act;
  logic en = 0, gclk;
  int checks = 0, failures = 0, n_switch = 0;
  time t_rise = 0, t_fall = 0;
  int  g_edges = 0;

  always #10 fast = ~fast;     // 50 MHz
  always #97 slow = ~slow;     // about 5 MHz, not phase-locked to the fast clock

  clk_switch dut (.clk_fast_i(fast), .clk_slow_i(slow), .rst_ni(rst_n), .sel_slow_i(sel),
                  .clk_o(clk), .slow_active_o(slow_act));
  clk_gate   cg  (.clk_i(fast), .rst_ni(rst_n), .en_i(en), .clk_o(gclk));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // never both clocks enabled at once
  always @(fast or slow) if (rst_n) #0.1
    if (dut.fast_en_q && dut.slow_en_q) check(1'b0, "both clocks enabled");
  always @(posedge clk) begin
    t_rise = $time;
    if (rst_n && t_fall > 0) check($time - t_fall >= 10, $sformatf("low phase %0t", $time - t_fall));
  end
  always @(negedge clk) begin
    t_fall = $time;
    if (rst_n) check($time - t_rise >= 10, $sformatf("high phase %0t", $time - t_rise));
  end
  time t_grise = 0;
  always @(posedge gclk) begin g_edges++; t_grise = $time; end
  always @(negedge gclk) check($time - t_grise == 10, "gated clock pulse has full width");

  task automatic measure(input time exp);
    time a;
    repeat (3) @(posedge clk);
    a = $time; @(posedge clk);
    check($time - a == exp, $sformatf("period %0t, expected %0t", $time - a, exp));
  endtask

  initial begin
    int e0;
    repeat (3) @(posedge fast); rst_n = 1;
    measure(20);
    for (int k = 0; k < 20; k++) begin
      #($urandom_range(5000, 1)) sel = ~sel; n_switch++;
      wait (slow_act == sel);
      measure(sel ? 194 : 20);
    end
    // clock gate
    @(posedge fast); #3 en = 0;
    repeat (2) @(posedge fast);
    e0 = g_edges;
    repeat (10) @(posedge fast);
    check(g_edges == e0, "no gated edges while disabled");
    #3 en = 1;
    @(posedge fast); #1;     // first gated edge: enable taken at the falling edge before
    e0 = g_edges;
    repeat (10) @(posedge fast);
    #1 check(g_edges == e0 + 10, $sformatf("%0d gated edges in 10 cycles", g_edges - e0));
    check(n_switch == 20, "switches done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
