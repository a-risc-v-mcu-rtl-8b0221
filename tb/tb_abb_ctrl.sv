// tb_abb_ctrl: self-checking test of the ABB regulation loop.
// A behavioural ring oscillator whose period grows with the reverse-bias
// code (period = 20 ns + 2 ns * code, reference clock 10 ns) closes the
// loop. Checked: lock is reached, at a code whose oscillator count lies in
// the band [target, target + HYST] (worked out from the oscillator formula,
// +-1 edge of sampling error); the 50 % target drops lock within four cycles and
// relocks at a stronger reverse bias; returning to the full target relocks
// at the first code; lock takes no more windows than the code steps plus
// the lock count allow.
module tb_abb_ctrl;
  localparam int WINDOW = 256, TARGET = 64, HYST = 4, LOCKW = 4;

  logic clk = 0, rst_n = 0, ro = 0, low = 0;
  logic [5:0] code;
  logic lock;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // ring oscillator: half period 10 ns + 1 ns per code step, built from 1 ns ticks
  int ro_cnt = 0;
  always #1 begin
    if (ro_cnt >= 9 + int'(code)) begin ro = ~ro; ro_cnt = 0; end
    else ro_cnt++;
  end

  abb_ctrl #(.WINDOW(WINDOW), .TARGET_FULL(TARGET), .HYST(HYST), .LOCK_WINDOWS(LOCKW), .CODE_W(6)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ro_i(ro), .target_low_i(low), .bias_code_o(code), .lock_o(lock));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit in_band(int c, int tgt);
    real edges;
    edges = (WINDOW - 1) * 10.0 / (20.0 + 2.0 * c);
    return edges >= tgt - 1 && edges <= tgt + HYST + 1;
  endfunction

  task automatic wait_lock(input int start_code, input string what, output int cyc);
    cyc = 0;
    while (!lock && cyc < 200 * WINDOW) begin @(posedge clk); cyc++; end
    check(lock, {what, ": locked"});
  endtask

  initial begin
    int cyc, c_full, c_low;
    repeat (3) @(negedge clk); rst_n = 1;
    wait_lock(0, "full target", cyc);
    c_full = int'(code);
    check(in_band(c_full, TARGET), $sformatf("full target code %0d in band", c_full));
    check(cyc <= (c_full + LOCKW + 2) * WINDOW, $sformatf("lock after %0d cycles", cyc));
    // hold lock for a while
    repeat (4 * WINDOW) @(posedge clk);
    check(lock && int'(code) == c_full, "lock and code stable");
    // 50 % target
    @(negedge clk); low = 1;
    repeat (4) @(posedge clk); #1;
    check(!lock, "lock dropped on target change");
    wait_lock(c_full, "50% target", cyc);
    c_low = int'(code);
    check(in_band(c_low, TARGET / 2), $sformatf("low target code %0d in band", c_low));
    check(c_low > c_full, "more reverse bias at the lower target");
    check(cyc <= (c_low - c_full + LOCKW + 2) * WINDOW, $sformatf("relock after %0d cycles", cyc));
    // back to full
    @(negedge clk); low = 0;
    repeat (4) @(posedge clk); #1;
    check(!lock, "lock dropped on return");
    wait_lock(c_low, "full target again", cyc);
    check(in_band(int'(code), TARGET), $sformatf("code %0d back in full band", code));
    $display("codes: full %0d, low %0d", c_full, c_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * WINDOW) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
