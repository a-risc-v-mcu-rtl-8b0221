// tb_sram_macro: self-checking test of the SRAM macro model.
// Random byte-masked writes and reads against a reference array; retention
// keeps the data and clamps the output to zero; power-down loses it; the
// wake-up from either state takes exactly WAKEUP_CYCLES cycles, during which
// accesses are ignored.
module tb_sram_macro;
  localparam int unsigned WORDS = 64;
  localparam int unsigned WAKE  = 10;

  logic        clk = 0, rst_n = 0;
  logic        me = 0, we = 0;
  logic [5:0]  addr = '0;
  logic [31:0] din = '0, dout;
  logic [3:0]  bm = '0;
  logic [1:0]  pdret = 2'b00;
  logic        rdy;
  int          checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  always #5 clk = ~clk;

  sram_macro #(.WORDS(WORDS), .WAKEUP_CYCLES(WAKE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .A_ME_I(me), .A_WE_I(we), .A_ADDR_I(addr),
    .A_DIN_I(din), .A_BM_I(bm), .A_PDRET_I(pdret), .A_DR_O(dout), .A_RDY_O(rdy));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(input int a, input logic [31:0] d, input logic [3:0] m);
    @(negedge clk); me = 1; we = 1; addr = 6'(a); din = d; bm = m;
    @(negedge clk); me = 0; we = 0;
    for (int b = 0; b < 4; b++) if (m[b]) ref_mem[a][8*b +: 8] = d[8*b +: 8];
  endtask

  task automatic read_check(input int a, input logic [31:0] exp);
    @(negedge clk); me = 1; we = 0; addr = 6'(a);
    @(negedge clk); me = 0;
    check(dout === exp, $sformatf("read [%0d] = %h, expected %h", a, dout, exp));
  endtask

  task automatic wake_and_count(output int n);
    @(negedge clk); pdret = 2'b00; n = 0;
    while (!rdy) begin @(negedge clk); n++; end
  endtask

  initial begin
    int n;
    for (int i = 0; i < WORDS; i++) ref_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(rdy, "ready after reset");
    read_check(5, 32'h0);   // never written reads as zero
    for (int i = 0; i < WORDS; i++) write(i, $urandom, 4'hF);
    for (int k = 0; k < 200; k++) write($urandom_range(WORDS-1), $urandom, 4'($urandom));
    for (int i = 0; i < WORDS; i++) read_check(i, ref_mem[i]);

    // retention: output clamped, no access, data kept
    read_check(7, ref_mem[7]);
    @(negedge clk); pdret = 2'b01;
    @(negedge clk);
    check(!rdy, "not ready in retention");
    check(dout == 32'h0, "output pulled down in retention");
    me = 1; we = 1; addr = 6'd3; din = ~ref_mem[3]; bm = 4'hF;  // must be ignored
    @(negedge clk); me = 0; we = 0;
    wake_and_count(n);
    check(n == WAKE, $sformatf("wake-up from retention took %0d cycles, expected %0d", n, WAKE));
    for (int i = 0; i < WORDS; i++) read_check(i, ref_mem[i]);

    // access during the wake-up window is ignored
    @(negedge clk); pdret = 2'b01;
    @(negedge clk); pdret = 2'b00;
    @(negedge clk); me = 1; we = 1; addr = 6'd9; din = ~ref_mem[9]; bm = 4'hF;
    @(negedge clk); me = 0; we = 0;
    while (!rdy) @(negedge clk);
    read_check(9, ref_mem[9]);

    // power-down: contents lost
    @(negedge clk); pdret = 2'b10;
    @(negedge clk);
    check(!rdy && dout == 0, "power-down: not ready, output low");
    wake_and_count(n);
    check(n == WAKE, $sformatf("wake-up from power-down took %0d cycles", n));
    for (int i = 0; i < WORDS; i++) read_check(i, 32'h0);
    write(4, 32'hA5A5_1234, 4'b0011);
    read_check(4, 32'h0000_1234);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
