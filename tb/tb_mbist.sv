// tb_mbist: self-checking test of the March C- MBIST engine.
// The engine runs against a bus memory model with random grant stalls.
// Checked: a fault-free memory passes; March C- (w0 | r0 w1 | r1 w0 |
// r0 w1 | r1 w0 | r0) issues 5 writes and 5 reads per word; elements 3 and 4
// run from the top address down (2*(WORDS-1) downward address steps, plus
// the two restarts at address 0 after elements 0 and 1); a bit stuck at 1 and a coupling-free stuck-at-0 are each
// found and their word address reported.
module tb_mbist;
  import pe_pkg::*;
  localparam int WORDS = 256;
  localparam logic [31:0] BASE = 32'h0000_1000;

  logic clk = 0, rst_n = 0, start = 0, busy, done, pass;
  logic [31:0] fail_addr;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [31:0] mem [WORDS];
  logic gnt_en = 1, rv_q = 0;
  logic [31:0] rd_q = 0;
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, n_down = 0;
  int stuck_addr = -1, stuck_bit = 0;
  logic stuck_val = 0;
  logic [31:0] last_addr = 0;

  always #5 clk = ~clk;

  mbist #(.BASE(BASE), .WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .busy_o(busy), .done_o(done),
    .pass_o(pass), .fail_addr_o(fail_addr), .req_o(req), .rsp_i(rsp));

  assign rsp.gnt    = req.req && gnt_en;
  assign rsp.rvalid = rv_q;
  assign rsp.rdata  = rd_q;

  always @(posedge clk) begin
    gnt_en <= ($urandom_range(3) != 0);
    rv_q   <= rsp.gnt;
    if (rsp.gnt) begin
      int w;
      w = int'((req.addr - BASE) >> 2);
      if (req.addr < last_addr) n_down++;
      last_addr = req.addr;
      if (req.we) begin
        n_wr++;
        mem[w] = req.wdata;
      end else begin
        n_rd++;
        rd_q <= mem[w];
      end
      if (w == stuck_addr) mem[w][stuck_bit] = stuck_val;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run();
    n_wr = 0; n_rd = 0; n_down = 0; last_addr = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    check(!done && !busy, "idle after reset");
    run();
    check(pass, "fault-free memory passes");
    check(n_wr == 5 * WORDS && n_rd == 5 * WORDS,
          $sformatf("%0d writes, %0d reads, expected %0d each", n_wr, n_rd, 5 * WORDS));
    check(n_down == 2 * (WORDS - 1) + 2, $sformatf("%0d downward steps", n_down));
    for (int i = 0; i < WORDS; i++) check(mem[i] == 0, "memory ends with zeros");
    // stuck-at-1
    stuck_addr = 77; stuck_bit = 13; stuck_val = 1;
    run();
    check(!pass, "stuck-at-1 detected");
    check(fail_addr == BASE + 77 * 4, $sformatf("fail address %h", fail_addr));
    // stuck-at-0 on the last word
    stuck_addr = WORDS - 1; stuck_bit = 31; stuck_val = 0;
    run();
    check(!pass, "stuck-at-0 detected");
    check(fail_addr == BASE + (WORDS - 1) * 4, $sformatf("fail address %h", fail_addr));
    // fault removed again
    stuck_addr = -1;
    run();
    check(pass, "passes again");
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
