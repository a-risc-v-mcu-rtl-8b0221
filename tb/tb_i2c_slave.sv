// tb_i2c_slave: self-checking test of the I2C-to-bus bridge.
// A behavioural I2C master (open-drain SDA, SCL period 40 system clocks)
// writes and reads words through the bridge into a bus memory model.
// Checked: address-phase ACK, NACK and no bus traffic for another device
// address, single and burst writes land at the right addresses, single and
// burst reads return the memory contents byte by byte, and every data byte
// of a write is acknowledged.
module tb_i2c_slave;
  import pe_pkg::*;
  localparam int Q = 10;   // quarter SCL period in system clocks
  localparam logic [6:0] DEV = 7'h50;

  logic clk = 0, rst_n = 0;
  logic scl = 1, m_oe = 0, s_oe, sda;
  bus_req_t req;
  bus_rsp_t rsp;
  logic [31:0] mem [logic [31:0]];
  logic rv_q = 0;
  logic [31:0] rd_q = 0;
  int checks = 0, failures = 0, bus_ops = 0;

  always #5 clk = ~clk;
  assign sda = !(m_oe || s_oe);

  i2c_slave #(.DEV_ADDR(DEV)) dut (
    .clk_i(clk), .rst_ni(rst_n), .scl_i(scl), .sda_i(sda), .sda_oe_o(s_oe),
    .req_o(req), .rsp_i(rsp));

  // bus memory model, grants every other cycle
  logic gnt_en = 0;
  assign rsp.gnt    = req.req && gnt_en;
  assign rsp.rvalid = rv_q;
  assign rsp.rdata  = rd_q;
  always @(posedge clk) begin
    gnt_en <= !gnt_en;
    rv_q   <= rsp.gnt;
    if (rsp.gnt) begin
      bus_ops++;
      if (req.we) mem[req.addr] = req.wdata;
      else rd_q <= mem.exists(req.addr) ? mem[req.addr] : 32'h0;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wq(int n = 1); repeat (n * Q) @(posedge clk); endtask

  task automatic i2c_start();
    m_oe = 0; wq(); scl = 1; wq(); m_oe = 1; wq(); scl = 0; wq();
  endtask
  task automatic i2c_stop();
    m_oe = 1; wq(); scl = 1; wq(); m_oe = 0; wq(2);
  endtask
  task automatic i2c_write_byte(input logic [7:0] b, output logic ack);
    for (int i = 7; i >= 0; i--) begin
      m_oe = !b[i]; wq(); scl = 1; wq(2); scl = 0; wq();
    end
    m_oe = 0; wq(); scl = 1; wq(); ack = !sda; wq(); scl = 0; wq();
  endtask
  task automatic i2c_read_byte(input logic ack, output logic [7:0] b);
    m_oe = 0;
    for (int i = 7; i >= 0; i--) begin
      wq(); scl = 1; wq(); b[i] = sda; wq(); scl = 0; wq();
    end
    m_oe = ack; wq(); scl = 1; wq(2); scl = 0; wq(); m_oe = 0;
  endtask

  task automatic i2c_write(input logic [31:0] addr, input logic [31:0] data [], output logic all_ack);
    logic ack;
    i2c_start();
    i2c_write_byte({DEV, 1'b0}, ack); all_ack = ack;
    for (int i = 3; i >= 0; i--) begin i2c_write_byte(addr[8*i +: 8], ack); all_ack &= ack; end
    foreach (data[k])
      for (int i = 3; i >= 0; i--) begin i2c_write_byte(data[k][8*i +: 8], ack); all_ack &= ack; end
    i2c_stop();
  endtask

  task automatic i2c_read(input logic [31:0] addr, input int n, output logic [31:0] data []);
    logic ack;
    data = new[n];
    i2c_start();
    i2c_write_byte({DEV, 1'b0}, ack);
    for (int i = 3; i >= 0; i--) i2c_write_byte(addr[8*i +: 8], ack);
    i2c_start();   // repeated start
    i2c_write_byte({DEV, 1'b1}, ack);
    check(ack, "read address ACK");
    for (int k = 0; k < n; k++)
      for (int i = 3; i >= 0; i--) begin
        logic [7:0] b;
        i2c_read_byte(!(k == n - 1 && i == 0), b);
        data[k][8*i +: 8] = b;
      end
    i2c_stop();
  endtask

  initial begin
    logic ack;
    logic [31:0] wd [], rdd [];
    int ops0;
    repeat (3) @(negedge clk); rst_n = 1;
    wq(4);
    // another device: NACK, no bus access
    ops0 = bus_ops;
    i2c_start(); i2c_write_byte({7'h23, 1'b0}, ack); i2c_stop();
    check(!ack, "other device address NACKed");
    check(bus_ops == ops0, "no bus access for another device");
    // single write
    wd = new[1]; wd[0] = 32'hDEAD_BEEF;
    i2c_write(32'h0000_0100, wd, ack);
    check(ack, "all write bytes ACKed");
    check(mem.exists(32'h100) && mem[32'h100] == 32'hDEAD_BEEF, "single write");
    // burst write
    wd = new[4];
    foreach (wd[k]) wd[k] = $urandom;
    i2c_write(32'h0001_8040, wd, ack);
    check(ack, "burst write ACKed");
    foreach (wd[k]) check(mem.exists(32'h18040 + 4 * k) && mem[32'h18040 + 4 * k] == wd[k],
                          $sformatf("burst word %0d", k));
    // single read
    i2c_read(32'h0000_0100, 1, rdd);
    check(rdd[0] == 32'hDEAD_BEEF, $sformatf("single read %h", rdd[0]));
    // burst read
    i2c_read(32'h0001_8040, 4, rdd);
    foreach (wd[k]) check(rdd[k] == wd[k], $sformatf("burst read word %0d: %h vs %h", k, rdd[k], wd[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
