// mbist: memory built-in self test of the PE's SRAM.
//
// Runs the March C- algorithm over WORDS 32-bit words starting at BASE,
// as a master on the PE crossbar:
//   up(w0); up(r0,w1); up(r1,w0); down(r0,w1); down(r1,w0); up(r0)
// "0" is the all-zeros word and "1" the all-ones word. Each operation is one
// bus request; a read waits for its response and is compared with the
// expected word. The first mismatch is recorded in fail_addr_o and pass_o is
// cleared. A run takes 10 operations per word; the test overwrites the whole
// memory.
//
// Interface: pulse start_i to begin; busy_o is high during the run, done_o
// rises when it ends and stays high (with pass_o valid) until the next
// start.
//
// From the paper: an MBIST block in the PE whose pass is one of the chip's
// pass criteria. The algorithm and the bus-master implementation are this
// design's choices.
module mbist
  import pe_pkg::*;
#(
  parameter logic [31:0] BASE  = SRAM_BASE,
  parameter int unsigned WORDS = N_BANKS * BANK_BYTES / 4   // 32768 words, 128 KiB
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        pass_o,
  output logic [31:0] fail_addr_o,
  output bus_req_t    req_o,
  input  bus_rsp_t    rsp_i
);

  localparam int unsigned AW = $clog2(WORDS);

  typedef enum logic [1:0] {M_IDLE, M_ISSUE, M_WAIT, M_DONE} mstate_e;

  mstate_e     state_q;
  logic [2:0]  elem_q;     // march element 0..5
  logic        opi_q;      // operation within element
  logic [AW-1:0] addr_q;
  logic        op_read, op_val, last_op, down, last_addr;

  // operation table of March C-
  always_comb begin
    op_read = 1'b0; op_val = 1'b0; last_op = 1'b1;
    unique case (elem_q)
      3'd0: begin op_read = 1'b0; op_val = 1'b0; end
      3'd1: begin op_read = !opi_q; op_val = opi_q;  last_op = opi_q; end
      3'd2: begin op_read = !opi_q; op_val = !opi_q; last_op = opi_q; end
      3'd3: begin op_read = !opi_q; op_val = opi_q;  last_op = opi_q; end
      3'd4: begin op_read = !opi_q; op_val = !opi_q; last_op = opi_q; end
      default: begin op_read = 1'b1; op_val = 1'b0; end
    endcase
    down      = (elem_q == 3'd3) || (elem_q == 3'd4);
    last_addr = down ? (addr_q == '0) : (addr_q == AW'(WORDS - 1));
  end

  always_comb begin
    req_o.req   = (state_q == M_ISSUE);
    req_o.addr  = BASE + {{(30-AW){1'b0}}, addr_q, 2'b00};
    req_o.we    = !op_read;
    req_o.be    = 4'hF;
    req_o.wdata = {32{op_val}};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= M_IDLE;
      elem_q      <= '0;
      opi_q       <= 1'b0;
      addr_q      <= '0;
      pass_o      <= 1'b0;
      fail_addr_o <= '0;
    end else begin
      unique case (state_q)
        M_IDLE, M_DONE: if (start_i) begin
          state_q     <= M_ISSUE;
          elem_q      <= '0;
          opi_q       <= 1'b0;
          addr_q      <= '0;
          pass_o      <= 1'b1;
          fail_addr_o <= '0;
        end
        M_ISSUE: if (rsp_i.gnt) state_q <= M_WAIT;
        M_WAIT: if (rsp_i.rvalid) begin
          if (op_read && rsp_i.rdata != {32{op_val}} && pass_o) begin
            pass_o      <= 1'b0;
            fail_addr_o <= req_o.addr;
          end
          state_q <= M_ISSUE;
          if (!last_op) begin
            opi_q <= 1'b1;
          end else begin
            opi_q <= 1'b0;
            if (!last_addr) begin
              addr_q <= down ? addr_q - 1'b1 : addr_q + 1'b1;
            end else if (elem_q == 3'd5) begin
              state_q <= M_DONE;
            end else begin
              elem_q <= elem_q + 1'b1;
              // elements 3 and 4 run downwards, starting at the top
              addr_q <= (elem_q == 3'd2 || elem_q == 3'd3) ? AW'(WORDS - 1) : '0;
            end
          end
        end
        default: state_q <= M_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q == M_ISSUE) || (state_q == M_WAIT);
  assign done_o = (state_q == M_DONE);

endmodule
