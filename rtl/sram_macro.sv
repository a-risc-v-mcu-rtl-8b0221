// sram_macro: behavioural model of one 4 KiB single-port SRAM macro with
// power-state control. This is a model of a custom, process-specific macro
// (power switches, in-rush current limiting, body-biased 6T bit cells), not
// logic to be synthesized as it stands; it reproduces the macro's digital
// behaviour at its pins.
//
// Power states, selected by A_PDRET_I[1:0] through the macro's decoder:
//   2'b00 active     : bit array and periphery powered, reads and writes work.
//   2'b01 retention  : periphery switched off, bit array keeps its contents.
//   2'b1x power-down : bit array and periphery off, all contents are lost.
// Leaving retention or power-down for active takes WAKEUP_CYCLES clock cycles
// (the 200 ns wake-up with in-rush current limiting, 10 cycles at 50 MHz);
// A_RDY_O is low until then and accesses are ignored.
// The read-data output A_DR_O is clamped to zero whenever the periphery is
// unpowered (the output pull-down of the macro) and otherwise holds the data
// of the last read.
//
// Timing: synchronous. A read with A_ME_I=1, A_WE_I=0 on a clock edge shows
// its data on A_DR_O after that edge. A write stores A_DIN_I under the byte
// mask A_BM_I.
//
// From the paper: the 4 KiB size, the three power states, the loss of state
// in power-down, the 200 ns wake-up, the A_PDRET[1:0] and A_DR_O pin names
// and the output pull-down. This model's own choices: the A_PDRET encoding,
// the other pin names, A_RDY_O, and that words lost in power-down (or never
// written since reset) read as zero.
module sram_macro #(
  parameter int unsigned WORDS         = 1024,  // 4 KiB of 32-bit words
  parameter int unsigned WAKEUP_CYCLES = 10,    // 200 ns at 50 MHz
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          A_ME_I,     // macro enable (access this cycle)
  input  logic          A_WE_I,     // write enable
  input  logic [AW-1:0] A_ADDR_I,   // word address
  input  logic [31:0]   A_DIN_I,    // write data
  input  logic [3:0]    A_BM_I,     // byte write mask
  input  logic [1:0]    A_PDRET_I,  // power state request
  output logic [31:0]   A_DR_O,     // read data
  output logic          A_RDY_O     // powered and woken up
);

  typedef enum logic [1:0] {ST_ON, ST_RET, ST_OFF, ST_WAKE} pstate_e;

  pstate_e               state_q;
  logic [$clog2(WAKEUP_CYCLES+1)-1:0] wake_cnt_q;
  logic [31:0]           mem [WORDS];
  logic [WORDS-1:0]      lost_q;      // word content undefined (reads as 0)
  logic [31:0]           dout_q;
  logic                  access;

  assign A_RDY_O = (state_q == ST_ON);
  assign access  = A_RDY_O && A_ME_I && (A_PDRET_I == 2'b00);

  // power-state sequencing
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= ST_ON;
      wake_cnt_q <= '0;
    end else begin
      unique case (A_PDRET_I)
        2'b00: begin
          if (state_q == ST_RET || state_q == ST_OFF) begin
            state_q    <= ST_WAKE;
            wake_cnt_q <= ($bits(wake_cnt_q))'(WAKEUP_CYCLES - 1);
          end else if (state_q == ST_WAKE) begin
            // ready on the WAKEUP_CYCLES-th edge after the request
            if (wake_cnt_q <= 1) state_q <= ST_ON;
            else                 wake_cnt_q <= wake_cnt_q - 1'b1;
          end
        end
        2'b01:   state_q <= ST_RET;
        default: state_q <= ST_OFF;
      endcase
    end
  end

  // bit array
  always_ff @(posedge clk_i) begin
    if (access && A_WE_I) begin
      for (int b = 0; b < 4; b++) begin
        if (A_BM_I[b])            mem[A_ADDR_I][8*b +: 8] <= A_DIN_I[8*b +: 8];
        else if (lost_q[A_ADDR_I]) mem[A_ADDR_I][8*b +: 8] <= 8'h00;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lost_q <= '1;
    end else if (A_PDRET_I[1]) begin
      lost_q <= '1;
    end else if (access && A_WE_I) begin
      lost_q[A_ADDR_I] <= 1'b0;
    end
  end

  // periphery: output register, lost when the periphery is unpowered
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dout_q <= '0;
    end else if (state_q != ST_ON && state_q != ST_WAKE) begin
      dout_q <= '0;
    end else if (access && !A_WE_I) begin
      dout_q <= lost_q[A_ADDR_I] ? 32'h0 : mem[A_ADDR_I];
    end
  end

  // output pull-down unless the periphery is powered
  assign A_DR_O = (state_q == ST_ON) ? dout_q : 32'h0;

endmodule
