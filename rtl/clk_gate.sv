// clk_gate: clock gate for the processor clock (sleep and retention).
//
// The enable is taken over on the falling edge of the clock and ANDed with
// the clock, so the gated clock only ever stops or starts while the clock is
// low and never produces a shortened pulse. This is the function of an
// integrated clock-gating cell; a falling-edge flop is used in place of the
// usual transparent-low latch, which behaves the same for an enable that
// changes only after rising edges.
//
// Interface: en_i is sampled at each falling edge of clk_i; clk_o follows
// clk_i from the next rising edge on while it is high.
//
// From the paper: sleep mode clock gates the processor. The cell structure
// is this design's choice.
module clk_gate (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic en_i,
  output logic clk_o
);

  logic en_q;

  always_ff @(negedge clk_i or negedge rst_ni)
    if (!rst_ni) en_q <= 1'b0;
    else         en_q <= en_i;

  assign clk_o = clk_i && en_q;

endmodule
