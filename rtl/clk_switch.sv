// clk_switch: glitch-free clock multiplexer that moves the processing
// element between its 50 MHz clock and the 5 MHz wake-up clock.
//
// Each clock has an enable flop pair: the request is captured on the rising
// edge and applied on the falling edge of its own clock, and a clock is only
// enabled after the other one has been switched off. The output is
// (clk_fast & en_fast) | (clk_slow & en_slow), so neither clock is ever cut
// short and there is a short gap with no edges during a switch. After reset
// the fast clock runs.
//
// Interface: sel_slow_i = 1 selects the slow clock; slow_active_o tells when
// it is actually driving the output. A switch takes up to two cycles of each
// clock.
//
// From the paper: during retention the wake-up circuit runs at 5 MHz. The
// multiplexer structure is this design's own (a standard glitch-free clock
// switch).
module clk_switch (
  input  logic clk_fast_i,
  input  logic clk_slow_i,
  input  logic rst_ni,
  input  logic sel_slow_i,
  output logic clk_o,
  output logic slow_active_o
);

  logic fast_req_q, fast_en_q, slow_req_q, slow_en_q;

  always_ff @(posedge clk_fast_i or negedge rst_ni)
    if (!rst_ni) fast_req_q <= 1'b1;
    else         fast_req_q <= !sel_slow_i && !slow_en_q;

  always_ff @(negedge clk_fast_i or negedge rst_ni)
    if (!rst_ni) fast_en_q <= 1'b1;
    else         fast_en_q <= fast_req_q;

  always_ff @(posedge clk_slow_i or negedge rst_ni)
    if (!rst_ni) slow_req_q <= 1'b0;
    else         slow_req_q <= sel_slow_i && !fast_en_q;

  always_ff @(negedge clk_slow_i or negedge rst_ni)
    if (!rst_ni) slow_en_q <= 1'b0;
    else         slow_en_q <= slow_req_q;

  assign clk_o         = (clk_fast_i && fast_en_q) || (clk_slow_i && slow_en_q);
  assign slow_active_o = slow_en_q;

endmodule
