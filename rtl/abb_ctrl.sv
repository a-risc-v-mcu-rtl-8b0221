// abb_ctrl: digital regulation loop of the adaptive reverse body bias (ABB)
// generator in the zero-bias top-level domain.
//
// The PE's speed is measured with a ring oscillator placed in the
// body-biased domain: over a window of WINDOW reference-clock cycles the
// controller counts the oscillator's rising edges (after a two-flop
// synchronizer). The count is compared with the performance target:
//   count <  target          -> too slow: reduce the reverse bias (code - 1)
//   count >  target + HYST   -> faster than needed: more reverse bias
//                               (code + 1), which cuts leakage
//   otherwise                -> in band
// After LOCK_WINDOWS in-band windows in a row lock_o is raised. The target is
// TARGET_FULL in active mode and half of it when target_low_i is set (the
// 50 % ABB performance target used in retention). target_low_i comes from the
// PE clock domain and passes a two-flop synchronizer; three cycles after it
// changes, lock is dropped and the measurement restarts.
//
// bias_code_o drives the analog well-bias generator (charge pumps for the
// N-well and P-well voltages, not part of this RTL); code 0 is zero bias and
// larger codes mean stronger reverse bias, i.e. a slower, less leaky PE.
//
// From the paper: an ABB generator in the top-level domain regulating the
// PE to a performance target, the lowered (50 %) target in retention and a
// lock indication. The ring-oscillator measurement, window, hysteresis,
// code width and step-by-one regulation are this design's choices.
module abb_ctrl #(
  parameter int unsigned WINDOW       = 256,  // reference cycles per measurement
  parameter int unsigned TARGET_FULL  = 64,   // oscillator edges per window at full target
  parameter int unsigned HYST         = 4,    // width of the in-band region
  parameter int unsigned LOCK_WINDOWS = 4,    // in-band windows before lock
  parameter int unsigned CODE_W       = 6     // bias code width
) (
  input  logic              clk_i,        // reference clock
  input  logic              rst_ni,
  input  logic              ro_i,         // ring oscillator, asynchronous
  input  logic              target_low_i, // 50 % performance target
  output logic [CODE_W-1:0] bias_code_o,
  output logic              lock_o
);

  localparam int unsigned WW = $clog2(WINDOW + 1);
  localparam int unsigned CW = $clog2(WINDOW + 1);   // at most one edge per two cycles
  localparam int unsigned LW = $clog2(LOCK_WINDOWS + 1);

  logic [2:0]        ro_sync_q;
  logic [1:0]        low_sync_q;     // target_low_i comes from the PE clock domain
  logic              ro_rise;
  logic [WW-1:0]     win_q;
  logic [CW-1:0]     cnt_q;
  logic [CODE_W-1:0] code_q;
  logic [LW-1:0]     inband_q;
  logic              low_q;
  logic [CW-1:0]     target;

  assign ro_rise = ro_sync_q[1] && !ro_sync_q[2];
  assign target  = low_q ? CW'(TARGET_FULL / 2) : CW'(TARGET_FULL);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ro_sync_q <= '0;
      low_sync_q <= '0;
      win_q     <= '0;
      cnt_q     <= '0;
      code_q    <= '0;
      inband_q  <= '0;
      low_q     <= 1'b0;
      lock_o    <= 1'b0;
    end else begin
      ro_sync_q <= {ro_sync_q[1:0], ro_i};
      low_sync_q <= {low_sync_q[0], target_low_i};
      low_q      <= low_sync_q[1];
      if (low_sync_q[1] != low_q) begin
        // new target: restart measurement, lock is lost
        win_q    <= '0;
        cnt_q    <= '0;
        inband_q <= '0;
        lock_o   <= 1'b0;
      end else if (win_q == WW'(WINDOW - 1)) begin
        win_q <= '0;
        cnt_q <= '0;
        if (cnt_q < target) begin
          if (code_q != '0) code_q <= code_q - 1'b1;
          inband_q <= '0;
          lock_o   <= 1'b0;
        end else if (cnt_q > target + CW'(HYST)) begin
          if (code_q != '1) code_q <= code_q + 1'b1;
          inband_q <= '0;
          lock_o   <= 1'b0;
        end else begin
          if (inband_q != LW'(LOCK_WINDOWS)) inband_q <= inband_q + 1'b1;
          if (inband_q >= LW'(LOCK_WINDOWS - 1)) lock_o <= 1'b1;
        end
      end else begin
        win_q <= win_q + 1'b1;
        if (ro_rise) cnt_q <= cnt_q + 1'b1;
      end
    end
  end

  assign bias_code_o = code_q;

endmodule
