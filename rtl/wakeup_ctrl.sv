// wakeup_ctrl: configurable wake-up and interrupt controller of the PE.
//
// It moves the processing element between three modes:
//   active    : core clock on, SRAM banks powered.
//   sleep     : the core's clock is gated; the SRAM stays powered.
//   retention : the core's clock is gated and every SRAM bank is put into
//               retention (periphery off, bit cells keep their data).
//               Optionally the ABB regulation target is lowered (to 50 %)
//               and the wake-up logic is clocked at 5 MHz instead of the PE
//               clock; both save further power.
// Software selects sleep or retention in CFG and then executes WFI; the
// core's sleep output starts the entry. Any enabled pending interrupt wakes
// the PE. Waking from retention is sequenced: first the full ABB target and
// the fast clock are restored and, after ABB_SETTLE cycles in which the
// regulator drops its old lock, the controller waits for ABB lock (through a
// two-flop synchronizer, as the regulator has its own clock), then
// the SRAM banks are powered up and the controller waits until all of them
// report ready (200 ns), and only then is the core clock enabled again.
// Banks selected in BANK_PD are held in power-down in every mode.
//
// Registers (offsets from the wake-up controller base):
//   0x00 CFG      [0] 0 = sleep, 1 = retention; [1] lower ABB target in
//                 retention; [2] 5 MHz wake-up clock in retention
//   0x04 IRQ_EN   interrupt enables, one bit per source
//   0x08 IRQ_PEND pending interrupts, write 1 to clear
//   0x0C BANK_PD  power-down mask, one bit per SRAM bank
//   0x10 STATUS   [2:0] controller state
// Bus: PE bus slave, always grants, answers one cycle later.
// core_irq_o (pending and enabled) goes to the core's interrupt inputs.
//
// From the paper: the three modes, clock gating in sleep, SRAM retention in
// retention mode, the lowered ABB target and the 5 MHz wake-up clock during
// retention, and that the controller is configurable and handles interrupts.
// The register map, the wake-up order and the per-bank power-down mask are
// this design's choices.
module wakeup_ctrl
  import pe_pkg::*;
#(
  parameter int unsigned NIRQ  = 4,
  parameter int unsigned NBANK = N_BANKS,
  // cycles after raising the ABB target before abb_lock_i is trusted: the
  // target and the lock each cross a two-flop synchronizer, and the
  // regulator needs a cycle to notice the new target and drop its old lock
  parameter int unsigned ABB_SETTLE = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  bus_req_t         req_i,
  output bus_rsp_t         rsp_o,
  input  logic [NIRQ-1:0]  irq_i,
  output logic [NIRQ-1:0]  core_irq_o,
  input  logic             core_sleep_i,
  output logic             core_clk_en_o,
  output logic [1:0]       sram_pdret_o [NBANK],
  input  logic [NBANK-1:0] sram_ready_i,
  output logic             abb_target_low_o,
  input  logic             abb_lock_i,
  output logic             clk_slow_o,
  output pe_mode_e         mode_o
);

  typedef enum logic [2:0] {
    W_ACTIVE, W_SLEEP, W_RET, W_WAKE_ABB, W_WAKE_SRAM
  } wstate_e;

  wstate_e           state_q, state_d;
  logic [2:0]        cfg_q;
  logic [NIRQ-1:0]   irq_en_q, pend_q;
  logic [NBANK-1:0]  pd_q;
  logic              rvalid_q;
  logic [31:0]       rdata_q;
  logic              wake_evt, wr;
  logic [2:0]        reg_idx;
  logic [$clog2(ABB_SETTLE+1)-1:0] settle_q;
  logic [1:0]        lock_sync_q;    // abb_lock_i comes from the ABB clock domain
  logic              abb_lock;

  assign wake_evt   = |(pend_q & irq_en_q);
  assign abb_lock   = lock_sync_q[1];
  assign core_irq_o = pend_q & irq_en_q;
  assign wr         = req_i.req && req_i.we;
  assign reg_idx    = req_i.addr[4:2];

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      W_ACTIVE:    if (core_sleep_i && !wake_evt) state_d = cfg_q[0] ? W_RET : W_SLEEP;
      W_SLEEP:     if (wake_evt) state_d = W_ACTIVE;
      W_RET:       if (wake_evt) state_d = W_WAKE_ABB;
      W_WAKE_ABB:  if (settle_q == '0 && abb_lock) state_d = W_WAKE_SRAM;
      W_WAKE_SRAM: if (&(sram_ready_i | pd_q)) state_d = W_ACTIVE;
      default:     state_d = W_ACTIVE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= W_ACTIVE;
      settle_q <= '0;
      lock_sync_q <= '0;
      cfg_q    <= '0;
      irq_en_q <= '0;
      pend_q   <= '0;
      pd_q     <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      state_q <= state_d;
      pend_q  <= pend_q | irq_i;
      lock_sync_q <= {lock_sync_q[0], abb_lock_i};
      if (state_q == W_RET && state_d == W_WAKE_ABB)
        settle_q <= ($bits(settle_q))'(ABB_SETTLE);
      else if (settle_q != '0)
        settle_q <= settle_q - 1'b1;
      if (wr) begin
        unique case (reg_idx)
          3'd0: cfg_q    <= req_i.wdata[2:0];
          3'd1: irq_en_q <= req_i.wdata[NIRQ-1:0];
          3'd2: pend_q   <= (pend_q & ~req_i.wdata[NIRQ-1:0]) | irq_i;
          3'd3: pd_q     <= req_i.wdata[NBANK-1:0];
          default: ;
        endcase
      end
      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        unique case (reg_idx)
          3'd0: rdata_q <= 32'(cfg_q);
          3'd1: rdata_q <= 32'(irq_en_q);
          3'd2: rdata_q <= 32'(pend_q);
          3'd3: rdata_q <= 32'(pd_q);
          3'd4: rdata_q <= 32'(state_q);
          default: rdata_q <= '0;
        endcase
      end else begin
        rdata_q <= '0;
      end
    end
  end

  // mode-dependent outputs
  always_comb begin
    core_clk_en_o    = (state_q == W_ACTIVE);
    abb_target_low_o = (state_q == W_RET) && cfg_q[1];
    clk_slow_o       = (state_q == W_RET) && cfg_q[2];
    for (int b = 0; b < NBANK; b++) begin
      if (pd_q[b])
        sram_pdret_o[b] = PDRET_POWERDOWN;
      else if (state_q == W_RET || state_q == W_WAKE_ABB)
        sram_pdret_o[b] = PDRET_RETENTION;
      else
        sram_pdret_o[b] = PDRET_ACTIVE;
    end
    unique case (state_q)
      W_ACTIVE: mode_o = PE_ACTIVE;
      W_SLEEP:  mode_o = PE_SLEEP;
      default:  mode_o = PE_RETENTION;
    endcase
  end

  assign rsp_o.gnt    = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

endmodule
