// mcu_top: the low-power RISC-V MCU test chip.
//
// Processing element (PE): a crossbar joins the core's instruction and data
// ports, the I2C bridge and the MBIST engine to four 32 KiB SRAM banks (each
// eight 4 KiB retention-capable macros with data bus gating), a timer and
// the wake-up/IRQ controller. The wake-up controller gates the core clock in
// sleep, also puts the SRAM into retention in retention mode, lowers the ABB
// performance target and asks for the 5 MHz wake-up clock there, and
// sequences the wake-up (ABB lock, then SRAM power-up, then core clock).
// Top level: the ABB regulation loop and the I2C interface.
//
// Not in this RTL, and therefore at the ports: the CV32E40P core (its
// instruction/data bus ports, sleep output, clock enable and interrupts), the
// ADPLL and the 5 MHz clock source (clk_pll_i and clk_ref_i are inputs; a
// glitch-free switch makes the PE clock from them, and clk_gate derives the
// gated processor clock core_clk_o), the analog well-bias generator
// (driven by abb_bias_code_o, with the speed monitor's ring oscillator at
// ro_i), the temperature sensor and the pads.
//
// Interrupt sources of the wake-up controller: bit 0 timer, bits 3:1
// ext_irq_i. The PE (crossbar, SRAM, timer, wake-up controller, MBIST, I2C)
// runs on the switched PE clock; in retention with the slow-clock option it
// runs at 5 MHz. The ABB regulation runs on clk_pll_i, which is never
// switched, so its speed measurement keeps its time base. I2C transfers
// need the fast clock (the SCL oversampling is sized for it).
module mcu_top
  import pe_pkg::*;
(
  input  logic        clk_pll_i,   // 50 MHz PE clock from the ADPLL
  input  logic        clk_ref_i,   // 5 MHz clock for the wake-up circuit in retention
  input  logic        rst_ni,
  // CV32E40P core ports
  input  bus_req_t    instr_req_i,
  output bus_rsp_t    instr_rsp_o,
  input  bus_req_t    data_req_i,
  output bus_rsp_t    data_rsp_o,
  input  logic        core_sleep_i,
  output logic        core_clk_o,     // gated processor clock
  output logic        core_clk_en_o,
  output logic [3:0]  core_irq_o,
  input  logic [2:0]  ext_irq_i,
  // power management
  output pe_mode_e    mode_o,
  output logic        clk_slow_o,     // PE running from the 5 MHz clock
  input  logic        ro_i,
  output logic [5:0]  abb_bias_code_o,
  output logic        abb_lock_o,
  // I2C pads
  input  logic        scl_i,
  input  logic        sda_i,
  output logic        sda_oe_o,
  // MBIST control
  input  logic        mbist_start_i,
  output logic        mbist_done_o,
  output logic        mbist_busy_o,
  output logic        mbist_pass_o,
  output logic [31:0] mbist_fail_addr_o
);

  bus_req_t m_req [N_MASTERS];
  bus_rsp_t m_rsp [N_MASTERS];
  bus_req_t s_req [N_SLAVES-1];
  bus_rsp_t s_rsp [N_SLAVES-1];

  logic [1:0]         pdret [N_BANKS];
  logic [N_BANKS-1:0] bank_ready;
  logic               timer_irq, abb_target_low, slow_req;
  logic               clk_pe;         // PE clock after the clock switch

  // PE clock: 50 MHz, or 5 MHz while the wake-up controller asks for it
  clk_switch u_clk_switch (
    .clk_fast_i   (clk_pll_i),
    .clk_slow_i   (clk_ref_i),
    .rst_ni       (rst_ni),
    .sel_slow_i   (slow_req),
    .clk_o        (clk_pe),
    .slow_active_o(clk_slow_o)
  );

  // processor clock gate (sleep and retention)
  clk_gate u_core_cg (
    .clk_i (clk_pe),
    .rst_ni(rst_ni),
    .en_i  (core_clk_en_o),
    .clk_o (core_clk_o)
  );

  assign m_req[M_INSTR] = instr_req_i;
  assign m_req[M_DATA]  = data_req_i;
  assign instr_rsp_o    = m_rsp[M_INSTR];
  assign data_rsp_o     = m_rsp[M_DATA];

  pe_xbar u_xbar (
    .clk_i(clk_pe), .rst_ni,
    .m_req_i(m_req), .m_rsp_o(m_rsp),
    .s_req_o(s_req), .s_rsp_i(s_rsp)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    sram_bank u_bank (
      .clk_i(clk_pe), .rst_ni,
      .req_i  (s_req[b]),
      .rsp_o  (s_rsp[b]),
      .pdret_i(pdret[b]),
      .ready_o(bank_ready[b])
    );
  end

  pe_timer u_timer (
    .clk_i(clk_pe), .rst_ni,
    .req_i(s_req[S_TIMER]), .rsp_o(s_rsp[S_TIMER]),
    .irq_o(timer_irq)
  );

  wakeup_ctrl u_wakeup (
    .clk_i(clk_pe), .rst_ni,
    .req_i           (s_req[S_WAKEUP]),
    .rsp_o           (s_rsp[S_WAKEUP]),
    .irq_i           ({ext_irq_i, timer_irq}),
    .core_irq_o      (core_irq_o),
    .core_sleep_i    (core_sleep_i),
    .core_clk_en_o   (core_clk_en_o),
    .sram_pdret_o    (pdret),
    .sram_ready_i    (bank_ready),
    .abb_target_low_o(abb_target_low),
    .abb_lock_i      (abb_lock_o),
    .clk_slow_o      (slow_req),
    .mode_o          (mode_o)
  );

  mbist u_mbist (
    .clk_i(clk_pe), .rst_ni,
    .start_i    (mbist_start_i),
    .busy_o     (mbist_busy_o),
    .done_o     (mbist_done_o),
    .pass_o     (mbist_pass_o),
    .fail_addr_o(mbist_fail_addr_o),
    .req_o      (m_req[M_MBIST]),
    .rsp_i      (m_rsp[M_MBIST])
  );

  // top-level (zero-bias) domain: regulation clocked by the undivided PLL clock
  abb_ctrl u_abb (
    .clk_i       (clk_pll_i),
    .rst_ni      (rst_ni),
    .ro_i        (ro_i),
    .target_low_i(abb_target_low),
    .bias_code_o (abb_bias_code_o),
    .lock_o      (abb_lock_o)
  );

  i2c_slave u_i2c (
    .clk_i(clk_pe), .rst_ni,
    .scl_i, .sda_i, .sda_oe_o,
    .req_o(m_req[M_I2C]),
    .rsp_i(m_rsp[M_I2C])
  );

endmodule
