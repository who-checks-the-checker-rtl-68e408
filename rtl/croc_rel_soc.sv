// croc_rel_soc: top level of the reliable croc microcontroller SoC (full protection, with
// overlapping protection domains).
//
// Structure (block diagram of the reliable croc architecture):
//   * tcls_unit: three lockstepped RISC-V cores (outside this module; their bus signals are
//     the core_out_i / core_in_o ports), each with its own relOBI encoders, and a bit-wise
//     voter on the encoded buses. Two relOBI managers: instruction and data.
//   * relobi_encoder in front of the debug module's manager port (third manager) and
//     relobi_decoder_single in front of its subordinate port, and a gate on its halt request
//     to the cores: the protected isolation units
//     of the unprotected debug module, which is outside this module.
//   * relobi_xbar: the relOBI interconnect with triplicated control.
//   * Two ecc_sram_bank (8 KiB each, 16 KiB total) that store relOBI codewords directly and
//     contain the scrubbers.
//   * Triplicated subordinates: soc_ctrl, uart, gpio, timer, and the fault_monitor.
// Address map (relobi_pkg): debug 0x0000_0000, soc_ctrl 0x0300_0000, fault monitor
// 0x0300_1000, UART 0x0300_2000, GPIO 0x0300_5000, timer 0x0300_A000, SRAM bank 0
// 0x1000_0000, SRAM bank 1 0x1000_2000. The map, the flat single-level interconnect and the
// fault event assignment are this design's own; the partition into protection domains and
// the overlaps between them follow the paper.
//
// Fault monitor events (counter index): 0 TCLS mismatch, 1 corrected error at a core's
// response decoder, 2 interconnect correction, 3 SRAM bank 0 correction, 4 SRAM bank 1
// correction, 5 scrubber correction (either bank), 6 correction in a peripheral or an
// isolation adapter, 7 any uncorrectable error.
module croc_rel_soc
  import relobi_pkg::*;
#(
  parameter int unsigned SramWords = 2048,   // words per bank: 2 x 8 KiB = 16 KiB
  parameter int unsigned NumGpio   = 32
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // lockstepped cores
  input  core_out_t            core_out_i [3],
  output core_in_t             core_in_o  [3],
  output logic                 core_busy_o,
  // debug module bus ports
  input  obi_req_t             dbg_mgr_req_i,
  output obi_rsp_t             dbg_mgr_rsp_o,
  output obi_req_t             dbg_sub_req_o,
  input  obi_rsp_t             dbg_sub_rsp_i,
  input  logic                 dbg_req_i,       // debug module halt request, blocked while isolated
  // IO
  input  logic                 uart_rx_i,
  output logic                 uart_tx_o,
  input  logic [NumGpio-1:0]   gpio_i,
  output logic [NumGpio-1:0]   gpio_o,
  output logic [NumGpio-1:0]   gpio_oe_o,
  output logic [DataWidth-1:0] status_o        // return value register
);
  localparam int unsigned NumEvents = 8;
  localparam int unsigned IDbg  = int'(SubDebug);
  localparam int unsigned ICtrl = int'(SubSocCtrl);
  localparam int unsigned IFm   = int'(SubFaultMon);
  localparam int unsigned IUart = int'(SubUart);
  localparam int unsigned IGpio = int'(SubGpio);
  localparam int unsigned ITim  = int'(SubTimer);
  localparam int unsigned IS0   = int'(SubSram0);
  localparam int unsigned IS1   = int'(SubSram1);

  rel_req_t mgr_req [XbarNumMgr];
  rel_rsp_t mgr_rsp [XbarNumMgr];
  rel_req_t sub_req [XbarNumSub];
  rel_rsp_t sub_rsp [XbarNumSub];

  logic                 irq_timer, fetch_en, tcls_clear, tcls_flag, tcls_mismatch;
  logic [AddrWidth-1:0] boot_addr;
  logic                 scrub_en, dbg_isolate;
  logic [15:0]          scrub_period;

  logic tcls_corr, tcls_unc, xbar_corr, xbar_unc;
  logic s0_corr, s0_unc, s0_sc, s1_corr, s1_unc, s1_sc;
  logic ctrl_corr, ctrl_unc, fm_corr, fm_unc, uart_corr, uart_unc, gpio_corr, gpio_unc;
  logic tim_corr, tim_unc, dbgm_corr, dbgm_unc, dbgs_corr, dbgs_unc;
  logic [NumEvents-1:0] events;

  // ---------------------------------------------------------------- TCLS cores
  tcls_unit i_tcls (
    .clk_i, .rst_ni, .core_out_i, .core_in_o,
    .instr_req_o(mgr_req[0]), .instr_rsp_i(mgr_rsp[0]),
    .data_req_o (mgr_req[1]), .data_rsp_i (mgr_rsp[1]),
    .irq_timer_i(irq_timer), .fetch_en_i(fetch_en), .debug_req_i(dbg_req_i && !dbg_isolate), .boot_addr_i(boot_addr),
    .clear_i(tcls_clear), .busy_o(core_busy_o), .mismatch_o(tcls_mismatch), .flag_o(tcls_flag),
    .corr_o(tcls_corr), .uncorr_o(tcls_unc)
  );

  // ---------------------------------------------------------------- debug isolation
  relobi_encoder i_dbg_enc (
    .isolate_i(dbg_isolate), .obi_req_i(dbg_mgr_req_i), .obi_rsp_o(dbg_mgr_rsp_o),
    .rel_req_o(mgr_req[2]), .rel_rsp_i(mgr_rsp[2]), .corr_o(dbgm_corr), .uncorr_o(dbgm_unc)
  );

  relobi_decoder_single i_dbg_dec (
    .clk_i, .rst_ni, .isolate_i(dbg_isolate), .rel_req_i(sub_req[IDbg]),
    .rel_rsp_o(sub_rsp[IDbg]), .obi_req_o(dbg_sub_req_o), .obi_rsp_i(dbg_sub_rsp_i),
    .corr_o(dbgs_corr), .uncorr_o(dbgs_unc)
  );

  // ---------------------------------------------------------------- interconnect
  relobi_xbar i_xbar (
    .clk_i, .rst_ni, .mgr_req_i(mgr_req), .mgr_rsp_o(mgr_rsp), .sub_req_o(sub_req),
    .sub_rsp_i(sub_rsp), .corr_o(xbar_corr), .uncorr_o(xbar_unc)
  );

  // ---------------------------------------------------------------- memories
  ecc_sram_bank #(.NumWords(SramWords)) i_sram0 (
    .clk_i, .rst_ni, .rel_req_i(sub_req[IS0]), .rel_rsp_o(sub_rsp[IS0]),
    .scrub_en_i(scrub_en), .scrub_period_i(scrub_period),
    .corr_o(s0_corr), .uncorr_o(s0_unc), .scrub_corr_o(s0_sc)
  );

  ecc_sram_bank #(.NumWords(SramWords)) i_sram1 (
    .clk_i, .rst_ni, .rel_req_i(sub_req[IS1]), .rel_rsp_o(sub_rsp[IS1]),
    .scrub_en_i(scrub_en), .scrub_period_i(scrub_period),
    .corr_o(s1_corr), .uncorr_o(s1_unc), .scrub_corr_o(s1_sc)
  );

  // ---------------------------------------------------------------- TMR peripherals
  soc_ctrl i_soc_ctrl (
    .clk_i, .rst_ni, .rel_req_i(sub_req[ICtrl]), .rel_rsp_o(sub_rsp[ICtrl]),
    .tcls_flag_i(tcls_flag), .boot_addr_o(boot_addr), .fetch_en_o(fetch_en),
    .core_status_o(status_o), .scrub_en_o(scrub_en), .scrub_period_o(scrub_period),
    .dbg_isolate_o(dbg_isolate), .tcls_clear_o(tcls_clear), .corr_o(ctrl_corr), .uncorr_o(ctrl_unc)
  );

  fault_monitor #(.NumEvents(NumEvents)) i_fault_mon (
    .clk_i, .rst_ni, .rel_req_i(sub_req[IFm]), .rel_rsp_o(sub_rsp[IFm]),
    .events_i(events), .corr_o(fm_corr), .uncorr_o(fm_unc)
  );

  uart i_uart (
    .clk_i, .rst_ni, .rel_req_i(sub_req[IUart]), .rel_rsp_o(sub_rsp[IUart]),
    .rx_i(uart_rx_i), .tx_o(uart_tx_o), .corr_o(uart_corr), .uncorr_o(uart_unc)
  );

  gpio #(.NumGpio(NumGpio)) i_gpio (
    .clk_i, .rst_ni, .rel_req_i(sub_req[IGpio]), .rel_rsp_o(sub_rsp[IGpio]),
    .gpio_i, .gpio_o, .gpio_oe_o, .corr_o(gpio_corr), .uncorr_o(gpio_unc)
  );

  timer i_timer (
    .clk_i, .rst_ni, .rel_req_i(sub_req[ITim]), .rel_rsp_o(sub_rsp[ITim]),
    .irq_o(irq_timer), .corr_o(tim_corr), .uncorr_o(tim_unc)
  );

  // ---------------------------------------------------------------- fault events
  assign events = {
    tcls_unc | xbar_unc | s0_unc | s1_unc | ctrl_unc | fm_unc | uart_unc | gpio_unc | tim_unc |
      dbgm_unc | dbgs_unc,                                                       // 7
    ctrl_corr | fm_corr | uart_corr | gpio_corr | tim_corr | dbgm_corr | dbgs_corr, // 6
    s0_sc | s1_sc,                                                               // 5
    s1_corr,                                                                     // 4
    s0_corr,                                                                     // 3
    xbar_corr,                                                                   // 2
    tcls_corr,                                                                   // 1
    tcls_mismatch                                                                // 0
  };
endmodule
