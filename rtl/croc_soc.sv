// croc_soc: the Croc domain, a minimal RISC-V microcontroller around an OBI
// crossbar.
//
// Croc is a teaching platform: a small, complete microcontroller that a
// student can extend with their own logic and take to silicon. This module
// holds everything of the Croc domain except the processor core and the debug
// module, which are existing cores used unchanged; their bus and interrupt
// signals are ports here. The structure follows the platform's block diagram:
//
//   managers      core instruction port, core data port, debug system-bus
//                 port, user-domain manager port
//   obi_xbar      full crossbar, round-robin per subordinate
//   subordinates  debug memory (port), I-Mem bank, D-Mem bank,
//                 peripheral demux, user-domain subordinate (port)
//   obi_demux     Regs (soc_regs), UART, GPIO, Timer
//
// Instructions and data sit in two separate single-cycle SRAM banks, so the
// core can fetch from one and load/store to the other in the same cycle and
// retire one instruction per cycle. Every subordinate grants in the cycle of
// the request and answers one cycle later; the external subordinate ports
// (debug, user domain) must keep that rule (the crossbar asserts it).
//
// Interrupts: irq_timer_o is the timer's compare interrupt; irq_fast_o
// collects bit 0 UART receive, bit 1 GPIO input change and bits 2.. the
// user-domain interrupts. This numbering, the address map (croc_pkg) and the
// SRAM size are this design's own choices.
module croc_soc
  import croc_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,

  // Core (CVE2) bus ports and control.
  input  obi_req_t              core_instr_req_i,
  output obi_rsp_t              core_instr_rsp_o,
  input  obi_req_t              core_data_req_i,
  output obi_rsp_t              core_data_rsp_o,
  output logic                  irq_timer_o,
  output logic [15:0]           irq_fast_o,
  output addr_t                 boot_addr_o,
  output logic                  fetch_en_o,
  output data_t                 core_status_o,
  output logic [1:0]            boot_mode_o,

  // Debug module bus ports.
  input  obi_req_t              dbg_mgr_req_i,
  output obi_rsp_t              dbg_mgr_rsp_o,
  output obi_req_t              dbg_sub_req_o,
  input  obi_rsp_t              dbg_sub_rsp_i,

  // User domain.
  input  obi_req_t              user_mgr_req_i,
  output obi_rsp_t              user_mgr_rsp_o,
  output obi_req_t              user_sub_req_o,
  input  obi_rsp_t              user_sub_rsp_i,
  input  logic [NumUserIrq-1:0] user_irq_i,

  // Pins.
  input  logic [NumGpio-1:0]    gpio_i,
  output logic [NumGpio-1:0]    gpio_o,
  output logic [NumGpio-1:0]    gpio_oe_o,
  input  logic                  uart_rx_i,
  output logic                  uart_tx_o
);

  obi_req_t mgr_req [NumMgr];
  obi_rsp_t mgr_rsp [NumMgr];
  obi_req_t sub_req [NumSub];
  obi_rsp_t sub_rsp [NumSub];
  obi_req_t per_req [NumPeriph];
  obi_rsp_t per_rsp [NumPeriph];

  logic uart_irq, gpio_irq;

  // Managers.
  assign mgr_req[MgrCoreInstr] = core_instr_req_i;
  assign mgr_req[MgrCoreData]  = core_data_req_i;
  assign mgr_req[MgrDebug]     = dbg_mgr_req_i;
  assign mgr_req[MgrUser]      = user_mgr_req_i;
  assign core_instr_rsp_o      = mgr_rsp[MgrCoreInstr];
  assign core_data_rsp_o       = mgr_rsp[MgrCoreData];
  assign dbg_mgr_rsp_o         = mgr_rsp[MgrDebug];
  assign user_mgr_rsp_o        = mgr_rsp[MgrUser];

  // External subordinates.
  assign dbg_sub_req_o     = sub_req[SubDebug];
  assign sub_rsp[SubDebug] = dbg_sub_rsp_i;
  assign user_sub_req_o    = sub_req[SubUser];
  assign sub_rsp[SubUser]  = user_sub_rsp_i;

  obi_xbar #(
    .NumMgrs ( NumMgr ),
    .NumSubs ( NumSub )
  ) i_xbar (
    .clk_i,
    .rst_ni,
    .mgr_req_i ( mgr_req ),
    .mgr_rsp_o ( mgr_rsp ),
    .sub_req_o ( sub_req ),
    .sub_rsp_i ( sub_rsp )
  );

  sram_bank #(
    .NumWords ( SramNumWords )
  ) i_imem (
    .clk_i,
    .rst_ni,
    .obi_req_i ( sub_req[SubImem] ),
    .obi_rsp_o ( sub_rsp[SubImem] )
  );

  sram_bank #(
    .NumWords ( SramNumWords )
  ) i_dmem (
    .clk_i,
    .rst_ni,
    .obi_req_i ( sub_req[SubDmem] ),
    .obi_rsp_o ( sub_rsp[SubDmem] )
  );

  obi_demux #(
    .NumSubs ( NumPeriph )
  ) i_periph_demux (
    .clk_i,
    .rst_ni,
    .mgr_req_i ( sub_req[SubPeriph] ),
    .mgr_rsp_o ( sub_rsp[SubPeriph] ),
    .sub_req_o ( per_req ),
    .sub_rsp_i ( per_rsp )
  );

  soc_regs i_regs (
    .clk_i,
    .rst_ni,
    .obi_req_i     ( per_req[PeriphRegs] ),
    .obi_rsp_o     ( per_rsp[PeriphRegs] ),
    .boot_addr_o,
    .fetch_en_o,
    .core_status_o,
    .boot_mode_o
  );

  uart i_uart (
    .clk_i,
    .rst_ni,
    .obi_req_i ( per_req[PeriphUart] ),
    .obi_rsp_o ( per_rsp[PeriphUart] ),
    .uart_rx_i,
    .uart_tx_o,
    .irq_o     ( uart_irq )
  );

  gpio #(
    .NumPins ( NumGpio )
  ) i_gpio (
    .clk_i,
    .rst_ni,
    .obi_req_i ( per_req[PeriphGpio] ),
    .obi_rsp_o ( per_rsp[PeriphGpio] ),
    .gpio_i,
    .gpio_o,
    .gpio_oe_o,
    .irq_o     ( gpio_irq )
  );

  timer i_timer (
    .clk_i,
    .rst_ni,
    .obi_req_i ( per_req[PeriphTimer] ),
    .obi_rsp_o ( per_rsp[PeriphTimer] ),
    .irq_o     ( irq_timer_o )
  );

  always_comb begin
    irq_fast_o                   = '0;
    irq_fast_o[0]                = uart_irq;
    irq_fast_o[1]                = gpio_irq;
    irq_fast_o[2 +: NumUserIrq]  = user_irq_i;
  end

endmodule
