// croc_soc: the Croc SoC, a microcontroller-class RISC-V platform.
//
// This module is the "Croc domain": all chip infrastructure around the core.
//   * obi_xbar, the main crossbar. Managers: core instruction port, core
//     data port, debug unit, user domain. Subordinates: SRAM bank 0, SRAM
//     bank 1, peripheral demux, user domain.
//   * two sram_bank instances, 4 KiB each (8 KiB total), back to back at
//     0x1000_0000. Code in one bank and data in the other lets the core
//     fetch and load/store in the same cycle: one instruction per cycle.
//   * obi_demux to the peripherals: debug (0x0000_0000), boot ROM
//     (0x0200_0000), CLINT (0x0204_0000), SoC registers (0x0300_0000), UART
//     (0x0300_2000), GPIO (0x0300_5000), timer (0x0300_A000).
// The RISC-V core (CVE2, a separate open-source core) and the user domain
// (the slot for a custom accelerator or peripheral) are outside this
// module. The core's instruction and data OBI ports, boot address, fetch
// enable, debug request and interrupts are ports here, and so are the user
// domain's OBI manager and subordinate ports and interrupt lines.
//
// Bus timing: grant in the request cycle, response exactly one cycle later,
// for every subordinate, including the user domain's subordinate port.
// Interrupts to the core: timer_irq (CLINT), sw_irq (CLINT) and fast
// interrupts {user_irq_i, timer, gpio, uart} (bit 0 = UART).
// The block structure follows the source's architecture figure; the
// address map, interrupt numbering and bus timing rule are this design's
// own choices.
module croc_soc #(
  parameter int unsigned SramWords  = croc_pkg::SramBankWords,
  parameter int unsigned NumGpio    = 32,
  parameter int unsigned NumUserIrq = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  fetch_en_i,
  // JTAG
  input  logic                  jtag_tck_i,
  input  logic                  jtag_tms_i,
  input  logic                  jtag_tdi_i,
  input  logic                  jtag_trst_ni,
  output logic                  jtag_tdo_o,
  // UART
  input  logic                  uart_rx_i,
  output logic                  uart_tx_o,
  // GPIO
  input  logic [NumGpio-1:0]    gpio_i,
  output logic [NumGpio-1:0]    gpio_o,
  output logic [NumGpio-1:0]    gpio_oe_o,
  // core (CVE2) side
  input  croc_pkg::obi_req_t    core_instr_req_i,
  output croc_pkg::obi_rsp_t    core_instr_rsp_o,
  input  croc_pkg::obi_req_t    core_data_req_i,
  output croc_pkg::obi_rsp_t    core_data_rsp_o,
  output croc_pkg::addr_t       core_boot_addr_o,
  output logic                  core_fetch_en_o,
  output logic                  core_debug_req_o,
  output logic                  core_timer_irq_o,
  output logic                  core_sw_irq_o,
  output logic [NumUserIrq+2:0] core_fast_irq_o,
  output croc_pkg::data_t       core_status_o,
  // user domain side
  input  croc_pkg::obi_req_t    user_mgr_req_i,
  output croc_pkg::obi_rsp_t    user_mgr_rsp_o,
  output croc_pkg::obi_req_t    user_sbr_req_o,
  input  croc_pkg::obi_rsp_t    user_sbr_rsp_i,
  input  logic [NumUserIrq-1:0] user_irq_i
);
  import croc_pkg::*;

  localparam addr_t BankBytes = addr_t'(SramWords * 4);
  localparam addr_rule_t [XbarNumSbr-1:0] AddrMap = '{
    '{base: UserBase,              size: UserSize},
    '{base: PeriphBase,            size: PeriphSize},
    '{base: SramBase + BankBytes,  size: BankBytes},
    '{base: SramBase,              size: BankBytes}
  };

  obi_req_t [XbarNumMgr-1:0] xbar_mgr_req;
  obi_rsp_t [XbarNumMgr-1:0] xbar_mgr_rsp;
  obi_req_t [XbarNumSbr-1:0] xbar_sbr_req;
  obi_rsp_t [XbarNumSbr-1:0] xbar_sbr_rsp;
  obi_req_t [NumPeriph-1:0]  per_req;
  obi_rsp_t [NumPeriph-1:0]  per_rsp;
  logic                      uart_irq, gpio_irq, timer_irq;

  // ------------------------------------------------------------ managers
  assign xbar_mgr_req[MgrCoreInstr] = core_instr_req_i;
  assign xbar_mgr_req[MgrCoreData]  = core_data_req_i;
  assign xbar_mgr_req[MgrUser]      = user_mgr_req_i;
  assign core_instr_rsp_o = xbar_mgr_rsp[MgrCoreInstr];
  assign core_data_rsp_o  = xbar_mgr_rsp[MgrCoreData];
  assign user_mgr_rsp_o   = xbar_mgr_rsp[MgrUser];

  obi_xbar #(
    .NumMgr  (XbarNumMgr),
    .NumSbr  (XbarNumSbr),
    .AddrMap (AddrMap)
  ) i_xbar (
    .clk_i,
    .rst_ni,
    .mgr_req_i (xbar_mgr_req),
    .mgr_rsp_o (xbar_mgr_rsp),
    .sbr_req_o (xbar_sbr_req),
    .sbr_rsp_i (xbar_sbr_rsp)
  );

  // -------------------------------------------------------- memory banks
  for (genvar b = 0; b < NumSramBanks; b++) begin : gen_bank
    sram_bank #(.NumWords(SramWords)) i_bank (
      .clk_i,
      .rst_ni,
      .obi_req_i (xbar_sbr_req[SbrBank0 + b]),
      .obi_rsp_o (xbar_sbr_rsp[SbrBank0 + b])
    );
  end

  assign user_sbr_req_o         = xbar_sbr_req[SbrUser];
  assign xbar_sbr_rsp[SbrUser]  = user_sbr_rsp_i;

  // --------------------------------------------------------- peripherals
  obi_demux #(
    .NumSbr  (NumPeriph),
    .AddrMap (PeriphAddrMap)
  ) i_demux (
    .clk_i,
    .rst_ni,
    .mgr_req_i (xbar_sbr_req[SbrPeriph]),
    .mgr_rsp_o (xbar_sbr_rsp[SbrPeriph]),
    .sbr_req_o (per_req),
    .sbr_rsp_i (per_rsp)
  );

  dbg_jtag i_dbg (
    .clk_i,
    .rst_ni,
    .jtag_tck_i,
    .jtag_tms_i,
    .jtag_tdi_i,
    .jtag_trst_ni,
    .jtag_tdo_o,
    .mgr_req_o   (xbar_mgr_req[MgrDebug]),
    .mgr_rsp_i   (xbar_mgr_rsp[MgrDebug]),
    .sbr_req_i   (per_req[PerDebug]),
    .sbr_rsp_o   (per_rsp[PerDebug]),
    .debug_req_o (core_debug_req_o)
  );

  bootrom i_bootrom (
    .clk_i,
    .rst_ni,
    .obi_req_i (per_req[PerBootrom]),
    .obi_rsp_o (per_rsp[PerBootrom])
  );

  clint i_clint (
    .clk_i,
    .rst_ni,
    .obi_req_i   (per_req[PerClint]),
    .obi_rsp_o   (per_rsp[PerClint]),
    .timer_irq_o (core_timer_irq_o),
    .sw_irq_o    (core_sw_irq_o)
  );

  soc_ctrl i_soc_ctrl (
    .clk_i,
    .rst_ni,
    .obi_req_i     (per_req[PerSocCtrl]),
    .obi_rsp_o     (per_rsp[PerSocCtrl]),
    .fetch_en_i,
    .boot_addr_o   (core_boot_addr_o),
    .fetch_en_o    (core_fetch_en_o),
    .core_status_o
  );

  uart i_uart (
    .clk_i,
    .rst_ni,
    .obi_req_i (per_req[PerUart]),
    .obi_rsp_o (per_rsp[PerUart]),
    .rx_i      (uart_rx_i),
    .tx_o      (uart_tx_o),
    .irq_o     (uart_irq)
  );

  gpio #(.NumGpio(NumGpio)) i_gpio (
    .clk_i,
    .rst_ni,
    .obi_req_i (per_req[PerGpio]),
    .obi_rsp_o (per_rsp[PerGpio]),
    .gpio_i,
    .gpio_o,
    .gpio_oe_o,
    .irq_o     (gpio_irq)
  );

  obi_timer i_timer (
    .clk_i,
    .rst_ni,
    .obi_req_i (per_req[PerTimer]),
    .obi_rsp_o (per_rsp[PerTimer]),
    .irq_o     (timer_irq)
  );

  assign core_fast_irq_o = {user_irq_i, timer_irq, gpio_irq, uart_irq};

endmodule
