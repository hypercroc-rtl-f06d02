// croc_soc: top level of the SoC, a RISC-V microcontroller whose memory
// system is extended with a DMA engine and a HyperBus external-memory
// controller, and with a plug-in port for a domain-specific accelerator.
//
// Structure (following the paper's block diagram):
//  * Main 32-bit OBI crossbar, single-cycle. Managers: core instruction
//    port, core data port, debug module, iDMA read side, iDMA write side,
//    user-domain manager. Subordinates: the peripheral demux, four 8 KiB
//    SRAM banks, the user-domain subordinate window.
//  * Peripheral demux: debug memory window, boot ROM, CLINT, SoC registers,
//    UART, GPIO, timer, and the configuration ports of the iDMA and of the
//    HyperBus controller.
//  * iDMA: reaches SRAM and the user domain through the crossbar and the
//    HyperBus controller through two direct burst ports.
//  * HyperBus controller with two PHYs (2 x 256 MiB, in the PHY clock
//    domain phy_clk_i), reachable only through the iDMA.
// The CPU core (a 3-stage RV32IMCB core), the JTAG/debug module and the
// accelerator are not part of this RTL: their bus ports, interrupts and
// boot controls are ports of this module, to be connected to those blocks.
//
// Address map (this design's choice; the paper gives none):
//   0x0000_0000 debug window     0x0200_0000 boot ROM   0x0204_0000 CLINT
//   0x0300_0000 SoC registers    0x0300_2000 UART       0x0300_5000 GPIO
//   0x0300_A000 timer            0x0300_B000 iDMA cfg   0x0300_C000 HyperBus cfg
//   0x1000_0000 SRAM bank 0..3 (8 KiB each, contiguous)
//   0x2000_0000 user domain      0x8000_0000 HyperBus memory (iDMA only)
// Every subordinate answers one cycle after its grant; an unmapped address
// gets an error response.
// Interrupts to the core: CLINT timer and software interrupts, and fast
// interrupt lines [0] UART, [1] GPIO, [2] timer, [3] iDMA done,
// [11:4] user-domain interrupts.
//
// Lint tools may report rst_ni as used both asynchronously and
// synchronously: every flip-flop resets asynchronously, the synchronous
// use is only the disable-iff condition of the bus assertions.
module croc_soc
  import croc_pkg::*;
#(
  parameter int unsigned NumBanks    = 4,
  parameter int unsigned BankWords   = 2048,   // 8 KiB
  parameter int unsigned NumPhys     = 2,
  parameter int unsigned NumCs       = 4,
  parameter int unsigned NumGpio     = 32,
  parameter int unsigned NumUserIrqs = 8,
  parameter int unsigned UartDiv     = 868
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          rtc_tick_i,     // CLINT time base
  input  logic                          phy_clk_i,      // HyperBus PHY clock
  input  logic [1:0]                    bootmode_i,
  // core (outside this RTL)
  input  obi_req_t                      core_instr_req_i,
  output obi_rsp_t                      core_instr_rsp_o,
  input  obi_req_t                      core_data_req_i,
  output obi_rsp_t                      core_data_rsp_o,
  output addr_t                         core_boot_addr_o,
  output logic                          core_fetch_en_o,
  output data_t                         core_status_o,
  output logic                          core_irq_timer_o,
  output logic                          core_irq_sw_o,
  output logic [14:0]                   core_irq_fast_o,
  // debug module (outside this RTL)
  input  obi_req_t                      dbg_mgr_req_i,
  output obi_rsp_t                      dbg_mgr_rsp_o,
  output obi_req_t                      dbg_sbr_req_o,
  input  obi_rsp_t                      dbg_sbr_rsp_i,
  // user domain
  input  obi_req_t                      user_mgr_req_i,
  output obi_rsp_t                      user_mgr_rsp_o,
  output obi_req_t                      user_sbr_req_o,
  input  obi_rsp_t                      user_sbr_rsp_i,
  input  logic [NumUserIrqs-1:0]        user_irqs_i,
  // UART and GPIO pads
  input  logic                          uart_rx_i,
  output logic                          uart_tx_o,
  input  logic [NumGpio-1:0]            gpio_i,
  output logic [NumGpio-1:0]            gpio_o,
  output logic [NumGpio-1:0]            gpio_oe_o,
  // HyperBus pads
  output logic [NumPhys-1:0][NumCs-1:0] hyper_cs_no,
  output logic [NumPhys-1:0]            hyper_ck_o,
  output logic [NumPhys-1:0]            hyper_ck_no,
  output logic [NumPhys-1:0]            hyper_reset_no,
  output logic [NumPhys-1:0][7:0]       hyper_dq_o,
  output logic [NumPhys-1:0]            hyper_dq_oe_o,
  input  logic [NumPhys-1:0][7:0]       hyper_dq_i,
  output logic [NumPhys-1:0]            hyper_rwds_o,
  output logic [NumPhys-1:0]            hyper_rwds_oe_o,
  input  logic [NumPhys-1:0]            hyper_rwds_i
);
  localparam int unsigned NumMgr   = 6;
  localparam int unsigned NumSbr   = NumBanks + 2;
  localparam addr_t       BankSize = addr_t'(BankWords * 4);

  function automatic addr_rule_t [NumSbr-1:0] xbar_rules();
    addr_rule_t [NumSbr-1:0] r;
    r[0] = '{start_addr: PeriphBase, end_addr: PeriphEnd};
    for (int b = 0; b < NumBanks; b++) begin
      r[1+b] = '{start_addr: SramBase + addr_t'(b) * BankSize,
                 end_addr:   SramBase + addr_t'(b + 1) * BankSize};
    end
    r[NumSbr-1] = '{start_addr: UserBase, end_addr: UserEnd};
    return r;
  endfunction

  localparam addr_rule_t [NumPeriph-1:0] PeriphRules = '{
    PeriphHyper:   '{start_addr: HyperCfgBase, end_addr: HyperCfgEnd},
    PeriphIdma:    '{start_addr: IdmaBase,     end_addr: IdmaEnd},
    PeriphTimer:   '{start_addr: TimerBase,    end_addr: TimerEnd},
    PeriphGpio:    '{start_addr: GpioBase,     end_addr: GpioEnd},
    PeriphUart:    '{start_addr: UartBase,     end_addr: UartEnd},
    PeriphSocRegs: '{start_addr: SocRegsBase,  end_addr: SocRegsEnd},
    PeriphClint:   '{start_addr: ClintBase,    end_addr: ClintEnd},
    PeriphBootrom: '{start_addr: BootromBase,  end_addr: BootromEnd},
    PeriphDebug:   '{start_addr: DebugBase,    end_addr: DebugEnd}
  };

  obi_req_t [NumMgr-1:0]    mgr_req;
  obi_rsp_t [NumMgr-1:0]    mgr_rsp;
  obi_req_t [NumSbr-1:0]    sbr_req;
  obi_rsp_t [NumSbr-1:0]    sbr_rsp;
  obi_req_t [NumPeriph-1:0] per_req;
  obi_rsp_t [NumPeriph-1:0] per_rsp;
  obi_req_t hyper_rd_req, hyper_wr_req;
  obi_rsp_t hyper_rd_rsp, hyper_wr_rsp;
  logic irq_uart, irq_gpio, irq_timer, irq_idma, idma_busy;

  // ---------------- crossbar ----------------
  assign mgr_req[0]       = core_instr_req_i;
  assign mgr_req[1]       = core_data_req_i;
  assign mgr_req[2]       = dbg_mgr_req_i;
  assign mgr_req[5]       = user_mgr_req_i;
  assign core_instr_rsp_o = mgr_rsp[0];
  assign core_data_rsp_o  = mgr_rsp[1];
  assign dbg_mgr_rsp_o    = mgr_rsp[2];
  assign user_mgr_rsp_o   = mgr_rsp[5];

  obi_xbar #(.NumMgr(NumMgr), .NumSbr(NumSbr), .Rules(xbar_rules())) i_xbar (
    .clk_i, .rst_ni,
    .mgr_req_i(mgr_req), .mgr_rsp_o(mgr_rsp),
    .sbr_req_o(sbr_req), .sbr_rsp_i(sbr_rsp)
  );

  // ---------------- SRAM banks ----------------
  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank
    sram_bank #(.NumWords(BankWords)) i_bank (
      .clk_i, .rst_ni, .req_i(sbr_req[1+b]), .rsp_o(sbr_rsp[1+b])
    );
  end

  // ---------------- user domain ----------------
  assign user_sbr_req_o      = sbr_req[NumSbr-1];
  assign sbr_rsp[NumSbr-1]   = user_sbr_rsp_i;

  // ---------------- peripherals ----------------
  obi_demux #(.NumSbr(NumPeriph), .Rules(PeriphRules)) i_demux (
    .clk_i, .rst_ni,
    .mgr_req_i(sbr_req[0]), .mgr_rsp_o(sbr_rsp[0]),
    .sbr_req_o(per_req), .sbr_rsp_i(per_rsp)
  );

  assign dbg_sbr_req_o        = per_req[PeriphDebug];
  assign per_rsp[PeriphDebug] = dbg_sbr_rsp_i;

  bootrom i_bootrom (
    .clk_i, .rst_ni, .req_i(per_req[PeriphBootrom]), .rsp_o(per_rsp[PeriphBootrom])
  );

  clint i_clint (
    .clk_i, .rst_ni, .tick_i(rtc_tick_i),
    .req_i(per_req[PeriphClint]), .rsp_o(per_rsp[PeriphClint]),
    .timer_irq_o(core_irq_timer_o), .sw_irq_o(core_irq_sw_o)
  );

  soc_regs #(.NumBanks(NumBanks), .BankKiB(BankWords * 4 / 1024), .NumPhys(NumPhys),
             .NumCs(NumCs)) i_soc_regs (
    .clk_i, .rst_ni,
    .req_i(per_req[PeriphSocRegs]), .rsp_o(per_rsp[PeriphSocRegs]),
    .bootmode_i, .boot_addr_o(core_boot_addr_o), .fetch_enable_o(core_fetch_en_o),
    .core_status_o
  );

  uart #(.DivReset(UartDiv)) i_uart (
    .clk_i, .rst_ni, .req_i(per_req[PeriphUart]), .rsp_o(per_rsp[PeriphUart]),
    .rx_i(uart_rx_i), .tx_o(uart_tx_o), .irq_o(irq_uart)
  );

  gpio #(.NumPins(NumGpio)) i_gpio (
    .clk_i, .rst_ni, .req_i(per_req[PeriphGpio]), .rsp_o(per_rsp[PeriphGpio]),
    .gpio_i, .gpio_o, .gpio_oe_o, .irq_o(irq_gpio)
  );

  timer i_timer (
    .clk_i, .rst_ni, .req_i(per_req[PeriphTimer]), .rsp_o(per_rsp[PeriphTimer]),
    .irq_o(irq_timer)
  );

  // ---------------- iDMA ----------------
  idma i_idma (
    .clk_i, .rst_ni,
    .cfg_req_i(per_req[PeriphIdma]), .cfg_rsp_o(per_rsp[PeriphIdma]),
    .xbar_rd_req_o(mgr_req[3]),  .xbar_rd_rsp_i(mgr_rsp[3]),
    .hyper_rd_req_o(hyper_rd_req), .hyper_rd_rsp_i(hyper_rd_rsp),
    .xbar_wr_req_o(mgr_req[4]),  .xbar_wr_rsp_i(mgr_rsp[4]),
    .hyper_wr_req_o(hyper_wr_req), .hyper_wr_rsp_i(hyper_wr_rsp),
    .busy_o(idma_busy), .irq_o(irq_idma)
  );

  // ---------------- HyperBus ----------------
  hyperbus #(.NumPhys(NumPhys), .NumCs(NumCs)) i_hyperbus (
    .clk_i, .rst_ni, .phy_clk_i,
    .cfg_req_i(per_req[PeriphHyper]), .cfg_rsp_o(per_rsp[PeriphHyper]),
    .rd_req_i(hyper_rd_req), .rd_rsp_o(hyper_rd_rsp),
    .wr_req_i(hyper_wr_req), .wr_rsp_o(hyper_wr_rsp),
    .hyper_cs_no, .hyper_ck_o, .hyper_ck_no, .hyper_reset_no,
    .hyper_dq_o, .hyper_dq_oe_o, .hyper_dq_i,
    .hyper_rwds_o, .hyper_rwds_oe_o, .hyper_rwds_i
  );

  // ---------------- interrupts ----------------
  always_comb begin
    core_irq_fast_o      = '0;
    core_irq_fast_o[0]   = irq_uart;
    core_irq_fast_o[1]   = irq_gpio;
    core_irq_fast_o[2]   = irq_timer;
    core_irq_fast_o[3]   = irq_idma;
    for (int i = 0; i < NumUserIrqs && i < 8; i++) core_irq_fast_o[4+i] = user_irqs_i[i];
  end

endmodule
