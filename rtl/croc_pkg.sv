// croc_pkg: types and constants shared by the Croc SoC blocks.
//
// The on-chip bus is OBI (Open Bus Interface). A request carries `req` plus
// an address phase (addr, we, be, wdata, aid); the subordinate answers with
// `gnt` in the same cycle. The response phase (rvalid, rdata, err, rid)
// follows. In this design every subordinate answers exactly one cycle after
// its grant, which is what lets the interconnect be "single cycle": a
// manager can issue a new request every cycle and receives one response per
// cycle.
//
// The address map is this design's own choice (the paper gives none); it
// follows the layout commonly used for this SoC: peripherals in the low
// 256 MiB, SRAM at 0x1000_0000, the user domain at 0x2000_0000.
package croc_pkg;

  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 32;
  localparam int unsigned IdWidth   = 1;

  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [DataWidth/8-1:0] strb_t;
  typedef logic [IdWidth-1:0]     id_t;

  // OBI address phase
  typedef struct packed {
    addr_t addr;
    logic  we;
    strb_t be;
    data_t wdata;
    id_t   aid;
  } obi_a_t;

  typedef struct packed {
    logic   req;
    obi_a_t a;
  } obi_req_t;

  // OBI response phase
  typedef struct packed {
    data_t rdata;
    logic  err;
    id_t   rid;
  } obi_r_t;

  typedef struct packed {
    logic   gnt;
    logic   rvalid;
    obi_r_t r;
  } obi_rsp_t;

  // One address window: [base, base + size)
  typedef struct packed {
    addr_t base;
    addr_t size;
  } addr_rule_t;

  // ---------------------------------------------------------------- memory
  // Table I of the source: 8 kB on-chip memory in the baseline, in two banks.
  localparam int unsigned NumSramBanks  = 2;
  localparam int unsigned SramBankWords = 1024;            // 4 KiB per bank
  localparam addr_t       SramBase      = 32'h1000_0000;
  localparam addr_t       SramBankSize  = addr_t'(SramBankWords * 4);

  // ----------------------------------------------------------- crossbar map
  // Managers (Figure 2): core instruction, core data, debug, user domain.
  typedef enum int unsigned {
    MgrCoreInstr = 0,
    MgrCoreData  = 1,
    MgrDebug     = 2,
    MgrUser      = 3
  } xbar_mgr_e;
  localparam int unsigned XbarNumMgr = 4;

  // Subordinates (Figure 2): bank 0, bank 1, peripheral demux, user domain.
  typedef enum int unsigned {
    SbrBank0  = 0,
    SbrBank1  = 1,
    SbrPeriph = 2,
    SbrUser   = 3
  } xbar_sbr_e;
  localparam int unsigned XbarNumSbr = 4;

  localparam addr_t PeriphBase = 32'h0000_0000;
  localparam addr_t PeriphSize = 32'h1000_0000;
  localparam addr_t UserBase   = 32'h2000_0000;
  localparam addr_t UserSize   = 32'h1000_0000;

  localparam addr_rule_t [XbarNumSbr-1:0] XbarAddrMap = '{
    '{base: UserBase,                  size: UserSize},      // 3 user
    '{base: PeriphBase,                size: PeriphSize},    // 2 peripherals
    '{base: SramBase + SramBankSize,   size: SramBankSize},  // 1 bank 1
    '{base: SramBase,                  size: SramBankSize}   // 0 bank 0
  };

  // ------------------------------------------------------- peripheral map
  typedef enum int unsigned {
    PerDebug   = 0,
    PerBootrom = 1,
    PerClint   = 2,
    PerSocCtrl = 3,
    PerUart    = 4,
    PerGpio    = 5,
    PerTimer   = 6
  } periph_e;
  localparam int unsigned NumPeriph = 7;

  localparam addr_t DebugBase   = 32'h0000_0000;
  localparam addr_t BootromBase = 32'h0200_0000;
  localparam addr_t ClintBase   = 32'h0204_0000;
  localparam addr_t SocCtrlBase = 32'h0300_0000;
  localparam addr_t UartBase    = 32'h0300_2000;
  localparam addr_t GpioBase    = 32'h0300_5000;
  localparam addr_t TimerBase   = 32'h0300_A000;

  localparam addr_rule_t [NumPeriph-1:0] PeriphAddrMap = '{
    '{base: TimerBase,   size: 32'h0000_1000},
    '{base: GpioBase,    size: 32'h0000_1000},
    '{base: UartBase,    size: 32'h0000_1000},
    '{base: SocCtrlBase, size: 32'h0000_1000},
    '{base: ClintBase,   size: 32'h0001_0000},
    '{base: BootromBase, size: 32'h0000_1000},
    '{base: DebugBase,   size: 32'h0000_1000}
  };

  // Write-enable mask from byte enables: merge new bytes into an old word.
  function automatic data_t apply_be(data_t old_w, data_t new_w, strb_t be);
    data_t res = old_w;
    for (int unsigned i = 0; i < DataWidth / 8; i++) begin
      if (be[i]) res[8*i +: 8] = new_w[8*i +: 8];
    end
    return res;
  endfunction

endpackage
