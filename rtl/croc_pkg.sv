// croc_pkg: types, address map and constants shared by the SoC.
//
// The bus everywhere is a 32-bit OBI-style request/grant/response bundle,
// kept as two packed structs (request from manager, response from
// subordinate). Timing rule used by every subordinate in the design:
// a request is accepted in the cycle where req && gnt, and its response
// (rvalid, rdata, err) appears exactly one cycle later. This is what makes
// the interconnect "single-cycle" towards the SRAM banks.
//
// The optional burst sideband (blen) carries, on every beat of a burst,
// the number of beats minus one. The crossbar and plain subordinates ignore
// it; the HyperBus controller uses it to open one long HyperBus transaction
// instead of one per word.
//
// The 32-bit data width, the four 8 KiB SRAM banks and the two HyperBus PHYs
// follow the paper. The address map is this design's own choice (it follows
// the layout commonly used by Croc-style SoCs) since the paper gives none.
package croc_pkg;

  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 32;
  localparam int unsigned BlenWidth = 8;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [DataWidth/8-1:0] strb_t;

  typedef struct packed {
    logic                 req;
    addr_t                addr;
    logic                 we;
    strb_t                be;
    data_t                wdata;
    logic [BlenWidth-1:0] blen;   // beats-1 of the burst this beat belongs to
  } obi_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    data_t rdata;
    logic  err;
  } obi_rsp_t;

  localparam obi_req_t ObiReqIdle = '{default: '0};
  localparam obi_rsp_t ObiRspIdle = '{default: '0};

  // An address rule: addr in [start, end) selects a port.
  typedef struct packed {
    addr_t start_addr;
    addr_t end_addr;
  } addr_rule_t;

  // ---------------- Address map (design choice) ----------------
  localparam addr_t DebugBase    = 32'h0000_0000;
  localparam addr_t DebugEnd     = 32'h0004_0000;
  localparam addr_t BootromBase  = 32'h0200_0000;
  localparam addr_t BootromEnd   = 32'h0200_4000;
  localparam addr_t ClintBase    = 32'h0204_0000;
  localparam addr_t ClintEnd     = 32'h0205_0000;
  localparam addr_t SocRegsBase  = 32'h0300_0000;
  localparam addr_t SocRegsEnd   = 32'h0300_1000;
  localparam addr_t UartBase     = 32'h0300_2000;
  localparam addr_t UartEnd      = 32'h0300_3000;
  localparam addr_t GpioBase     = 32'h0300_5000;
  localparam addr_t GpioEnd      = 32'h0300_6000;
  localparam addr_t TimerBase    = 32'h0300_A000;
  localparam addr_t TimerEnd     = 32'h0300_B000;
  localparam addr_t IdmaBase     = 32'h0300_B000;
  localparam addr_t IdmaEnd      = 32'h0300_C000;
  localparam addr_t HyperCfgBase = 32'h0300_C000;
  localparam addr_t HyperCfgEnd  = 32'h0300_D000;
  localparam addr_t PeriphBase   = 32'h0000_0000;  // everything below SRAM
  localparam addr_t PeriphEnd    = 32'h1000_0000;
  localparam addr_t SramBase     = 32'h1000_0000;
  localparam addr_t UserBase     = 32'h2000_0000;
  localparam addr_t UserEnd      = 32'h8000_0000;
  localparam addr_t HyperBase    = 32'h8000_0000;  // external memory, iDMA only
  localparam addr_t HyperEnd     = 32'hA000_0000;  // 2 x 256 MiB

  // Peripheral demux port order
  typedef enum logic [3:0] {
    PeriphDebug   = 4'd0,
    PeriphBootrom = 4'd1,
    PeriphClint   = 4'd2,
    PeriphSocRegs = 4'd3,
    PeriphUart    = 4'd4,
    PeriphGpio    = 4'd5,
    PeriphTimer   = 4'd6,
    PeriphIdma    = 4'd7,
    PeriphHyper   = 4'd8
  } periph_idx_e;
  localparam int unsigned NumPeriph = 9;

  // HyperBus command/address word (48 bits, HyperBus specification layout)
  typedef struct packed {
    logic        read;        // CA[47]  1 = read
    logic        reg_space;   // CA[46]  1 = register space
    logic        linear;      // CA[45]  1 = linear burst
    logic [28:0] addr_hi;     // CA[44:16] half-word address [31:3]
    logic [12:0] reserved;    // CA[15:3]
    logic [2:0]  addr_lo;     // CA[2:0]  half-word address [2:0]
  } hyper_ca_t;

endpackage
