// croc_pkg: types and constants shared by the Croc domain.
//
// The Croc domain connects its managers and subordinates through OBI, the
// Open Bus Interface. A request carries req/addr/we/be/wdata/aid; the
// subordinate grants it (gnt) in the cycle it is accepted, and returns one
// response (rvalid with rdata/rid/err) per granted request. In this design
// every subordinate answers exactly one cycle after the grant, which is what
// makes the interconnect "single-cycle": a core fetching from one SRAM bank
// and loading from the other can complete one access per port per cycle.
//
// The OBI signal set follows the OBI 1 standard. The 32-bit widths follow
// from the 32-bit RISC-V core. The address map, the SRAM bank size and the
// interrupt numbering are this design's own choices; the GPIO count (26) is
// the number of GPIO pins of the first chip built from the platform.
package croc_pkg;

  // ---------------------------------------------------------------- OBI bus
  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 32;
  localparam int unsigned IdWidth   = 2;

  typedef logic [AddrWidth-1:0]   addr_t;
  typedef logic [DataWidth-1:0]   data_t;
  typedef logic [DataWidth/8-1:0] strb_t;
  typedef logic [IdWidth-1:0]     id_t;

  typedef struct packed {
    addr_t addr;
    logic  we;
    strb_t be;
    data_t wdata;
    id_t   aid;
  } obi_a_chan_t;

  typedef struct packed {
    logic        req;
    obi_a_chan_t a;
  } obi_req_t;

  typedef struct packed {
    data_t rdata;
    id_t   rid;
    logic  err;
  } obi_r_chan_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    obi_r_chan_t r;
  } obi_rsp_t;

  localparam obi_req_t ObiReqIdle = '0;
  localparam obi_rsp_t ObiRspIdle = '0;

  // Read data returned for an access no subordinate decodes.
  localparam data_t ErrRdata = 32'h0000_0000;

  // ------------------------------------------------------------ crossbar map
  // Managers of the crossbar.
  typedef enum int unsigned {
    MgrCoreInstr = 0,
    MgrCoreData  = 1,
    MgrDebug     = 2,
    MgrUser      = 3
  } mgr_idx_e;
  localparam int unsigned NumMgr = 4;

  // Subordinates of the crossbar.
  typedef enum int unsigned {
    SubDebug  = 0,
    SubImem   = 1,
    SubDmem   = 2,
    SubPeriph = 3,
    SubUser   = 4
  } sub_idx_e;
  localparam int unsigned NumSub = 5;

  // SRAM: two banks, the first used as instruction memory and the second as
  // data memory, placed back to back.
  localparam int unsigned NumSramBanks  = 2;
  localparam int unsigned SramNumWords  = 512;
  localparam int unsigned SramBankBytes = SramNumWords * DataWidth / 8;

  localparam addr_t DebugBase  = 32'h0000_0000;
  localparam addr_t DebugSize  = 32'h0000_1000;
  localparam addr_t PeriphBase = 32'h0300_0000;
  localparam addr_t PeriphSize = 32'h0001_0000;
  localparam addr_t SramBase   = 32'h1000_0000;
  localparam addr_t ImemBase   = SramBase;
  localparam addr_t DmemBase   = SramBase + SramBankBytes;
  localparam addr_t UserBase   = 32'h2000_0000;
  localparam addr_t UserSize   = 32'h1000_0000;

  // Peripherals behind the OBI demux, 4 KiB each.
  typedef enum int unsigned {
    PeriphRegs  = 0,
    PeriphUart  = 1,
    PeriphGpio  = 2,
    PeriphTimer = 3
  } periph_idx_e;
  localparam int unsigned NumPeriph = 4;

  localparam addr_t PeriphRegsBase  = PeriphBase + 32'h0000;
  localparam addr_t PeriphUartBase  = PeriphBase + 32'h2000;
  localparam addr_t PeriphGpioBase  = PeriphBase + 32'h5000;
  localparam addr_t PeriphTimerBase = PeriphBase + 32'hA000;
  localparam addr_t PeriphSlotSize  = 32'h0000_1000;

  // ---------------------------------------------------------------- I/O
  localparam int unsigned NumGpio    = 26;
  localparam int unsigned NumUserIrq = 4;

  // Address decoders, returning the index or -1 when nothing matches.
  function automatic int xbar_decode(addr_t addr);
    if (addr < DebugBase + DebugSize)                              return int'(SubDebug);
    if (addr >= ImemBase   && addr < ImemBase + SramBankBytes)      return int'(SubImem);
    if (addr >= DmemBase   && addr < DmemBase + SramBankBytes)      return int'(SubDmem);
    if (addr >= PeriphBase && addr < PeriphBase + PeriphSize)       return int'(SubPeriph);
    if (addr >= UserBase   && addr < UserBase + UserSize)           return int'(SubUser);
    return -1;
  endfunction

  function automatic int periph_decode(addr_t addr);
    if (addr >= PeriphRegsBase  && addr < PeriphRegsBase  + PeriphSlotSize) return int'(PeriphRegs);
    if (addr >= PeriphUartBase  && addr < PeriphUartBase  + PeriphSlotSize) return int'(PeriphUart);
    if (addr >= PeriphGpioBase  && addr < PeriphGpioBase  + PeriphSlotSize) return int'(PeriphGpio);
    if (addr >= PeriphTimerBase && addr < PeriphTimerBase + PeriphSlotSize) return int'(PeriphTimer);
    return -1;
  endfunction

  // Merge a write into a word under byte enables.
  function automatic data_t apply_be(data_t old, data_t wdata, strb_t be);
    data_t res = old;
    for (int i = 0; i < DataWidth / 8; i++) begin
      if (be[i]) res[8*i +: 8] = wdata[8*i +: 8];
    end
    return res;
  endfunction

endpackage
