// heep_pkg: types and constants shared by the HEEPidermis RTL.
//
// The on-chip buses follow the OBI protocol: a request phase (req/gnt) carrying
// address, write enable, byte enables and write data, and a response phase
// (rvalid/rdata). In this design every slave grants at once and answers exactly
// one cycle after the grant, which keeps the crossbar and the peripheral
// buses free of response FIFOs.
//
// The memory map is this design's own choice (the reference design's map is
// not published with it): two 16 KiB RAM banks at the bottom, the always-on
// peripheral bus at 0x2000_0000, the peripheral bus at 0x3000_0000 and the
// external peripheral bus, which holds the analog front-end controllers, at
// 0x3008_0000. Each front-end controller owns a 256-byte register window.
package heep_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_rsp_t;

  localparam obi_req_t OBI_REQ_IDLE = '{req: 1'b0, we: 1'b0, be: 4'h0, addr: 32'h0, wdata: 32'h0};
  localparam obi_rsp_t OBI_RSP_IDLE = '{gnt: 1'b0, rvalid: 1'b0, rdata: 32'h0};

  // ---------------------------------------------------------------- system bus
  localparam int unsigned SYS_NM = 7;  // masters
  localparam int unsigned SYS_NS = 5;  // slaves

  typedef enum logic [2:0] {
    M_CPU_INSTR = 3'd0,
    M_CPU_DATA  = 3'd1,
    M_DEBUG     = 3'd2,
    M_DMA_ADC_R = 3'd3,
    M_DMA_ADC_W = 3'd4,
    M_DMA_DAC_R = 3'd5,
    M_DMA_DAC_W = 3'd6
  } sys_master_e;

  typedef enum logic [2:0] {
    S_RAM_I  = 3'd0,
    S_RAM_D  = 3'd1,
    S_AO     = 3'd2,
    S_PERIPH = 3'd3,
    S_EXT    = 3'd4
  } sys_slave_e;

  localparam logic [31:0] RAM_I_BASE  = 32'h0000_0000;
  localparam logic [31:0] RAM_D_BASE  = 32'h0000_4000;
  localparam logic [31:0] RAM_SIZE    = 32'h0000_4000;  // 16 KiB per bank
  localparam logic [31:0] AO_BASE     = 32'h2000_0000;
  localparam logic [31:0] PERIPH_BASE = 32'h3000_0000;
  localparam logic [31:0] EXT_BASE    = 32'h3008_0000;
  localparam logic [31:0] EXT_SIZE    = 32'h0001_0000;

  // Which system-bus slave serves an address. Anything outside the RAM banks,
  // the always-on window and the external window goes to the peripheral bus.
  function automatic sys_slave_e sys_decode(logic [31:0] addr);
    if (addr < RAM_I_BASE + RAM_SIZE)                       return S_RAM_I;
    if (addr >= RAM_D_BASE && addr < RAM_D_BASE + RAM_SIZE) return S_RAM_D;
    if (addr[31:28] == AO_BASE[31:28])                      return S_AO;
    if (addr >= EXT_BASE && addr < EXT_BASE + EXT_SIZE)     return S_EXT;
    return S_PERIPH;
  endfunction

  // ------------------------------------------- peripheral windows (256 B each)
  localparam int unsigned WIN_BITS = 8;
  // external peripheral bus
  localparam int unsigned EXT_IDAC  = 0;
  localparam int unsigned EXT_VCO   = 1;
  localparam int unsigned EXT_DLC   = 2;
  localparam int unsigned EXT_REFS  = 3;
  localparam int unsigned EXT_AMUX  = 4;
  localparam int unsigned EXT_DSM   = 5;
  localparam int unsigned EXT_N     = 6;
  // always-on bus: two DMA windows, the rest of the window leaves the design
  localparam int unsigned AO_DMA_ADC = 0;
  localparam int unsigned AO_DMA_DAC = 1;
  localparam int unsigned AO_OTHER   = 2;
  localparam int unsigned AO_N       = 3;

  // Merge a bus write into a register, byte lane by byte lane.
  function automatic logic [31:0] apply_be(logic [31:0] old, logic [31:0] wdata, logic [3:0] be);
    logic [31:0] r;
    for (int i = 0; i < 4; i++) r[8*i +: 8] = be[i] ? wdata[8*i +: 8] : old[8*i +: 8];
    return r;
  endfunction

endpackage
