// pe_pkg: types and constants shared by the processing element (PE).
//
// The PE bus follows the request/grant/response style of the CV32E40P
// core's instruction and data ports: a master raises req with an address,
// write enable, byte enables and write data; the cycle in which gnt is high
// the request is taken; exactly one cycle later rvalid returns with rdata.
// All PE slaves answer with this fixed one-cycle latency.
//
// Sizes that come from the paper: four 32 KiB SRAM banks (128 KiB in all),
// each split into 4 KiB macros, and a 200 ns SRAM wake-up, which is 10
// cycles of the 50 MHz PE clock. The address map, the register offsets and
// the bus encoding are choices of this design.
package pe_pkg;

  localparam int unsigned XLEN          = 32;
  localparam int unsigned N_BANKS       = 4;          // four SRAM banks
  localparam int unsigned BANK_BYTES    = 32 * 1024;  // 32 KiB per bank
  localparam int unsigned MACRO_BYTES   = 4 * 1024;   // 4 KiB macros
  localparam int unsigned MACROS_PER_BANK = BANK_BYTES / MACRO_BYTES;  // 8
  localparam int unsigned F_CLK_MHZ     = 50;         // active-mode clock
  localparam int unsigned SRAM_WAKEUP_NS = 200;       // SRAM wake-up time
  localparam int unsigned SRAM_WAKEUP_CYCLES = SRAM_WAKEUP_NS * F_CLK_MHZ / 1000;  // 10

  // Address map (this design's choice)
  localparam logic [31:0] SRAM_BASE   = 32'h0000_0000;  // 128 KiB, bank = addr[16:15]
  localparam logic [31:0] TIMER_BASE  = 32'h1000_0000;
  localparam logic [31:0] WAKEUP_BASE = 32'h1000_1000;

  // Bus masters and slaves of the crossbar
  localparam int unsigned N_MASTERS = 4;
  localparam int unsigned M_INSTR = 0, M_DATA = 1, M_I2C = 2, M_MBIST = 3;
  localparam int unsigned N_SLAVES = 7;
  localparam int unsigned S_TIMER = 4, S_WAKEUP = 5, S_NONE = 6;

  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  // SRAM macro power state, A_PDRET[1:0] (encoding is this design's choice)
  typedef enum logic [1:0] {
    PDRET_ACTIVE    = 2'b00,  // bit array and periphery powered
    PDRET_RETENTION = 2'b01,  // periphery off, bit array keeps its state
    PDRET_POWERDOWN = 2'b10   // both off, contents lost (2'b11 also powers down)
  } pdret_e;

  // Operating modes of the PE
  typedef enum logic [1:0] {
    PE_ACTIVE    = 2'b00,
    PE_SLEEP     = 2'b01,
    PE_RETENTION = 2'b10
  } pe_mode_e;

  function automatic int unsigned slave_of(logic [31:0] addr);
    if (addr[31:17] == SRAM_BASE[31:17])            return int'(addr[16:15]);
    if (addr[31:12] == TIMER_BASE[31:12])           return S_TIMER;
    if (addr[31:12] == WAKEUP_BASE[31:12])          return S_WAKEUP;
    return S_NONE;
  endfunction

endpackage
