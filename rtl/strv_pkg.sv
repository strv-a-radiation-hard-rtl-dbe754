// strv_pkg: types and constants shared by the STRV-R1 blocks.
//
// The system is built from three identical logic copies ("domains" A, B, C of the triple
// modular redundancy, index 0..2). Every bus between blocks therefore exists three times and
// is carried as an unpacked array [3] of the structs below.
//
// Bus protocol (this design's choice): a master raises req with addr/we/be/wdata and holds
// them until gnt is seen in the same cycle. Exactly one cycle after the grant, rvalid is high
// for one cycle and rdata carries the read data (rdata is don't-care for writes).
//
// Memory map (this design's choice; the paper gives the SRAM size, 32 kB, but no addresses):
//   0x0000_0000 - 0x0000_7FFF  shared instruction/data SRAM (aliased below 0x8000_0000)
//   0x8000_0000                GPIO      (+0 OUT, +4 DIR, +8 IN)
//   0x8000_0100                UART      (+0 TXDATA, +4 RXDATA, +8 STATUS, +C BAUDDIV)
//   0x8000_0200                SEU counters (+0 core, +4 SRAM, +8 peripherals)
package strv_pkg;

  localparam int unsigned NDOM       = 3;      // TMR copies
  localparam int unsigned SRAM_BYTES = 32768;  // 32 kB shared SRAM (paper, Sec. 2)
  localparam int unsigned SRAM_WORDS = SRAM_BYTES / 4;
  localparam int unsigned SRAM_AW    = $clog2(SRAM_WORDS);
  localparam int unsigned N_GPIO     = 27;     // paper, Sec. 2.1

  localparam logic [31:0] RESET_PC     = 32'h0000_0000;
  localparam logic [31:0] PERIPH_BASE  = 32'h8000_0000;
  localparam logic [7:0]  GPIO_PAGE    = 8'h00;  // addr[15:8] within the peripheral region
  localparam logic [7:0]  UART_PAGE    = 8'h01;
  localparam logic [7:0]  SEUCNT_PAGE  = 8'h02;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  // One SRAM port request, as seen by a single macro.
  typedef struct packed {
    logic               cs;
    logic               we;
    logic [3:0]         be;
    logic [SRAM_AW-1:0] addr;
    logic [31:0]        wdata;
  } sram_req_t;

  // Architectural and pipeline state of one domain of the core (register file excluded).
  typedef struct packed {
    // fetch stage: halfword prefetch queue
    logic [31:0]      fetch_pc;    // word address of the next fetch
    logic             inflight;    // a fetch was granted last cycle
    logic             drop_first;  // discard lower half of the returning word
    logic [5:0][15:0] q;           // q[0] is the oldest halfword
    logic [2:0]       q_cnt;
    logic [31:0]      q_pc;        // PC of q[0]
    // writeback stage
    logic             wb_valid;
    logic             wb_load;
    logic [4:0]       wb_rd;
    logic [2:0]       wb_f3;
    logic [1:0]       wb_off;
    logic [31:0]      wb_data;
    // iterative divider
    logic             div_busy;
    logic             div_done;
    logic [5:0]       div_cnt;
    logic [31:0]      div_rem;
    logic [31:0]      div_quo;
    logic [31:0]      div_dvs;
    logic             halted;      // EBREAK/ECALL/illegal instruction stops the core
  } core_state_t;

endpackage
