// strv_top: the STRV-R1 radiation-tolerant RV32IMC microcontroller.
//
// Three groups of logic, matching the chip's three supply domains (paper, Sec. 2.1):
//  * core domain: the RV32IMC core (strv_core), the JTAG debug module and the memory bridge
//    that lets the core's instruction and data buses share the SRAM;
//  * SRAM domain: three 32 kB dual-port SRAM copies with voted read data (tmr_sram) and the
//    independent refresh engine (sram_scrubber) on their second port;
//  * peripheral domain: 27 GPIOs, one UART and the three SEU counters (strv_periph).
// Every block is fully triplicated (TMR): each has three logic copies on three clock trees and
// resets (clk_i[k], rst_ni[k]), and all its flip-flops are voted with feedback. The OR of all
// voter discrepancy signals of a domain (copy 0) is brought out on seu_o (bit 0 core, 1 SRAM,
// 2 peripherals) and counted by the SEU counters.
//
// Ports: clk_i/rst_ni (active-low, asynchronous) per TMR copy; JTAG; GPIO pad signals; UART;
// scrub_en_i enables the SRAM refresh; halted_o shows that the core stopped on
// ECALL/EBREAK/illegal instruction. After reset the core starts at address 0; programs are
// loaded over JTAG while the debug module holds the core in reset (ndmreset).
module strv_top
  import strv_pkg::*;
#(
  parameter int unsigned SRAM_WORDS_P   = SRAM_WORDS,
  parameter logic [15:0] UART_DIV_RESET = 16'd434
) (
  input  logic              clk_i   [3],
  input  logic              rst_ni  [3],
  input  logic              jtag_tck_i,
  input  logic              jtag_tms_i,
  input  logic              jtag_tdi_i,
  output logic              jtag_tdo_o,
  input  logic [N_GPIO-1:0] gpio_i,
  output logic [N_GPIO-1:0] gpio_o,
  output logic [N_GPIO-1:0] gpio_oe_o,
  input  logic              uart_rx_i,
  output logic              uart_tx_o,
  input  logic              scrub_en_i,
  output logic [2:0]        seu_o,
  output logic              halted_o
);
  localparam int unsigned AW = $clog2(SRAM_WORDS_P);

  bus_req_t    dbg_req [3], imem_req [3], dmem_req [3], per_req [3];
  bus_rsp_t    dbg_rsp [3], imem_rsp [3], dmem_rsp [3];
  sram_req_t   a_req [3], b_req [3];
  logic [31:0] a_rdata [3], b_raw [3], per_rdata [3], seu_count [3];
  logic        hold [3], halt_req [3], core_halted [3], core_idle [3], scrub_en [3];
  logic        err_core_i [3], err_dbg [3], err_bridge [3], err_sram_a [3], err_scrub [3];
  logic        err_core [3], err_sram [3], err_per [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    assign scrub_en[i] = scrub_en_i;
    assign err_core[i] = err_core_i[i] | err_dbg[i] | err_bridge[i];
    assign err_sram[i] = err_sram_a[i] | err_scrub[i];
  end

  // ---------------- core domain ----------------
  debug_module u_dbg (
    .clk(clk_i), .rst_n(rst_ni),
    .tck(jtag_tck_i), .tms(jtag_tms_i), .tdi(jtag_tdi_i), .tdo(jtag_tdo_o),
    .sb_req(dbg_req), .sb_rsp(dbg_rsp), .core_halted(core_halted),
    .hold(hold), .halt_req(halt_req), .err(err_dbg)
  );

  strv_core u_core (
    .clk(clk_i), .rst_n(rst_ni), .hold(hold), .halt_req(halt_req),
    .imem_req(imem_req), .imem_rsp(imem_rsp), .dmem_req(dmem_req), .dmem_rsp(dmem_rsp),
    .halted(core_halted), .idle(core_idle), .err(err_core_i)
  );

  mem_bridge #(.AW(AW)) u_bridge (
    .clk(clk_i), .rst_n(rst_ni),
    .dbg_req(dbg_req), .dbg_rsp(dbg_rsp),
    .dmem_req(dmem_req), .dmem_rsp(dmem_rsp),
    .imem_req(imem_req), .imem_rsp(imem_rsp),
    .sram_req(a_req), .sram_rdata(a_rdata),
    .per_req(per_req), .per_rdata(per_rdata), .err(err_bridge)
  );

  // ---------------- SRAM domain ----------------
  tmr_sram #(.WORDS(SRAM_WORDS_P), .AW(AW)) u_sram (
    .clk(clk_i), .rst_n(rst_ni),
    .a_req(a_req), .a_rdata(a_rdata), .a_err(err_sram_a),
    .b_req(b_req), .b_raw(b_raw)
  );

  sram_scrubber #(.WORDS(SRAM_WORDS_P), .AW(AW)) u_scrub (
    .clk(clk_i), .rst_n(rst_ni), .en(scrub_en),
    .a_req(a_req), .b_raw(b_raw), .b_req(b_req), .err(err_scrub)
  );

  // ---------------- peripheral domain ----------------
  strv_periph #(.UART_DIV_RESET(UART_DIV_RESET)) u_periph (
    .clk(clk_i), .rst_n(rst_ni), .req(per_req), .rdata(per_rdata),
    .err_core(err_core), .err_sram(err_sram),
    .gpio_i(gpio_i), .gpio_o(gpio_o), .gpio_oe(gpio_oe_o),
    .uart_rx(uart_rx_i), .uart_tx(uart_tx_o),
    .seu_count(seu_count), .err(err_per)
  );

  assign seu_o    = {err_per[0], err_sram[0], err_core[0]};
  assign halted_o = core_halted[0];
endmodule
