// strv_top_tb: end-to-end test of the STRV-R1 at its full size (32 kB SRAM, default
// parameters).
//
// 1. Reads IDCODE, then loads the test program of strv_test_prog_pkg over JTAG (system-bus
//    writes while ndmreset holds the core) and reads part of it back.
// 2. Releases the core. The program checks the RV32IMC instruction set, then drives the GPIOs,
//    sends one UART byte, waits for one received byte and stores the three SEU counters.
// 3. While it runs, single-event upsets are injected: one flip-flop copy of a core register,
//    one copy of a GPIO register, and instruction words in one SRAM copy.
// 4. After EBREAK, all results are read back over JTAG and compared; the GPIO pins, the UART
//    byte decoded from the pin, the SEU counts and the repair of every corrupted SRAM word by
//    the refresh engine are checked.
// Each mechanism of the design is counted and must occur at least once: fetch stall behind a
// data access, writeback bypass, taken branch/jump flush, compressed instruction, divider stall,
// TMR repair in the core, voter masking of an SRAM copy, refresh write-back, debug system-bus
// access, UART transmit and receive.
module strv_top_tb;
  import strv_pkg::*;
  import strv_test_prog_pkg::*;

  localparam int UART_BIT = 16;   // divider the program writes

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3];
  logic        tck, tms, tdi, tdo, uart_rx, uart_tx, halted;
  logic [26:0] gpio_i, gpio_o, gpio_oe;
  logic [2:0]  seu;
  logic [31:0] r32;
  logic [63:0] r64;
  logic [7:0]  tx_byte;
  int checks = 0, failures = 0, nwords, seu_inj_sram = 0;
  int sram_bad [$];

  // mechanism counters
  int m_fetch_stall = 0, m_bypass = 0, m_flush = 0, m_rvc = 0, m_div = 0, m_core_fix = 0;
  int m_sram_mask = 0, m_scrub_wr = 0, m_sba = 0, m_uart_tx = 0, m_uart_rx = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
  end

  strv_top dut (
    .clk_i(clk3), .rst_ni(rst3),
    .jtag_tck_i(tck), .jtag_tms_i(tms), .jtag_tdi_i(tdi), .jtag_tdo_o(tdo),
    .gpio_i(gpio_i), .gpio_o(gpio_o), .gpio_oe_o(gpio_oe),
    .uart_rx_i(uart_rx), .uart_tx_o(uart_tx),
    .scrub_en_i(1'b1), .seu_o(seu), .halted_o(halted)
  );

  jtag_host #(.HALF(4)) host (.clk(clk), .tck(tck), .tms(tms), .tdi(tdi), .tdo(tdo));

  always @(posedge clk) begin
    if (dut.imem_req[0].req && !dut.imem_rsp[0].gnt && dut.dmem_req[0].req) m_fetch_stall++;
    if (dut.u_core.g_dom[0].u_logic.exec && dut.u_core.g_dom[0].u_logic.st_q.wb_valid &&
        dut.u_core.g_dom[0].u_logic.st_q.wb_rd != 0 &&
        (dut.u_core.g_dom[0].u_logic.st_q.wb_rd == dut.u_core.g_dom[0].u_logic.rs1 ||
         dut.u_core.g_dom[0].u_logic.st_q.wb_rd == dut.u_core.g_dom[0].u_logic.rs2)) m_bypass++;
    if (dut.u_core.g_dom[0].u_logic.redirect) m_flush++;
    if (dut.u_core.g_dom[0].u_logic.exec && dut.u_core.g_dom[0].u_logic.is_c) m_rvc++;
    if (dut.u_core.g_dom[0].u_logic.st_q.div_busy) m_div++;
    if (dut.err_core[0]) m_core_fix++;
    if (dut.err_sram_a[0]) m_sram_mask++;
    if (dut.b_req[0].cs && dut.b_req[0].we) m_scrub_wr++;
    if (dut.dbg_req[0].req && dut.dbg_rsp[0].gnt) m_sba++;
  end

  // UART: decode the transmitted byte, then answer with one byte
  initial begin
    uart_rx = 1'b1;
    wait (rst_n);
    repeat (10) @(posedge clk);
    @(negedge uart_tx);
    repeat (UART_BIT / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (UART_BIT) @(posedge clk);
      tx_byte[i] = uart_tx;
    end
    m_uart_tx++;
    repeat (UART_BIT) @(posedge clk);
    uart_rx = 1'b0;
    repeat (UART_BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rx = 8'h3C >> i;
      repeat (UART_BIT) @(posedge clk);
    end
    uart_rx = 1'b1;
    m_uart_rx++;
  end

  task automatic expect32(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  task automatic mech(int n, string what);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  initial begin
    build(1'b1);
    nwords = prog.size() / 2;
    gpio_i = 27'h2AB_CDEF;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. load the program over JTAG
    host.reset();
    host.dr_scan(32, 64'h0, r64);
    expect32(r64[31:0], 32'h1000_0A5B, "IDCODE");
    host.ir_scan(5'h11);
    host.dmi_write(7'h10, 32'h0000_0003);          // ndmreset | dmactive
    host.dmi_write(7'h38, 32'h0001_0000);          // auto-increment
    host.dmi_write(7'h39, 32'h0000_0000);
    for (int i = 0; i < nwords; i++) host.dmi_write(7'h3C, word(i));
    host.dmi_write(7'h38, 32'h0011_0000);          // read on address
    for (int i = 0; i < 4; i++) begin
      host.dmi_write(7'h39, 32'(4 * i));
      host.dmi_read(7'h3C, r32);
      expect32(r32, word(i), "program read-back");
    end

    // 2. run, 3. inject upsets
    host.dmi_write(7'h10, 32'h0000_0001);          // release ndmreset
    repeat (150) @(negedge clk);
    force dut.u_core.g_reg[10].u_x.g_ff[0].ff = 32'h0;
    #1 release dut.u_core.g_reg[10].u_x.g_ff[0].ff;
    @(negedge clk);
    force dut.u_periph.u_gpio.u_state.g_ff[1].ff = '1;
    #1 release dut.u_periph.u_gpio.u_state.g_ff[1].ff;
    for (int w = nwords - 40; w < nwords; w += 3) begin
      dut.u_sram.g_dom[1].u_macro.mem[w] = ~dut.u_sram.g_dom[1].u_macro.mem[w];
      sram_bad.push_back(w);
    end

    fork
      wait (halted);
      begin repeat (200000) @(posedge clk); end
    join_any
    expect32({31'b0, halted}, 32'h1, "core halted");

    // 4. read the results back over JTAG
    host.dmi_write(7'h38, 32'h0011_8000);          // read on address and on data
    host.dmi_write(7'h39, RES_BASE);
    exp_val[periph_slot]     = 32'(gpio_i);
    exp_val[periph_slot + 1] = 32'h3C;
    exp_val[periph_slot + 2] = 32'h1;              // core counter: one repaired upset
    for (int k = 0; k < n_res; k++) begin
      host.dmi_read(7'h3C, r32);
      if (k == periph_slot + 3) begin
        checks++;
        if (r32 == 0) begin failures++; $display("FAIL: SRAM counter did not count"); end
      end else if (k == periph_slot + 4) begin
        expect32(r32, 32'h1, "peripheral counter");
      end else begin
        expect32(r32, exp_val[k], $sformatf("result %0d", k));
      end
    end
    expect32(32'(gpio_o), 32'h05A5_A5A5 & 32'h07FF_FFFF, "GPIO outputs");
    expect32(32'(gpio_oe), 32'h0000_FFFF, "GPIO enables");
    expect32(32'(tx_byte), 32'hC3, "UART byte");
    // counters through the debug path
    host.dmi_write(7'h38, 32'h0010_0000);
    host.dmi_write(7'h39, 32'h8000_0200);
    host.dmi_read(7'h3C, r32);
    checks++;
    if (r32 < 1) begin failures++; $display("FAIL: core counter over JTAG %0d", r32); end

    // every corrupted SRAM word repaired by the refresh engine within one pass
    repeat (2 * SRAM_WORDS + 100) @(posedge clk);
    foreach (sram_bad[j]) begin
      checks++;
      if (dut.u_sram.g_dom[1].u_macro.mem[sram_bad[j]] !== dut.u_sram.g_dom[0].u_macro.mem[sram_bad[j]] ||
          dut.u_sram.g_dom[1].u_macro.mem[sram_bad[j]] !== word(sram_bad[j])) begin
        failures++; $display("FAIL: SRAM word %0d not repaired", sram_bad[j]);
      end
    end
    checks++;
    if (m_scrub_wr < sram_bad.size()) begin
      failures++; $display("FAIL: %0d refresh writes for %0d bad words", m_scrub_wr, sram_bad.size());
    end

    $display("mechanisms:");
    mech(m_fetch_stall, "fetch stall behind data");
    mech(m_bypass,      "writeback bypass");
    mech(m_flush,       "branch/jump flush");
    mech(m_rvc,         "compressed instructions");
    mech(m_div,         "divider stall cycles");
    mech(m_core_fix,    "core TMR repairs");
    mech(m_sram_mask,   "SRAM voter masking");
    mech(m_scrub_wr,    "refresh write-backs");
    mech(m_sba,         "debug bus accesses");
    mech(m_uart_tx,     "UART transmit");
    mech(m_uart_rx,     "UART receive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
