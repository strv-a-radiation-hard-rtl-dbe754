// strv_workload_tb: the STRV-R1 at full size running the three program types of its power
// measurements (Dhrystone, a register-centred loop and an SRAM-centred copy loop), each once
// with the SRAM refresh enabled and once with it disabled.
//
// Programs are placed in all three SRAM copies directly (the JTAG load path is exercised by
// strv_top_tb) while the chip is in reset; the core then starts at address 0 and each run ends
// when the core halts on EBREAK.
//  * Dhrystone 2.1, 500 runs, compiled for RV32IMC with GCC at -O2 (strv_dhrystone_o2.hex) and
//    at -O3 (strv_dhrystone_o3.hex), one 32-bit word per line from address 0. The program
//    writes a phase number to the GPIO outputs where the benchmark starts and stops its timer. The testbench counts the clock cycles in between, prints the DMIPS/MHz figure
//    (1e6 * runs / (1757 * cycles)), and checks the benchmark's final variables against the
//    values the benchmark itself documents. In the refresh-enabled run, instruction words are
//    corrupted in one SRAM copy and one copy of the stack pointer is upset while the benchmark
//    runs; results must not change and the refresh must have repaired every corrupted word.
//    The -O3 image runs once, with the refresh disabled.
//  * Register-centred: a loop of register-to-register ALU instructions; the final register
//    values are compared with a model of the same operations.
//  * SRAM-centred: a loop of loads and stores copying 256 words; the copy is compared.
// For every program the testbench counts fetch stalls (an instruction fetch that loses the SRAM
// port to a data access) and the cycles in which the core-side SRAM port is busy. It checks the
// behaviour reported for the chip: the register-centred loop runs without stalls, the
// SRAM-centred one stalls, the port is busy almost every cycle in all three, and enabling the
// refresh changes nothing for the core (same cycle count), because it has its own SRAM port.
module strv_workload_tb;
  import strv_pkg::*;
  import rv32_pkg::*;

  localparam int DHRY_MAX   = 1024;            // words reserved for an image
  localparam int DHRY_RUNS  = 500;
  localparam int RES_WORD   = 32'h7F00 / 4;   // result block written by the Dhrystone harness

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;                      // 50 MHz

  logic              clk3 [3], rst3 [3];
  logic [N_GPIO-1:0] gpio_o, gpio_oe;
  logic              uart_tx, tdo, halted, scrub_en;
  logic [2:0]        seu;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
  end

  strv_top dut (
    .clk_i(clk3), .rst_ni(rst3),
    .jtag_tck_i(1'b0), .jtag_tms_i(1'b1), .jtag_tdi_i(1'b0), .jtag_tdo_o(tdo),
    .gpio_i('0), .gpio_o(gpio_o), .gpio_oe_o(gpio_oe), .uart_rx_i(1'b1), .uart_tx_o(uart_tx),
    .scrub_en_i(scrub_en), .seu_o(seu), .halted_o(halted)
  );

  int checks = 0, failures = 0;
  logic [31:0] dhry2 [DHRY_MAX], dhry3 [DHRY_MAX];
  logic [31:0] img [$];
  logic [31:0] src [256];

  // per-run counters
  int cyc, stalls, busy, scrub_wr, t_start, t_stop;
  logic [7:0] phase_q;

  always @(posedge clk) begin
    if (rst_n && !halted) begin
      cyc++;
      if (dut.imem_req[0].req && !dut.imem_rsp[0].gnt && dut.dmem_req[0].req) stalls++;
      if (dut.a_req[0].cs) busy++;
    end
    if (dut.b_req[0].cs && dut.b_req[0].we) scrub_wr++;
    phase_q <= gpio_o[7:0];
    if (gpio_o[7:0] == 8'd1 && phase_q != 8'd1) t_start = cyc;
    if (gpio_o[7:0] == 8'd2 && phase_q != 8'd2) t_stop = cyc;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // write a word into all three SRAM copies
  task automatic poke(int w, logic [31:0] v);
    dut.u_sram.g_dom[0].u_macro.mem[w] = v;
    dut.u_sram.g_dom[1].u_macro.mem[w] = v;
    dut.u_sram.g_dom[2].u_macro.mem[w] = v;
  endtask

  function automatic logic [31:0] peek(int w);
    return dut.u_sram.g_dom[0].u_macro.mem[w];
  endfunction

  // ---------------------------------------------------------------- register-centred program
  // x1..x4 are mixed by 12 ALU operations per iteration, 200 iterations; then stored.
  localparam int REG_ITER = 200;
  logic [31:0] reg_exp [4];

  function automatic void reg_prog();
    logic [31:0] x1, x2, x3, x4;
    img.delete();
    // values left by the LUI/ADDI pairs below (ADDI sign-extends its 12-bit immediate)
    x1 = 32'h1358_0000 + 32'($signed(12'hBDF));
    x2 = 32'h0246_9000 + 32'($signed(12'hACE));
    x3 = 32'h0F0F_1000 + 32'h234;
    x4 = 32'h7;
    foreach (reg_exp[k]) reg_exp[k] = '0;
    img.push_back(enc_u(20'h13580, 5'd1, OP_LUI));
    img.push_back(enc_i(12'hBDF, 5'd1, 3'b000, 5'd1, OP_IMM));
    img.push_back(enc_u(20'h02469, 5'd2, OP_LUI));
    img.push_back(enc_i(12'hACE, 5'd2, 3'b000, 5'd2, OP_IMM));
    img.push_back(enc_u(20'h0F0F1, 5'd3, OP_LUI));
    img.push_back(enc_i(12'h234, 5'd3, 3'b000, 5'd3, OP_IMM));
    img.push_back(enc_i(12'd7, 5'd0, 3'b000, 5'd4, OP_IMM));
    img.push_back(enc_i(12'(REG_ITER), 5'd0, 3'b000, 5'd7, OP_IMM));
    // loop body (12 ALU operations + counter + branch)
    img.push_back(enc_r(7'h00, 5'd2, 5'd1, 3'b000, 5'd3, OP_OP));      // add  x3,x1,x2
    img.push_back(enc_r(7'h00, 5'd1, 5'd3, 3'b100, 5'd4, OP_OP));      // xor  x4,x3,x1
    img.push_back(enc_r(7'h00, 5'd4, 5'd2, 3'b001, 5'd5, OP_OP));      // sll  x5,x2,x4
    img.push_back(enc_r(7'h00, 5'd3, 5'd5, 3'b110, 5'd1, OP_OP));      // or   x1,x5,x3
    img.push_back(enc_r(7'h20, 5'd1, 5'd4, 3'b000, 5'd2, OP_OP));      // sub  x2,x4,x1
    img.push_back(enc_r(7'h00, 5'd2, 5'd1, 3'b101, 5'd6, OP_OP));      // srl  x6,x1,x2
    img.push_back(enc_r(7'h00, 5'd6, 5'd3, 3'b111, 5'd3, OP_OP));      // and  x3,x3,x6
    img.push_back(enc_i(12'h5A5, 5'd3, 3'b100, 5'd3, OP_IMM));         // xori x3,x3,0x5a5
    img.push_back(enc_r(7'h20, 5'd4, 5'd2, 3'b101, 5'd4, OP_OP));      // sra  x4,x2,x4
    img.push_back(enc_r(7'h00, 5'd3, 5'd4, 3'b011, 5'd5, OP_OP));      // sltu x5,x4,x3
    img.push_back(enc_r(7'h00, 5'd5, 5'd1, 3'b000, 5'd1, OP_OP));      // add  x1,x1,x5
    img.push_back(enc_i(12'd3, 5'd2, 3'b001, 5'd2, OP_IMM));           // slli x2,x2,3
    img.push_back(enc_i(12'hFFF, 5'd7, 3'b000, 5'd7, OP_IMM));         // addi x7,x7,-1
    img.push_back(enc_b(13'(-13 * 4), 5'd0, 5'd7, 3'b001));            // bne  x7,x0,loop
    img.push_back(enc_s(12'h400, 5'd1, 5'd0, 3'b010, OP_STORE));       // sw x1..x4 -> 0x400..
    img.push_back(enc_s(12'h404, 5'd2, 5'd0, 3'b010, OP_STORE));
    img.push_back(enc_s(12'h408, 5'd3, 5'd0, 3'b010, OP_STORE));
    img.push_back(enc_s(12'h40C, 5'd4, 5'd0, 3'b010, OP_STORE));
    img.push_back(32'h0010_0073);                                      // ebreak
    for (int n = 0; n < REG_ITER; n++) begin
      logic [31:0] x5, x6;
      x3 = x1 + x2;
      x4 = x3 ^ x1;
      x5 = x2 << x4[4:0];
      x1 = x5 | x3;
      x2 = x4 - x1;
      x6 = x1 >> x2[4:0];
      x3 = x3 & x6;
      x3 = x3 ^ 32'h0000_05A5;
      x4 = $signed(x2) >>> x4[4:0];
      x5 = {31'b0, x4 < x3};
      x1 = x1 + x5;
      x2 = x2 << 3;
    end
    reg_exp[0] = x1; reg_exp[1] = x2; reg_exp[2] = x3; reg_exp[3] = x4;
  endfunction

  // ---------------------------------------------------------------- SRAM-centred program
  // copies 256 words from 0x1000 to 0x2000, four loads and four stores per iteration
  function automatic void sram_prog();
    img.delete();
    img.push_back(enc_u(20'h00001, 5'd1, OP_LUI));                    // x1 = 0x1000
    img.push_back(enc_u(20'h00002, 5'd2, OP_LUI));                    // x2 = 0x2000
    img.push_back(enc_i(12'd64, 5'd0, 3'b000, 5'd7, OP_IMM));         // x7 = 64
    img.push_back(enc_i(12'd0,  5'd1, 3'b010, 5'd3, OP_LOAD));        // lw x3,0(x1)
    img.push_back(enc_i(12'd4,  5'd1, 3'b010, 5'd4, OP_LOAD));        // lw x4,4(x1)
    img.push_back(enc_s(12'd0,  5'd3, 5'd2, 3'b010, OP_STORE));       // sw x3,0(x2)
    img.push_back(enc_s(12'd4,  5'd4, 5'd2, 3'b010, OP_STORE));       // sw x4,4(x2)
    img.push_back(enc_i(12'd8,  5'd1, 3'b010, 5'd5, OP_LOAD));        // lw x5,8(x1)
    img.push_back(enc_i(12'd12, 5'd1, 3'b010, 5'd6, OP_LOAD));        // lw x6,12(x1)
    img.push_back(enc_s(12'd8,  5'd5, 5'd2, 3'b010, OP_STORE));       // sw x5,8(x2)
    img.push_back(enc_s(12'd12, 5'd6, 5'd2, 3'b010, OP_STORE));       // sw x6,12(x2)
    img.push_back(enc_i(12'd16, 5'd1, 3'b000, 5'd1, OP_IMM));         // addi x1,x1,16
    img.push_back(enc_i(12'd16, 5'd2, 3'b000, 5'd2, OP_IMM));         // addi x2,x2,16
    img.push_back(enc_i(12'hFFF, 5'd7, 3'b000, 5'd7, OP_IMM));        // addi x7,x7,-1
    img.push_back(enc_b(13'(-11 * 4), 5'd0, 5'd7, 3'b001));           // bne x7,x0,loop
    img.push_back(32'h0010_0073);                                     // ebreak
  endfunction

  // ---------------------------------------------------------------- one run
  // kind: 0 Dhrystone -O2, 1 register-centred, 2 SRAM-centred, 3 Dhrystone -O3
  task automatic run(int kind, bit refresh, output int cycles, output int run_stalls,
                     output int run_busy);
    string name;
    name = (kind == 0) ? "Dhrystone -O2" : (kind == 1) ? "register-centred" :
           (kind == 2) ? "SRAM-centred" : "Dhrystone -O3";
    @(negedge clk);
    rst_n = 1'b0;
    scrub_en = refresh;
    #1;
    if (kind == 0 || kind == 3) begin
      for (int w = 0; w < DHRY_MAX; w++) poke(w, (kind == 0) ? dhry2[w] : dhry3[w]);
      for (int w = 0; w < 14; w++) poke(RES_WORD + w, 32'hDEAD_BEEF);
    end else begin
      if (kind == 1) reg_prog(); else sram_prog();
      foreach (img[w]) poke(w, img[w]);
      for (int w = 0; w < 4; w++) poke(32'h400 / 4 + w, '0);
      for (int w = 0; w < 256; w++) begin
        src[w] = $urandom();
        poke(32'h1000 / 4 + w, src[w]);
        poke(32'h2000 / 4 + w, '0);
      end
    end
    repeat (4) @(negedge clk);
    cyc = 0; stalls = 0; busy = 0; scrub_wr = 0; t_start = -1; t_stop = -1;
    rst_n = 1'b1;
    if (kind == 0 && refresh) begin
      // upsets while the benchmark runs: instruction words in copy 2, one copy of sp (x2)
      int bad [6] = '{3, 40, 100, 333, 600, 801};
      wait (t_start >= 0);
      repeat (20000) @(negedge clk);
      foreach (bad[j])
        dut.u_sram.g_dom[2].u_macro.mem[bad[j]] = dut.u_sram.g_dom[2].u_macro.mem[bad[j]] ^ 32'h0100_0010;
      force dut.u_core.g_reg[2].u_x.g_ff[1].ff = 32'h0000_0004;
      #1 release dut.u_core.g_reg[2].u_x.g_ff[1].ff;
      wait (halted);
      // let the refresh finish at least one pass (16384 cycles) after the upsets
      repeat (17000) @(negedge clk);
      foreach (bad[j])
        check(dut.u_sram.g_dom[2].u_macro.mem[bad[j]] == dhry2[bad[j]] &&
              dut.u_sram.g_dom[0].u_macro.mem[bad[j]] == dhry2[bad[j]],
              $sformatf("instruction word %0d not repaired by the refresh", bad[j]));
    end
    wait (halted);
    repeat (4) @(negedge clk);
    cycles = cyc; run_stalls = stalls; run_busy = busy;
    $display("%-17s refresh %s: %7d cycles, %6d fetch stalls, SRAM port busy %0d.%0d %%, %0d refresh write-backs",
             name, refresh ? "on " : "off", cyc, stalls, busy * 100 / cyc, (busy * 1000 / cyc) % 10,
             scrub_wr);
    if (kind == 0 || kind == 3) begin
      int dc, milli;
      logic [31:0] exp_res [14] = '{5, 1, 65, 66, 7, DHRY_RUNS + 10, 0, 2, 17, 0, 1, 18, 0, 32'h600D};
      dc = t_stop - t_start;
      check(t_start > 0 && dc > 0, "Dhrystone timer marks not seen on the GPIO pins");
      if (dc > 0) begin
        milli = int'((64'd1_000_000_000 * DHRY_RUNS) / (64'(1757) * 64'(dc)));
        $display("  Dhrystone: %0d cycles for %0d runs = %0d cycles/run, %0d.%03d DMIPS/MHz",
                 dc, DHRY_RUNS, dc / DHRY_RUNS, milli / 1000, milli % 1000);
      end
      for (int k = 0; k < 14; k++)
        check(peek(RES_WORD + k) == exp_res[k],
              $sformatf("Dhrystone final value %0d = %0d, expected %0d", k, peek(RES_WORD + k),
                        exp_res[k]));
    end else if (kind == 1) begin
      for (int k = 0; k < 4; k++)
        check(peek(32'h400 / 4 + k) == reg_exp[k],
              $sformatf("register loop x%0d = %h, expected %h", k + 1, peek(32'h400 / 4 + k),
                        reg_exp[k]));
    end else begin
      int bad_copy = 0;
      for (int w = 0; w < 256; w++) if (peek(32'h2000 / 4 + w) != src[w]) bad_copy++;
      check(bad_copy == 0, $sformatf("SRAM copy loop: %0d words wrong", bad_copy));
    end
  endtask

  initial begin
    int c_on [3], c_off [3], s_on [3], s_off [3], b_on [3], b_off [3];
    scrub_en = 1'b1;
    foreach (dhry2[w]) begin dhry2[w] = '0; dhry3[w] = '0; end
    $readmemh("tb/strv_dhrystone_o2.hex", dhry2);
    $readmemh("tb/strv_dhrystone_o3.hex", dhry3);
    check(dhry2[0] != 32'h0 && dhry3[0] != 32'h0, "Dhrystone images not loaded");
    for (int k = 0; k < 3; k++) begin
      run(k, 1'b1, c_on[k], s_on[k], b_on[k]);
      run(k, 1'b0, c_off[k], s_off[k], b_off[k]);
      check(c_on[k] == c_off[k] && s_on[k] == s_off[k],
            $sformatf("program %0d: refresh changed the core's timing (%0d vs %0d cycles)", k,
                      c_on[k], c_off[k]));
      // SRAM port A busy in at least 90 % of the cycles
      check(b_off[k] * 10 >= c_off[k] * 9,
            $sformatf("program %0d: SRAM port busy only %0d of %0d cycles", k, b_off[k], c_off[k]));
    end
    begin
      int c3, s3, b3;
      run(3, 1'b0, c3, s3, b3);
      check(b3 * 20 >= c3 * 17, $sformatf("Dhrystone -O3: SRAM port busy only %0d of %0d cycles", b3, c3));
    end
    // register-centred loop: no stalls apart from the final stores; SRAM-centred: many
    check(s_off[1] <= 4, $sformatf("register-centred loop stalled %0d times", s_off[1]));
    check(s_off[2] * 4 >= c_off[2],
          $sformatf("SRAM-centred loop stalled only %0d times in %0d cycles", s_off[2], c_off[2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
