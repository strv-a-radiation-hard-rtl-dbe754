// strv_periph_tb: checks the peripheral domain as seen from the bus.
// Read data must arrive one cycle after the request from the addressed peripheral (GPIO,
// UART, SEU counters). Core- and SRAM-domain discrepancy pulses must be counted by the first
// two counters, and an upset injected into a GPIO flip-flop copy must be counted once by the
// peripheral-domain counter while the pad output stays correct.
module strv_periph_tb;
  import strv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], ec [3], es [3], err [3];
  bus_req_t    req [3], r_s;
  logic [31:0] rdata [3], cnt [3];
  logic [26:0] gi, go, goe;
  logic        rx, tx, ec_s, es_s;
  int checks = 0, failures = 0, n_core = 0, n_sram = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign req[i]  = r_s;
    assign ec[i]   = ec_s;
    assign es[i]   = es_s;
  end

  strv_periph dut (
    .clk(clk3), .rst_n(rst3), .req(req), .rdata(rdata), .err_core(ec), .err_sram(es),
    .gpio_i(gi), .gpio_o(go), .gpio_oe(goe), .uart_rx(rx), .uart_tx(tx),
    .seu_count(cnt), .err(err)
  );

  task automatic wr(logic [31:0] a, logic [31:0] v);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.we = 1; r_s.addr = a; r_s.wdata = v;
    @(negedge clk);
    r_s = '0;
  endtask

  task automatic rd(logic [31:0] a, logic [31:0] v, string what);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.addr = a;
    @(negedge clk);
    r_s = '0;
    checks++;
    if (rdata[0] !== v || rdata[1] !== v || rdata[2] !== v) begin
      failures++; $display("FAIL %s: %h exp %h", what, rdata[0], v);
    end
  endtask

  initial begin
    r_s = '0; gi = 27'h1234567; rx = 1'b1; ec_s = 0; es_s = 0;
    #12 rst_n = 1'b1;
    rd(32'h8000_010C, 32'd434, "uart divider");
    wr(32'h8000_0000, 32'h0765_4321);
    wr(32'h8000_0004, 32'h07FF_FFFF);
    rd(32'h8000_0000, 32'h0765_4321, "gpio out");
    rd(32'h8000_0008, 32'h0123_4567, "gpio in");
    checks++;
    if (go !== 27'h7654321 || goe !== '1) begin failures++; $display("FAIL pads"); end
    // clear counters, then pulse the discrepancy inputs
    for (int k = 0; k < 3; k++) wr(32'h8000_0200 + 32'(4 * k), 32'h0);
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      ec_s = $urandom_range(0, 1); es_s = $urandom_range(0, 3) == 0;
      n_core += int'(ec_s); n_sram += int'(es_s);
    end
    @(negedge clk);
    ec_s = 0; es_s = 0;
    rd(32'h8000_0200, 32'(n_core), "core counter");
    rd(32'h8000_0204, 32'(n_sram), "sram counter");
    rd(32'h8000_0208, 32'h0, "peripheral counter");
    // upset one copy of the GPIO state
    @(negedge clk);
    force dut.u_gpio.u_state.g_ff[2].ff = '0;
    #1 release dut.u_gpio.u_state.g_ff[2].ff;
    checks++;
    if (go !== 27'h7654321) begin failures++; $display("FAIL: upset reached the pads"); end
    repeat (2) @(negedge clk);
    rd(32'h8000_0208, 32'h1, "peripheral counter after upset");
    rd(32'h8000_0000, 32'h0765_4321, "gpio out after upset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
