// uart_tb: checks the UART with a small bit divider (8 clocks per bit).
// Transmit: bytes written to TXDATA are decoded from txd by a behavioural receiver in the
// testbench, which also checks the bit time and the stop bit; STATUS shows busy meanwhile.
// Receive: the testbench serialises bytes onto rxd; each must appear in RXDATA with the valid
// flag, and reading RXDATA must clear the flag. Back-to-back transmission must keep the full
// frame length of 10 bit times. Also checks BAUDDIV read-back.
module uart_tb;
  import strv_pkg::*;
  localparam int DIV = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], err [3];
  bus_req_t    req [3], r_s;
  logic [31:0] rdata [3], rv;
  logic        rxd, txd;
  int checks = 0, failures = 0;
  int cyc = 0, edge_cyc [$];
  logic txd_q = 1'b1;

  // cycle number of every falling edge on txd (start of a frame)
  always @(posedge clk) begin
    cyc++;
    txd_q <= txd;
    if (txd_q && !txd && rst_n) edge_cyc.push_back(cyc);
  end

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign req[i]  = r_s;
  end

  uart #(.DIV_RESET(16'd434)) dut (.clk(clk3), .rst_n(rst3), .req(req), .rdata(rdata),
                                   .rxd(rxd), .txd(txd), .err(err));

  task automatic wr(logic [3:0] a, logic [31:0] v);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.we = 1; r_s.addr = {28'h0, a}; r_s.wdata = v;
    @(negedge clk);
    r_s = '0;
  endtask

  task automatic rd(logic [3:0] a, output logic [31:0] v);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.addr = {28'h0, a};
    #1 v = rdata[0];
    @(negedge clk);
    r_s = '0;
  endtask

  // behavioural receiver on txd
  task automatic rx_byte(output logic [7:0] b, output bit ok);
    ok = 1;
    @(negedge txd);
    repeat (DIV / 2) @(posedge clk);
    if (txd !== 1'b0) ok = 0;
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      b[i] = txd;
    end
    repeat (DIV) @(posedge clk);
    if (txd !== 1'b1) ok = 0;
  endtask

  task automatic tx_byte(logic [7:0] b);
    rxd = 1'b0;
    repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rxd = b[i];
      repeat (DIV) @(posedge clk);
    end
    rxd = 1'b1;
    repeat (DIV) @(posedge clk);
  endtask

  initial begin
    r_s = '0; rxd = 1'b1;
    #12 rst_n = 1'b1;
    rd(4'hC, rv);
    checks++;
    if (rv !== 32'd434) begin failures++; $display("FAIL reset divider %0d", rv); end
    wr(4'hC, DIV);
    rd(4'hC, rv);
    checks++;
    if (rv !== DIV) begin failures++; $display("FAIL divider %0d", rv); end
    for (int n = 0; n < 6; n++) begin
      logic [7:0] b, got;
      bit ok;
      b = 8'($urandom());
      fork
        rx_byte(got, ok);
        begin
          wr(4'h0, {24'h0, b});
          rd(4'h8, rv);
          checks++;
          if (rv[0] !== 1'b1) begin failures++; $display("FAIL: not busy while sending"); end
        end
      join
      checks++;
      if (!ok || got !== b) begin failures++; $display("FAIL tx %h got %h ok %0d", b, got, ok); end
      repeat (DIV) @(negedge clk);
      rd(4'h8, rv);
      checks++;
      if (rv[0] !== 1'b0) begin failures++; $display("FAIL: busy after byte"); end
    end
    // back to back: the next byte is written as soon as STATUS shows not busy; frames must
    // keep their full length of 10 bit times (start, 8 data, stop)
    edge_cyc.delete();
    for (int n = 0; n < 4; n++) begin
      do rd(4'h8, rv); while (rv[0]);
      wr(4'h0, {24'h0, 8'h00});
    end
    do rd(4'h8, rv); while (rv[0]);
    checks++;
    if (edge_cyc.size() != 4) begin
      failures++; $display("FAIL: %0d frames seen back to back, expected 4", edge_cyc.size());
    end
    for (int n = 1; n < edge_cyc.size(); n++) begin
      checks++;
      if (edge_cyc[n] - edge_cyc[n-1] < 10 * DIV) begin
        failures++; $display("FAIL: frame %0d lasted %0d clocks", n, edge_cyc[n] - edge_cyc[n-1]);
      end
    end
    for (int n = 0; n < 6; n++) begin
      logic [7:0] b;
      b = 8'($urandom());
      tx_byte(b);
      repeat (4) @(negedge clk);
      rd(4'h8, rv);
      checks++;
      if (rv[1] !== 1'b1) begin failures++; $display("FAIL: rx not valid"); end
      rd(4'h4, rv);
      checks++;
      if (rv !== {24'h0, b}) begin failures++; $display("FAIL rx %h exp %h", rv, b); end
      rd(4'h8, rv);
      checks++;
      if (rv[1] !== 1'b0) begin failures++; $display("FAIL: rx valid not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
