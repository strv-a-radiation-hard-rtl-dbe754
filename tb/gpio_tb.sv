// gpio_tb: writes OUT and DIR, checks the pad outputs and enables, reads both registers
// back, and checks that IN returns the pad levels one clock after they are applied.
module gpio_tb;
  import strv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          clk3 [3], rst3 [3], err [3];
  bus_req_t      req [3], r_s;
  logic [31:0]   rdata [3];
  logic [26:0]   pad_i, pad_o, pad_oe;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign req[i]  = r_s;
  end

  gpio dut (.clk(clk3), .rst_n(rst3), .req(req), .rdata(rdata),
            .pad_i(pad_i), .pad_o(pad_o), .pad_oe(pad_oe), .err(err));

  task automatic wr(logic [3:0] a, logic [31:0] v);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.we = 1; r_s.addr = {28'h0, a}; r_s.wdata = v;
    @(negedge clk);
    r_s = '0;
  endtask

  task automatic rd(logic [3:0] a, logic [31:0] v);
    @(negedge clk);
    r_s = '0; r_s.req = 1; r_s.addr = {28'h0, a};
    #1;
    checks++;
    if (rdata[0] !== v || rdata[1] !== v || rdata[2] !== v) begin
      failures++; $display("FAIL read %h: %h exp %h", a, rdata[0], v);
    end
    @(negedge clk);
    r_s = '0;
  endtask

  initial begin
    r_s = '0; pad_i = '0;
    #12 rst_n = 1'b1;
    checks++;
    if (pad_oe !== '0) begin failures++; $display("FAIL: outputs enabled after reset"); end
    for (int n = 0; n < 40; n++) begin
      logic [26:0] o, d, p;
      o = 27'($urandom()); d = 27'($urandom()); p = 27'($urandom());
      wr(4'h0, {5'h1F, o});
      wr(4'h4, {5'h1F, d});
      pad_i = p;
      @(negedge clk);
      checks++;
      if (pad_o !== o || pad_oe !== d) begin
        failures++; $display("FAIL pads: o=%h exp %h oe=%h exp %h", pad_o, o, pad_oe, d);
      end
      rd(4'h0, {5'h0, o});
      rd(4'h4, {5'h0, d});
      rd(4'h8, {5'h0, p});
    end
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
