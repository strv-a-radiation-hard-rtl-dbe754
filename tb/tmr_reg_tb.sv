// tmr_reg_tb: checks the TMR register of Fig. 1.
// Loads random values with the enable, holds them with the enable low, and injects upsets
// (forcing one flip-flop copy for less than a clock period) into each copy in turn: the voted
// outputs must never change, the discrepancy flag must rise for exactly one cycle, and the
// feedback path must have rewritten the upset copy at the next clock edge even though the
// register is not being written. Also checks the reset value.
module tmr_reg_tb;
  localparam int W = 16;
  localparam logic [W-1:0] RV = 16'hA5C3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         clk3 [3], rst3 [3], en [3], err [3];
  logic [W-1:0] d [3], q [3];
  logic         en_s;
  logic [W-1:0] d_s, model;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign en[i]   = en_s;
    assign d[i]    = d_s;
  end

  tmr_reg #(.W(W), .RESET_VAL(RV)) dut (
    .clk(clk3), .rst_n(rst3), .en(en), .d(d), .q(q), .err(err)
  );

  task automatic expect_q(logic [W-1:0] v, logic e, string what);
    checks++;
    if (q[0] !== v || q[1] !== v || q[2] !== v || err[0] !== e || err[1] !== e || err[2] !== e) begin
      failures++;
      $display("FAIL %s: q=%h/%h/%h exp %h err=%b%b%b exp %b", what, q[0], q[1], q[2], v,
               err[0], err[1], err[2], e);
    end
  endtask

  initial begin
    en_s = 1'b0;
    d_s  = '0;
    #12;
    expect_q(RV, 1'b0, "reset");
    rst_n = 1'b1;
    model = RV;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      en_s = $urandom_range(0, 1) == 1;
      d_s  = W'($urandom());
      if (en_s) model = d_s;
      @(posedge clk);
      #1 expect_q(model, 1'b0, "load/hold");
      en_s = 1'b0;
      // upset in copy n%3 during the low clock phase
      @(negedge clk);
      unique case (n % 3)
        0: begin force dut.g_ff[0].ff = ~model; #1 release dut.g_ff[0].ff; end
        1: begin force dut.g_ff[1].ff = model ^ 16'h0100; #1 release dut.g_ff[1].ff; end
        default: begin force dut.g_ff[2].ff = 16'h0; #1 release dut.g_ff[2].ff; end
      endcase
      #1 expect_q(model, (n % 3 == 2 && model == 0) ? 1'b0 : 1'b1, "masked upset");
      @(posedge clk);
      #1 expect_q(model, 1'b0, "repaired by feedback");
      checks++;
      if (dut.g_ff[0].ff !== model || dut.g_ff[1].ff !== model || dut.g_ff[2].ff !== model) begin
        failures++;
        $display("FAIL: copies not repaired");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
