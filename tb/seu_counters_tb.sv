// seu_counters_tb: drives random discrepancy pulses into the three counters and compares
// them with counts kept by the testbench; checks read-back through the register interface,
// clearing by a write, and that each TMR copy counts its own input.
module seu_counters_tb;
  import strv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], err [3];
  bus_req_t    req [3], r_s;
  logic [31:0] rdata [3], count [3];
  logic [2:0]  inc [3], inc_s;
  int          model [3];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign req[i]  = r_s;
    assign inc[i]  = inc_s;
  end

  seu_counters dut (.clk(clk3), .rst_n(rst3), .req(req), .rdata(rdata),
                    .inc(inc), .count(count), .err(err));

  initial begin
    r_s = '0; inc_s = '0; model = '{0, 0, 0};
    #12 rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        inc_s = 3'($urandom());
        for (int k = 0; k < 3; k++) if (inc_s[k]) model[k]++;
      end
      @(negedge clk);
      inc_s = '0;
      for (int k = 0; k < 3; k++) begin
        r_s = '0; r_s.req = 1; r_s.addr = 32'(4 * k);
        #1;
        checks++;
        if (rdata[0] !== 32'(model[k]) || rdata[2] !== 32'(model[k]) || count[k] !== 32'(model[k])) begin
          failures++; $display("FAIL counter %0d: %0d exp %0d", k, rdata[0], model[k]);
        end
        @(negedge clk);
      end
      // clear one counter by writing it
      r_s = '0; r_s.req = 1; r_s.we = 1; r_s.addr = 32'(4 * (round % 3)); r_s.wdata = 32'd0;
      model[round % 3] = 0;
      @(negedge clk);
      r_s = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
