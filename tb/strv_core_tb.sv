// strv_core_tb: runs the RV32IMC test program on the triplicated core alone.
//
// A behavioural single-port memory (data before instruction requests, one cycle latency,
// plus random refusals to create extra stalls) stands in for the bridge and the SRAM. The
// program of strv_test_prog_pkg stores its results; after the core halts on EBREAK every slot
// is compared with the value computed in the package. A register-file upset is injected into
// one copy while the program runs and must be repaired without changing any result.
module strv_core_tb;
  import strv_pkg::*;
  import strv_test_prog_pkg::*;

  localparam int MWORDS = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     clk3 [3], rst3 [3], hold [3], haltr [3], halted [3], idle [3], err [3];
  bus_req_t imem_req [3], dmem_req [3];
  bus_rsp_t imem_rsp [3], dmem_rsp [3];
  logic [31:0] mem [MWORDS];
  logic        deny;
  logic        rv_i, rv_d;
  logic [31:0] rdata;
  int checks = 0, failures = 0, cycles = 0, stalls = 0, errs = 0;

  for (genvar i = 0; i < 3; i++) begin : g_dom
    assign clk3[i]  = clk;
    assign rst3[i]  = rst_n;
    assign hold[i]  = 1'b0;
    assign haltr[i] = 1'b0;
    always_comb begin
      dmem_rsp[i].gnt    = dmem_req[i].req && !deny;
      imem_rsp[i].gnt    = imem_req[i].req && !dmem_req[i].req && !deny;
      dmem_rsp[i].rvalid = rv_d;
      imem_rsp[i].rvalid = rv_i;
      dmem_rsp[i].rdata  = rdata;
      imem_rsp[i].rdata  = rdata;
    end
  end

  strv_core dut (
    .clk(clk3), .rst_n(rst3), .hold(hold), .halt_req(haltr),
    .imem_req(imem_req), .imem_rsp(imem_rsp), .dmem_req(dmem_req), .dmem_rsp(dmem_rsp),
    .halted(halted), .idle(idle), .err(err)
  );

  // memory model, driven by domain 0's requests
  always_ff @(posedge clk) begin
    deny <= ($urandom_range(0, 7) == 0);
    rv_d <= dmem_rsp[0].gnt;
    rv_i <= imem_rsp[0].gnt;
    if (dmem_rsp[0].gnt) begin
      if (dmem_req[0].we) begin
        for (int b = 0; b < 4; b++)
          if (dmem_req[0].be[b])
            mem[dmem_req[0].addr[12:2]][8*b +: 8] <= dmem_req[0].wdata[8*b +: 8];
      end else begin
        rdata <= mem[dmem_req[0].addr[12:2]];
      end
    end else if (imem_rsp[0].gnt) begin
      rdata <= mem[imem_req[0].addr[12:2]];
    end
    if (rst_n) cycles <= cycles + 1;
    if (imem_req[0].req && !imem_rsp[0].gnt) stalls <= stalls + 1;
    if (rst_n && err[0]) errs <= errs + 1;
  end

  initial begin
    build(1'b0);
    for (int i = 0; i < MWORDS; i++) mem[i] = '0;
    for (int i = 0; i < prog.size() / 2; i++) mem[i] = word(i);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // single-event upset in copy 1 of x10 (the result base pointer) while the program runs
    repeat (200) @(posedge clk);
    @(negedge clk);
    force dut.g_reg[10].u_x.g_ff[1].ff = 32'hDEAD_0000;
    #1 release dut.g_reg[10].u_x.g_ff[1].ff;
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (dut.g_reg[10].u_x.g_ff[1].ff !== RES_BASE) begin
      failures++;
      $display("FAIL: upset copy of x10 not repaired: %h", dut.g_reg[10].u_x.g_ff[1].ff);
    end
    wait (halted[0]);
    repeat (3) @(posedge clk);
    for (int k = 0; k < n_res; k++) begin
      checks++;
      if (mem[RES_BASE[12:2] + k] !== exp_val[k]) begin
        failures++;
        $display("FAIL: result %0d = %h, expected %h", k, mem[RES_BASE[12:2] + k], exp_val[k]);
      end
    end
    checks++;
    if (errs != 1) begin
      failures++;
      $display("FAIL: discrepancy flagged in %0d cycles, expected 1", errs);
    end
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL: no fetch stall seen");
    end
    $display("core: %0d results, %0d cycles, %0d fetch stalls", n_res, cycles, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, core did not halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
