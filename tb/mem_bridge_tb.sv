// mem_bridge_tb: three random bus masters (debug, data, instruction) share the bridge.
// Behavioural SRAM and peripheral models answer one cycle after a request. Checked: one
// grant per cycle with priority debug > data > instruction, a held request is eventually
// granted, rvalid comes exactly one cycle after the grant to the granted master only, and
// read data comes from the SRAM or the peripheral side according to address bit 31.
module mem_bridge_tb;
  import strv_pkg::*;
  localparam int AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], err [3];
  bus_req_t    m_req [3][3];   // [master][domain]; master 0 dbg, 1 dmem, 2 imem
  bus_rsp_t    m_rsp [3][3];
  bus_req_t    rq [3];
  sram_req_t   sram_req [3];
  bus_req_t    per_req [3];
  logic [31:0] sram_rdata [3], per_rdata [3];
  logic [31:0] smem [2**AW];
  logic [31:0] s_rd, p_rd;
  logic [31:0] expd [3];
  logic        pend [3];
  int checks = 0, failures = 0, grants [3] = '{0, 0, 0}, contention = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i] = clk;
    assign rst3[i] = rst_n;
    assign sram_rdata[i] = s_rd;
    assign per_rdata[i]  = p_rd;
    for (genvar m = 0; m < 3; m++) begin : g_m
      assign m_req[m][i] = rq[m];
    end
  end

  mem_bridge #(.AW(AW)) dut (
    .clk(clk3), .rst_n(rst3),
    .dbg_req(m_req[0]), .dbg_rsp(m_rsp[0]),
    .dmem_req(m_req[1]), .dmem_rsp(m_rsp[1]),
    .imem_req(m_req[2]), .imem_rsp(m_rsp[2]),
    .sram_req(sram_req), .sram_rdata(sram_rdata),
    .per_req(per_req), .per_rdata(per_rdata), .err(err)
  );

  // slave models
  always_ff @(posedge clk) begin
    if (sram_req[0].cs) begin
      if (sram_req[0].we) smem[sram_req[0].addr[AW-1:0]] <= sram_req[0].wdata;
      else                s_rd <= smem[sram_req[0].addr[AW-1:0]];
    end
    if (per_req[0].req && !per_req[0].we) p_rd <= ~per_req[0].addr;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) smem[i] = 32'(i * 32'h0101_0101);
    for (int m = 0; m < 3; m++) begin rq[m] = '0; pend[m] = 0; end
    #12 rst_n = 1'b1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      // checks of responses to the previous cycle's grants
      for (int m = 0; m < 3; m++) begin
        checks++;
        if (m_rsp[m][0].rvalid !== pend[m] || m_rsp[m][1].rvalid !== pend[m]) begin
          failures++; $display("FAIL rvalid master %0d n=%0d", m, n);
        end else if (pend[m] && !rq[m].we && m_rsp[m][2].rdata !== expd[m]) begin
          failures++; $display("FAIL rdata master %0d: %h exp %h", m, m_rsp[m][2].rdata, expd[m]);
        end
        pend[m] = 0;
      end
      // new requests where idle (a granted request is dropped in the previous cycle)
      for (int m = 0; m < 3; m++)
        if (!rq[m].req && $urandom_range(0, 2) == 0) begin
          rq[m].req   = 1;
          rq[m].we    = $urandom_range(0, 3) == 0;
          rq[m].be    = 4'hF;
          rq[m].addr  = $urandom_range(0, 4) == 0 ? {1'b1, 31'($urandom())} & 32'h8000_FFFC
                                                  : 32'({$urandom_range(0, 2**AW - 1), 2'b00});
          rq[m].wdata = $urandom();
        end
      #1;
      // grant rules
      checks++;
      if (int'(m_rsp[0][0].gnt) + int'(m_rsp[1][0].gnt) + int'(m_rsp[2][0].gnt) > 1 ||
          (rq[0].req && !m_rsp[0][0].gnt) ||
          (rq[1].req && !rq[0].req && !m_rsp[1][0].gnt) ||
          (rq[2].req && !rq[0].req && !rq[1].req && !m_rsp[2][0].gnt)) begin
        failures++; $display("FAIL grant n=%0d", n);
      end
      if (rq[2].req && (rq[0].req || rq[1].req)) contention++;
      for (int m = 0; m < 3; m++)
        if (m_rsp[m][0].gnt) begin
          grants[m]++;
          pend[m] = 1;
          expd[m] = rq[m].addr[31] ? ~rq[m].addr : smem[rq[m].addr[AW+1:2]];
        end
      @(posedge clk);
      #1;
      for (int m = 0; m < 3; m++) if (pend[m]) rq[m].req = 0;
    end
    checks++;
    if (grants[0] == 0 || grants[1] == 0 || grants[2] == 0 || contention == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("bridge: grants %0d/%0d/%0d, instruction fetch held %0d times",
             grants[0], grants[1], grants[2], contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
