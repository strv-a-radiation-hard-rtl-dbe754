// tmr_sram_tb: checks the triplicated SRAM with voted port A read data.
// Fills a small memory through port A, reads it back, then corrupts words in one macro copy
// (writing the array directly, as an upset would): port A must still return the written data
// from every voter and flag the discrepancy in the cycle the data appears, port B must show the
// raw, corrupted copy, and a word corrupted in two copies must read as the corrupted value.
module tmr_sram_tb;
  import strv_pkg::*;
  localparam int WORDS = 64;
  localparam int AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], a_err [3];
  sram_req_t   a_req [3], b_req [3];
  logic [31:0] a_rdata [3], b_raw [3];
  sram_req_t   a_s, b_s;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i]  = clk;
    assign rst3[i]  = rst_n;
    assign a_req[i] = a_s;
    assign b_req[i] = b_s;
  end

  tmr_sram #(.WORDS(WORDS), .AW(AW)) dut (
    .clk(clk3), .rst_n(rst3), .a_req(a_req), .a_rdata(a_rdata), .a_err(a_err),
    .b_req(b_req), .b_raw(b_raw)
  );

  task automatic read_a(int adr, logic [31:0] v, logic e);
    @(negedge clk);
    a_s = '0; a_s.cs = 1; a_s.addr = SRAM_AW'(adr);
    @(negedge clk);
    a_s = '0;
    checks++;
    for (int i = 0; i < 3; i++)
      if (a_rdata[i] !== v || a_err[i] !== e) begin
        failures++;
        $display("FAIL read %0d dom %0d: %h exp %h err %b exp %b", adr, i, a_rdata[i], v, a_err[i], e);
      end
  endtask

  initial begin
    a_s = '0; b_s = '0;
    #12 rst_n = 1'b1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_s = '0; a_s.cs = 1; a_s.we = 1; a_s.be = 4'hF; a_s.addr = SRAM_AW'(i);
      a_s.wdata = $urandom(); ref_mem[i] = a_s.wdata;
    end
    for (int i = 0; i < WORDS; i++) read_a(i, ref_mem[i], 1'b0);
    // stale output after a discrepancy must not keep flagging
    @(negedge clk);
    checks++;
    if (a_err[0] || a_err[1] || a_err[2]) begin failures++; $display("FAIL idle err"); end
    // single-copy upsets
    for (int n = 0; n < 30; n++) begin
      int adr, k;
      adr = $urandom_range(0, WORDS - 1);
      k = n % 3;
      unique case (k)
        0: dut.g_dom[0].u_macro.mem[adr] = ref_mem[adr] ^ 32'(1 << (n % 32));
        1: dut.g_dom[1].u_macro.mem[adr] = ~ref_mem[adr];
        default: dut.g_dom[2].u_macro.mem[adr] = 32'h0 ^ ref_mem[adr] ^ 32'h00FF_0000;
      endcase
      read_a(adr, ref_mem[adr], 1'b1);
      // port B shows each copy unvoted
      @(negedge clk);
      b_s = '0; b_s.cs = 1; b_s.addr = SRAM_AW'(adr);
      @(negedge clk);
      b_s = '0;
      checks++;
      if (b_raw[k] === ref_mem[adr] || b_raw[(k + 1) % 3] !== ref_mem[adr]) begin
        failures++;
        $display("FAIL raw copy view adr %0d", adr);
      end
      // repair the copy for the next round
      @(negedge clk);
      a_s = '0; a_s.cs = 1; a_s.we = 1; a_s.be = 4'hF; a_s.addr = SRAM_AW'(adr);
      a_s.wdata = ref_mem[adr];
      @(negedge clk);
      a_s = '0;
    end
    // double upset is not correctable
    dut.g_dom[0].u_macro.mem[3] = 32'h1234_5678;
    dut.g_dom[2].u_macro.mem[3] = 32'h1234_5678;
    read_a(3, 32'h1234_5678, 1'b1);
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
