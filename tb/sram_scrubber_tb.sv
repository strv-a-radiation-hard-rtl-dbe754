// sram_scrubber_tb: checks the SRAM refresh loop of Fig. 2 on a 64-row memory.
//  * a clean pass visits one row every 2 cycles (period 2*WORDS), with no write;
//  * rows corrupted in any one copy are rewritten with voted data within one pass, one
//    write per corrupted row, and the discrepancy flag rises;
//  * a row the core keeps writing is never written by the scrubber, and afterwards holds the
//    core's data;
//  * a single core write to a corrupted row in the scrubber's read or compare cycle makes the
//    scrubber drop its (now stale) voted word, so the row keeps the core's data;
//  * with the enable low no row is read.
module sram_scrubber_tb;
  import strv_pkg::*;
  localparam int WORDS = 64;
  localparam int AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], a_err [3], en [3], err [3];
  sram_req_t   a_req [3], b_req [3];
  logic [31:0] a_rdata [3], b_raw [3];
  sram_req_t   a_s;
  logic        en_s;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;
  int writes = 0, reads = 0, errs = 0, last_r0 = -1, period = 0, cyc = 0, blocked_w = 0;
  int core_row = -1;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i]  = clk;
    assign rst3[i]  = rst_n;
    assign a_req[i] = a_s;
    assign en[i]    = en_s;
  end

  tmr_sram #(.WORDS(WORDS), .AW(AW)) u_sram (
    .clk(clk3), .rst_n(rst3), .a_req(a_req), .a_rdata(a_rdata), .a_err(a_err),
    .b_req(b_req), .b_raw(b_raw)
  );

  sram_scrubber #(.WORDS(WORDS), .AW(AW)) dut (
    .clk(clk3), .rst_n(rst3), .en(en), .a_req(a_req), .b_raw(b_raw), .b_req(b_req), .err(err)
  );

  always @(posedge clk) begin
    cyc++;
    if (b_req[0].cs && b_req[0].we) begin
      writes++;
      if (int'(b_req[0].addr) == core_row) blocked_w++;
    end
    if (b_req[0].cs && !b_req[0].we) begin
      reads++;
      if (b_req[0].addr == 0) begin
        if (last_r0 >= 0) period = cyc - last_r0;
        last_r0 = cyc;
      end
    end
    if (err[0]) errs++;
  end

  task automatic check_all(string what);
    for (int r = 0; r < WORDS; r++) begin
      checks++;
      if (u_sram.g_dom[0].u_macro.mem[r] !== ref_mem[r] ||
          u_sram.g_dom[1].u_macro.mem[r] !== ref_mem[r] ||
          u_sram.g_dom[2].u_macro.mem[r] !== ref_mem[r]) begin
        failures++;
        $display("FAIL %s: row %0d not clean", what, r);
      end
    end
  endtask

  initial begin
    a_s = '0; en_s = 1'b0;
    #12 rst_n = 1'b1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_s = '0; a_s.cs = 1; a_s.we = 1; a_s.be = 4'hF; a_s.addr = SRAM_AW'(i);
      a_s.wdata = $urandom(); ref_mem[i] = a_s.wdata;
    end
    @(negedge clk);
    a_s = '0;
    repeat (20) @(negedge clk);
    checks++;
    if (reads != 0) begin failures++; $display("FAIL: reads while disabled"); end

    // clean passes
    errs = 0;
    en_s = 1'b1;
    repeat (3 * 2 * WORDS) @(negedge clk);
    checks++;
    if (period != 2 * WORDS || writes != 0 || errs != 0) begin
      failures++;
      $display("FAIL clean pass: period %0d writes %0d errs %0d", period, writes, errs);
    end

    // upsets in all three copies, different rows
    for (int n = 0; n < 9; n++) begin
      int r;
      r = 5 * n + 1;
      unique case (n % 3)
        0: u_sram.g_dom[0].u_macro.mem[r] = ref_mem[r] ^ 32'h0000_0010;
        1: u_sram.g_dom[1].u_macro.mem[r] = ~ref_mem[r];
        default: u_sram.g_dom[2].u_macro.mem[r] = ref_mem[r] ^ 32'h8000_0000;
      endcase
    end
    writes = 0;
    repeat (2 * WORDS + 9 + 2) @(negedge clk);
    checks++;
    if (writes != 9 || errs == 0) begin
      failures++;
      $display("FAIL repair: %0d writes (exp 9), errs %0d", writes, errs);
    end
    check_all("after one pass");

    // core keeps writing row 20, which is corrupted in copy 1: the scrubber must skip it
    core_row = 20;
    u_sram.g_dom[1].u_macro.mem[20] = 32'h0BAD_0BAD;
    blocked_w = 0;
    for (int c = 0; c < 3 * WORDS; c++) begin
      @(negedge clk);
      a_s = '0; a_s.cs = 1; a_s.we = 1; a_s.be = 4'hF; a_s.addr = SRAM_AW'(20);
      a_s.wdata = (c == 3 * WORDS - 1) ? 32'hC0DE_0000 : $urandom();
      if (c == 0) u_sram.g_dom[1].u_macro.mem[20] = 32'h0BAD_0BAD;
    end
    ref_mem[20] = 32'hC0DE_0000;
    @(negedge clk);
    a_s = '0;
    checks++;
    if (blocked_w != 0) begin failures++; $display("FAIL: scrubber wrote the row the core writes"); end
    repeat (2 * WORDS + 4) @(negedge clk);
    check_all("after core writes");

    // a single core write lands on a corrupted row in the scrubber's read cycle (row 30) or
    // compare cycle (row 40): the voted word the scrubber holds is then stale, so the write-back
    // must be skipped and the row must keep the core's data
    for (int t = 0; t < 2; t++) begin
      int row;
      row = (t == 0) ? 30 : 40;
      u_sram.g_dom[2].u_macro.mem[row] = ~ref_mem[row];
      do @(negedge clk); while (!(b_req[0].cs && !b_req[0].we && int'(b_req[0].addr) == row));
      if (t == 1) @(negedge clk);
      a_s = '0; a_s.cs = 1; a_s.we = 1; a_s.be = 4'hF; a_s.addr = SRAM_AW'(row);
      a_s.wdata = 32'h5A5A_0000 + row; ref_mem[row] = a_s.wdata;
      @(negedge clk);
      a_s = '0;
      repeat (4) @(negedge clk);
      begin
        logic [31:0] got [3];
        got[0] = u_sram.g_dom[0].u_macro.mem[row];
        got[1] = u_sram.g_dom[1].u_macro.mem[row];
        got[2] = u_sram.g_dom[2].u_macro.mem[row];
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (got[c] !== ref_mem[row]) begin
            failures++;
            $display("FAIL: row %0d copy %0d = %h after core write in %s cycle, expected %h", row,
                     c, got[c], (t == 0) ? "read" : "compare", ref_mem[row]);
          end
        end
      end
    end

    // disabled again: no traffic
    en_s = 1'b0;
    repeat (4) @(negedge clk);
    reads = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (reads != 0) begin failures++; $display("FAIL: reads after disable"); end
    $display("scrubber: pass period %0d cycles", period);
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
