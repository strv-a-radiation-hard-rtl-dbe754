// debug_module_tb: drives the debug module through its JTAG pins with a behavioural probe.
// Checks IDCODE after TAP reset, DTMCS, the one-bit BYPASS register, dmcontrol (ndmreset ->
// hold, haltreq -> halt_req), dmstatus, and system-bus access: words written through
// sbaddress0/sbdata0 with auto-increment must land in a behavioural memory, and must read
// back both with read-on-address and with read-on-data.
module debug_module_tb;
  import strv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clk3 [3], rst3 [3], hold [3], haltr [3], chalt [3], err [3];
  bus_req_t    sb_req [3];
  bus_rsp_t    sb_rsp [3];
  logic        tck, tms, tdi, tdo, rv, chalt_s;
  logic [31:0] mem [64], rd, r32;
  logic [63:0] r;
  int checks = 0, failures = 0, accesses = 0;

  for (genvar i = 0; i < 3; i++) begin : g_c
    assign clk3[i]  = clk;
    assign rst3[i]  = rst_n;
    assign chalt[i] = chalt_s;
    assign sb_rsp[i] = '{gnt: sb_req[0].req, rvalid: rv, rdata: rd};
  end

  debug_module dut (
    .clk(clk3), .rst_n(rst3), .tck(tck), .tms(tms), .tdi(tdi), .tdo(tdo),
    .sb_req(sb_req), .sb_rsp(sb_rsp), .core_halted(chalt), .hold(hold), .halt_req(haltr),
    .err(err)
  );

  jtag_host #(.HALF(4)) host (.clk(clk), .tck(tck), .tms(tms), .tdi(tdi), .tdo(tdo));

  always_ff @(posedge clk) begin
    rv <= sb_req[0].req;
    if (sb_req[0].req) begin
      accesses <= accesses + 1;
      if (sb_req[0].we) mem[sb_req[0].addr[7:2]] <= sb_req[0].wdata;
      else              rd <= mem[sb_req[0].addr[7:2]];
    end
  end

  task automatic expect32(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    chalt_s = 1'b0;
    for (int i = 0; i < 64; i++) mem[i] = '0;
    #12 rst_n = 1'b1;
    host.reset();
    host.dr_scan(32, 64'h0, r);
    expect32(r[31:0], 32'h1000_0A5B, "IDCODE");
    host.ir_scan(5'h10);
    host.dr_scan(32, 64'h0, r);
    expect32(r[31:0], {17'b0, 3'd1, 2'b0, 6'd7, 4'd1}, "DTMCS");
    host.ir_scan(5'h1F);
    host.dr_scan(8, 64'hA5, r);
    expect32(r[31:0], 32'h4A, "BYPASS");           // shifted by one bit
    host.ir_scan(5'h11);
    host.dmi_write(7'h10, 32'h0000_0003);          // ndmreset | dmactive
    expect32({31'b0, hold[0]}, 32'h1, "hold");
    host.dmi_read(7'h10, r32);
    expect32(r32, 32'h3, "dmcontrol");
    host.dmi_write(7'h10, 32'h8000_0001);          // haltreq | dmactive
    expect32({31'b0, haltr[1], 31'b0} | {31'b0, hold[2]}, 32'h8000_0000, "halt_req");
    chalt_s = 1'b1;
    host.dmi_read(7'h11, r32);
    expect32(r32 & 32'hF8F, 32'h382, "dmstatus halted");
    // system bus: auto-increment writes
    host.dmi_write(7'h38, 32'h0001_0000);          // sbautoincrement
    host.dmi_write(7'h39, 32'h0000_0010);
    for (int k = 0; k < 8; k++) host.dmi_write(7'h3C, 32'hC0DE_0000 + 32'(k * 7));
    for (int k = 0; k < 8; k++) expect32(mem[4 + k], 32'hC0DE_0000 + 32'(k * 7), "sb write");
    // read on address (the triggered read also increments the address)
    host.dmi_write(7'h38, 32'h0011_0000);          // sbreadonaddr | sbautoincrement
    for (int k = 0; k < 4; k++) begin
      host.dmi_write(7'h39, 32'(32'h10 + 4 * k));
      host.dmi_read(7'h3C, r32);
      expect32(r32, 32'hC0DE_0000 + 32'(k * 7), "sb read on address");
    end
    // read on data with auto-increment
    host.dmi_write(7'h38, 32'h0011_8000);          // + sbreadondata
    host.dmi_write(7'h39, 32'h0000_0020);          // triggers read of word 8
    for (int k = 4; k < 8; k++) begin
      host.dmi_read(7'h3C, r32);
      expect32(r32, 32'hC0DE_0000 + 32'(k * 7), "sb read on data");
    end
    host.dmi_read(7'h38, r32);
    expect32(r32 & 32'hE07F_FFFF, 32'h2015_8404, "sbcs");
    $display("debug: %0d system bus accesses", accesses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
