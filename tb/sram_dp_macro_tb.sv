// sram_dp_macro_tb: random traffic on both ports of one SRAM macro against a reference array.
// Covers byte-masked writes, one-cycle read latency on both ports, read data holding while a
// port is idle, and a port A / port B write to the same word (port A must win).
module sram_dp_macro_tb;
  localparam int WORDS = 64;
  localparam int AW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          cs_a, we_a, cs_b, we_b;
  logic [3:0]    be_a, be_b;
  logic [AW-1:0] addr_a, addr_b;
  logic [31:0]   wdata_a, wdata_b, rdata_a, rdata_b;
  logic [31:0]   ref_mem [WORDS];
  logic [31:0]   exp_a, exp_b;
  int checks = 0, failures = 0;
  bit seen_a = 0, seen_b = 0;

  sram_dp_macro #(.WORDS(WORDS), .AW(AW)) dut (
    .clk(clk),
    .cs_a(cs_a), .we_a(we_a), .be_a(be_a), .addr_a(addr_a), .wdata_a(wdata_a), .rdata_a(rdata_a),
    .cs_b(cs_b), .we_b(we_b), .be_b(be_b), .addr_b(addr_b), .wdata_b(wdata_b), .rdata_b(rdata_b)
  );

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int i = 0; i < 4; i++) if (be[i]) old[8*i +: 8] = nw[8*i +: 8];
    return old;
  endfunction

  initial begin
    cs_a = 0; cs_b = 0; we_a = 0; we_b = 0; be_a = '1; be_b = '1;
    addr_a = 0; addr_b = 0; wdata_a = 0; wdata_b = 0;
    // initialise through port A
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      cs_a = 1; we_a = 1; be_a = 4'hF; addr_a = AW'(i); wdata_a = $urandom();
      ref_mem[i] = wdata_a;
    end
    for (int n = 0; n < 800; n++) begin
      logic rd_a, rd_b;
      @(negedge clk);
      cs_a = $urandom_range(0, 3) != 0; we_a = $urandom_range(0, 1);
      cs_b = $urandom_range(0, 3) != 0; we_b = $urandom_range(0, 1);
      be_a = 4'($urandom()); be_b = 4'($urandom());
      addr_a = AW'($urandom()); addr_b = (n % 5 == 0) ? addr_a : AW'($urandom());
      wdata_a = $urandom(); wdata_b = $urandom();
      rd_a = cs_a && !we_a;
      rd_b = cs_b && !we_b;
      if (rd_a) begin exp_a = ref_mem[addr_a]; seen_a = 1; end
      if (rd_b) begin exp_b = ref_mem[addr_b]; seen_b = 1; end
      if (cs_b && we_b && !(cs_a && we_a && addr_a == addr_b))
        ref_mem[addr_b] = merge(ref_mem[addr_b], wdata_b, be_b);
      if (cs_a && we_a) ref_mem[addr_a] = merge(ref_mem[addr_a], wdata_a, be_a);
      @(posedge clk);
      #1;
      if (seen_a) begin
        checks++;
        if (rdata_a !== exp_a) begin failures++; $display("FAIL A n=%0d %h exp %h", n, rdata_a, exp_a); end
      end
      if (seen_b) begin
        checks++;
        if (rdata_b !== exp_b) begin failures++; $display("FAIL B n=%0d %h exp %h", n, rdata_b, exp_b); end
      end
    end
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
