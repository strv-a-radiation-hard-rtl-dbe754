// tmr_voter_tb: random and directed vectors for the 2-of-3 majority voter.
// The expected majority is computed bit by bit by counting ones; the discrepancy flag must
// be set exactly when the three inputs are not identical.
module tmr_voter_tb;
  localparam int W = 32;
  logic [W-1:0] a, b, c, y;
  logic         err;
  int checks = 0, failures = 0;

  tmr_voter #(.W(W)) dut (.a(a), .b(b), .c(c), .y(y), .err(err));

  task automatic check();
    logic [W-1:0] m;
    logic         e;
    #1;
    for (int i = 0; i < W; i++) m[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
    e = !(a == b && b == c);
    checks++;
    if (y !== m || err !== e) begin
      failures++;
      $display("FAIL: a=%h b=%h c=%h y=%h (exp %h) err=%b (exp %b)", a, b, c, y, m, err, e);
    end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      a = $urandom(); b = $urandom(); c = $urandom();
      unique case (n % 4)
        0: begin b = a; c = a; end                   // all equal
        1: begin b = a; c = a ^ (32'h1 << (n % 32)); end  // single upset in c
        2: begin c = b; a = b ^ 32'h8000_0001; end   // two bits upset in a
        default: ;                                   // random
      endcase
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
