// tmr_reg: fine-grained TMR register with voter feedback (the STRV-R1 storage cell).
//
// Three flip-flop copies, each on its own clock tree and reset, are followed by three majority
// voters; voter i drives output q[i], which feeds only the logic copy of domain i. Each copy has
// an enable multiplexer: when en[i] is low the flip-flop reloads the voted value q[i] instead of
// holding its own content, so an upset copy is repaired at the next clock edge even if the
// register is never written again. This is the structure of the paper's Fig. 1 (TMR structure
// with feedback path). The discrepancy outputs err[i] of the voters are this design's way of
// exposing the "additional output" the paper describes.
//
// Reset is asynchronous and active low (this design's choice) and loads RESET_VAL.
// Timing: q follows d one clock after en; repair of a single upset copy takes one clock.
module tmr_reg #(
  parameter int unsigned      W         = 32,
  parameter logic [W-1:0]     RESET_VAL = '0
) (
  input  logic         clk   [3],
  input  logic         rst_n [3],
  input  logic         en    [3],
  input  logic [W-1:0] d     [3],
  output logic [W-1:0] q     [3],
  output logic         err   [3]
);
  // Each copy lives in its own generate scope so that every flip-flop has a single driver.
  for (genvar i = 0; i < 3; i++) begin : g_ff
    logic [W-1:0] ff;
    logic         ck, rn;
    assign ck = clk[i];
    assign rn = rst_n[i];
    always_ff @(posedge ck or negedge rn) begin
      if (!rn)         ff <= RESET_VAL;
      else if (en[i])  ff <= d[i];
      else             ff <= q[i];        // feedback path of Fig. 1
    end
  end

  for (genvar i = 0; i < 3; i++) begin : g_vote
    tmr_voter #(.W(W)) u_vote (
      .a(g_ff[0].ff), .b(g_ff[1].ff), .c(g_ff[2].ff), .y(q[i]), .err(err[i])
    );
  end
endmodule
