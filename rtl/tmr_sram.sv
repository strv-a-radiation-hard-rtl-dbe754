// tmr_sram: triplicated shared SRAM with voted read data (SRAM domain of the STRV-R1).
//
// Three dual-port macros hold identical copies of the 32 kB instruction/data memory. Domain i
// drives macro i with its own copy of each port request, so a write stores the data held in
// that domain's (TMR-protected) logic into that copy, as the paper describes (Sec. 3.1).
// Port A serves the core through the memory bridge: its read data passes three 32-bit majority
// voters, voter i feeding domain i. Port B belongs to the refresh logic, which needs the raw
// output of every macro to find an upset, so b_raw[k] is macro k's unvoted output, seen by all
// domains.
//
// a_err[i] reports a discrepancy at voter i in the cycle the read data is presented; a
// one-bit TMR register remembers that a port A read was issued, so a stale, already-reported
// output does not keep counting (this gating is this design's choice).
// Timing: read data one cycle after the request, as for one macro.
module tmr_sram
  import strv_pkg::*;
#(
  parameter int unsigned WORDS = SRAM_WORDS,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic        clk     [3],
  input  logic        rst_n   [3],
  input  sram_req_t   a_req   [3],
  output logic [31:0] a_rdata [3],
  output logic        a_err   [3],
  input  sram_req_t   b_req   [3],
  output logic [31:0] b_raw   [3]
);
  logic [31:0] a_raw [3];
  logic        vote_err [3];
  logic        rd_d [3], rd_q [3], rd_err [3], rd_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    sram_dp_macro #(.WORDS(WORDS), .AW(AW)) u_macro (
      .clk     (clk[i]),
      .cs_a    (a_req[i].cs),
      .we_a    (a_req[i].we),
      .be_a    (a_req[i].be),
      .addr_a  (a_req[i].addr[AW-1:0]),
      .wdata_a (a_req[i].wdata),
      .rdata_a (a_raw[i]),
      .cs_b    (b_req[i].cs),
      .we_b    (b_req[i].we),
      .be_b    (b_req[i].be),
      .addr_b  (b_req[i].addr[AW-1:0]),
      .wdata_b (b_req[i].wdata),
      .rdata_b (b_raw[i])
    );

    tmr_voter #(.W(32)) u_vote (
      .a(a_raw[0]), .b(a_raw[1]), .c(a_raw[2]), .y(a_rdata[i]), .err(vote_err[i])
    );

    assign rd_d[i]  = a_req[i].cs && !a_req[i].we;
    assign rd_en[i] = 1'b1;
    assign a_err[i] = (vote_err[i] && rd_q[i]) || rd_err[i];
  end

  tmr_reg #(.W(1)) u_rdv (
    .clk(clk), .rst_n(rst_n), .en(rd_en), .d(rd_d), .q(rd_q), .err(rd_err)
  );
endmodule
