// sram_scrubber: SRAM self-refresh ("scrubbing") engine of the STRV-R1.
//
// Walks through every row of the triplicated SRAM on the second port, independently of the
// core, following the loop of the paper's Fig. 2: read a row from all three macros, compare
// the three words, and if they differ write the majority-voted word back to all three in the
// next clock cycle; then go on with the next row. The write is skipped when the three words
// agree, and also when the core writes the same row (paper, Sec. 3.2). The core write is
// checked in the read cycle, the compare cycle and the write cycle, so that a row the core has
// just updated is never overwritten with older voted data (the first two checks are this
// design's addition to the paper's rule, which names only a concurrent core write).
//
// The engine is itself triplicated: three copies of the next-state logic, each driving the
// port B request of its own macro, with the state (FSM, row address, hit flag) held in a
// tmr_reg. Rows are visited at one every 2 cycles when clean (3 when a repair is written), so
// a full pass over 8192 rows takes 16384 cycles, 328 us at 50 MHz; the paper reports an upper
// correction time of 320 us. en stops the engine between rows (paper measures the chip with
// and without refresh). err[i] flags a mismatch found in domain i or an upset of the
// engine's own state.
module sram_scrubber
  import strv_pkg::*;
#(
  parameter int unsigned WORDS = SRAM_WORDS,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic        clk   [3],
  input  logic        rst_n [3],
  input  logic        en    [3],
  input  sram_req_t   a_req [3],   // core-side port A request, to detect write collisions
  input  logic [31:0] b_raw [3],   // unvoted port B read data of macro 0, 1, 2
  output sram_req_t   b_req [3],
  output logic        err   [3]
);
  typedef enum logic [1:0] { S_READ = 2'd0, S_COMPARE = 2'd1, S_WRITE = 2'd2 } scrub_state_e;

  typedef struct packed {
    scrub_state_e  fsm;
    logic [AW-1:0] addr;
    logic          hit;    // core wrote this row since it was read
  } scrub_t;

  scrub_t st_q [3], st_d [3];
  logic   st_en [3], st_err [3];
  logic [$bits(scrub_t)-1:0] st_dv [3], st_qv [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    logic [31:0] voted;
    logic        vote_err, core_hit, mismatch;

    tmr_voter #(.W(32)) u_vote (
      .a(b_raw[0]), .b(b_raw[1]), .c(b_raw[2]), .y(voted), .err(vote_err)
    );

    always_comb begin
      core_hit = a_req[i].cs && a_req[i].we && (a_req[i].addr[AW-1:0] == st_q[i].addr);
      mismatch = (st_q[i].fsm == S_COMPARE) && vote_err;
      st_d[i]  = st_q[i];
      b_req[i] = '0;
      b_req[i].addr[AW-1:0] = st_q[i].addr;
      b_req[i].be    = 4'hF;
      b_req[i].wdata = voted;
      unique case (st_q[i].fsm)
        S_READ: begin
          if (en[i]) begin
            b_req[i].cs   = 1'b1;
            st_d[i].fsm   = S_COMPARE;
            st_d[i].hit   = core_hit;
          end
        end
        S_COMPARE: begin
          if (mismatch && !st_q[i].hit && !core_hit) begin
            st_d[i].fsm = S_WRITE;
          end else begin
            st_d[i].fsm  = S_READ;
            st_d[i].addr = st_q[i].addr + 1'b1;
          end
          st_d[i].hit = 1'b0;
        end
        S_WRITE: begin
          b_req[i].cs  = !core_hit;
          b_req[i].we  = 1'b1;
          st_d[i].fsm  = S_READ;
          st_d[i].addr = st_q[i].addr + 1'b1;
        end
        default: st_d[i].fsm = S_READ;
      endcase
    end

    assign st_en[i] = 1'b1;
    assign st_dv[i] = st_d[i];
    assign st_q[i]  = scrub_t'(st_qv[i]);
    assign err[i]   = mismatch || st_err[i];
  end

  tmr_reg #(.W($bits(scrub_t))) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(st_err)
  );
endmodule
