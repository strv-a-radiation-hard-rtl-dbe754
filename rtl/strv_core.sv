// strv_core: fully triplicated RV32IMC core of the STRV-R1.
//
// Implements the paper's full TMR scheme (Sec. 3.1) for the core: the combinational logic
// exists three times (strv_core_logic, one per domain A/B/C, each on its own clock and reset),
// and every flip-flop is a tmr_reg cell with a majority voter behind it, so each domain's logic
// only sees voted values. The pipeline state is one TMR register that is rewritten every cycle;
// the 31 general-purpose registers x1..x31 are TMR registers whose enable mux falls back to the
// voted value when the register is not written, the feedback path of the paper's Fig. 1 that
// removes an upset before a second one can accumulate. x0 is a constant zero.
//
// Interface: one IMEM and one DMEM bus per domain (see strv_pkg for the protocol), hold
// (system reset from the debug module) and halt_req per domain. halted and idle report the
// state of domain 0 after voting. err[i] is the OR of the discrepancy outputs of all voters of
// domain i and feeds the core-domain SEU counter.
module strv_core
  import strv_pkg::*;
(
  input  logic     clk      [3],
  input  logic     rst_n    [3],
  input  logic     hold     [3],
  input  logic     halt_req [3],
  output bus_req_t imem_req [3],
  input  bus_rsp_t imem_rsp [3],
  output bus_req_t dmem_req [3],
  input  bus_rsp_t dmem_rsp [3],
  output logic     halted   [3],
  output logic     idle     [3],
  output logic     err      [3]
);
  localparam int unsigned SW = $bits(core_state_t);

  logic [SW-1:0] st_dv [3], st_qv [3];
  logic          st_en [3], st_err [3];
  logic          rf_we [3];
  logic [4:0]    rf_wa [3];
  logic [31:0]   rf_wd [3];
  logic [31:0]   rf_q  [32][3];
  logic          rf_err [32][3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    core_state_t st_q, st_d;
    logic [31:0] rf [32];

    assign st_q = core_state_t'(st_qv[i]);
    for (genvar r = 0; r < 32; r++) begin : g_rf
      assign rf[r] = rf_q[r][i];
    end

    strv_core_logic u_logic (
      .st_q     (st_q),
      .rf       (rf),
      .imem_rsp (imem_rsp[i]),
      .dmem_rsp (dmem_rsp[i]),
      .hold     (hold[i]),
      .halt_req (halt_req[i]),
      .st_d     (st_d),
      .rf_we    (rf_we[i]),
      .rf_waddr (rf_wa[i]),
      .rf_wdata (rf_wd[i]),
      .imem_req (imem_req[i]),
      .dmem_req (dmem_req[i]),
      .idle     (idle[i])
    );

    assign st_dv[i]  = st_d;
    assign st_en[i]  = 1'b1;
    assign halted[i] = st_q.halted;

    always_comb begin
      err[i] = st_err[i];
      for (int r = 1; r < 32; r++) err[i] = err[i] | rf_err[r][i];
    end
  end

  tmr_reg #(.W(SW)) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(st_err)
  );

  // register file: x0 is hard-wired to zero, x1..x31 are TMR registers with write enable
  assign rf_q[0]   = '{default: '0};
  assign rf_err[0] = '{default: 1'b0};
  for (genvar r = 1; r < 32; r++) begin : g_reg
    logic en [3];
    for (genvar i = 0; i < 3; i++) begin : g_en
      assign en[i] = rf_we[i] && (rf_wa[i] == 5'(r));
    end
    tmr_reg #(.W(32)) u_x (
      .clk(clk), .rst_n(rst_n), .en(en), .d(rf_wd), .q(rf_q[r]), .err(rf_err[r])
    );
  end
endmodule
