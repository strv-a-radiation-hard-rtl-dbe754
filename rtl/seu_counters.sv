// seu_counters: the three memory-mapped SEU counters of the STRV-R1.
//
// One 32-bit counter per domain of the chip (core, SRAM, peripherals) records how often a
// voter of that domain saw the three copies disagree (paper, Sec. 2.1 and 3.1: the voters'
// discrepancy outputs are ORed and counted). A counter adds one in every clock cycle in which
// its OR input is high; a single upset repaired by the feedback path is thus counted once.
// Registers (word offsets): +0 core, +4 SRAM, +8 peripherals; reads return the count, writes
// load a new value (e.g. 0 to clear). Counting per cycle, the write access and the offsets
// are this design's choices. The counters are themselves TMR registers; inc[i] bit k is the
// OR of the discrepancy signals of domain copy i in chip domain k.
module seu_counters
  import strv_pkg::*;
(
  input  logic        clk   [3],
  input  logic        rst_n [3],
  input  bus_req_t    req   [3],
  output logic [31:0] rdata [3],
  input  logic [2:0]  inc   [3],
  output logic [31:0] count [3],  // voted counters of copy 0 (core, SRAM, peripherals)
  output logic        err   [3]
);
  typedef logic [2:0][31:0] cnt_t;

  logic [$bits(cnt_t)-1:0] st_dv [3], st_qv [3];
  logic st_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    cnt_t st_q, st_d;
    assign st_q = cnt_t'(st_qv[i]);

    always_comb begin
      for (int k = 0; k < 3; k++) st_d[k] = st_q[k] + 32'(inc[i][k]);
      rdata[i] = (req[i].addr[3:2] == 2'd3) ? 32'd0 : st_q[req[i].addr[3:2]];
      if (req[i].req && req[i].we && req[i].addr[3:2] != 2'd3)
        st_d[req[i].addr[3:2]] = req[i].wdata;
    end

    assign st_dv[i] = st_d;
    assign st_en[i] = 1'b1;
  end

  for (genvar k = 0; k < 3; k++) begin : g_out
    assign count[k] = g_dom[0].st_q[k];
  end

  tmr_reg #(.W($bits(cnt_t))) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(err)
  );
endmodule
