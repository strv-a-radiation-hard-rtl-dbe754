// mem_bridge: memory bridge between the core's buses and the single core-side SRAM port.
//
// The core has an instruction bus (IMEM) and a data bus (DMEM); the debug module adds a
// system-bus master used to load programs. The paper places a bridge between the core buses
// and the SRAM so that both can use one SRAM port (Sec. 2). This bridge grants one request
// per cycle with fixed priority debug > data > instruction; a losing master keeps its request
// and is granted later (the core sees this as a pipeline stall). Addresses with bit 31 clear go
// to the SRAM, the others to the peripheral bus. The arbitration and the address decode are
// this design's choices.
//
// Timing: gnt is combinational in the request cycle; the SRAM or peripheral answers one cycle
// later, when rvalid is returned to the master that was granted. The record of who was
// granted (3 valid bits and the target) is a tmr_reg; the logic is triplicated per domain.
module mem_bridge
  import strv_pkg::*;
#(
  parameter int unsigned AW = SRAM_AW
) (
  input  logic        clk      [3],
  input  logic        rst_n    [3],
  input  bus_req_t    dbg_req  [3],
  output bus_rsp_t    dbg_rsp  [3],
  input  bus_req_t    dmem_req [3],
  output bus_rsp_t    dmem_rsp [3],
  input  bus_req_t    imem_req [3],
  output bus_rsp_t    imem_rsp [3],
  output sram_req_t   sram_req [3],
  input  logic [31:0] sram_rdata [3],
  output bus_req_t    per_req  [3],
  input  logic [31:0] per_rdata [3],
  output logic        err      [3]
);
  typedef struct packed {
    logic rv_dbg;
    logic rv_dmem;
    logic rv_imem;
    logic from_per;
  } bridge_t;

  logic [$bits(bridge_t)-1:0] st_dv [3], st_qv [3];
  logic st_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    bridge_t  st_q, st_d;
    bus_req_t sel;
    logic [31:0] rdata;

    assign st_q = bridge_t'(st_qv[i]);

    // grants, selected request and returned data; each response is driven by its own process
    // so that no response process reads a request that depends on it
    logic g_dbg, g_dmem, g_imem;
    assign g_dbg  = dbg_req[i].req;
    assign g_dmem = dmem_req[i].req && !dbg_req[i].req;
    assign g_imem = imem_req[i].req && !dmem_req[i].req && !dbg_req[i].req;
    assign rdata  = st_q.from_per ? per_rdata[i] : sram_rdata[i];

    always_comb dbg_rsp[i]  = '{gnt: g_dbg,  rvalid: st_q.rv_dbg,  rdata: rdata};
    always_comb dmem_rsp[i] = '{gnt: g_dmem, rvalid: st_q.rv_dmem, rdata: rdata};
    always_comb imem_rsp[i] = '{gnt: g_imem, rvalid: st_q.rv_imem, rdata: rdata};

    always_comb begin
      sel = g_dbg ? dbg_req[i] : (g_dmem ? dmem_req[i] : imem_req[i]);
      st_d.rv_dbg   = g_dbg;
      st_d.rv_dmem  = g_dmem;
      st_d.rv_imem  = g_imem;
      st_d.from_per = sel.addr[31];

      sram_req[i]       = '0;
      sram_req[i].cs    = sel.req && !sel.addr[31];
      sram_req[i].we    = sel.we;
      sram_req[i].be    = sel.be;
      sram_req[i].addr[AW-1:0] = sel.addr[AW+1:2];
      sram_req[i].wdata = sel.wdata;

      per_req[i]     = sel;
      per_req[i].req = sel.req && sel.addr[31];
    end

    assign st_dv[i] = st_d;
    assign st_en[i] = 1'b1;
  end

  tmr_reg #(.W($bits(bridge_t))) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(err)
  );
endmodule
