// gpio: the STRV-R1's 27 configurable general-purpose I/Os.
//
// The paper gives only the number of pins and that they are configurable (Sec. 2.1). This
// block gives each pin an output value and an output-enable bit, both software-writable, and
// samples the pad inputs into a register that software reads. Registers (word offsets):
//   +0 OUT  (read/write)  value driven on pins whose enable bit is set
//   +4 DIR  (read/write)  1 = pin is an output
//   +8 IN   (read only)   pad levels, sampled one clock earlier
// Writes are whole-word. All three registers are TMR registers with per-domain logic; domain
// 0's voted copy drives the pads. A read returns rdata combinationally in the request cycle;
// the peripheral interconnect registers it. err[i] reports voter discrepancies of domain i.
module gpio
  import strv_pkg::*;
#(
  parameter int unsigned N = N_GPIO
) (
  input  logic         clk   [3],
  input  logic         rst_n [3],
  input  bus_req_t     req   [3],   // req = this block selected
  output logic [31:0]  rdata [3],
  input  logic [N-1:0] pad_i,
  output logic [N-1:0] pad_o,
  output logic [N-1:0] pad_oe,
  output logic         err   [3]
);
  typedef struct packed {
    logic [N-1:0] out;
    logic [N-1:0] dir;
    logic [N-1:0] in;
  } gpio_t;

  logic [$bits(gpio_t)-1:0] st_dv [3], st_qv [3];
  logic st_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    gpio_t st_q, st_d;
    assign st_q = gpio_t'(st_qv[i]);

    always_comb begin
      st_d    = st_q;
      st_d.in = pad_i;
      if (req[i].req && req[i].we) begin
        unique case (req[i].addr[3:2])
          2'd0:    st_d.out = req[i].wdata[N-1:0];
          2'd1:    st_d.dir = req[i].wdata[N-1:0];
          default: ;
        endcase
      end
      unique case (req[i].addr[3:2])
        2'd0:    rdata[i] = 32'(st_q.out);
        2'd1:    rdata[i] = 32'(st_q.dir);
        2'd2:    rdata[i] = 32'(st_q.in);
        default: rdata[i] = '0;
      endcase
    end

    assign st_dv[i] = st_d;
    assign st_en[i] = 1'b1;
  end

  assign pad_o  = g_dom[0].st_q.out;
  assign pad_oe = g_dom[0].st_q.dir;

  tmr_reg #(.W($bits(gpio_t))) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(err)
  );
endmodule
