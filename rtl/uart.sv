// uart: the single UART interface of the STRV-R1 peripheral domain.
//
// The paper only names a UART (Sec. 2.1); the format and registers here are this design's
// choices. 8 data bits, no parity, one stop bit, LSB first; one bit lasts BAUDDIV clock cycles
// (reset value DIV_RESET, 434 = 50 MHz / 115200 baud). Registers (word offsets):
//   +0 TXDATA  write: send the low byte (ignored while the transmitter is busy)
//   +4 RXDATA  read: last received byte; reading clears the valid flag
//   +8 STATUS  bit 0 transmitter busy, bit 1 received byte valid
//   +C BAUDDIV clock cycles per bit (16 bits)
// The receiver synchronises rxd through two flip-flops, starts on a falling edge, samples each
// bit in its middle and accepts the byte if the stop bit is high. All state is held in TMR
// registers with triplicated logic; domain 0's voted copy drives txd. err[i] reports voter
// discrepancies of domain i. Reads answer combinationally; the interconnect registers them.
module uart
  import strv_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd434
) (
  input  logic        clk   [3],
  input  logic        rst_n [3],
  input  bus_req_t    req   [3],
  output logic [31:0] rdata [3],
  input  logic        rxd,
  output logic        txd,
  output logic        err   [3]
);
  typedef struct packed {
    logic [15:0] div;
    logic        tx_busy;
    logic [9:0]  tx_sh;
    logic [3:0]  tx_bits;
    logic [15:0] tx_cnt;
    logic [1:0]  rx_s;
    logic        rx_busy;
    logic [3:0]  rx_bits;
    logic [15:0] rx_cnt;
    logic [7:0]  rx_sh;
    logic [7:0]  rx_data;
    logic        rx_valid;
  } uart_t;

  localparam int unsigned UW = $bits(uart_t);
  // reset: divider at DIV_RESET, line idle (synchroniser at 1), everything else 0
  localparam logic [UW-1:0] RESET_VAL = UW'({DIV_RESET, 11'b0, 4'b0, 16'b0, 2'b11, 1'b0, 4'b0,
                                             16'b0, 8'b0, 8'b0, 1'b0});

  logic [UW-1:0] st_dv [3], st_qv [3];
  logic st_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    uart_t st_q, st_d;
    assign st_q = uart_t'(st_qv[i]);

    always_comb begin
      st_d = st_q;
      // transmitter
      if (st_q.tx_busy) begin
        if (st_q.tx_cnt == 16'd0) begin
          st_d.tx_sh   = {1'b1, st_q.tx_sh[9:1]};
          st_d.tx_cnt  = st_q.div - 16'd1;
          st_d.tx_bits = st_q.tx_bits - 4'd1;
          if (st_q.tx_bits == 4'd1) st_d.tx_busy = 1'b0;
        end else begin
          st_d.tx_cnt = st_q.tx_cnt - 16'd1;
        end
      end
      // receiver
      st_d.rx_s = {st_q.rx_s[0], rxd};
      if (!st_q.rx_busy) begin
        if (!st_q.rx_s[1]) begin
          st_d.rx_busy = 1'b1;
          st_d.rx_bits = 4'd0;
          st_d.rx_cnt  = {1'b0, st_q.div[15:1]} - 16'd2;   // middle of the start bit
        end
      end else if (st_q.rx_cnt == 16'd0) begin
        st_d.rx_cnt  = st_q.div - 16'd1;
        st_d.rx_bits = st_q.rx_bits + 4'd1;
        if (st_q.rx_bits == 4'd0) begin
          if (st_q.rx_s[1]) st_d.rx_busy = 1'b0;             // glitch, not a start bit
        end else if (st_q.rx_bits == 4'd9) begin
          st_d.rx_busy = 1'b0;
          if (st_q.rx_s[1]) begin
            st_d.rx_data  = st_q.rx_sh;
            st_d.rx_valid = 1'b1;
          end
        end else begin
          st_d.rx_sh = {st_q.rx_s[1], st_q.rx_sh[7:1]};
        end
      end else begin
        st_d.rx_cnt = st_q.rx_cnt - 16'd1;
      end
      // register access
      unique case (req[i].addr[3:2])
        2'd0:    rdata[i] = '0;
        2'd1:    rdata[i] = {24'b0, st_q.rx_data};
        2'd2:    rdata[i] = {30'b0, st_q.rx_valid, st_q.tx_busy};
        default: rdata[i] = {16'b0, st_q.div};
      endcase
      if (req[i].req) begin
        if (req[i].we) begin
          if (req[i].addr[3:2] == 2'd0 && !st_q.tx_busy) begin
            st_d.tx_busy = 1'b1;
            st_d.tx_sh   = {1'b1, req[i].wdata[7:0], 1'b0};
            st_d.tx_bits = 4'd10;
            st_d.tx_cnt  = st_q.div - 16'd1;
          end
          if (req[i].addr[3:2] == 2'd3) st_d.div = req[i].wdata[15:0];
        end else if (req[i].addr[3:2] == 2'd1) begin
          st_d.rx_valid = 1'b0;
        end
      end
    end

    assign st_dv[i] = st_d;
    assign st_en[i] = 1'b1;
  end

  assign txd = g_dom[0].st_q.tx_busy ? g_dom[0].st_q.tx_sh[0] : 1'b1;

  tmr_reg #(.W(UW), .RESET_VAL(RESET_VAL)) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(err)
  );
endmodule
