// strv_periph: peripheral domain of the STRV-R1 (GPIO, UART and the SEU counters).
//
// Decodes the peripheral bus coming from the memory bridge by address bits [15:8] into the
// three peripherals (page 0 GPIO, page 1 UART, page 2 SEU counters, see strv_pkg) and returns
// the read data one cycle after the request, through a TMR register. The discrepancy outputs of
// all voters of this domain are ORed into err[i]; together with the core-domain and SRAM-domain
// discrepancy inputs it drives the three SEU counters. The grouping of blocks follows the
// paper's domain split (Sec. 2.1); the address map is this design's choice.
module strv_periph
  import strv_pkg::*;
#(
  parameter logic [15:0] UART_DIV_RESET = 16'd434
) (
  input  logic              clk      [3],
  input  logic              rst_n    [3],
  input  bus_req_t          req      [3],
  output logic [31:0]       rdata    [3],
  input  logic              err_core [3],
  input  logic              err_sram [3],
  input  logic [N_GPIO-1:0] gpio_i,
  output logic [N_GPIO-1:0] gpio_o,
  output logic [N_GPIO-1:0] gpio_oe,
  input  logic              uart_rx,
  output logic              uart_tx,
  output logic [31:0]       seu_count [3],
  output logic              err      [3]
);
  bus_req_t    gpio_req [3], uart_req [3], cnt_req [3];
  logic [31:0] gpio_rd [3], uart_rd [3], cnt_rd [3], rd_d [3];
  logic        gpio_err [3], uart_err [3], cnt_err [3], rd_err [3], rd_en [3];
  logic [2:0]  inc [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    logic [7:0] page;
    always_comb begin
      page        = req[i].addr[15:8];
      gpio_req[i] = req[i];
      uart_req[i] = req[i];
      cnt_req[i]  = req[i];
      gpio_req[i].req = req[i].req && page == GPIO_PAGE;
      uart_req[i].req = req[i].req && page == UART_PAGE;
      cnt_req[i].req  = req[i].req && page == SEUCNT_PAGE;
    end
    always_comb begin
      unique case (page)
        GPIO_PAGE:   rd_d[i] = gpio_rd[i];
        UART_PAGE:   rd_d[i] = uart_rd[i];
        SEUCNT_PAGE: rd_d[i] = cnt_rd[i];
        default:     rd_d[i] = '0;
      endcase
    end
    assign rd_en[i] = req[i].req && !req[i].we;
    assign err[i]   = gpio_err[i] | uart_err[i] | cnt_err[i] | rd_err[i];
    assign inc[i]   = {err[i], err_sram[i], err_core[i]};
  end

  gpio u_gpio (
    .clk(clk), .rst_n(rst_n), .req(gpio_req), .rdata(gpio_rd),
    .pad_i(gpio_i), .pad_o(gpio_o), .pad_oe(gpio_oe), .err(gpio_err)
  );

  uart #(.DIV_RESET(UART_DIV_RESET)) u_uart (
    .clk(clk), .rst_n(rst_n), .req(uart_req), .rdata(uart_rd),
    .rxd(uart_rx), .txd(uart_tx), .err(uart_err)
  );

  seu_counters u_cnt (
    .clk(clk), .rst_n(rst_n), .req(cnt_req), .rdata(cnt_rd),
    .inc(inc), .count(seu_count), .err(cnt_err)
  );

  tmr_reg #(.W(32)) u_rdata (
    .clk(clk), .rst_n(rst_n), .en(rd_en), .d(rd_d), .q(rdata), .err(rd_err)
  );
endmodule
