// debug_module: JTAG access to the STRV-R1 (test access port, debug transport and a minimal
// debug module with system-bus access).
//
// The paper only says that the core domain holds a debug module and that the chip is
// programmed through JTAG (Sec. 2.1, 4). This block provides what programming needs, laid out
// after the RISC-V debug specification 0.13:
//  * an IEEE 1149.1 TAP controller with a 5-bit instruction register: IDCODE (0x01),
//    DTMCS (0x10), DMI (0x11, 41 bits: 7-bit address, 32-bit data, 2-bit op), BYPASS (others);
//  * debug-module registers dmcontrol (0x10: haltreq bit 31, ndmreset bit 1, dmactive bit 0),
//    dmstatus (0x11), sbcs (0x38), sbaddress0 (0x39) and sbdata0 (0x3C). System-bus accesses
//    are 32 bit and support read-on-address, read-on-data and address auto-increment.
// ndmreset holds the core in its reset state (used while loading a program), haltreq stops the
// core at the next instruction boundary. Abstract commands, program buffer and a real debug
// mode are not implemented (partial).
//
// Timing: TCK, TMS and TDI are sampled with the system clock through a two-stage synchroniser
// and edges of TCK are detected in the sampled stream, so the whole block runs on the system
// clock and can be triplicated like the rest of the chip (TCK must be at most 1/8 of the system
// clock). TDO changes after a falling TCK edge. A DMI operation is executed on Update-DR; its
// read data is returned by the capture of the next DMI scan. Oversampling instead of a TCK
// clock domain is this design's choice.
module debug_module
  import strv_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h1000_0A5B
) (
  input  logic     clk      [3],
  input  logic     rst_n    [3],
  input  logic     tck,
  input  logic     tms,
  input  logic     tdi,
  output logic     tdo,
  output bus_req_t sb_req   [3],
  input  bus_rsp_t sb_rsp   [3],
  input  logic     core_halted [3],
  output logic     hold     [3],
  output logic     halt_req [3],
  output logic     err      [3]
);
  typedef enum logic [3:0] {
    TLR, RTI, SELDR, CAPDR, SHDR, EX1DR, PADR, EX2DR, UPDR,
    SELIR, CAPIR, SHIR, EX1IR, PAIR, EX2IR, UPIR
  } tap_e;

  localparam logic [4:0] IR_IDCODE = 5'h01;
  localparam logic [4:0] IR_DTMCS  = 5'h10;
  localparam logic [4:0] IR_DMI    = 5'h11;

  typedef struct packed {
    logic [2:0]  tck_s;
    logic [1:0]  tms_s;
    logic [1:0]  tdi_s;
    tap_e        tap;
    logic [4:0]  ir;
    logic [4:0]  ir_sh;
    logic [40:0] dr;
    logic        tdo;
    logic [31:0] dmi_rdata;
    logic        dmactive;
    logic        ndmreset;
    logic        haltreq;
    logic        sbreadonaddr;
    logic        sbautoinc;
    logic        sbreadondata;
    logic [1:0]  sb_state;     // 0 idle, 1 request, 2 wait for data
    logic        sb_we;
    logic [31:0] sbaddr;
    logic [31:0] sbdata;
  } dbg_t;

  localparam int unsigned DW = $bits(dbg_t);
  logic [DW-1:0] st_dv [3], st_qv [3];
  logic st_en [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    dbg_t st_q, st_d;
    logic rise, fall, t_ms, t_di;
    logic [31:0] rd;
    assign st_q = dbg_t'(st_qv[i]);

    always_comb begin
      st_d       = st_q;
      st_d.tck_s = {st_q.tck_s[1:0], tck};
      st_d.tms_s = {st_q.tms_s[0], tms};
      st_d.tdi_s = {st_q.tdi_s[0], tdi};
      rise = st_q.tck_s[2:1] == 2'b01;
      fall = st_q.tck_s[2:1] == 2'b10;
      t_ms = st_q.tms_s[1];
      t_di = st_q.tdi_s[1];

      // debug-module register read value
      unique case (st_q.dr[40:34])
        7'h10:   rd = {st_q.haltreq, 29'b0, st_q.ndmreset, st_q.dmactive};
        7'h11:   rd = {20'b0, !core_halted[i], !core_halted[i], core_halted[i], core_halted[i],
                       1'b1, 3'b0, 4'd2};
        7'h38:   rd = {3'd1, 7'b0, st_q.sb_state != 2'd0, st_q.sbreadonaddr, 3'd2,
                       st_q.sbautoinc, st_q.sbreadondata, 3'b0, 7'd32, 5'b00100};
        7'h39:   rd = st_q.sbaddr;
        7'h3C:   rd = st_q.sbdata;
        default: rd = '0;
      endcase

      if (rise) begin
        unique case (st_q.tap)
          TLR:   st_d.tap = t_ms ? TLR   : RTI;
          RTI:   st_d.tap = t_ms ? SELDR : RTI;
          SELDR: st_d.tap = t_ms ? SELIR : CAPDR;
          CAPDR: st_d.tap = t_ms ? EX1DR : SHDR;
          SHDR:  st_d.tap = t_ms ? EX1DR : SHDR;
          EX1DR: st_d.tap = t_ms ? UPDR  : PADR;
          PADR:  st_d.tap = t_ms ? EX2DR : PADR;
          EX2DR: st_d.tap = t_ms ? UPDR  : SHDR;
          UPDR:  st_d.tap = t_ms ? SELDR : RTI;
          SELIR: st_d.tap = t_ms ? TLR   : CAPIR;
          CAPIR: st_d.tap = t_ms ? EX1IR : SHIR;
          SHIR:  st_d.tap = t_ms ? EX1IR : SHIR;
          EX1IR: st_d.tap = t_ms ? UPIR  : PAIR;
          PAIR:  st_d.tap = t_ms ? EX2IR : PAIR;
          EX2IR: st_d.tap = t_ms ? UPIR  : SHIR;
          default: st_d.tap = t_ms ? SELDR : RTI;   // UPIR
        endcase

        unique case (st_q.tap)
          TLR:   st_d.ir = IR_IDCODE;
          CAPIR: st_d.ir_sh = 5'b00001;
          SHIR:  st_d.ir_sh = {t_di, st_q.ir_sh[4:1]};
          UPIR:  st_d.ir = st_q.ir_sh;
          CAPDR: begin
            unique case (st_q.ir)
              IR_IDCODE: st_d.dr = {9'b0, IDCODE};
              IR_DTMCS:  st_d.dr = {9'b0, 17'b0, 3'd1, 2'b00, 6'd7, 4'd1};
              IR_DMI:    st_d.dr = {st_q.dr[40:34], st_q.dmi_rdata, 2'b00};
              default:   st_d.dr = '0;
            endcase
          end
          SHDR: begin
            st_d.dr = {1'b0, st_q.dr[40:1]};
            unique case (st_q.ir)
              IR_IDCODE, IR_DTMCS: st_d.dr[31] = t_di;
              IR_DMI:              st_d.dr[40] = t_di;
              default:             st_d.dr[0]  = t_di;
            endcase
          end
          UPDR: begin
            if (st_q.ir == IR_DMI && st_q.sb_state == 2'd0) begin
              if (st_q.dr[1:0] == 2'd1) begin                  // DMI read
                st_d.dmi_rdata = rd;
                if (st_q.dr[40:34] == 7'h3C && st_q.sbreadondata) begin
                  st_d.sb_state = 2'd1;
                  st_d.sb_we    = 1'b0;
                end
              end else if (st_q.dr[1:0] == 2'd2) begin         // DMI write
                unique case (st_q.dr[40:34])
                  7'h10: begin
                    st_d.haltreq  = st_q.dr[33];
                    st_d.ndmreset = st_q.dr[3];
                    st_d.dmactive = st_q.dr[2];
                  end
                  7'h38: begin
                    st_d.sbreadonaddr = st_q.dr[22];
                    st_d.sbautoinc    = st_q.dr[18];
                    st_d.sbreadondata = st_q.dr[17];
                  end
                  7'h39: begin
                    st_d.sbaddr = st_q.dr[33:2];
                    if (st_q.sbreadonaddr) begin
                      st_d.sb_state = 2'd1;
                      st_d.sb_we    = 1'b0;
                    end
                  end
                  7'h3C: begin
                    st_d.sbdata   = st_q.dr[33:2];
                    st_d.sb_state = 2'd1;
                    st_d.sb_we    = 1'b1;
                  end
                  default: ;
                endcase
              end
            end
          end
          default: ;
        endcase
      end

      if (fall) begin
        if (st_q.tap == SHIR)      st_d.tdo = st_q.ir_sh[0];
        else if (st_q.tap == SHDR) st_d.tdo = st_q.dr[0];
      end

      // system bus master
      sb_req[i]       = '0;
      sb_req[i].req   = st_q.sb_state == 2'd1;
      sb_req[i].we    = st_q.sb_we;
      sb_req[i].be    = 4'hF;
      sb_req[i].addr  = st_q.sbaddr;
      sb_req[i].wdata = st_q.sbdata;
      if (st_q.sb_state == 2'd1 && sb_rsp[i].gnt) st_d.sb_state = 2'd2;
      if (st_q.sb_state == 2'd2 && sb_rsp[i].rvalid) begin
        st_d.sb_state = 2'd0;
        if (!st_q.sb_we) st_d.sbdata = sb_rsp[i].rdata;
        if (st_q.sbautoinc) st_d.sbaddr = st_q.sbaddr + 32'd4;
      end
    end

    assign st_dv[i]    = st_d;
    assign st_en[i]    = 1'b1;
    assign hold[i]     = st_q.ndmreset;
    assign halt_req[i] = st_q.haltreq;
  end

  assign tdo = g_dom[0].st_q.tdo;

  tmr_reg #(.W(DW)) u_state (
    .clk(clk), .rst_n(rst_n), .en(st_en), .d(st_dv), .q(st_qv), .err(err)
  );
endmodule
