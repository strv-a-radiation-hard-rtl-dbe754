// strv_test_prog_pkg: test program for the RV32IMC core, built by a small assembler.
//
// build() assembles a program that exercises every RV32I instruction class, the M extension
// (including division by zero and signed overflow), byte/halfword stores and loads, a
// load-use pair, a counted loop whose branch target is at a halfword address, all six branch
// types, JAL/JALR, and several RV32C instructions. Each result is stored with SW to the result
// area at RES_BASE; the expected value of every slot is computed here with ordinary
// SystemVerilog arithmetic from the same operands. The compressed instructions are encoded
// by hand from the RISC-V specification, not with the core's expander. With periph set, a
// section that drives the GPIOs, sends and receives one UART byte and reads the SEU counters
// is appended before the final EBREAK.
package strv_test_prog_pkg;
  import rv32_pkg::*;

  localparam logic [31:0] RES_BASE = 32'h0000_1000;
  localparam logic [31:0] A = 32'hF123_4567;
  localparam logic [31:0] B = 32'h0000_0123;
  localparam logic [31:0] C = 32'h0000_0007;

  logic [15:0] prog [$];
  logic [31:0] exp_val [$];
  int          n_res;
  int          periph_slot;   // first result slot of the peripheral section

  function automatic logic [31:0] pc();
    return 32'(prog.size() * 2);
  endfunction

  function automatic void e32(logic [31:0] w);
    prog.push_back(w[15:0]);
    prog.push_back(w[31:16]);
  endfunction

  function automatic void e16(logic [15:0] h);
    prog.push_back(h);
  endfunction

  function automatic void li(logic [4:0] rd, logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    e32(enc_u(hi[31:12], rd, OP_LUI));
    e32(enc_i(v[11:0], rd, 3'b000, rd, OP_IMM));
  endfunction

  // store x5 into the next result slot and record its expected value
  function automatic void chk(logic [31:0] v);
    e32(enc_s(12'(n_res * 4), 5'd5, 5'd10, 3'b010, OP_STORE));
    exp_val.push_back(v);
    n_res++;
  endfunction

  function automatic void r_op(logic [6:0] f7, logic [2:0] f3, logic [4:0] a, logic [4:0] b);
    e32(enc_r(f7, b, a, f3, 5'd5, OP_OP));
  endfunction

  function automatic void i_op(logic [2:0] f3, logic [11:0] imm);
    e32(enc_i(imm, 5'd1, f3, 5'd5, OP_IMM));
  endfunction

  // hand-encoded RV32C instructions
  function automatic logic [15:0] c_li(logic [4:0] rd, logic [5:0] imm);
    return {3'b010, imm[5], rd, imm[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_addi(logic [4:0] rd, logic [5:0] imm);
    return {3'b000, imm[5], rd, imm[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_mv(logic [4:0] rd, logic [4:0] rs2);
    return {3'b100, 1'b0, rd, rs2, 2'b10};
  endfunction
  function automatic logic [15:0] c_add(logic [4:0] rd, logic [4:0] rs2);
    return {3'b100, 1'b1, rd, rs2, 2'b10};
  endfunction
  function automatic logic [15:0] c_slli(logic [4:0] rd, logic [4:0] sh);
    return {3'b000, 1'b0, rd, sh, 2'b10};
  endfunction
  function automatic logic [15:0] c_sw(logic [2:0] rs2p, logic [6:0] off, logic [2:0] rs1p);
    return {3'b110, off[5:3], rs1p, off[2], off[6], rs2p, 2'b00};
  endfunction
  function automatic logic [15:0] c_lw(logic [2:0] rdp, logic [6:0] off, logic [2:0] rs1p);
    return {3'b010, off[5:3], rs1p, off[2], off[6], rdp, 2'b00};
  endfunction
  function automatic logic [15:0] c_beqz(logic [2:0] rs1p, logic [8:0] off);
    return {3'b110, off[8], off[4:3], rs1p, off[7:6], off[2:1], off[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_j(logic [11:0] off);
    return {3'b101, off[11], off[4], off[9:8], off[10], off[6], off[7], off[3:1], off[5], 2'b01};
  endfunction

  function automatic logic [31:0] sext12(logic [11:0] v);
    return {{20{v[11]}}, v};
  endfunction

  function automatic void build(bit periph);
    logic signed [63:0] p;
    logic [31:0] t, jal_pc, loop_pc;
    logic [7:0]  mask;
    logic [31:0] ba [6], bb [6];
    prog.delete();
    exp_val.delete();
    n_res = 0;

    li(5'd10, RES_BASE);
    li(5'd1, A);
    li(5'd2, B);
    li(5'd3, C);

    // RV32I register-register
    r_op(7'h00, 3'b000, 1, 2); chk(A + B);
    r_op(7'h20, 3'b000, 1, 2); chk(A - B);
    r_op(7'h00, 3'b100, 1, 2); chk(A ^ B);
    r_op(7'h00, 3'b110, 1, 2); chk(A | B);
    r_op(7'h00, 3'b111, 1, 2); chk(A & B);
    r_op(7'h00, 3'b010, 1, 2); chk(32'($signed(A) < $signed(B)));
    r_op(7'h00, 3'b011, 1, 2); chk(32'(A < B));
    r_op(7'h00, 3'b001, 1, 3); chk(A << C[4:0]);
    r_op(7'h00, 3'b101, 1, 3); chk(A >> C[4:0]);
    r_op(7'h20, 3'b101, 1, 3); chk(32'($signed(A) >>> C[4:0]));
    // RV32I register-immediate
    i_op(3'b000, 12'hF9C);     chk(A + sext12(12'hF9C));
    i_op(3'b010, 12'h005);     chk(32'($signed(A) < 5));
    i_op(3'b011, 12'h005);     chk(32'(A < 5));
    i_op(3'b100, 12'h555);     chk(A ^ 32'h555);
    i_op(3'b110, 12'h8F0);     chk(A | sext12(12'h8F0));
    i_op(3'b111, 12'h0F0);     chk(A & 32'h0F0);
    i_op(3'b001, 12'h00D);     chk(A << 13);
    i_op(3'b101, 12'h00D);     chk(A >> 13);
    i_op(3'b101, 12'h40D);     chk(32'($signed(A) >>> 13));
    e32(enc_u(20'hABCDE, 5'd5, OP_LUI));   chk(32'hABCDE000);
    t = pc();
    e32(enc_u(20'h00012, 5'd5, OP_AUIPC)); chk(t + 32'h12000);
    // M extension
    p = $signed({{32{A[31]}}, A}) * $signed({{32{B[31]}}, B});
    r_op(7'h01, 3'b000, 1, 2); chk(p[31:0]);
    r_op(7'h01, 3'b001, 1, 2); chk(p[63:32]);
    p = $signed({{32{A[31]}}, A}) * $signed({32'b0, B});
    r_op(7'h01, 3'b010, 1, 2); chk(p[63:32]);
    p = $signed({32'b0, A}) * $signed({32'b0, B});
    r_op(7'h01, 3'b011, 1, 2); chk(p[63:32]);
    r_op(7'h01, 3'b100, 1, 2); chk(32'($signed(A) / $signed(B)));
    r_op(7'h01, 3'b101, 1, 2); chk(A / B);
    r_op(7'h01, 3'b110, 1, 2); chk(32'($signed(A) % $signed(B)));
    r_op(7'h01, 3'b111, 1, 2); chk(A % B);
    r_op(7'h01, 3'b100, 1, 0); chk(32'hFFFF_FFFF);          // division by zero
    r_op(7'h01, 3'b110, 1, 0); chk(A);
    li(5'd6, 32'h8000_0000);
    li(5'd7, 32'hFFFF_FFFF);
    r_op(7'h01, 3'b100, 6, 7); chk(32'h8000_0000);          // signed overflow
    r_op(7'h01, 3'b110, 6, 7); chk(32'h0);
    // stores and loads
    e32(enc_s(12'h200, 5'd1, 5'd10, 3'b010, OP_STORE));      // sw A
    e32(enc_s(12'h204, 5'd0, 5'd10, 3'b010, OP_STORE));      // sw 0
    e32(enc_s(12'h205, 5'd2, 5'd10, 3'b000, OP_STORE));      // sb B
    e32(enc_s(12'h206, 5'd1, 5'd10, 3'b001, OP_STORE));      // sh A
    e32(enc_i(12'h204, 5'd10, 3'b010, 5'd5, OP_LOAD)); chk({A[15:0], B[7:0], 8'h00});
    e32(enc_i(12'h203, 5'd10, 3'b000, 5'd5, OP_LOAD)); chk({{24{A[31]}}, A[31:24]});
    e32(enc_i(12'h203, 5'd10, 3'b100, 5'd5, OP_LOAD)); chk({24'b0, A[31:24]});
    e32(enc_i(12'h202, 5'd10, 3'b001, 5'd5, OP_LOAD)); chk({{16{A[31]}}, A[31:16]});
    e32(enc_i(12'h202, 5'd10, 3'b101, 5'd5, OP_LOAD)); chk({16'b0, A[31:16]});
    e32(enc_i(12'h200, 5'd10, 3'b010, 5'd6, OP_LOAD));       // load-use pair
    e32(enc_i(12'h001, 5'd6, 3'b000, 5'd5, OP_IMM));   chk(A + 1);
    // counted loop, branch target at a halfword address
    li(5'd6, 0);
    li(5'd7, 10);
    e16(16'h0001);                                           // c.nop
    loop_pc = pc();
    e32(enc_r(7'h00, 5'd7, 5'd6, 3'b000, 5'd6, OP_OP));      // add x6,x6,x7
    e32(enc_i(12'hFFF, 5'd7, 3'b000, 5'd7, OP_IMM));         // addi x7,x7,-1
    e32(enc_b(13'(loop_pc - pc()), 5'd0, 5'd7, 3'b001));     // bne x7,x0,loop
    e32(enc_r(7'h00, 5'd0, 5'd6, 3'b000, 5'd5, OP_OP));      chk(32'd55);
    // all branch types: bit set for every branch not taken
    ba = '{A, B, A, B, A, B};
    bb = '{A, A, B, A, B, A};
    mask = '0;
    e32(enc_i(12'h000, 5'd0, 3'b000, 5'd8, OP_IMM));         // x8 = 0
    for (int k = 0; k < 6; k++) begin
      logic [2:0] f3;
      logic       tk;
      f3 = (k < 2) ? 3'(k) : 3'(k + 2);
      unique case (f3)
        3'b000:  tk = ba[k] == bb[k];
        3'b001:  tk = ba[k] != bb[k];
        3'b100:  tk = $signed(ba[k]) <  $signed(bb[k]);
        3'b101:  tk = $signed(ba[k]) >= $signed(bb[k]);
        3'b110:  tk = ba[k] <  bb[k];
        default: tk = ba[k] >= bb[k];
      endcase
      mask = {mask[6:0], !tk};
      e32(enc_i(12'h001, 5'd8, 3'b001, 5'd8, OP_IMM));       // slli x8,x8,1
      e32(enc_b(13'd8, (bb[k] == A) ? 5'd1 : 5'd2, (ba[k] == A) ? 5'd1 : 5'd2, f3));
      e32(enc_i(12'h001, 5'd8, 3'b000, 5'd8, OP_IMM));       // addi x8,x8,1
    end
    e32(enc_r(7'h00, 5'd0, 5'd8, 3'b000, 5'd5, OP_OP));      chk(32'(mask));
    // JAL / JALR
    jal_pc = pc();
    e32(enc_j(21'd8, 5'd9));                                 // jal x9, sub
    e32(enc_j(21'd12, 5'd0));                                // j over sub
    e32(enc_i(12'd77, 5'd0, 3'b000, 5'd5, OP_IMM));          // sub: li x5, 77
    e32(enc_i(12'd0, 5'd9, 3'b000, 5'd0, OP_JALR));          // ret
    chk(32'd77);
    e32(enc_r(7'h00, 5'd0, 5'd9, 3'b000, 5'd5, OP_OP));      chk(jal_pc + 4);
    // compressed instructions
    e16(c_li(5'd5, 6'h39));                                  chk(32'hFFFF_FFF9);   // -7
    e16(c_addi(5'd5, 6'd3));                                 chk(32'hFFFF_FFFC);
    e16(c_mv(5'd5, 5'd1));                                   chk(A);
    e16(c_add(5'd5, 5'd2));                                  chk(A + B);
    e16(c_slli(5'd5, 5'd4));                                 chk((A + B) << 4);
    e32(enc_i(12'h300, 5'd10, 3'b000, 5'd12, OP_IMM));       // x12 = RES_BASE + 0x300
    e16(c_li(5'd11, 6'd21));
    e16(c_sw(3'd3, 7'd8, 3'd4));                             // c.sw x11, 8(x12)
    e16(c_lw(3'd5, 7'd8, 3'd4));                             // c.lw x13, 8(x12)
    e16(c_mv(5'd5, 5'd13));                                  chk(32'd21);
    e16(c_li(5'd5, 6'd9));
    e16(c_li(5'd14, 6'd0));
    e16(c_beqz(3'd6, 9'd4));                                 // taken
    e16(c_li(5'd5, 6'd1));
    e16(c_j(12'd4));
    e16(c_li(5'd5, 6'd2));
    chk(32'd9);

    periph_slot = n_res;
    if (periph) begin
      li(5'd20, 32'h8000_0000);
      li(5'd5, 32'h05A5_A5A5); e32(enc_s(12'h000, 5'd5, 5'd20, 3'b010, OP_STORE));  // GPIO OUT
      li(5'd5, 32'h0000_FFFF); e32(enc_s(12'h004, 5'd5, 5'd20, 3'b010, OP_STORE));  // GPIO DIR
      e32(enc_i(12'h008, 5'd20, 3'b010, 5'd5, OP_LOAD));     chk(32'h0);  // GPIO IN, tb checks
      li(5'd5, 32'd16);        e32(enc_s(12'h10C, 5'd5, 5'd20, 3'b010, OP_STORE));  // BAUDDIV
      li(5'd5, 32'h0000_00C3); e32(enc_s(12'h100, 5'd5, 5'd20, 3'b010, OP_STORE));  // TXDATA
      t = pc();                                              // wait for a received byte
      e32(enc_i(12'h108, 5'd20, 3'b010, 5'd6, OP_LOAD));
      e32(enc_i(12'h002, 5'd6, 3'b111, 5'd6, OP_IMM));
      e32(enc_b(13'(t - pc()), 5'd0, 5'd6, 3'b000));
      e32(enc_i(12'h104, 5'd20, 3'b010, 5'd5, OP_LOAD));     chk(32'h0);  // RXDATA, tb checks
      t = pc();                                              // wait until the byte is sent
      e32(enc_i(12'h108, 5'd20, 3'b010, 5'd6, OP_LOAD));
      e32(enc_i(12'h001, 5'd6, 3'b111, 5'd6, OP_IMM));
      e32(enc_b(13'(t - pc()), 5'd0, 5'd6, 3'b001));
      e32(enc_i(12'h200, 5'd20, 3'b010, 5'd5, OP_LOAD));     chk(32'h0);  // SEU counters
      e32(enc_i(12'h204, 5'd20, 3'b010, 5'd5, OP_LOAD));     chk(32'h0);
      e32(enc_i(12'h208, 5'd20, 3'b010, 5'd5, OP_LOAD));     chk(32'h0);
    end
    e32(32'h0010_0073);                                      // ebreak
    if (prog.size() % 2 == 1) e16(16'h0001);
  endfunction

  function automatic logic [31:0] word(int i);
    return {prog[2*i+1], prog[2*i]};
  endfunction

endpackage
