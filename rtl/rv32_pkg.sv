// rv32_pkg: RISC-V RV32 instruction encodings and the compressed-instruction expander.
//
// The encoders build 32-bit base instructions from their fields (R, I, S, B, U and J formats
// of the RISC-V unprivileged specification). rvc_expand maps every RV32C instruction onto the
// equivalent 32-bit instruction, so the core decodes only one instruction format; a 16-bit
// word that is not a valid RV32C instruction expands to all zeros, which the core treats as
// illegal. The paper states that the core implements the C extension (Sec. 2); expanding before
// decode is this design's choice.
package rv32_pkg;

  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction

  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                        logic [4:0] rd, logic [6:0] op);
    return {imm, rs1, f3, rd, op};
  endfunction

  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [6:0] op);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], op};
  endfunction

  function automatic logic [31:0] enc_b(logic [12:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], OP_BRANCH};
  endfunction

  function automatic logic [31:0] enc_u(logic [19:0] imm, logic [4:0] rd, logic [6:0] op);
    return {imm, rd, op};
  endfunction

  function automatic logic [31:0] enc_j(logic [20:0] imm, logic [4:0] rd);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd, OP_JAL};
  endfunction

  // Expand one RV32C instruction (c[1:0] != 2'b11) into its 32-bit equivalent.
  function automatic logic [31:0] rvc_expand(logic [15:0] c);
    logic [4:0]  rd, rs2, rdp, rs1p, rs2p;
    logic [11:0] imm6;
    logic [20:0] joff;
    logic [12:0] boff;
    logic [31:0] r;
    rd   = c[11:7];
    rs2  = c[6:2];
    rdp  = {2'b01, c[4:2]};
    rs1p = {2'b01, c[9:7]};
    rs2p = {2'b01, c[4:2]};
    imm6 = {{6{c[12]}}, c[12], c[6:2]};
    joff = {{10{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
    boff = {{5{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};
    r    = '0;
    unique case ({c[1:0], c[15:13]})
      5'b00_000: if (c[12:5] != 0)  // C.ADDI4SPN
                   r = enc_i({2'b0, c[10:7], c[12:11], c[5], c[6], 2'b00}, 5'd2, 3'b000, rdp, OP_IMM);
      5'b00_010: r = enc_i({5'b0, c[5], c[12:10], c[6], 2'b00}, rs1p, 3'b010, rdp, OP_LOAD);   // C.LW
      5'b00_110: r = enc_s({5'b0, c[5], c[12:10], c[6], 2'b00}, rs2p, rs1p, 3'b010, OP_STORE); // C.SW
      5'b01_000: r = enc_i(imm6, rd, 3'b000, rd, OP_IMM);                                      // C.ADDI
      5'b01_001: r = enc_j(joff, 5'd1);                                                        // C.JAL
      5'b01_010: r = enc_i(imm6, 5'd0, 3'b000, rd, OP_IMM);                                    // C.LI
      5'b01_011: begin
        if (rd == 5'd2) begin                                                                   // C.ADDI16SP
          if ({c[12], c[6:2]} != 0)
            r = enc_i({{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0}, 5'd2, 3'b000, 5'd2, OP_IMM);
        end else if ({c[12], c[6:2]} != 0) begin                                               // C.LUI
          r = enc_u({{14{c[12]}}, c[12], c[6:2]}, rd, OP_LUI);
        end
      end
      5'b01_100: begin
        unique case (c[11:10])
          2'b00: if (!c[12]) r = enc_r(7'b0000000, c[6:2], rs1p, 3'b101, rs1p, OP_IMM);      // C.SRLI
          2'b01: if (!c[12]) r = enc_r(7'b0100000, c[6:2], rs1p, 3'b101, rs1p, OP_IMM);      // C.SRAI
          2'b10: r = enc_i(imm6, rs1p, 3'b111, rs1p, OP_IMM);                                 // C.ANDI
          default: if (!c[12]) begin
            unique case (c[6:5])
              2'b00: r = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p, OP_OP);                 // C.SUB
              2'b01: r = enc_r(7'b0000000, rs2p, rs1p, 3'b100, rs1p, OP_OP);                 // C.XOR
              2'b10: r = enc_r(7'b0000000, rs2p, rs1p, 3'b110, rs1p, OP_OP);                 // C.OR
              default: r = enc_r(7'b0000000, rs2p, rs1p, 3'b111, rs1p, OP_OP);               // C.AND
            endcase
          end
        endcase
      end
      5'b01_101: r = enc_j(joff, 5'd0);                                                        // C.J
      5'b01_110: r = enc_b(boff, 5'd0, rs1p, 3'b000);                                          // C.BEQZ
      5'b01_111: r = enc_b(boff, 5'd0, rs1p, 3'b001);                                          // C.BNEZ
      5'b10_000: if (!c[12]) r = enc_r(7'b0000000, c[6:2], rd, 3'b001, rd, OP_IMM);           // C.SLLI
      5'b10_010: if (rd != 0)                                                                   // C.LWSP
                   r = enc_i({4'b0, c[3:2], c[12], c[6:4], 2'b00}, 5'd2, 3'b010, rd, OP_LOAD);
      5'b10_100: begin
        if (!c[12]) begin
          if (rs2 == 0) begin
            if (rd != 0) r = enc_i(12'd0, rd, 3'b000, 5'd0, OP_JALR);                         // C.JR
          end else begin
            r = enc_r(7'b0, rs2, 5'd0, 3'b000, rd, OP_OP);                                     // C.MV
          end
        end else begin
          if (rs2 == 0 && rd == 0) r = 32'h0010_0073;                                          // C.EBREAK
          else if (rs2 == 0)       r = enc_i(12'd0, rd, 3'b000, 5'd1, OP_JALR);               // C.JALR
          else                     r = enc_r(7'b0, rs2, rd, 3'b000, rd, OP_OP);                // C.ADD
        end
      end
      5'b10_110: r = enc_s({4'b0, c[8:7], c[12:9], 2'b00}, c[6:2], 5'd2, 3'b010, OP_STORE);   // C.SWSP
      default:   r = '0;
    endcase
    return r;
  endfunction

endpackage
