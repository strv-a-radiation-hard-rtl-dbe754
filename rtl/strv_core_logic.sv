// strv_core_logic: next-state logic of one TMR domain of the RV32IMC core.
//
// The STRV-R1 core (derived by the paper's authors from an existing RV32IMC core) has a
// three-stage pipeline: instruction fetch, decode/execute and writeback (paper, Sec. 2). This
// module is the purely combinational part of one domain; strv_core instantiates it three times
// and keeps all state in voted TMR registers, so every flip-flop output reaches this logic only
// through a voter. The pipeline itself is this design's own, written from the RISC-V
// specification:
//
//  * Fetch: 32-bit words are requested on the IMEM bus into a queue of six 16-bit halfwords,
//    which lets 16-bit (C extension) and 32-bit instructions sit at any halfword address. A
//    fetch is issued when the queue plus the word in flight hold at most four halfwords, so
//    the returning word always has room; in straight-line code this keeps one fetch per cycle
//    going while one 32-bit instruction per cycle is executed.
//  * Decode/execute: the instruction at the head of the queue (expanded first if compressed)
//    reads its operands, with a bypass from the writeback stage, and executes in one cycle.
//    Loads and stores issue their DMEM request here and stall while the bridge does not grant
//    it. Branches and jumps are resolved here; a taken one flushes the queue and any fetch in
//    flight and requests its target word in the same cycle, so it costs one bubble. MUL/MULH*
//    use a single-cycle 33x33 multiplier; DIV/REM use a 32-step restoring divider that holds
//    the instruction in this stage for 34 cycles.
//  * Writeback: the result (or the load data arriving from memory, aligned and extended here)
//    is written to the register file.
//
// ECALL, EBREAK, CSR and illegal instructions stop the core (halted); there are no CSRs, traps
// or interrupts (the paper does not describe them). FENCE is a no-op. Accesses are assumed
// naturally aligned. hold returns the pipeline to its reset state (used by the debug module's
// system reset); halt_req stops issue at the next instruction boundary.
module strv_core_logic
  import strv_pkg::*;
  import rv32_pkg::*;
(
  input  core_state_t st_q,
  input  logic [31:0] rf [32],
  input  bus_rsp_t    imem_rsp,
  input  bus_rsp_t    dmem_rsp,
  input  logic        hold,
  input  logic        halt_req,
  output core_state_t st_d,
  output logic        rf_we,
  output logic [4:0]  rf_waddr,
  output logic [31:0] rf_wdata,
  output bus_req_t    imem_req,
  output bus_req_t    dmem_req,
  output logic        idle
);
  // ---------------- writeback stage ----------------
  logic [31:0] ld_word, wb_value;
  always_comb begin
    ld_word = dmem_rsp.rdata >> {st_q.wb_off, 3'b000};
    unique case (st_q.wb_f3)
      3'b000:  wb_value = {{24{ld_word[7]}},  ld_word[7:0]};
      3'b001:  wb_value = {{16{ld_word[15]}}, ld_word[15:0]};
      3'b100:  wb_value = {24'b0, ld_word[7:0]};
      3'b101:  wb_value = {16'b0, ld_word[15:0]};
      default: wb_value = ld_word;
    endcase
    if (!st_q.wb_load) wb_value = st_q.wb_data;
    rf_we    = st_q.wb_valid && (st_q.wb_rd != 5'd0);
    rf_waddr = st_q.wb_rd;
    rf_wdata = wb_value;
  end

  // ---------------- decode ----------------
  logic        is_c, have;
  logic [31:0] instr;
  logic [6:0]  opc;
  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic [31:0] rs1v, rs2v;

  always_comb begin
    is_c  = st_q.q[0][1:0] != 2'b11;
    have  = is_c ? (st_q.q_cnt >= 3'd1) : (st_q.q_cnt >= 3'd2);
    instr = is_c ? rvc_expand(st_q.q[0]) : {st_q.q[1], st_q.q[0]};
    opc   = instr[6:0];
    rd    = instr[11:7];
    f3    = instr[14:12];
    rs1   = instr[19:15];
    rs2   = instr[24:20];
    f7    = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'b0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};
    rs1v  = (st_q.wb_valid && st_q.wb_rd == rs1 && rs1 != 5'd0) ? wb_value : rf[rs1];
    rs2v  = (st_q.wb_valid && st_q.wb_rd == rs2 && rs2 != 5'd0) ? wb_value : rf[rs2];
  end

  // ---------------- execute ----------------
  logic [31:0] opb, alu, res, target, pc_next, maddr;
  logic [32:0] sub33;
  logic [65:0] prod;
  logic        is_mul, is_div, is_mem, writes, taken, illegal, brc;
  logic        can_issue, exec, stall;
  logic [31:0] q_fix, r_fix;
  logic [32:0] rem_t;

  always_comb begin
    opb    = (opc == OP_OP) ? rs2v : imm_i;
    sub33  = {1'b0, rs1v} - {1'b0, opb};
    unique case (f3)
      3'b000:  alu = (opc == OP_OP && f7[5]) ? sub33[31:0] : rs1v + opb;
      3'b001:  alu = rs1v << opb[4:0];
      3'b010:  alu = {31'b0, $signed(rs1v) < $signed(opb)};
      3'b011:  alu = {31'b0, sub33[32]};
      3'b100:  alu = rs1v ^ opb;
      3'b101:  alu = f7[5] ? 32'($signed(rs1v) >>> opb[4:0]) : rs1v >> opb[4:0];
      3'b110:  alu = rs1v | opb;
      default: alu = rs1v & opb;
    endcase

    // multiplier: operands sign-extended to 33 bits as the variant requires
    prod = 66'($signed({rs1v[31] & (f3[1:0] != 2'b11), rs1v}) *
               $signed({rs2v[31] & (f3[1:0] == 2'b01), rs2v}));

    // divider result sign correction (DIV by zero gives -1, REM by zero gives the dividend)
    q_fix = ((rs1v[31] ^ rs2v[31]) && !f3[0] && rs2v != 0) ? -st_q.div_quo : st_q.div_quo;
    r_fix = (rs1v[31] && !f3[0]) ? -st_q.div_rem : st_q.div_rem;

    unique case (f3)
      3'b000:  brc = rs1v == rs2v;
      3'b001:  brc = rs1v != rs2v;
      3'b100:  brc = $signed(rs1v) <  $signed(rs2v);
      3'b101:  brc = $signed(rs1v) >= $signed(rs2v);
      3'b110:  brc = rs1v <  rs2v;
      3'b111:  brc = rs1v >= rs2v;
      default: brc = 1'b0;
    endcase

    is_mul  = (opc == OP_OP) && (f7 == 7'b0000001) && !f3[2];
    is_div  = (opc == OP_OP) && (f7 == 7'b0000001) &&  f3[2];
    is_mem  = (opc == OP_LOAD) || (opc == OP_STORE);
    illegal = 1'b0;
    writes  = 1'b1;
    taken   = 1'b0;
    target  = st_q.q_pc + imm_b;
    res     = alu;
    pc_next = st_q.q_pc + (is_c ? 32'd2 : 32'd4);
    maddr   = rs1v + ((opc == OP_STORE) ? imm_s : imm_i);

    unique case (opc)
      OP_LUI:    res = imm_u;
      OP_AUIPC:  res = st_q.q_pc + imm_u;
      OP_JAL:    begin res = pc_next; taken = 1'b1; target = st_q.q_pc + imm_j; end
      OP_JALR:   begin res = pc_next; taken = 1'b1; target = (rs1v + imm_i) & ~32'd1; end
      OP_BRANCH: begin writes = 1'b0; taken = brc; illegal = (f3[2:1] == 2'b01); end
      OP_LOAD:   illegal = (f3 == 3'b011) || (f3[2:1] == 2'b11);
      OP_STORE:  begin writes = 1'b0; illegal = (f3[2] || f3 == 3'b011); end
      OP_IMM:    illegal = (f3 == 3'b001 && f7 != 0) ||
                           (f3 == 3'b101 && (f7 & 7'b1011111) != 0);
      OP_OP: begin
        if (is_mul) begin
          res = (f3 == 3'b000) ? prod[31:0] : prod[63:32];
        end else if (is_div) begin
          res = f3[1] ? r_fix : q_fix;
        end else begin
          illegal = (f7 & 7'b1011111) != 0 || (f7[5] && f3 != 3'b000 && f3 != 3'b101);
        end
      end
      OP_FENCE:  writes = 1'b0;
      default:   begin writes = 1'b0; illegal = 1'b1; end  // SYSTEM and everything else
    endcase
    if (instr[1:0] != 2'b11) illegal = 1'b1;   // invalid compressed encoding (expands to 0)
  end

  // ---------------- state update ----------------
  logic [2:0]       cnt, pop;
  logic [5:0][15:0] qn;
  logic             redirect;

  // The requests, the stall decision and the state update sit in separate processes, so that
  // no process both reads a bus response and drives the request it depends on.
  always_comb begin
    can_issue = have && !st_q.halted && !halt_req;
    dmem_req       = '0;
    dmem_req.req   = can_issue && is_mem && !illegal && !hold;
    dmem_req.we    = (opc == OP_STORE);
    dmem_req.addr  = maddr;
    unique case (f3[1:0])
      2'b00:   begin dmem_req.be = 4'b0001 << maddr[1:0]; dmem_req.wdata = {4{rs2v[7:0]}};  end
      2'b01:   begin dmem_req.be = 4'b0011 << maddr[1:0]; dmem_req.wdata = {2{rs2v[15:0]}}; end
      default: begin dmem_req.be = 4'b1111;               dmem_req.wdata = rs2v;            end
    endcase
  end

  always_comb begin
    stall    = (dmem_req.req && !dmem_rsp.gnt) || (can_issue && is_div && !st_q.div_done);
    exec     = can_issue && !stall;
    redirect = exec && !illegal && taken;
  end

  // next fetch: only if the queue can take a whole word when it returns
  always_comb begin
    imem_req      = '0;
    imem_req.be   = 4'hF;
    if (redirect) begin
      // a taken branch or jump fetches its target word in the same cycle
      imem_req.req  = !hold;
      imem_req.addr = {target[31:2], 2'b00};
    end else begin
      imem_req.req  = !st_q.halted && !hold &&
                      ({1'b0, st_q.q_cnt} + (st_q.inflight ? 4'd2 : 4'd0) <= 4'd4);
      imem_req.addr = st_q.fetch_pc;
    end
  end

  always_comb begin
    st_d = st_q;

    // iterative divider
    rem_t = {st_q.div_rem, st_q.div_quo[31]};
    if (st_q.div_busy) begin
      if (rem_t >= {1'b0, st_q.div_dvs}) begin
        st_d.div_rem = 32'(rem_t - {1'b0, st_q.div_dvs});
        st_d.div_quo = {st_q.div_quo[30:0], 1'b1};
      end else begin
        st_d.div_rem = rem_t[31:0];
        st_d.div_quo = {st_q.div_quo[30:0], 1'b0};
      end
      st_d.div_cnt = st_q.div_cnt - 6'd1;
      if (st_q.div_cnt == 6'd1) begin
        st_d.div_busy = 1'b0;
        st_d.div_done = 1'b1;
      end
    end
    if (can_issue && is_div && !st_q.div_done) begin
      if (!st_q.div_busy) begin
        st_d.div_busy = 1'b1;
        st_d.div_cnt  = 6'd32;
        st_d.div_rem  = '0;
        st_d.div_quo  = (rs1v[31] && !f3[0]) ? -rs1v : rs1v;
        st_d.div_dvs  = (rs2v[31] && !f3[0]) ? -rs2v : rs2v;
      end
    end

    // writeback stage register
    st_d.wb_valid = exec && !illegal && writes;
    st_d.wb_load  = exec && (opc == OP_LOAD);
    st_d.wb_rd    = rd;
    st_d.wb_f3    = f3;
    st_d.wb_off   = maddr[1:0];
    st_d.wb_data  = res;
    if (exec && is_div) st_d.div_done = 1'b0;
    if (exec && illegal) st_d.halted = 1'b1;

    // instruction queue: pop the executed instruction, then append the returning word
    pop = exec ? (is_c ? 3'd1 : 3'd2) : 3'd0;
    cnt = st_q.q_cnt - pop;
    qn  = st_q.q;
    if (pop == 3'd1) qn = {16'h0, st_q.q[5:1]};
    if (pop == 3'd2) qn = {32'h0, st_q.q[5:2]};
    if (exec) st_d.q_pc = (!illegal && taken) ? target : pc_next;

    if (imem_rsp.rvalid) begin
      if (st_q.drop_first) begin
        qn[cnt] = imem_rsp.rdata[31:16];
        cnt = cnt + 3'd1;
      end else begin
        qn[cnt]             = imem_rsp.rdata[15:0];
        qn[cnt + 3'd1]      = imem_rsp.rdata[31:16];
        cnt = cnt + 3'd2;
      end
      st_d.drop_first = 1'b0;
    end
    st_d.q     = qn;
    st_d.q_cnt = cnt;

    st_d.inflight = imem_req.req && imem_rsp.gnt;
    if (st_d.inflight) st_d.fetch_pc = imem_req.addr + 32'd4;

    if (redirect) begin
      st_d.q_cnt      = 3'd0;
      st_d.drop_first = target[1];
      if (!st_d.inflight) st_d.fetch_pc = {target[31:2], 2'b00};
    end

    if (hold) begin
      st_d          = '0;
      st_d.fetch_pc = RESET_PC;
      st_d.q_pc     = RESET_PC;
    end
  end

  assign idle = !st_q.div_busy && !st_q.wb_valid && !dmem_req.req;
endmodule
