// cva6sp_core: the dual-issue, in-order issue / execute / commit slice of
// CVA6S+, with its two-level branch predictor.
//
// Each cycle the decode stage offers up to two decoded instructions, oldest
// in slot 0. Slot 0 issues when its operands are available, its execution
// unit is ready and the 8-entry scoreboard has room. Slot 1 issues with it
// when, in addition, the pairing rules of dual_issue_check allow it and slot
// 0 is not a mispredicted branch. Issuing allocates a scoreboard entry (the
// scoreboard is also the reorder buffer) and records the entry in the
// rename table as the newest writer of the destination register.
//
// Operands come, in this order of priority, from slot 0 of the same cycle
// (only ALU to ALU, through alu_pair's forwarding path; any other
// dependence between the two slots holds slot 1 back), from an external
// write-back in the same cycle, from the finished result held in the
// scoreboard entry named by the rename table, or from the register file.
// An operand whose producer has not finished holds the instruction back.
//
// Execution units: two ALUs and the branch unit are inside and finish in the
// issue cycle. The load/store unit, multiplier/divider and FPU are outside
// (ext_* ports, indexed EXT_LSU, EXT_MD, EXT_FPU); a request is sent in the
// issue cycle and its result returns on ext_wb_* with the scoreboard tag.
// A store is complete once the LSU accepts it. Write-back ports of the
// scoreboard: 0 = ALU 0 and branch unit, 1 = ALU 1 shared with the FPU,
// 2 = LSU, 3 = multiplier/divider. Up to two finished entries at the head
// commit per cycle, in order, into the integer or FP register file.
//
// Branches resolve in the issue cycle; a mismatch with the front end's
// prediction (direction or target) raises redirect_o with the correct pc,
// kills slot 1 and trains the predictor. Conditional branches update the
// two-level BHT, which the front end reads through bp_pc_i / bp_taken_o.
//
// Follows the published CVA6S+: issue and commit width, scoreboard size,
// register renaming for WAW, ALU-to-ALU forwarding, ALU 1 sharing the FPU's
// write-back port, the FP store / FPU pairing limit, the predictor sizes.
// This design's own choices: the decoded-instruction format, resolving
// branches in the issue cycle, all instructions being 4 bytes long, the
// ext_valid_o depending combinationally on ext_ready_i (the units are
// assumed to answer ready without looking at valid), and no exceptions.
//
// Lint notes: the slot-index helper functions use only bit 0 of their
// argument. rst_ni also appears in the assertion's disable condition, which
// lint reports as a mixed synchronous/asynchronous use; the flops use it
// only asynchronously.
module cva6sp_core
  import cva6sp_pkg::*;
#(
  parameter int unsigned BHT_ENTRIES = 128,
  parameter int unsigned BHT_HIST    = 3
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // decoded instructions, slot 0 oldest
  input  instr_t     instr_i       [NR_ISSUE],
  input  logic       instr_valid_i [NR_ISSUE],
  output logic       instr_ack_o   [NR_ISSUE],
  // branch predictor lookup for the front end
  input  xlen_t      bp_pc_i       [NR_ISSUE],
  output logic       bp_taken_o    [NR_ISSUE],
  // front-end redirect on a mispredicted branch
  output logic       redirect_o,
  output xlen_t      redirect_pc_o,
  output bp_update_t bp_update_o,
  // external execution units
  output logic       ext_valid_o   [NR_EXT],
  input  logic       ext_ready_i   [NR_EXT],
  output fu_req_t    ext_req_o     [NR_EXT],
  input  logic       ext_wb_valid_i[NR_EXT],
  input  wb_t        ext_wb_i      [NR_EXT],
  // retirement trace and events
  output logic       commit_valid_o[NR_COMMIT],
  output xlen_t      commit_pc_o   [NR_COMMIT],
  output reg_t       commit_rd_o   [NR_COMMIT],
  output logic       commit_fp_o   [NR_COMMIT],
  output logic       commit_we_o   [NR_COMMIT],
  output xlen_t      commit_data_o [NR_COMMIT],
  output perf_t      perf_o
);
  // ---------------------------------------------------------------------
  // scoreboard
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic  valid;
    logic  done;
    reg_t  rd;
    logic  rd_fp;
    logic  rd_we;
    xlen_t pc;
    xlen_t result;
  } sb_entry_t;

  sb_entry_t             sb_q [NR_SB];
  sb_tag_t               head_q, tail_q;
  logic [SB_W:0]         count_q;

  // ---------------------------------------------------------------------
  // operand lookup: 3 sources per slot, index s*3+k
  // ---------------------------------------------------------------------
  localparam int unsigned NR_SRC = NR_ISSUE * 3;

  reg_t    src_reg  [NR_SRC];
  logic    src_fp   [NR_SRC];
  logic    src_used [NR_SRC];
  // lookups 0..5 are the sources, 6..7 the destinations of both slots
  reg_t    look_reg [NR_SRC+NR_ISSUE];
  logic    look_fp  [NR_SRC+NR_ISSUE];
  logic    ren_busy [NR_SRC+NR_ISSUE];
  sb_tag_t ren_tag  [NR_SRC+NR_ISSUE];
  xlen_t   src_val  [NR_SRC];
  logic    src_rdy  [NR_SRC];
  logic    src_fwd  [NR_SRC];   // take ALU 0's result of this cycle

  always_comb begin
    for (int s = 0; s < NR_ISSUE; s++) begin
      src_reg[s*3+0]  = instr_i[s].rs1; src_fp[s*3+0] = instr_i[s].rs1_fp; src_used[s*3+0] = 1'b1;
      src_reg[s*3+1]  = instr_i[s].rs2; src_fp[s*3+1] = instr_i[s].rs2_fp; src_used[s*3+1] = 1'b1;
      src_reg[s*3+2]  = instr_i[s].rs3; src_fp[s*3+2] = 1'b1;              src_used[s*3+2] = instr_i[s].rs3_en;
    end
  end

  // register files: 4 integer read ports (rs1/rs2 of both slots), 3 FP read
  // ports for whichever single slot reads FP registers this cycle
  logic  slot_reads_fp [NR_ISSUE];
  logic  fp_slot;
  reg_t  int_raddr [4];
  xlen_t int_rdata [4];
  reg_t  fp_raddr  [3];
  xlen_t fp_rdata  [3];
  logic  int_we    [NR_COMMIT];
  logic  fp_we     [NR_COMMIT];
  reg_t  rf_waddr  [NR_COMMIT];
  xlen_t rf_wdata  [NR_COMMIT];

  always_comb begin
    for (int s = 0; s < NR_ISSUE; s++)
      slot_reads_fp[s] = instr_i[s].rs1_fp || instr_i[s].rs2_fp || instr_i[s].rs3_en;
    fp_slot = !slot_reads_fp[0];
    for (int s = 0; s < NR_ISSUE; s++) begin
      int_raddr[s*2+0] = instr_i[s].rs1;
      int_raddr[s*2+1] = instr_i[s].rs2;
    end
    fp_raddr[0] = instr_i[fp_slot].rs1;
    fp_raddr[1] = instr_i[fp_slot].rs2;
    fp_raddr[2] = instr_i[fp_slot].rs3;
  end

  regfile #(.NR_ENTRIES(NR_REGS), .WIDTH(XLEN), .NR_READ(4), .NR_WRITE(NR_COMMIT), .ZERO_REG(1'b1))
  i_int_rf (.clk_i, .rst_ni, .raddr_i(int_raddr), .rdata_o(int_rdata),
            .we_i(int_we), .waddr_i(rf_waddr), .wdata_i(rf_wdata));

  regfile #(.NR_ENTRIES(NR_REGS), .WIDTH(XLEN), .NR_READ(3), .NR_WRITE(NR_COMMIT), .ZERO_REG(1'b0))
  i_fp_rf (.clk_i, .rst_ni, .raddr_i(fp_raddr), .rdata_o(fp_rdata),
           .we_i(fp_we), .waddr_i(rf_waddr), .wdata_i(rf_wdata));

  // rename table
  logic    alloc     [NR_ISSUE];
  reg_t    alloc_rd  [NR_ISSUE];
  logic    alloc_fp  [NR_ISSUE];
  sb_tag_t alloc_tag [NR_ISSUE];
  logic    rel       [NR_COMMIT];
  reg_t    rel_rd    [NR_COMMIT];
  logic    rel_fp    [NR_COMMIT];
  sb_tag_t rel_tag   [NR_COMMIT];

  always_comb begin
    for (int i = 0; i < NR_SRC; i++) begin
      look_reg[i] = src_reg[i];
      look_fp[i]  = src_fp[i];
    end
    for (int j = 0; j < NR_ISSUE; j++) begin
      look_reg[NR_SRC+j] = instr_i[j].rd;
      look_fp[NR_SRC+j]  = instr_i[j].rd_fp;
    end
  end

  rename_table #(.NR_LOOKUP(NR_SRC+NR_ISSUE)) i_rename (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .alloc_i(alloc), .alloc_rd_i(alloc_rd), .alloc_fp_i(alloc_fp), .alloc_tag_i(alloc_tag),
    .rel_i(rel), .rel_rd_i(rel_rd), .rel_fp_i(rel_fp), .rel_tag_i(rel_tag),
    .look_reg_i(look_reg), .look_fp_i(look_fp), .look_busy_o(ren_busy), .look_tag_o(ren_tag)
  );

  // destination of slot 0 as seen by slot 1
  logic slot0_writes;
  assign slot0_writes = instr_i[0].rd_we && (instr_i[0].rd_fp || instr_i[0].rd != '0);

  int    si, sk;
  xlen_t rfv;
  always_comb begin
    si = 0; sk = 0; rfv = '0;
    for (int i = 0; i < NR_SRC; i++) begin
      si = i / 3;
      sk = i % 3;
      if (src_fp[i]) rfv = (si == int'(fp_slot)) ? fp_rdata[sk] : '0;
      else           rfv = (sk < 2) ? int_rdata[si*2+sk] : '0;
      src_fwd[i] = 1'b0;
      src_val[i] = rfv;
      src_rdy[i] = 1'b1;
      if (!src_used[i]) begin
        src_rdy[i] = 1'b1;
        src_val[i] = '0;
      end else if (si == 1 && slot0_writes && src_reg[i] == instr_i[0].rd && src_fp[i] == instr_i[0].rd_fp) begin
        // depends on the instruction issuing beside it: only ALU -> ALU
        src_fwd[i] = (instr_i[0].fu == FU_ALU) && (instr_i[1].fu == FU_ALU);
        src_rdy[i] = src_fwd[i];
      end else if (ren_busy[i]) begin
        src_rdy[i] = 1'b0;
        if (sb_q[ren_tag[i]].done) begin
          src_val[i] = sb_q[ren_tag[i]].result;
          src_rdy[i] = 1'b1;
        end
        for (int e = 0; e < NR_EXT; e++)
          if (ext_wb_valid_i[e] && ext_wb_i[e].tag == ren_tag[i]) begin
            src_val[i] = ext_wb_i[e].data;
            src_rdy[i] = 1'b1;
          end
      end
    end
  end

  // ---------------------------------------------------------------------
  // issue decision
  // ---------------------------------------------------------------------
  function automatic int unsigned ext_of(input fu_t f);
    case (f)
      FU_LOAD, FU_STORE, FU_FSTORE: return EXT_LSU;
      FU_MULT, FU_DIV:              return EXT_MD;
      default:                      return EXT_FPU;
    endcase
  endfunction
  function automatic logic is_ext(input fu_t f);
    return f inside {FU_LOAD, FU_STORE, FU_FSTORE, FU_MULT, FU_DIV, FU_FPU};
  endfunction

  logic ops_rdy [NR_ISSUE];
  logic fu_rdy  [NR_ISSUE];
  logic pair_ok, alu1_used, fpu_wb;
  logic free1, free2;
  logic issue   [NR_ISSUE];
  logic issue1_pre;
  logic mispredict;

  assign fpu_wb = ext_wb_valid_i[EXT_FPU];

  dual_issue_check i_pair (
    .fu0_i(instr_i[0].fu), .fu1_i(instr_i[1].fu), .fpu_wb_i(fpu_wb),
    .pair_ok_o(pair_ok), .alu1_used_o(alu1_used)
  );

  always_comb begin
    for (int s = 0; s < NR_ISSUE; s++) begin
      ops_rdy[s] = src_rdy[s*3] && src_rdy[s*3+1] && src_rdy[s*3+2];
      fu_rdy[s]  = !is_ext(instr_i[s].fu) || ext_ready_i[ext_of(instr_i[s].fu)];
    end
  end

  assign free1 = count_q <= (SB_W+1)'(NR_SB - 1);
  assign free2 = count_q <= (SB_W+1)'(NR_SB - 2);

  assign issue[0] = instr_valid_i[0] && free1 && ops_rdy[0] && fu_rdy[0];
  assign issue1_pre = issue[0] && instr_valid_i[1] && free2 && pair_ok && ops_rdy[1] && fu_rdy[1]
                      && !(slot_reads_fp[0] && slot_reads_fp[1]);
  assign issue[1]   = issue1_pre && !(mispredict && instr_i[0].fu == FU_BRANCH);
  assign instr_ack_o = issue;

  // ---------------------------------------------------------------------
  // internal execution: ALUs and branch unit
  // ---------------------------------------------------------------------
  function automatic xlen_t opa(input int s, input xlen_t v);
    return instr_i[s].use_pc ? instr_i[s].pc : v;
  endfunction
  function automatic xlen_t opb(input int s, input xlen_t v);
    return instr_i[s].use_imm ? instr_i[s].imm : v;
  endfunction

  // ALU 0 serves slot 0, or slot 1 when slot 0 is not an ALU/branch op
  logic  alu0_slot;
  op_t   alu0_op, alu1_op;
  xlen_t alu0_a, alu0_b, alu1_a, alu1_b, alu0_res, alu1_res;
  logic  fwd_a1, fwd_b1;

  always_comb begin
    alu0_slot = (instr_i[0].fu == FU_ALU) ? 1'b0 : 1'b1;
    alu0_op   = instr_i[alu0_slot].op;
    alu0_a    = alu0_slot ? opa(1, src_val[3]) : opa(0, src_val[0]);
    alu0_b    = alu0_slot ? opb(1, src_val[4]) : opb(0, src_val[1]);
    alu1_op   = instr_i[1].op;
    alu1_a    = opa(1, src_val[3]);
    alu1_b    = opb(1, src_val[4]);
    fwd_a1    = src_fwd[3] && !instr_i[1].use_pc;
    fwd_b1    = src_fwd[4] && !instr_i[1].use_imm;
  end

  alu_pair i_alus (
    .op0_i(alu0_op), .a0_i(alu0_a), .b0_i(alu0_b),
    .op1_i(alu1_op), .a1_i(alu1_a), .b1_i(alu1_b),
    .fwd_a1_i(fwd_a1), .fwd_b1_i(fwd_b1),
    .res0_o(alu0_res), .res1_o(alu1_res)
  );

  logic  br_slot, br_valid, br_taken;
  xlen_t br_a, br_b, br_target, br_next, br_link;

  always_comb begin
    br_slot  = (instr_i[0].fu == FU_BRANCH) ? 1'b0 : 1'b1;
    br_valid = (instr_i[br_slot].fu == FU_BRANCH) && (br_slot ? issue1_pre : issue[0]);
    br_a     = br_slot ? src_val[3] : src_val[0];
    br_b     = br_slot ? src_val[4] : src_val[1];
    br_link  = instr_i[br_slot].pc + xlen_t'(4);
    br_target = instr_i[br_slot].pc + instr_i[br_slot].imm;
    unique case (instr_i[br_slot].op)
      BR_EQ:   br_taken = br_a == br_b;
      BR_NE:   br_taken = br_a != br_b;
      BR_LT:   br_taken = $signed(br_a) < $signed(br_b);
      BR_GE:   br_taken = $signed(br_a) >= $signed(br_b);
      BR_LTU:  br_taken = br_a < br_b;
      BR_GEU:  br_taken = br_a >= br_b;
      BR_JAL:  br_taken = 1'b1;
      BR_JALR: begin br_taken = 1'b1; br_target = (br_a + instr_i[br_slot].imm) & ~xlen_t'(1); end
      default: br_taken = 1'b0;
    endcase
    br_next    = br_taken ? br_target : br_link;
    mispredict = br_valid && ((br_taken != instr_i[br_slot].bp_taken)
                 || (br_taken && br_target != instr_i[br_slot].bp_target));
  end

  assign redirect_o    = mispredict;
  assign redirect_pc_o = br_next;

  always_comb begin
    bp_update_o.valid      = br_valid;
    bp_update_o.is_cond    = !(instr_i[br_slot].op inside {BR_JAL, BR_JALR});
    bp_update_o.pc         = instr_i[br_slot].pc;
    bp_update_o.taken      = br_taken;
    bp_update_o.target     = br_target;
    bp_update_o.mispredict = mispredict;
  end

  bht_2level #(.ENTRIES(BHT_ENTRIES), .HIST_BITS(BHT_HIST), .NR_PORTS(NR_ISSUE), .VLEN(XLEN)) i_bht (
    .clk_i, .rst_ni, .pc_i(bp_pc_i), .taken_o(bp_taken_o),
    .upd_valid_i(bp_update_o.valid && bp_update_o.is_cond),
    .upd_pc_i(bp_update_o.pc), .upd_taken_i(bp_update_o.taken)
  );

  // ---------------------------------------------------------------------
  // external execution units
  // ---------------------------------------------------------------------
  always_comb begin
    for (int e = 0; e < NR_EXT; e++) begin
      ext_valid_o[e] = 1'b0;
      ext_req_o[e]   = '0;
      for (int s = NR_ISSUE-1; s >= 0; s--)
        if (issue[s] && is_ext(instr_i[s].fu) && ext_of(instr_i[s].fu) == e) begin
          ext_valid_o[e]   = 1'b1;
          ext_req_o[e].fu  = instr_i[s].fu;
          ext_req_o[e].op  = instr_i[s].op;
          ext_req_o[e].a   = opa(s, src_val[s*3]);
          ext_req_o[e].b   = src_val[s*3+1];
          ext_req_o[e].c   = src_val[s*3+2];
          ext_req_o[e].imm = instr_i[s].imm;
          ext_req_o[e].tag = (s == 0) ? tail_q : tail_q + sb_tag_t'(1);
        end
    end
  end

  // ---------------------------------------------------------------------
  // scoreboard write-back ports
  // ---------------------------------------------------------------------
  logic wb_valid [NR_WB];
  wb_t  wb       [NR_WB];

  always_comb begin
    // port 0: ALU 0 or branch unit
    wb_valid[WB_FLU] = 1'b0;
    wb[WB_FLU]       = '0;
    if (issue[0] && instr_i[0].fu inside {FU_ALU, FU_BRANCH}) begin
      wb_valid[WB_FLU] = 1'b1;
      wb[WB_FLU].tag   = tail_q;
      wb[WB_FLU].data  = (instr_i[0].fu == FU_BRANCH) ? br_link : alu0_res;
    end else if (issue[1] && instr_i[1].fu inside {FU_ALU, FU_BRANCH}) begin
      wb_valid[WB_FLU] = 1'b1;
      wb[WB_FLU].tag   = tail_q + sb_tag_t'(1);
      wb[WB_FLU].data  = (instr_i[1].fu == FU_BRANCH) ? br_link : alu0_res;
    end
    // port 1: ALU 1, shared with the FPU
    wb_valid[WB_ALU1] = ext_wb_valid_i[EXT_FPU];
    wb[WB_ALU1]       = ext_wb_i[EXT_FPU];
    if (issue[1] && alu1_used) begin
      wb_valid[WB_ALU1] = 1'b1;
      wb[WB_ALU1].tag   = tail_q + sb_tag_t'(1);
      wb[WB_ALU1].data  = alu1_res;
    end
    wb_valid[WB_LSU] = ext_wb_valid_i[EXT_LSU];
    wb[WB_LSU]       = ext_wb_i[EXT_LSU];
    wb_valid[WB_MD]  = ext_wb_valid_i[EXT_MD];
    wb[WB_MD]        = ext_wb_i[EXT_MD];
  end

  // ---------------------------------------------------------------------
  // commit
  // ---------------------------------------------------------------------
  logic    commit [NR_COMMIT];
  sb_tag_t ctag   [NR_COMMIT];

  always_comb begin
    for (int c = 0; c < NR_COMMIT; c++) begin
      ctag[c]   = head_q + sb_tag_t'(c);
      commit[c] = sb_q[ctag[c]].valid && sb_q[ctag[c]].done;
      commit_valid_o[c] = commit[c];
      commit_pc_o[c]    = sb_q[ctag[c]].pc;
      commit_rd_o[c]    = sb_q[ctag[c]].rd;
      commit_fp_o[c]    = sb_q[ctag[c]].rd_fp;
      commit_we_o[c]    = sb_q[ctag[c]].rd_we;
      commit_data_o[c]  = sb_q[ctag[c]].result;
      int_we[c]   = commit[c] && sb_q[ctag[c]].rd_we && !sb_q[ctag[c]].rd_fp;
      fp_we[c]    = commit[c] && sb_q[ctag[c]].rd_we &&  sb_q[ctag[c]].rd_fp;
      rf_waddr[c] = sb_q[ctag[c]].rd;
      rf_wdata[c] = sb_q[ctag[c]].result;
      rel[c]      = commit[c] && sb_q[ctag[c]].rd_we;
      rel_rd[c]   = sb_q[ctag[c]].rd;
      rel_fp[c]   = sb_q[ctag[c]].rd_fp;
      rel_tag[c]  = ctag[c];
    end
    for (int c = 1; c < NR_COMMIT; c++) commit[c] = commit[c] && commit[c-1];
    for (int c = 1; c < NR_COMMIT; c++) commit_valid_o[c] = commit[c];
    for (int c = 1; c < NR_COMMIT; c++) begin
      int_we[c] = int_we[c] && commit[c];
      fp_we[c]  = fp_we[c] && commit[c];
      rel[c]    = rel[c] && commit[c];
    end
    for (int s = 0; s < NR_ISSUE; s++) begin
      alloc[s]     = issue[s] && instr_i[s].rd_we;
      alloc_rd[s]  = instr_i[s].rd;
      alloc_fp[s]  = instr_i[s].rd_fp;
      alloc_tag[s] = tail_q + sb_tag_t'(s);
    end
  end

  // ---------------------------------------------------------------------
  // scoreboard state
  // ---------------------------------------------------------------------
  logic [1:0] n_issue, n_commit;
  assign n_issue  = 2'(issue[0]) + 2'(issue[1]);
  assign n_commit = 2'(commit[0]) + 2'(commit[1]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NR_SB; i++) sb_q[i] <= '0;
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      for (int c = 0; c < NR_COMMIT; c++)
        if (commit[c]) sb_q[ctag[c]].valid <= 1'b0;
      for (int s = 0; s < NR_ISSUE; s++)
        if (issue[s]) begin
          sb_q[tail_q + sb_tag_t'(s)].valid  <= 1'b1;
          sb_q[tail_q + sb_tag_t'(s)].done   <= instr_i[s].fu inside {FU_STORE, FU_FSTORE, FU_NONE};
          sb_q[tail_q + sb_tag_t'(s)].rd     <= instr_i[s].rd;
          sb_q[tail_q + sb_tag_t'(s)].rd_fp  <= instr_i[s].rd_fp;
          sb_q[tail_q + sb_tag_t'(s)].rd_we  <= instr_i[s].rd_we;
          sb_q[tail_q + sb_tag_t'(s)].pc     <= instr_i[s].pc;
          sb_q[tail_q + sb_tag_t'(s)].result <= '0;
        end
      for (int w = 0; w < NR_WB; w++)
        if (wb_valid[w]) begin
          sb_q[wb[w].tag].done   <= 1'b1;
          sb_q[wb[w].tag].result <= wb[w].data;
        end
      head_q  <= head_q + sb_tag_t'(n_commit);
      tail_q  <= tail_q + sb_tag_t'(n_issue);
      count_q <= count_q + (SB_W+1)'(n_issue) - (SB_W+1)'(n_commit);
    end
  end

  // ---------------------------------------------------------------------
  // events
  // ---------------------------------------------------------------------
  always_comb begin
    perf_o.dual_issue  = issue[1];
    perf_o.alu_fwd     = issue[1] && (fwd_a1 || fwd_b1);
    perf_o.waw         = (alloc[0] && ren_busy[NR_SRC]) || (alloc[1] && ren_busy[NR_SRC+1])
                         || (alloc[1] && slot0_writes && instr_i[1].rd == instr_i[0].rd
                             && instr_i[1].rd_fp == instr_i[0].rd_fp);
    perf_o.pair_block  = issue[0] && instr_valid_i[1] && !pair_ok;
    perf_o.wb_conflict = issue[0] && instr_valid_i[1] && alu1_used && fpu_wb;
    perf_o.raw_stall   = instr_valid_i[0] && !ops_rdy[0];
    perf_o.sb_full     = instr_valid_i[0] && !free1;
    perf_o.mispredict  = mispredict;
  end

  // a write-back must target an allocated, unfinished entry
  for (genvar w = 0; w < NR_WB; w++) begin : g_wb_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      wb_valid[w] |-> (sb_q[wb[w].tag].valid || (issue[0] && wb[w].tag == tail_q)
                       || (issue[1] && wb[w].tag == tail_q + sb_tag_t'(1))))
      else $error("write-back to a free scoreboard entry");
  end
endmodule
