// cva6sp_prog_drv: program-driven environment for the CVA6S+ slice, used by
// tb_cva6sp_core and tb_ramp_top.
//
// It plays the parts of the core that are outside the slice:
//   * a program of decoded instructions, generated from a seed: an
//     initialisation block, a loop body of random ALU, load/store, FP load,
//     FP store, FPU, multiply and divide instructions plus a fixed group (a
//     data-dependent forward branch, a jump, a load-use pair, a dependent ALU
//     pair, an FP operation followed by eight ALU operations), the
//     loop-closing counter and branch, and a tail with a jalr. Memory words are 64 bit, addresses 0..511 (64 words).
//   * a front end that offers the two instructions at the fetch pc, stops the
//     pair after a predicted-taken branch, predicts conditional branches with
//     the slice's BHT (bp_pc_i / bp_taken_o) and direct jumps as taken with
//     the exact target, and follows redirect_o;
//   * the load/store unit, multiplier/divider and FPU, each with one
//     operation in flight and a random latency. The FPU's operation is a
//     stand-in (a + b + c, xor a constant): only its timing matters here.
//   * an in-order reference model of the program that lists every retiring
//     instruction's pc and result; each commit of the slice is compared with
//     it, in order.
// It counts the slice's event flags and reports them at the end; the
// events selected by REQ_EV must each occur. With KERNEL set, the random
// program is replaced by a fixed benchmark-style kernel (1: integer matrix
// multiply, 2: an FP-heavy loop, 3: a sequential memory copy), and LD_LAT_MAX bounds the load latency
// (a small value models warm caches).
module cva6sp_prog_drv
  import cva6sp_pkg::*;
#(
  parameter int unsigned SEED  = 1,
  parameter int unsigned LOOPS = 20,
  parameter int unsigned BODY  = 24,
  // 0: random program; 1: integer matrix multiply; 2: FP-heavy loop; 3: copy
  parameter int unsigned KERNEL     = 0,
  // longest load latency of the load/store unit model, in cycles
  parameter int unsigned LD_LAT_MAX = 8,
  // events that must occur at least once (bit order as in ev_name)
  parameter logic [7:0]  REQ_EV     = 8'hff
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  output instr_t     instr_o       [NR_ISSUE],
  output logic       instr_valid_o [NR_ISSUE],
  input  logic       instr_ack_i   [NR_ISSUE],
  output xlen_t      bp_pc_o       [NR_ISSUE],
  input  logic       bp_taken_i    [NR_ISSUE],
  input  logic       redirect_i,
  input  xlen_t      redirect_pc_i,
  input  logic       ext_valid_i   [NR_EXT],
  output logic       ext_ready_o   [NR_EXT],
  input  fu_req_t    ext_req_i     [NR_EXT],
  output logic       ext_wb_valid_o[NR_EXT],
  output wb_t        ext_wb_o      [NR_EXT],
  input  logic       commit_valid_i[NR_COMMIT],
  input  xlen_t      commit_pc_i   [NR_COMMIT],
  input  reg_t       commit_rd_i   [NR_COMMIT],
  input  logic       commit_fp_i   [NR_COMMIT],
  input  logic       commit_we_i   [NR_COMMIT],
  input  xlen_t      commit_data_i [NR_COMMIT],
  input  perf_t      perf_i,
  output int         checks_o,
  output int         failures_o,
  output logic       done_o,
  output int         cycles_o,
  output int         retired_o
);
  localparam xlen_t BASE = 64'h8000_0000;
  localparam int unsigned MAXP = 256;

  instr_t prog [MAXP];
  int     nprog;

  // ------------------------------------------------------------ helpers
  function automatic instr_t mk(fu_t fu, op_t op, int rd, int rs1, int rs2, xlen_t imm, bit use_imm);
    instr_t i;
    i = '0;
    i.fu = fu; i.op = op; i.rd = reg_t'(rd); i.rs1 = reg_t'(rs1); i.rs2 = reg_t'(rs2);
    i.imm = imm; i.use_imm = use_imm;
    i.rd_we = !(fu inside {FU_STORE, FU_FSTORE}) && !(fu == FU_BRANCH && rd == 0);
    return i;
  endfunction

  function automatic xlen_t sext32(input logic [31:0] v);
    return {{32{v[31]}}, v};
  endfunction
  function automatic xlen_t ref_alu(op_t op, xlen_t a, xlen_t b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_SLL:  return a << b[5:0];
      ALU_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU: return (a < b) ? 1 : 0;
      ALU_XOR:  return a ^ b;
      ALU_SRL:  return a >> b[5:0];
      ALU_SRA:  return $signed(a) >>> b[5:0];
      ALU_OR:   return a | b;
      ALU_AND:  return a & b;
      ALU_ADDW: return sext32(a[31:0] + b[31:0]);
      ALU_SUBW: return sext32(a[31:0] - b[31:0]);
      ALU_SLLW: return sext32(a[31:0] << b[4:0]);
      ALU_SRLW: return sext32(a[31:0] >> b[4:0]);
      ALU_SRAW: return sext32($signed(a[31:0]) >>> b[4:0]);
      ALU_LUI:  return b;
      default:  return 0;
    endcase
  endfunction
  function automatic xlen_t fpu_op(xlen_t a, xlen_t b, xlen_t c);
    return (a + b + c) ^ 64'h5a5a_0000_0000_00a5;
  endfunction
  function automatic xlen_t md_op(op_t op, xlen_t a, xlen_t b);
    // op ALU_ADD stands for mul, anything else for divu
    if (op == ALU_ADD) return a * b;
    return (b == 0) ? '1 : a / b;
  endfunction

  // ------------------------------------------------------------ kernels
  function automatic instr_t br(op_t op, int rs1, int rs2, int at, int target);
    instr_t i;
    i = mk(FU_BRANCH, op, 0, rs1, rs2, xlen_t'(4 * target) - xlen_t'(4 * at), 0);
    return i;
  endfunction

  // C = A x B for 4x4 matrices of 64-bit integers: A at bytes 0..127,
  // B at 128..255, C written at 256..383. Inner loop: two loads, a multiply,
  // an accumulate, two pointer increments, the counter and the branch.
  task automatic gen_matmult(inout int n);
    int l_i, l_j, l_k;
    prog[n++] = mk(FU_ALU, ALU_ADD, 5, 0, 0, 0, 1);      // x5  = row of A
    prog[n++] = mk(FU_ALU, ALU_ADD, 18, 0, 0, 256, 1);   // x18 = C pointer
    prog[n++] = mk(FU_ALU, ALU_ADD, 8, 0, 0, 4, 1);      // x8  = rows left
    l_i = n;
    prog[n++] = mk(FU_ALU, ALU_ADD, 9, 0, 0, 128, 1);    // x9  = column of B
    prog[n++] = mk(FU_ALU, ALU_ADD, 10, 0, 0, 4, 1);     // x10 = columns left
    l_j = n;
    prog[n++] = mk(FU_ALU, ALU_ADD, 11, 0, 0, 0, 1);     // acc = 0
    prog[n++] = mk(FU_ALU, ALU_ADD, 12, 5, 0, 0, 1);     // a pointer
    prog[n++] = mk(FU_ALU, ALU_ADD, 13, 9, 0, 0, 1);     // b pointer
    prog[n++] = mk(FU_ALU, ALU_ADD, 14, 0, 0, 4, 1);     // k left
    l_k = n;
    prog[n++] = mk(FU_LOAD, ALU_ADD, 15, 12, 0, 0, 1);
    prog[n++] = mk(FU_LOAD, ALU_ADD, 16, 13, 0, 0, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 12, 12, 0, 8, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 13, 13, 0, 32, 1);
    prog[n++] = mk(FU_MULT, ALU_ADD, 17, 15, 16, 0, 0);
    prog[n++] = mk(FU_ALU, ALU_ADD, 14, 14, 0, -xlen_t'(1), 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 11, 11, 17, 0, 0);
    prog[n] = br(BR_NE, 14, 0, n, l_k); n++;
    prog[n++] = mk(FU_STORE, ALU_ADD, 0, 18, 11, 0, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 18, 18, 0, 8, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 9, 9, 0, 8, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 10, 10, 0, -xlen_t'(1), 1);
    prog[n] = br(BR_NE, 10, 0, n, l_j); n++;
    prog[n++] = mk(FU_ALU, ALU_ADD, 5, 5, 0, 32, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 8, 8, 0, -xlen_t'(1), 1);
    prog[n] = br(BR_NE, 8, 0, n, l_i); n++;
    // read back two results so the last stores are exercised
    prog[n++] = mk(FU_LOAD, ALU_ADD, 20, 0, 0, 256, 1);
    prog[n++] = mk(FU_LOAD, ALU_ADD, 21, 0, 0, 376, 1);
  endtask

  // Particle-update style loop: per pass three FP loads, a chain of five
  // FPU operations each followed by seven independent integer operations,
  // and an FP store.
  task automatic gen_fp_kernel(inout int n);
    int l;
    prog[n++] = mk(FU_ALU, ALU_ADD, 1, 0, 0, xlen_t'(LOOPS), 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 5, 0, 0, 0, 1);
    l = n;
    for (int k = 0; k < 3; k++) begin
      prog[n] = mk(FU_LOAD, ALU_ADD, 1 + k, 5, 0, xlen_t'(8 * k), 1); prog[n].rd_fp = 1; n++;
    end
    for (int k = 0; k < 5; k++) begin
      prog[n] = mk(FU_FPU, ALU_ADD, 4 + k % 3, 1 + k % 3, 4 + (k + 2) % 3, 0, 0);
      prog[n].rs1_fp = 1; prog[n].rs2_fp = 1; prog[n].rd_fp = 1;
      prog[n].rs3 = reg_t'(3); prog[n].rs3_en = (k == 2);
      n++;
      for (int q = 0; q < 7; q++)
        prog[n++] = mk(FU_ALU, (q % 2) ? ALU_XOR : ALU_ADD, 6 + q, 6 + q, 5, xlen_t'(k), 0);
    end
    prog[n] = mk(FU_FSTORE, ALU_ADD, 0, 5, 6, 24, 1); prog[n].rs2_fp = 1; n++;
    prog[n++] = mk(FU_ALU, ALU_ADD, 5, 5, 0, 32, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 1, 1, 0, -xlen_t'(1), 1);
    prog[n] = br(BR_NE, 1, 0, n, l); n++;
  endtask

  // Sequential copy of 32 words from bytes 0..255 to 256..511, as in a
  // streaming-copy benchmark: load, store, pointer and counter updates.
  task automatic gen_copy(inout int n);
    int l;
    prog[n++] = mk(FU_ALU, ALU_ADD, 12, 0, 0, 0, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 14, 0, 0, 32, 1);
    l = n;
    prog[n++] = mk(FU_LOAD, ALU_ADD, 15, 12, 0, 0, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 14, 14, 0, -xlen_t'(1), 1);
    prog[n++] = mk(FU_STORE, ALU_ADD, 0, 12, 15, 256, 1);
    prog[n++] = mk(FU_ALU, ALU_ADD, 12, 12, 0, 8, 1);
    prog[n] = br(BR_NE, 14, 0, n, l); n++;
  endtask

  // ------------------------------------------------------------ program
  initial begin
    int n, r, loop_pc, skip_at;
    void'($urandom(SEED));
    n = 0;
    if (KERNEL == 1) gen_matmult(n);
    else if (KERNEL == 2) gen_fp_kernel(n);
    else if (KERNEL == 3) gen_copy(n);
    else begin
    // x1 = loop counter; x2..x15 data; f1..f7 data; x16 scratch for branches
    prog[n++] = mk(FU_ALU, ALU_ADD, 1, 0, 0, xlen_t'(LOOPS), 1);
    for (int k = 2; k < 16; k++) prog[n++] = mk(FU_ALU, ALU_ADD, k, 0, 0, xlen_t'($urandom_range(1, 5000)), 1);
    for (int k = 1; k < 8; k++) begin
      prog[n] = mk(FU_LOAD, ALU_ADD, k, 0, 0, xlen_t'(8 * k), 1); prog[n].rd_fp = 1; n++;
    end
    loop_pc = n;
    skip_at = $urandom_range(2, BODY - 3);
    for (int b = 0; b < BODY; b++) begin
      if (b == skip_at) begin
        // x16 = x1 & 3 ; beq x16, x0, +8 (skips the next instruction every 4th pass)
        prog[n++] = mk(FU_ALU, ALU_AND, 16, 1, 0, 3, 1);
        prog[n++] = mk(FU_BRANCH, BR_EQ, 0, 16, 0, 8, 0);
        prog[n++] = mk(FU_ALU, ALU_ADD, 2, 2, 0, 1, 1);
        // jal x0, +8 over a poisoned instruction
        prog[n++] = mk(FU_BRANCH, BR_JAL, 0, 0, 0, 8, 0);
        prog[n++] = mk(FU_ALU, ALU_LUI, 3, 0, 0, 64'hbad, 1);
        // load-use (operand stall), then a dependent ALU pair (forwarding)
        prog[n++] = mk(FU_LOAD, ALU_ADD, 17, 0, 0, 64'h40, 1);
        prog[n++] = mk(FU_ALU, ALU_ADD, 18, 17, 17, 0, 0);
        prog[n++] = mk(FU_ALU, ALU_XOR, 19, 18, 2, 0, 0);
        // FP operation followed by a run of independent ALU pairs: its
        // write-back lands while ALU pairs are trying to issue
        prog[n] = mk(FU_FPU, ALU_ADD, 6, 1, 2, 0, 0);
        prog[n].rs1_fp = 1; prog[n].rs2_fp = 1; prog[n].rd_fp = 1; n++;
        for (int q = 0; q < 8; q++) prog[n++] = mk(FU_ALU, ALU_ADD, 26 + q % 4, 2 + q, 0, xlen_t'(q), 1);
        continue;
      end
      r = $urandom_range(0, 99);
      if (r < 45) begin
        prog[n] = mk(FU_ALU, op_t'($urandom_range(0, 15)), $urandom_range(2, 15), $urandom_range(0, 15),
                     $urandom_range(0, 15), xlen_t'($urandom_range(0, 40)), $urandom_range(0, 1));
        if (prog[n].use_imm) prog[n].rs2 = 0;
        n++;
      end else if (r < 55) begin
        prog[n++] = mk(FU_LOAD, ALU_ADD, $urandom_range(2, 15), 0, 0, xlen_t'(8 * $urandom_range(0, 63)), 1);
      end else if (r < 62) begin
        prog[n++] = mk(FU_STORE, ALU_ADD, 0, 0, $urandom_range(2, 15), xlen_t'(8 * $urandom_range(0, 63)), 1);
      end else if (r < 67) begin
        prog[n] = mk(FU_LOAD, ALU_ADD, $urandom_range(1, 7), 0, 0, xlen_t'(8 * $urandom_range(0, 63)), 1);
        prog[n].rd_fp = 1; n++;
      end else if (r < 72) begin
        prog[n] = mk(FU_FSTORE, ALU_ADD, 0, 0, $urandom_range(1, 7), xlen_t'(8 * $urandom_range(0, 63)), 1);
        prog[n].rs2_fp = 1; n++;
      end else if (r < 88) begin
        prog[n] = mk(FU_FPU, ALU_ADD, $urandom_range(1, 7), $urandom_range(1, 7), $urandom_range(1, 7), 0, 0);
        prog[n].rs1_fp = 1; prog[n].rs2_fp = 1; prog[n].rd_fp = 1;
        prog[n].rs3 = reg_t'($urandom_range(1, 7)); prog[n].rs3_en = $urandom_range(0, 1);
        n++;
      end else if (r < 95) begin
        prog[n++] = mk(FU_MULT, ALU_ADD, $urandom_range(2, 15), $urandom_range(2, 15), $urandom_range(2, 15), 0, 0);
      end else begin
        prog[n++] = mk(FU_DIV, ALU_SUB, $urandom_range(2, 15), $urandom_range(2, 15), $urandom_range(0, 15), 0, 0);
      end
    end
    // x1 -= 1 ; bne x1, x0, loop
    prog[n++] = mk(FU_ALU, ALU_ADD, 1, 1, 0, -xlen_t'(1), 1);
    prog[n] = mk(FU_BRANCH, BR_NE, 0, 1, 0, 0, 0);
    prog[n].imm = xlen_t'(4 * loop_pc) - xlen_t'(4 * n);
    n++;
    // tail: dependent ALU chain and a jalr through a register
    prog[n++] = mk(FU_ALU, ALU_ADD, 20, 2, 3, 0, 0);
    prog[n++] = mk(FU_ALU, ALU_SLL, 21, 20, 0, 3, 1);
    r = n;
    prog[n++] = mk(FU_ALU, ALU_LUI, 22, 0, 0, BASE + xlen_t'(4 * (r + 3)), 1);
    prog[n++] = mk(FU_BRANCH, BR_JALR, 23, 22, 0, 0, 0);
    prog[n++] = mk(FU_ALU, ALU_LUI, 24, 0, 0, 64'hbad, 1);
    prog[n++] = mk(FU_ALU, ALU_XOR, 25, 21, 23, 0, 0);
    end
    nprog = n;
    for (int k = 0; k < nprog; k++) prog[k].pc = BASE + xlen_t'(4 * k);
  end

  // ------------------------------------------------------------ reference run
  xlen_t exp_pc   [$];
  logic  exp_we   [$];
  reg_t  exp_rd   [$];
  logic  exp_fp   [$];
  xlen_t exp_data [$];
  xlen_t mem_init [64];

  initial begin
    xlen_t x [32], f [32], m [64], a, b, c, res;
    int pc;
    #1;
    for (int k = 0; k < 64; k++) begin mem_init[k] = {$urandom(), $urandom()}; m[k] = mem_init[k]; end
    for (int k = 0; k < 32; k++) begin x[k] = 0; f[k] = 0; end
    pc = 0;
    while (pc < nprog) begin
      automatic instr_t i = prog[pc];
      automatic int nxt = pc + 1;
      a = i.rs1_fp ? f[i.rs1] : x[i.rs1];
      b = i.rs2_fp ? f[i.rs2] : x[i.rs2];
      c = i.rs3_en ? f[i.rs3] : 0;
      res = 0;
      case (i.fu)
        FU_ALU:    res = ref_alu(i.op, i.use_pc ? i.pc : a, i.use_imm ? i.imm : b);
        FU_LOAD:   res = m[((a + i.imm) >> 3) % 64];
        FU_STORE, FU_FSTORE: m[((a + i.imm) >> 3) % 64] = b;
        FU_FPU:    res = fpu_op(a, b, c);
        FU_MULT, FU_DIV: res = md_op(i.op, a, b);
        FU_BRANCH: begin
          automatic bit t = 0;
          automatic xlen_t tgt = i.pc + i.imm;
          case (i.op)
            BR_EQ: t = a == b;  BR_NE: t = a != b;
            BR_LT: t = $signed(a) < $signed(b);  BR_GE: t = $signed(a) >= $signed(b);
            BR_LTU: t = a < b;  BR_GEU: t = a >= b;
            BR_JAL: t = 1;
            BR_JALR: begin t = 1; tgt = (a + i.imm) & ~xlen_t'(1); end
            default: t = 0;
          endcase
          res = i.pc + 4;
          if (t) nxt = int'((tgt - BASE) >> 2);
        end
        default: ;
      endcase
      exp_pc.push_back(i.pc); exp_we.push_back(i.rd_we); exp_rd.push_back(i.rd);
      exp_fp.push_back(i.rd_fp); exp_data.push_back(res);
      if (i.rd_we) begin
        if (i.rd_fp) f[i.rd] = res;
        else if (i.rd != 0) x[i.rd] = res;
      end
      pc = nxt;
    end
  end

  // ------------------------------------------------------------ front end
  xlen_t fetch_pc_q;
  logic  pred_taken [NR_ISSUE];

  function automatic int pidx(xlen_t p);
    return int'((p - BASE) >> 2);
  endfunction

  always_comb begin
    for (int s = 0; s < NR_ISSUE; s++) begin
      automatic xlen_t p = fetch_pc_q + xlen_t'(4 * s);
      automatic int k = pidx(p);
      bp_pc_o[s]       = p;
      instr_valid_o[s] = (k >= 0) && (k < nprog) && rst_ni;
      instr_o[s]       = (k >= 0 && k < nprog) ? prog[k] : '0;
      pred_taken[s]    = 1'b0;
      if (instr_o[s].fu == FU_BRANCH) begin
        if (instr_o[s].op == BR_JAL)       pred_taken[s] = 1'b1;
        else if (instr_o[s].op != BR_JALR) pred_taken[s] = bp_taken_i[s];
      end
      instr_o[s].bp_taken  = pred_taken[s];
      instr_o[s].bp_target = pred_taken[s] ? p + instr_o[s].imm : '0;
    end
    if (pred_taken[0]) instr_valid_o[1] = 1'b0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) fetch_pc_q <= BASE;
    else if (redirect_i) fetch_pc_q <= redirect_pc_i;
    else if (instr_ack_i[1]) fetch_pc_q <= pred_taken[1] ? instr_o[1].bp_target : fetch_pc_q + 8;
    else if (instr_ack_i[0]) fetch_pc_q <= pred_taken[0] ? instr_o[0].bp_target : fetch_pc_q + 4;
  end

  // ------------------------------------------------------------ execution units
  xlen_t dmem [64];
  int    busy_cnt [NR_EXT];
  wb_t   pend     [NR_EXT];

  always_comb
    for (int e = 0; e < NR_EXT; e++) ext_ready_o[e] = (busy_cnt[e] == 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int e = 0; e < NR_EXT; e++) begin busy_cnt[e] <= 0; pend[e] <= '0; end
      for (int k = 0; k < 64; k++) dmem[k] <= mem_init[k];
    end else begin
      for (int e = 0; e < NR_EXT; e++) begin
        if (busy_cnt[e] > 0) busy_cnt[e] <= busy_cnt[e] - 1;
        if (ext_valid_i[e]) begin
          automatic fu_req_t q = ext_req_i[e];
          pend[e].tag <= q.tag;
          case (q.fu)
            FU_LOAD:  begin pend[e].data <= dmem[((q.a + q.imm) >> 3) % 64]; busy_cnt[e] <= $urandom_range(1, LD_LAT_MAX); end
            FU_STORE, FU_FSTORE: begin dmem[((q.a + q.imm) >> 3) % 64] <= q.b; busy_cnt[e] <= 0; end
            FU_FPU:   begin pend[e].data <= fpu_op(q.a, q.b, q.c); busy_cnt[e] <= 3; end
            default:  begin pend[e].data <= md_op(q.op, q.a, q.b); busy_cnt[e] <= $urandom_range(1, 6); end
          endcase
        end
      end
    end
  end

  always_comb
    for (int e = 0; e < NR_EXT; e++) begin
      ext_wb_valid_o[e] = (busy_cnt[e] == 1);
      ext_wb_o[e]       = pend[e];
    end

  // ------------------------------------------------------------ commit check
  int checks, failures, nret, cyc;
  int ev [8];
  string ev_name [8] = '{"dual_issue", "alu_fwd", "waw", "pair_block", "wb_conflict", "raw_stall", "sb_full", "mispredict"};

  always @(posedge clk_i) begin
    if (rst_ni && !done_o) begin
      cyc = cyc + 1;
      ev[0] += int'(perf_i.dual_issue);
      ev[1] += int'(perf_i.alu_fwd);
      ev[2] += int'(perf_i.waw);
      ev[3] += int'(perf_i.pair_block);
      ev[4] += int'(perf_i.wb_conflict);
      ev[5] += int'(perf_i.raw_stall);
      ev[6] += int'(perf_i.sb_full);
      ev[7] += int'(perf_i.mispredict);
      for (int c = 0; c < NR_COMMIT; c++)
        if (commit_valid_i[c]) begin
          automatic int k = nret + c;
          checks++;
          if (k >= exp_pc.size()) begin
            failures++;
            $display("extra commit pc=%h", commit_pc_i[c]);
          end else if (commit_pc_i[c] !== exp_pc[k] || commit_we_i[c] !== exp_we[k] ||
                       (exp_we[k] && (commit_rd_i[c] !== exp_rd[k] || commit_fp_i[c] !== exp_fp[k] ||
                                      commit_data_i[c] !== exp_data[k]))) begin
            failures++;
            if (failures < 10)
              $display("commit %0d: pc %h rd %0d data %h, expected pc %h rd %0d data %h", k,
                       commit_pc_i[c], commit_rd_i[c], commit_data_i[c], exp_pc[k], exp_rd[k], exp_data[k]);
          end
        end
      nret = nret + int'(commit_valid_i[0]) + int'(commit_valid_i[1]);
    end
  end

  initial begin
    checks = 0; failures = 0; nret = 0; cyc = 0;
    foreach (ev[i]) ev[i] = 0;
  end

  assign done_o = (exp_pc.size() > 0) && (nret >= exp_pc.size());
  assign retired_o = nret;
  assign cycles_o  = cyc;

  // final event check: each mechanism must have happened
  always @(posedge done_o) begin
    int f = 0;
    for (int i = 0; i < 8; i++) begin
      $display("  event %-12s %0d", ev_name[i], ev[i]);
      if (ev[i] == 0 && REQ_EV[i]) begin f++; $display("  event %s never happened", ev_name[i]); end
    end
    $display("  retired %0d instructions in %0d cycles", nret, cyc);
    checks += 8;
    failures += f;
  end

  assign checks_o   = checks;
  assign failures_o = failures;
endmodule
