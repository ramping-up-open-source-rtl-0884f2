// tb_ramp_top: end-to-end test of ramp_top at its default parameters.
// Three activities run concurrently:
//   * CVA6S+ slice: cva6sp_prog_drv runs a looping random program through
//     the slice and checks every retirement against a reference run; it
//     requires dual issue, ALU-to-ALU forwarding, WAW renaming, a pairing
//     block, the ALU 1 / FPU write-back conflict, an operand stall, a full
//     scoreboard and a misprediction to happen.
//   * L1 index prediction: a stream of requests and translations that both
//     confirm and contradict the predicted index bits.
//   * C910 shell: a halt request that wakes the core from wfi and enters
//     debug mode, a dscratch0 write and read-back, dret; then decrement
//     and increment AXI bursts through the converter to a memory model that
//     accepts only INCR bursts.
// Each mechanism is counted and must occur at least once.
module tb_ramp_top;
  import cva6sp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- CVA6S+ side ----------------
  instr_t     instr [NR_ISSUE];
  logic       ivalid [NR_ISSUE], iack [NR_ISSUE];
  xlen_t      bp_pc [NR_ISSUE];
  logic       bp_taken [NR_ISSUE];
  logic       redirect;
  xlen_t      redirect_pc;
  bp_update_t bpu;
  logic       ev_valid [NR_EXT], ev_ready [NR_EXT], wb_valid [NR_EXT];
  fu_req_t    ereq [NR_EXT];
  wb_t        wb [NR_EXT];
  logic       cv [NR_COMMIT], cfp [NR_COMMIT], cwe [NR_COMMIT];
  xlen_t      cpc [NR_COMMIT], cdata [NR_COMMIT];
  reg_t       crd [NR_COMMIT];
  perf_t      perf;
  int         drv_checks, drv_failures, drv_cycles, drv_retired;
  logic       drv_done;
  // ---------------- L1 index ----------------
  logic        l1_req_v = 0, l1_tr_v = 0, l1_abort, l1_proceed, l1_busy;
  logic [63:0] l1_vaddr = 0;
  logic [55:0] l1_paddr = 0;
  logic [8:0]  l1_idx, l1_ridx;
  // ---------------- C910 side ----------------
  logic        dbg_req = 0, dec_valid = 0, dec_ebreak = 0, retire = 0, dret = 0, wfi = 0, irq = 0;
  logic [63:0] dec_pc = 0, csr_wdata = 0, csr_rdata, dbg_redirect_pc;
  logic [1:0]  priv = 2'b11, priv_val;
  logic        csr_access = 0, csr_we = 0, csr_hit, csr_illegal, dmode, kill, flush, dbg_redirect, priv_restore, sleep;
  logic [11:0] csr_addr = 0;
  logic c_ar_valid = 0, c_ar_ready, c_r_valid, c_r_ready = 0, c_r_last;
  logic [63:0] c_ar_addr = 0, c_r_data; logic [7:0] c_ar_len = 0; logic [1:0] c_ar_burst = 0, c_r_resp;
  logic [3:0] c_r_id;
  logic c_aw_valid = 0, c_aw_ready, c_w_valid = 0, c_w_ready, c_w_last = 0, c_b_valid, c_b_ready = 0;
  logic [63:0] c_aw_addr = 0, c_w_data = 0; logic [7:0] c_aw_len = 0; logic [1:0] c_aw_burst = 0, c_b_resp;
  logic [3:0] c_b_id;
  logic s_ar_valid, s_ar_ready = 0, s_r_valid = 0, s_r_ready, s_r_last = 0;
  logic [63:0] s_ar_addr, s_r_data = 0; logic [7:0] s_ar_len; logic [2:0] s_ar_size; logic [1:0] s_ar_burst;
  logic [3:0] s_ar_id;
  logic s_aw_valid, s_aw_ready = 0, s_w_valid, s_w_ready = 0, s_w_last, s_b_valid = 0, s_b_ready;
  logic [63:0] s_aw_addr, s_w_data; logic [7:0] s_aw_len, s_w_strb; logic [2:0] s_aw_size; logic [1:0] s_aw_burst;
  logic [3:0] s_aw_id;

  ramp_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cva6_instr_i(instr), .cva6_instr_valid_i(ivalid), .cva6_instr_ack_o(iack),
    .cva6_bp_pc_i(bp_pc), .cva6_bp_taken_o(bp_taken), .cva6_redirect_o(redirect),
    .cva6_redirect_pc_o(redirect_pc), .cva6_bp_update_o(bpu),
    .cva6_ext_valid_o(ev_valid), .cva6_ext_ready_i(ev_ready), .cva6_ext_req_o(ereq),
    .cva6_ext_wb_valid_i(wb_valid), .cva6_ext_wb_i(wb),
    .cva6_commit_valid_o(cv), .cva6_commit_pc_o(cpc), .cva6_commit_rd_o(crd), .cva6_commit_fp_o(cfp),
    .cva6_commit_we_o(cwe), .cva6_commit_data_o(cdata), .cva6_perf_o(perf),
    .l1_req_valid_i(l1_req_v), .l1_req_vaddr_i(l1_vaddr), .l1_req_index_o(l1_idx),
    .l1_tr_valid_i(l1_tr_v), .l1_tr_paddr_i(l1_paddr), .l1_abort_o(l1_abort), .l1_proceed_o(l1_proceed),
    .l1_retry_index_o(l1_ridx), .l1_busy_o(l1_busy),
    .c910_debug_req_i(dbg_req), .c910_dec_valid_i(dec_valid), .c910_dec_pc_i(dec_pc),
    .c910_dec_ebreak_i(dec_ebreak), .c910_priv_i(priv), .c910_retire_i(retire), .c910_dret_i(dret),
    .c910_wfi_i(wfi), .c910_irq_pending_i(irq), .c910_sleep_o(sleep),
    .c910_csr_access_i(csr_access), .c910_csr_we_i(csr_we), .c910_csr_addr_i(csr_addr),
    .c910_csr_wdata_i(csr_wdata), .c910_csr_rdata_o(csr_rdata), .c910_csr_hit_o(csr_hit),
    .c910_csr_illegal_o(csr_illegal), .c910_debug_mode_o(dmode), .c910_dec_kill_o(kill),
    .c910_flush_o(flush), .c910_redirect_o(dbg_redirect), .c910_redirect_pc_o(dbg_redirect_pc),
    .c910_priv_restore_o(priv_restore), .c910_priv_restore_val_o(priv_val),
    .c910_ar_valid_i(c_ar_valid), .c910_ar_ready_o(c_ar_ready), .c910_ar_addr_i(c_ar_addr),
    .c910_ar_len_i(c_ar_len), .c910_ar_size_i(3'd3), .c910_ar_burst_i(c_ar_burst), .c910_ar_id_i(4'd5),
    .c910_r_valid_o(c_r_valid), .c910_r_ready_i(c_r_ready), .c910_r_data_o(c_r_data),
    .c910_r_resp_o(c_r_resp), .c910_r_last_o(c_r_last), .c910_r_id_o(c_r_id),
    .c910_aw_valid_i(c_aw_valid), .c910_aw_ready_o(c_aw_ready), .c910_aw_addr_i(c_aw_addr),
    .c910_aw_len_i(c_aw_len), .c910_aw_size_i(3'd3), .c910_aw_burst_i(c_aw_burst), .c910_aw_id_i(4'd6),
    .c910_w_valid_i(c_w_valid), .c910_w_ready_o(c_w_ready), .c910_w_data_i(c_w_data),
    .c910_w_strb_i(8'hff), .c910_w_last_i(c_w_last),
    .c910_b_valid_o(c_b_valid), .c910_b_ready_i(c_b_ready), .c910_b_resp_o(c_b_resp), .c910_b_id_o(c_b_id),
    .soc_ar_valid_o(s_ar_valid), .soc_ar_ready_i(s_ar_ready), .soc_ar_addr_o(s_ar_addr),
    .soc_ar_len_o(s_ar_len), .soc_ar_size_o(s_ar_size), .soc_ar_burst_o(s_ar_burst), .soc_ar_id_o(s_ar_id),
    .soc_r_valid_i(s_r_valid), .soc_r_ready_o(s_r_ready), .soc_r_data_i(s_r_data), .soc_r_resp_i(2'b00),
    .soc_r_last_i(s_r_last), .soc_r_id_i(4'd0),
    .soc_aw_valid_o(s_aw_valid), .soc_aw_ready_i(s_aw_ready), .soc_aw_addr_o(s_aw_addr),
    .soc_aw_len_o(s_aw_len), .soc_aw_size_o(s_aw_size), .soc_aw_burst_o(s_aw_burst), .soc_aw_id_o(s_aw_id),
    .soc_w_valid_o(s_w_valid), .soc_w_ready_i(s_w_ready), .soc_w_data_o(s_w_data), .soc_w_strb_o(s_w_strb),
    .soc_w_last_o(s_w_last), .soc_b_valid_i(s_b_valid), .soc_b_ready_o(s_b_ready), .soc_b_resp_i(2'b00),
    .soc_b_id_i(4'd0)
  );

  cva6sp_prog_drv #(.SEED(11), .LOOPS(30), .BODY(24)) drv (
    .clk_i(clk), .rst_ni(rst_n), .instr_o(instr), .instr_valid_o(ivalid), .instr_ack_i(iack),
    .bp_pc_o(bp_pc), .bp_taken_i(bp_taken), .redirect_i(redirect), .redirect_pc_i(redirect_pc),
    .ext_valid_i(ev_valid), .ext_ready_o(ev_ready), .ext_req_i(ereq), .ext_wb_valid_o(wb_valid),
    .ext_wb_o(wb), .commit_valid_i(cv), .commit_pc_i(cpc), .commit_rd_i(crd), .commit_fp_i(cfp),
    .commit_we_i(cwe), .commit_data_i(cdata), .perf_i(perf), .checks_o(drv_checks),
    .failures_o(drv_failures), .done_o(drv_done), .cycles_o(drv_cycles), .retired_o(drv_retired));

  int checks = 0, failures = 0;
  int n_abort = 0, n_proceed = 0, n_halt = 0, n_wake = 0, n_dret = 0, n_decr_rd = 0, n_decr_wr = 0;
  logic l1_done = 0, c910_done = 0;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired: core %0d, L1 %0d, C910 %0d", drv_done, l1_done, c910_done);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + drv_checks, failures + drv_failures);
    $finish;
  end

  // ---------------- L1 index prediction ----------------
  initial begin
    logic [2:0] pred, used;
    pred = 0;
    wait (rst_n);
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); l1_req_v = 1; l1_vaddr = {$urandom(), $urandom()};
      #1 chk(l1_idx == {pred, l1_vaddr[11:6]}, "predicted index");
      used = pred;
      @(posedge clk); #1 l1_req_v = 0;
      @(negedge clk); l1_tr_v = 1;
      l1_paddr = {24'h0, $urandom()};
      l1_paddr[11:0] = l1_vaddr[11:0];
      l1_paddr[14:12] = ($urandom_range(0, 2) == 0) ? 3'($urandom) : used;
      #1;
      chk(l1_abort == (l1_paddr[14:12] != used) && l1_proceed == (l1_paddr[14:12] == used), "abort/proceed");
      if (l1_abort) n_abort++;
      if (l1_proceed) n_proceed++;
      pred = l1_paddr[14:12];
      @(posedge clk); #1 l1_tr_v = 0;
    end
    l1_done = 1;
  end

  // ---------------- SoC memory (INCR only) ----------------
  logic [63:0] smem [64];
  initial begin : soc_rd
    for (int i = 0; i < 64; i++) smem[i] = 64'h1000 + 64'(i);
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (s_ar_valid) begin
        automatic int a = int'(s_ar_addr >> 3), len = int'(s_ar_len);
        chk(s_ar_burst == 2'b01, "SoC read burst is INCR");
        @(negedge clk) s_ar_ready = 1;
        @(negedge clk) s_ar_ready = 0;
        for (int i = 0; i <= len; i++) begin
          s_r_valid = 1; s_r_data = smem[(a + i) % 64]; s_r_last = (i == len);
          @(posedge clk); while (!s_r_ready) @(posedge clk);
          @(negedge clk);
        end
        s_r_valid = 0; s_r_last = 0;
      end
    end
  end
  initial begin : soc_wr
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (s_aw_valid) begin
        automatic int a = int'(s_aw_addr >> 3), len = int'(s_aw_len);
        chk(s_aw_burst == 2'b01, "SoC write burst is INCR");
        @(negedge clk) s_aw_ready = 1;
        @(negedge clk) s_aw_ready = 0; s_w_ready = 1;
        for (int i = 0; i <= len; i++) begin
          @(posedge clk); while (!s_w_valid) @(posedge clk);
          smem[(a + i) % 64] = s_w_data;
        end
        @(negedge clk) s_w_ready = 0; s_b_valid = 1;
        @(posedge clk); while (!s_b_ready) @(posedge clk);
        @(negedge clk) s_b_valid = 0;
      end
    end
  end

  // ---------------- C910 shell ----------------
  initial begin
    wait (rst_n);
    // sleep in wfi, then a halt request wakes the core and halts it at decode
    @(negedge clk); wfi = 1; @(negedge clk); wfi = 0;
    chk(sleep, "core sleeps after wfi");
    repeat (5) @(negedge clk);
    dbg_req = 1;
    @(negedge clk);
    chk(!sleep, "halt request wakes the core"); if (!sleep) n_wake++;
    dec_valid = 1; dec_pc = 64'h8000_1234; #1;
    chk(kill && dbg_redirect && dbg_redirect_pc == 64'h800, "halt at decode");
    if (kill) n_halt++;
    @(negedge clk); dec_valid = 0; dbg_req = 0;
    chk(dmode, "debug mode");
    csr_access = 1; csr_we = 1; csr_addr = 12'h7b2; csr_wdata = 64'hfeed;
    @(negedge clk); csr_we = 0; #1 chk(csr_rdata == 64'hfeed, "dscratch0 read-back");
    csr_addr = 12'h7b1; #1 chk(csr_rdata == 64'h8000_1234, "dpc");
    @(negedge clk); csr_access = 0; dret = 1; #1;
    chk(dbg_redirect && dbg_redirect_pc == 64'h8000_1234, "dret resumes at dpc");
    if (dbg_redirect) n_dret++;
    @(negedge clk); dret = 0;
    // decrement write of 4 beats ending at word 20 (words 23,22,21,20), then read it back
    @(negedge clk); c_aw_valid = 1; c_aw_addr = 64'(23 * 8); c_aw_len = 3; c_aw_burst = 2'b11;
    @(posedge clk); while (!c_aw_ready) @(posedge clk);
    @(negedge clk); c_aw_valid = 0;
    for (int i = 0; i < 4; i++) begin
      c_w_valid = 1; c_w_data = 64'hd0 + 64'(i); c_w_last = (i == 3);
      @(posedge clk); while (!c_w_ready) @(posedge clk);
      @(negedge clk);
    end
    c_w_valid = 0; c_w_last = 0; c_b_ready = 1;
    @(posedge clk); while (!c_b_valid) @(posedge clk);
    @(negedge clk); c_b_ready = 0;
    for (int i = 0; i < 4; i++) chk(smem[23 - i] == 64'hd0 + 64'(i), "decrement write lands at descending addresses");
    n_decr_wr++;
    @(negedge clk); c_ar_valid = 1; c_ar_addr = 64'(23 * 8); c_ar_len = 3; c_ar_burst = 2'b11;
    @(posedge clk); while (!c_ar_ready) @(posedge clk);
    @(negedge clk); c_ar_valid = 0; c_r_ready = 1;
    for (int i = 0; i < 4; i++) begin
      @(posedge clk); while (!c_r_valid) @(posedge clk);
      chk(c_r_data == 64'hd0 + 64'(i) && c_r_last == (i == 3), "decrement read returns descending words");
    end
    @(negedge clk); c_r_ready = 0;
    n_decr_rd++;
    // increment read of words 2..5
    @(negedge clk); c_ar_valid = 1; c_ar_addr = 64'(2 * 8); c_ar_len = 3; c_ar_burst = 2'b01;
    @(posedge clk); while (!c_ar_ready) @(posedge clk);
    @(negedge clk); c_ar_valid = 0; c_r_ready = 1;
    for (int i = 0; i < 4; i++) begin
      @(posedge clk); while (!c_r_valid) @(posedge clk);
      chk(c_r_data == 64'h1000 + 64'(2 + i), "increment read");
    end
    @(negedge clk); c_r_ready = 0;
    c910_done = 1;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (drv_done && l1_done && c910_done);
    repeat (2) @(posedge clk);
    $display("CVA6S+: %0d instructions in %0d cycles", drv_retired, drv_cycles);
    $display("L1 index: %0d aborted, %0d proceeded", n_abort, n_proceed);
    $display("C910: %0d halts, %0d wfi wake-ups, %0d drets, %0d decrement reads, %0d decrement writes",
             n_halt, n_wake, n_dret, n_decr_rd, n_decr_wr);
    chk(n_abort > 0, "index misprediction happened");
    chk(n_proceed > 0, "index prediction confirmed");
    chk(n_halt > 0 && n_wake > 0 && n_dret > 0, "debug entry, wake-up and exit happened");
    chk(n_decr_rd > 0 && n_decr_wr > 0, "decrement bursts converted");
    $display("TB_RESULT checks=%0d failures=%0d", checks + drv_checks, failures + drv_failures);
    $finish;
  end
endmodule
