// tb_c910_debug_ctrl: directed, self-checking test of the debug controller.
// Covers: debug CSRs unreachable outside debug mode; entry on a halt request
// (dpc, dcsr.cause = 3, dcsr.prv, redirect to the halt address, flush);
// CSR writes and read-back (dpc bit 0 cleared, xdebugver fixed at 4); dret
// (redirect to dpc, privilege restore); ebreak entry gated by
// dcsr.ebreakm/ebreaku and its priority over a halt request; single step
// (cause 4 on the instruction after one retirement); wake-up from wfi by a
// halt request and by an interrupt; halt requests ignored in debug mode.
// A second, random phase then drives every input at random for 4000 cycles
// and compares all outputs and the debug CSRs with a cycle-level reference
// model written from the same rules.
module tb_c910_debug_ctrl;
  logic clk = 0, rst_n = 0;
  logic debug_req, dec_valid, dec_ebreak, retire, dret, wfi, irq, sleep;
  logic [63:0] dec_pc, csr_wdata, csr_rdata, redirect_pc;
  logic [1:0]  priv, priv_val;
  logic csr_access, csr_we, csr_hit, csr_illegal, dmode, kill, flush, redirect, priv_restore;
  logic [11:0] csr_addr;
  int checks = 0, failures = 0;

  c910_debug_ctrl #(.HALT_ADDR(64'h800)) dut (
    .clk_i(clk), .rst_ni(rst_n), .debug_req_i(debug_req), .dec_valid_i(dec_valid), .dec_pc_i(dec_pc),
    .dec_ebreak_i(dec_ebreak), .priv_i(priv), .retire_i(retire), .dret_i(dret), .wfi_i(wfi),
    .irq_pending_i(irq), .sleep_o(sleep), .csr_access_i(csr_access), .csr_we_i(csr_we),
    .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .csr_illegal_o(csr_illegal), .debug_mode_o(dmode), .dec_kill_o(kill), .flush_o(flush),
    .redirect_o(redirect), .redirect_pc_o(redirect_pc), .priv_restore_o(priv_restore),
    .priv_restore_val_o(priv_val));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle();
    debug_req = 0; dec_valid = 0; dec_ebreak = 0; retire = 0; dret = 0; wfi = 0; irq = 0;
    csr_access = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
  endtask

  task automatic csr_read(input logic [11:0] a, output logic [63:0] v);
    @(negedge clk); csr_access = 1; csr_we = 0; csr_addr = a; #1 v = csr_rdata;
    @(posedge clk); #1 idle();
  endtask
  task automatic csr_write(input logic [11:0] a, input logic [63:0] v);
    @(negedge clk); csr_access = 1; csr_we = 1; csr_addr = a; csr_wdata = v;
    @(posedge clk); #1 idle();
  endtask
  // one instruction in decode for one cycle; returns whether it was taken as debug entry
  task automatic decode(input logic [63:0] pc, input bit ebreak, output bit entered, output logic [63:0] rpc);
    @(negedge clk); dec_valid = 1; dec_pc = pc; dec_ebreak = ebreak; #1;
    entered = kill; rpc = redirect_pc;
    if (kill) chk(flush && redirect, "entry flushes and redirects");
    @(posedge clk); #1 dec_valid = 0; dec_ebreak = 0;
  endtask

  // ------------------------------------------------------------ random phase
  task automatic random_phase();
    bit m_dmode = 0, m_sleep = 0, m_step_due = 0;
    bit m_ebm = 0, m_ebs = 0, m_ebu = 0, m_stepie = 0, m_stopc = 0, m_stopt = 0, m_step = 0;
    logic [1:0]  m_prv = 2'b11;
    logic [2:0]  m_cause = 0;
    logic [63:0] m_dpc = 0, m_ds0 = 0, m_ds1 = 0;
    logic [11:0] addrs [5] = '{12'h7b0, 12'h7b1, 12'h7b2, 12'h7b3, 12'h300};
    int n_enter = 0, n_leave = 0;
    @(negedge clk); idle(); rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit en, enter, leave, hit, wr, nsleep;
      logic [2:0] cause;
      @(negedge clk);
      debug_req  = ($urandom_range(0, 9) < 2);
      dec_valid  = ($urandom_range(0, 1) == 1);
      dec_ebreak = ($urandom_range(0, 4) == 0);
      dec_pc     = {$urandom(), $urandom()};
      priv       = 2'($urandom_range(0, 3));
      retire     = ($urandom_range(0, 9) < 3);
      dret       = ($urandom_range(0, 9) == 0);
      wfi        = ($urandom_range(0, 19) == 0);
      irq        = ($urandom_range(0, 9) == 0);
      csr_access = ($urandom_range(0, 9) < 4);
      csr_we     = ($urandom_range(0, 1) == 1);
      csr_addr   = addrs[$urandom_range(0, 4)];
      csr_wdata  = {$urandom(), $urandom()};
      #1;
      case (priv)
        2'b11: en = m_ebm;
        2'b01: en = m_ebs;
        2'b00: en = m_ebu;
        default: en = 0;
      endcase
      cause = 0;
      if (dec_valid && !m_dmode) begin
        if (dec_ebreak && en) cause = 1;
        else if (debug_req)   cause = 3;
        else if (m_step_due)  cause = 4;
      end
      enter = (cause != 0);
      leave = dret && m_dmode;
      hit   = csr_addr inside {12'h7b0, 12'h7b1, 12'h7b2, 12'h7b3};
      chk(kill == enter && flush == (enter || leave) && redirect == (enter || leave), "random: entry/exit strobes");
      if (enter) chk(redirect_pc == 64'h800, "random: entry target");
      else if (leave) chk(redirect_pc == m_dpc, "random: dret target");
      chk(priv_restore == leave && (!leave || priv_val == m_prv), "random: privilege restore");
      chk(dmode == m_dmode && sleep == m_sleep, "random: mode and sleep");
      chk(csr_hit == hit && csr_illegal == (csr_access && hit && !m_dmode), "random: CSR decode");
      if (m_dmode && hit)
        case (csr_addr)
          12'h7b0: chk(csr_rdata[31:28] == 4 && csr_rdata[15] == m_ebm && csr_rdata[13] == m_ebs &&
                       csr_rdata[12] == m_ebu && csr_rdata[11] == m_stepie && csr_rdata[10] == m_stopc &&
                       csr_rdata[9] == m_stopt && csr_rdata[8:6] == m_cause && csr_rdata[2] == m_step &&
                       csr_rdata[1:0] == m_prv, "random: dcsr");
          12'h7b1: chk(csr_rdata == m_dpc, "random: dpc");
          12'h7b2: chk(csr_rdata == m_ds0, "random: dscratch0");
          default: chk(csr_rdata == m_ds1, "random: dscratch1");
        endcase
      // next state
      wr = csr_access && csr_we && m_dmode;
      nsleep = m_sleep;
      if (wfi && !m_dmode) nsleep = 1;
      if (m_sleep && (irq || debug_req)) nsleep = 0;
      if (!m_dmode && m_step && retire) m_step_due = 1;
      if (enter) begin
        n_enter++;
        m_dmode = 1; m_dpc = dec_pc; m_cause = cause; m_prv = priv; m_step_due = 0; nsleep = 0;
      end else if (leave) begin
        n_leave++;
        m_dmode = 0;
      end else if (wr) begin
        case (csr_addr)
          12'h7b0: begin
            m_ebm = csr_wdata[15]; m_ebs = csr_wdata[13]; m_ebu = csr_wdata[12]; m_stepie = csr_wdata[11];
            m_stopc = csr_wdata[10]; m_stopt = csr_wdata[9]; m_step = csr_wdata[2]; m_prv = csr_wdata[1:0];
          end
          12'h7b1: m_dpc = {csr_wdata[63:1], 1'b0};
          12'h7b2: m_ds0 = csr_wdata;
          12'h7b3: m_ds1 = csr_wdata;
          default: ;
        endcase
      end
      m_sleep = nsleep;
    end
    @(negedge clk); idle();
    $display("random phase: %0d entries, %0d exits", n_enter, n_leave);
    chk(n_enter > 10 && n_leave > 10, "random phase entered and left debug mode");
  endtask

  initial begin
    logic [63:0] v, rpc;
    bit e;
    idle(); dec_pc = 0; priv = 2'b11;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // outside debug mode: illegal access
    @(negedge clk); csr_access = 1; csr_addr = 12'h7b0; #1;
    chk(csr_hit && csr_illegal, "dcsr illegal outside debug mode");
    @(posedge clk); #1 idle();
    // plain instruction, no request: no entry
    decode(64'h1000, 0, e, rpc); chk(!e && !dmode, "no spurious entry");
    // halt request
    debug_req = 1;
    decode(64'h1004, 0, e, rpc);
    chk(e && rpc == 64'h800, "haltreq entry to halt address");
    debug_req = 0;
    chk(dmode, "in debug mode");
    csr_read(12'h7b1, v); chk(v == 64'h1004, "dpc = pc of halted instruction");
    csr_read(12'h7b0, v);
    chk(v[31:28] == 4 && v[8:6] == 3 && v[1:0] == 2'b11, "dcsr xdebugver/cause/prv");
    // CSR writes
    csr_write(12'h7b2, 64'hdead_beef_0123_4567); csr_read(12'h7b2, v); chk(v == 64'hdead_beef_0123_4567, "dscratch0");
    csr_write(12'h7b3, 64'h55); csr_read(12'h7b3, v); chk(v == 64'h55, "dscratch1");
    csr_write(12'h7b1, 64'h2001); csr_read(12'h7b1, v); chk(v == 64'h2000, "dpc bit 0 cleared");
    csr_write(12'h7b0, 64'hf000_8000); csr_read(12'h7b0, v);
    chk(v[31:28] == 4 && v[15] && v[1:0] == 2'b00, "dcsr ebreakm set, prv = U, xdebugver read-only");
    // halt request in debug mode is ignored
    debug_req = 1; decode(64'h800, 0, e, rpc); chk(!e, "no re-entry in debug mode"); debug_req = 0;
    // dret
    @(negedge clk); dret = 1; #1;
    chk(redirect && flush && redirect_pc == 64'h2000 && priv_restore && priv_val == 2'b00, "dret redirect to dpc");
    @(posedge clk); #1 idle();
    chk(!dmode, "left debug mode");
    // ebreak in U mode with ebreaku clear: not taken
    priv = 2'b00; decode(64'h3000, 1, e, rpc); chk(!e, "ebreak in U ignored (ebreaku=0)");
    // ebreak in M mode with ebreakm set, together with a halt request: cause ebreak
    priv = 2'b11; debug_req = 1; decode(64'h3004, 1, e, rpc); debug_req = 0;
    chk(e, "ebreak entry");
    csr_read(12'h7b0, v); chk(v[8:6] == 1, "cause ebreak beats haltreq");
    csr_read(12'h7b1, v); chk(v == 64'h3004, "dpc = ebreak pc");
    // single step
    csr_write(12'h7b0, 64'h8007);   // ebreakm, step, prv M
    @(negedge clk); dret = 1; @(posedge clk); #1 idle();
    decode(64'h4000, 0, e, rpc); chk(!e, "first instruction runs");
    @(negedge clk); retire = 1; @(posedge clk); #1 retire = 0;
    decode(64'h4004, 0, e, rpc); chk(e, "step halts on next instruction");
    csr_read(12'h7b0, v); chk(v[8:6] == 4, "cause step");
    csr_read(12'h7b1, v); chk(v == 64'h4004, "dpc after step");
    csr_write(12'h7b0, 64'h8003);   // clear step
    @(negedge clk); dret = 1; @(posedge clk); #1 idle();
    // wfi woken by a halt request
    @(negedge clk); wfi = 1; @(posedge clk); #1 wfi = 0;
    chk(sleep, "asleep after wfi");
    repeat (3) @(posedge clk); chk(sleep, "stays asleep");
    @(negedge clk); debug_req = 1; @(posedge clk); #1;
    chk(!sleep, "halt request wakes the core");
    decode(64'h5000, 0, e, rpc); chk(e, "then halts"); debug_req = 0;
    @(negedge clk); dret = 1; @(posedge clk); #1 idle();
    // wfi woken by an interrupt
    @(negedge clk); wfi = 1; @(posedge clk); #1 wfi = 0;
    @(negedge clk); irq = 1; @(posedge clk); #1 irq = 0;
    chk(!sleep && !dmode, "interrupt wakes without debug entry");
    random_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
