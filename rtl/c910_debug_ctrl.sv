// c910_debug_ctrl: RISC-V debug support added to the C910 core.
//
// Holds the debug CSRs of the RISC-V debug specification - dcsr (0x7b0),
// dpc (0x7b1), dscratch0 (0x7b2) and dscratch1 (0x7b3) - and sequences entry
// into and exit from debug mode. Entry is taken as an exception on the
// instruction in decode: when a halt request from the SoC's debug module is
// pending, the instruction is an ebreak enabled for the current privilege
// level (dcsr.ebreakm/s/u), or single-stepping is due, the instruction is
// not executed; dpc takes its pc, dcsr.cause and dcsr.prv are updated, the
// pipeline is flushed and fetch is redirected to the debug module's halt
// address. A halt request also wakes a core sleeping in wfi. dret leaves
// debug mode: fetch is redirected to dpc, the pipeline flushed and the
// privilege level in dcsr.prv handed back.
//
// From the published C910 changes: the three CSRs, the debug request input,
// the decode-stage debug exception, wake-up from wfi, and the CSR update /
// fetch redirect / flush sequence. From the RISC-V debug specification:
// CSR addresses, dcsr layout (xdebugver = 4), cause codes and their priority
// (ebreak over halt request over step). This design's choices: the halt
// address parameter, single-cycle redirect/flush pulses, and writes to the
// debug CSRs outside debug mode being ignored and flagged on csr_illegal_o.
//
// Timing: entry, exit, redirect_o and flush_o are combinational in the cycle
// of the event; the CSRs and the mode change at the following clock edge.
module c910_debug_ctrl #(
  parameter logic [63:0] HALT_ADDR = 64'h0000_0000_0000_0800
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        debug_req_i,     // halt request from the debug module
  // instruction in decode
  input  logic        dec_valid_i,
  input  logic [63:0] dec_pc_i,
  input  logic        dec_ebreak_i,
  input  logic [1:0]  priv_i,          // current privilege level
  input  logic        retire_i,        // an instruction retired (for step)
  input  logic        dret_i,          // dret executed in debug mode
  // wait for interrupt
  input  logic        wfi_i,
  input  logic        irq_pending_i,
  output logic        sleep_o,
  // CSR access
  input  logic        csr_access_i,
  input  logic        csr_we_i,
  input  logic [11:0] csr_addr_i,
  input  logic [63:0] csr_wdata_i,
  output logic [63:0] csr_rdata_o,
  output logic        csr_hit_o,
  output logic        csr_illegal_o,
  // pipeline control
  output logic        debug_mode_o,
  output logic        dec_kill_o,      // instruction in decode becomes the debug exception
  output logic        flush_o,
  output logic        redirect_o,
  output logic [63:0] redirect_pc_o,
  output logic        priv_restore_o,
  output logic [1:0]  priv_restore_val_o
);
  localparam logic [11:0] CSR_DCSR = 12'h7b0, CSR_DPC = 12'h7b1,
                          CSR_DSCRATCH0 = 12'h7b2, CSR_DSCRATCH1 = 12'h7b3;

  typedef enum logic [2:0] {
    CAUSE_NONE = 3'd0, CAUSE_EBREAK = 3'd1, CAUSE_TRIGGER = 3'd2,
    CAUSE_HALTREQ = 3'd3, CAUSE_STEP = 3'd4
  } cause_e;

  typedef struct packed {
    logic [3:0]  xdebugver;   // 31:28
    logic [11:0] zero2;       // 27:16
    logic        ebreakm;     // 15
    logic        zero1;       // 14
    logic        ebreaks;     // 13
    logic        ebreaku;     // 12
    logic        stepie;      // 11
    logic        stopcount;   // 10
    logic        stoptime;    // 9
    cause_e      cause;       // 8:6
    logic        zero0;       // 5
    logic        mprven;      // 4
    logic        nmip;        // 3
    logic        step;        // 2
    logic [1:0]  prv;         // 1:0
  } dcsr_t;

  dcsr_t       dcsr_q;
  logic [63:0] dpc_q, dscratch0_q, dscratch1_q;
  logic        dmode_q, sleep_q, step_due_q;

  // entry
  logic   ebreak_en;
  cause_e cause;
  logic   enter;

  always_comb begin
    unique case (priv_i)
      2'b11:   ebreak_en = dcsr_q.ebreakm;
      2'b01:   ebreak_en = dcsr_q.ebreaks;
      2'b00:   ebreak_en = dcsr_q.ebreaku;
      default: ebreak_en = 1'b0;
    endcase
    cause = CAUSE_NONE;
    if (dec_valid_i && !dmode_q) begin
      if (dec_ebreak_i && ebreak_en) cause = CAUSE_EBREAK;
      else if (debug_req_i)          cause = CAUSE_HALTREQ;
      else if (step_due_q)           cause = CAUSE_STEP;
    end
    enter = (cause != CAUSE_NONE);
  end

  logic leave;
  assign leave = dret_i && dmode_q;

  assign dec_kill_o         = enter;
  assign flush_o            = enter || leave;
  assign redirect_o         = enter || leave;
  assign redirect_pc_o      = enter ? HALT_ADDR : dpc_q;
  assign priv_restore_o     = leave;
  assign priv_restore_val_o = dcsr_q.prv;
  assign debug_mode_o       = dmode_q;
  assign sleep_o            = sleep_q;

  // CSR port
  always_comb begin
    csr_hit_o   = csr_addr_i inside {CSR_DCSR, CSR_DPC, CSR_DSCRATCH0, CSR_DSCRATCH1};
    csr_rdata_o = '0;
    if (dmode_q) begin
      unique case (csr_addr_i)
        CSR_DCSR:      csr_rdata_o = {32'b0, dcsr_q};
        CSR_DPC:       csr_rdata_o = dpc_q;
        CSR_DSCRATCH0: csr_rdata_o = dscratch0_q;
        CSR_DSCRATCH1: csr_rdata_o = dscratch1_q;
        default:       csr_rdata_o = '0;
      endcase
    end
    csr_illegal_o = csr_access_i && csr_hit_o && !dmode_q;
  end

  logic csr_wr;
  assign csr_wr = csr_access_i && csr_we_i && dmode_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dcsr_q            <= '0;
      dcsr_q.xdebugver  <= 4'd4;
      dcsr_q.prv        <= 2'b11;
      dpc_q             <= '0;
      dscratch0_q       <= '0;
      dscratch1_q       <= '0;
      dmode_q           <= 1'b0;
      sleep_q           <= 1'b0;
      step_due_q        <= 1'b0;
    end else begin
      // wfi: sleep until an interrupt or a halt request
      if (wfi_i && !dmode_q)                          sleep_q <= 1'b1;
      if (sleep_q && (irq_pending_i || debug_req_i))  sleep_q <= 1'b0;
      // single step: one retirement outside debug mode arms the step halt
      if (!dmode_q && dcsr_q.step && retire_i)        step_due_q <= 1'b1;
      if (enter) begin
        dmode_q      <= 1'b1;
        dpc_q        <= dec_pc_i;
        dcsr_q.cause <= cause;
        dcsr_q.prv   <= priv_i;
        step_due_q   <= 1'b0;
        sleep_q      <= 1'b0;
      end else if (leave) begin
        dmode_q <= 1'b0;
      end else if (csr_wr) begin
        unique case (csr_addr_i)
          CSR_DCSR: begin
            dcsr_q.ebreakm   <= csr_wdata_i[15];
            dcsr_q.ebreaks   <= csr_wdata_i[13];
            dcsr_q.ebreaku   <= csr_wdata_i[12];
            dcsr_q.stepie    <= csr_wdata_i[11];
            dcsr_q.stopcount <= csr_wdata_i[10];
            dcsr_q.stoptime  <= csr_wdata_i[9];
            dcsr_q.step      <= csr_wdata_i[2];
            dcsr_q.prv       <= csr_wdata_i[1:0];
          end
          CSR_DPC:       dpc_q       <= {csr_wdata_i[63:1], 1'b0};
          CSR_DSCRATCH0: dscratch0_q <= csr_wdata_i;
          CSR_DSCRATCH1: dscratch1_q <= csr_wdata_i;
          default: ;
        endcase
      end
    end
  end
endmodule
