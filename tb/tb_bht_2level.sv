// tb_bht_2level: self-checking test of the two-level branch predictor.
// A reference model (per-entry 3-bit histories, shared table of 2-bit
// counters) is updated alongside the design with random branch outcomes on
// random pcs; both lookup ports are compared every cycle. A directed part
// trains one branch on the repeating pattern taken, taken, not-taken and
// checks that, once trained, every outcome is predicted correctly - the
// case a local history captures and a plain counter cannot.
module tb_bht_2level;
  localparam int unsigned ENTRIES = 128, HB = 3;
  logic clk = 0, rst_n = 0;
  logic [63:0] pc [2];
  logic        taken [2];
  logic        upd_v, upd_t;
  logic [63:0] upd_pc;
  int checks = 0, failures = 0;

  bht_2level #(.ENTRIES(ENTRIES), .HIST_BITS(HB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .pc_i(pc), .taken_o(taken),
    .upd_valid_i(upd_v), .upd_pc_i(upd_pc), .upd_taken_i(upd_t));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned m_hist [ENTRIES];
  int unsigned m_ctr  [8];

  function automatic int unsigned ix(input logic [63:0] p);
    return int'((p >> 1) % ENTRIES);
  endfunction
  function automatic bit m_pred(input logic [63:0] p);
    return m_ctr[m_hist[ix(p)]] >= 2;
  endfunction
  task automatic m_update(input logic [63:0] p, input bit t);
    int unsigned h = m_hist[ix(p)];
    if (t && m_ctr[h] < 3) m_ctr[h]++;
    if (!t && m_ctr[h] > 0) m_ctr[h]--;
    m_hist[ix(p)] = ((h << 1) | t) & 7;
  endtask

  task automatic cmp();
    for (int p = 0; p < 2; p++) begin
      checks++;
      if (taken[p] !== m_pred(pc[p])) begin
        failures++;
        if (failures < 10) $display("mismatch pc=%h dut=%0d ref=%0d", pc[p], taken[p], m_pred(pc[p]));
      end
    end
  endtask

  initial begin
    int correct;
    bit pat [3] = '{1, 1, 0};
    foreach (m_hist[i]) m_hist[i] = 0;
    foreach (m_ctr[i])  m_ctr[i]  = 1;
    upd_v = 0; upd_t = 0; upd_pc = 0; pc[0] = 0; pc[1] = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      pc[0]  = 64'($urandom_range(0, 1023)) << 1;
      pc[1]  = 64'($urandom_range(0, 1023)) << 1;
      upd_v  = ($urandom_range(0, 3) != 0);
      upd_pc = 64'($urandom_range(0, 1023)) << 1;
      upd_t  = $urandom_range(0, 1);
      #1 cmp();
      @(posedge clk);
      if (upd_v) m_update(upd_pc, upd_t);
    end
    // directed: pattern T T N on one branch
    correct = 0;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      pc[0] = 64'h8000_0100; pc[1] = 64'h8000_0104;
      upd_v = 1; upd_pc = 64'h8000_0100; upd_t = pat[n % 3];
      #1 cmp();
      if (n >= 30) begin
        checks++;
        if (taken[0] !== pat[n % 3]) failures++;
      end
      @(posedge clk);
      m_update(upd_pc, upd_t);
    end
    upd_v = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
