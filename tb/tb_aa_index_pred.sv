// tb_aa_index_pred: self-checking test of the VIPT index-bit predictor.
// Requests with random virtual addresses are followed, after a random delay
// of 1 to 3 cycles, by a translation. The set index offered at request time
// must combine the physical bits 14:12 of the previous translation with the
// page-offset bits 11:6; the translation must abort the request exactly when
// those predicted bits differ from the translated ones, with the corrected
// index on retry_index_o. Translations are drawn mostly from the same page
// so that both outcomes occur; their counts are checked to be non-zero.
module tb_aa_index_pred;
  logic clk = 0, rst_n = 0;
  logic        req_v, tr_v, abort, proceed, busy;
  logic [63:0] vaddr;
  logic [55:0] paddr;
  logic [8:0]  idx, ridx;
  int checks = 0, failures = 0, n_abort = 0, n_proceed = 0;

  aa_index_pred dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_v), .req_vaddr_i(vaddr),
    .req_index_o(idx), .tr_valid_i(tr_v), .tr_paddr_i(paddr), .abort_o(abort),
    .proceed_o(proceed), .retry_index_o(ridx), .busy_o(busy));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0]  m_pred, used, tb;
    logic [55:0] page;
    m_pred = 0; page = 56'h12_3000;
    req_v = 0; tr_v = 0; vaddr = 0; paddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      vaddr = {$urandom(), $urandom()};
      req_v = 1;
      #1;
      checks++;
      if (idx !== {m_pred, vaddr[11:6]}) failures++;
      used = m_pred;
      @(posedge clk); #1 req_v = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) page = {$urandom(), $urandom()} & 56'hff_ffff_f000;
      paddr = page | 56'(vaddr[11:0]);
      tr_v = 1;
      #1;
      tb = paddr[14:12];
      checks += 3;
      if (abort   !== (tb != used)) failures++;
      if (proceed !== (tb == used)) failures++;
      if (ridx    !== {tb, vaddr[11:6]}) failures++;
      if (tb != used) n_abort++; else n_proceed++;
      @(posedge clk); #1 tr_v = 0;
      m_pred = tb;
    end
    checks += 2;
    if (n_abort == 0) failures++;
    if (n_proceed == 0) failures++;
    $display("aborted %0d, proceeded %0d", n_abort, n_proceed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
