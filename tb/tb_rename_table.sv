// tb_rename_table: self-checking test of the latest-writer table.
// Random allocations (two per cycle, sometimes to the same register) and
// releases of previously allocated tags are applied to the table and to a
// reference model; all lookups are compared every cycle. Directed checks
// cover the WAW case (a younger writer takes over a busy register and the
// older one's commit leaves it busy), same-cycle slot-1 priority, x0 and
// flush.
module tb_rename_table;
  import cva6sp_pkg::*;
  localparam int unsigned NL = 4;
  logic clk = 0, rst_n = 0, flush = 0;
  logic    alloc [2];  reg_t ard [2]; logic afp [2]; sb_tag_t atag [2];
  logic    rel   [2];  reg_t rrd [2]; logic rfp [2]; sb_tag_t rtag [2];
  reg_t    lreg  [NL]; logic lfp [NL]; logic lbusy [NL]; sb_tag_t ltag [NL];
  int checks = 0, failures = 0;

  rename_table #(.NR_LOOKUP(NL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .alloc_i(alloc), .alloc_rd_i(ard), .alloc_fp_i(afp), .alloc_tag_i(atag),
    .rel_i(rel), .rel_rd_i(rrd), .rel_fp_i(rfp), .rel_tag_i(rtag),
    .look_reg_i(lreg), .look_fp_i(lfp), .look_busy_o(lbusy), .look_tag_o(ltag));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit          m_busy [64];
  int unsigned m_tag  [64];

  task automatic idle();
    for (int i = 0; i < 2; i++) begin
      alloc[i] = 0; ard[i] = 0; afp[i] = 0; atag[i] = 0;
      rel[i] = 0; rrd[i] = 0; rfp[i] = 0; rtag[i] = 0;
    end
  endtask

  task automatic check_all();
    for (int r = 0; r < 64; r += NL) begin
      for (int l = 0; l < NL; l++) begin
        lreg[l] = reg_t'((r + l) % 32);
        lfp[l]  = (r + l) >= 32;
      end
      #1;
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (lbusy[l] !== m_busy[r+l] || (m_busy[r+l] && ltag[l] !== sb_tag_t'(m_tag[r+l]))) begin
          failures++;
          if (failures < 10) $display("reg %0d busy %0d/%0d tag %0d/%0d", r+l, lbusy[l], m_busy[r+l], ltag[l], m_tag[r+l]);
        end
      end
    end
  endtask

  task automatic step();
    // model: releases, then allocations (slot 1 last)
    @(posedge clk);
    for (int c = 0; c < 2; c++)
      if (rel[c] && m_tag[{rfp[c], rrd[c]}] == int'(rtag[c])) m_busy[{rfp[c], rrd[c]}] = 0;
    for (int p = 0; p < 2; p++)
      if (alloc[p] && (afp[p] || ard[p] != 0)) begin
        m_busy[{afp[p], ard[p]}] = 1;
        m_tag[{afp[p], ard[p]}]  = atag[p];
      end
    #1 idle();
  endtask

  initial begin
    foreach (m_busy[i]) begin m_busy[i] = 0; m_tag[i] = 0; end
    idle();
    for (int l = 0; l < NL; l++) begin lreg[l] = 0; lfp[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed WAW: tag 1 then tag 2 write x5; commit of tag 1 keeps x5 busy with tag 2
    @(negedge clk); alloc[0] = 1; ard[0] = 5; atag[0] = 1; step();
    @(negedge clk); alloc[0] = 1; ard[0] = 5; atag[0] = 2; step();
    @(negedge clk); rel[0] = 1; rrd[0] = 5; rtag[0] = 1; step();
    @(negedge clk); lreg[0] = 5; lfp[0] = 0; #1;
    checks++; if (!(lbusy[0] && ltag[0] == 2)) failures++;
    // same cycle, both slots write f3: slot 1 wins
    alloc[0] = 1; ard[0] = 3; afp[0] = 1; atag[0] = 3;
    alloc[1] = 1; ard[1] = 3; afp[1] = 1; atag[1] = 4; step();
    @(negedge clk); lreg[0] = 3; lfp[0] = 1; #1;
    checks++; if (!(lbusy[0] && ltag[0] == 4)) failures++;
    // x0 never busy
    alloc[0] = 1; ard[0] = 0; afp[0] = 0; atag[0] = 5; step();
    @(negedge clk); check_all();
    // random phase
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        alloc[p] = $urandom_range(0, 1);
        ard[p]   = reg_t'($urandom_range(0, 7));
        afp[p]   = $urandom_range(0, 1);
        atag[p]  = sb_tag_t'($urandom_range(0, 7));
        rel[p]   = $urandom_range(0, 1);
        rrd[p]   = reg_t'($urandom_range(0, 7));
        rfp[p]   = $urandom_range(0, 1);
        rtag[p]  = m_busy[{rfp[p], rrd[p]}] && $urandom_range(0, 1) ? sb_tag_t'(m_tag[{rfp[p], rrd[p]}])
                                                                  : sb_tag_t'($urandom_range(0, 7));
      end
      if (rel[0] && rel[1] && rrd[0] == rrd[1] && rfp[0] == rfp[1]) rel[1] = 0;
      step();
      @(negedge clk); check_all();
    end
    // flush empties the table
    @(negedge clk); flush = 1; @(posedge clk); #1 flush = 0;
    foreach (m_busy[i]) m_busy[i] = 0;
    @(negedge clk); check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
