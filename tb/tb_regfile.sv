// tb_regfile: self-checking test of the register file in both variants
// (with and without a hard-wired zero register). Random two-port writes,
// including both ports on one register, are mirrored in a reference array;
// every read port is compared each cycle.
module tb_regfile;
  logic clk = 0, rst_n = 0;
  logic [4:0]  ra [4];
  logic [63:0] rd_z [4], rd_n [4];
  logic        we [2];
  logic [4:0]  wa [2];
  logic [63:0] wd [2];
  int checks = 0, failures = 0;

  regfile #(.NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b1)) dut_int (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(ra), .rdata_o(rd_z), .we_i(we), .waddr_i(wa), .wdata_i(wd));
  regfile #(.NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b0)) dut_fp (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(ra), .rdata_o(rd_n), .we_i(we), .waddr_i(wa), .wdata_i(wd));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] m_z [32], m_n [32];

  initial begin
    foreach (m_z[i]) begin m_z[i] = 0; m_n[i] = 0; end
    for (int i = 0; i < 2; i++) begin we[i] = 0; wa[i] = 0; wd[i] = 0; end
    for (int i = 0; i < 4; i++) ra[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        we[i] = $urandom_range(0, 1);
        wa[i] = 5'($urandom_range(0, 31));
        wd[i] = {$urandom(), $urandom()};
      end
      if (n % 7 == 0) wa[1] = wa[0];
      for (int i = 0; i < 4; i++) ra[i] = 5'($urandom_range(0, 31));
      #1;
      for (int i = 0; i < 4; i++) begin
        checks += 2;
        if (rd_z[i] !== m_z[ra[i]]) failures++;
        if (rd_n[i] !== m_n[ra[i]]) failures++;
      end
      @(posedge clk);
      for (int i = 0; i < 2; i++)
        if (we[i]) begin
          if (wa[i] != 0) m_z[wa[i]] = wd[i];
          m_n[wa[i]] = wd[i];
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
