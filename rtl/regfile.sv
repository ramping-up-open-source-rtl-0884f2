// regfile: architectural register file, flip-flop based.
//
// NR_READ combinational read ports and NR_WRITE write ports written at the
// clock edge; the commit stage retires up to two instructions per cycle, so
// two write ports. When two ports write one register in a cycle the higher
// numbered (younger) port wins. With ZERO_REG set, register 0 reads zero and
// ignores writes (the integer file); the FP file has no zero register.
// Reset clears all registers.
module regfile #(
  parameter int unsigned NR_ENTRIES = 32,
  parameter int unsigned WIDTH      = 64,
  parameter int unsigned NR_READ    = 4,
  parameter int unsigned NR_WRITE   = 2,
  parameter bit          ZERO_REG   = 1'b1
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [$clog2(NR_ENTRIES)-1:0] raddr_i [NR_READ],
  output logic [WIDTH-1:0]              rdata_o [NR_READ],
  input  logic                          we_i    [NR_WRITE],
  input  logic [$clog2(NR_ENTRIES)-1:0] waddr_i [NR_WRITE],
  input  logic [WIDTH-1:0]              wdata_i [NR_WRITE]
);
  logic [WIDTH-1:0] mem_q [NR_ENTRIES];

  always_comb begin
    for (int r = 0; r < NR_READ; r++)
      rdata_o[r] = (ZERO_REG && raddr_i[r] == '0) ? '0 : mem_q[raddr_i[r]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NR_ENTRIES; i++) mem_q[i] <= '0;
    end else begin
      for (int w = 0; w < NR_WRITE; w++)
        if (we_i[w] && !(ZERO_REG && waddr_i[w] == '0)) mem_q[waddr_i[w]] <= wdata_i[w];
    end
  end
endmodule
