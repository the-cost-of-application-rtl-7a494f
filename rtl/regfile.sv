// Integer register file: NR_REGS-1 registers of XLEN flip-flops (x0 reads as
// zero and has no storage), two combinational read ports for the issue stage
// and two write ports for the commit stage, which retires up to two
// instructions per cycle. If both ports write the same register, port 1 (the
// younger instruction) wins. The flip-flop variant is the one the paper
// lists for the silicon; the latch-based alternative is not built.
module regfile #(
  parameter int unsigned NR_REGS = 32,
  parameter int unsigned XLEN    = 64
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [1:0][$clog2(NR_REGS)-1:0] raddr_i,
  output logic [1:0][XLEN-1:0]       rdata_o,
  input  logic [1:0][$clog2(NR_REGS)-1:0] waddr_i,
  input  logic [1:0][XLEN-1:0]       wdata_i,
  input  logic [1:0]                 we_i
);
  logic [XLEN-1:0] mem_q [1:NR_REGS-1];

  for (genvar p = 0; p < 2; p++) begin : g_rd
    assign rdata_o[p] = (raddr_i[p] == '0) ? '0 : mem_q[raddr_i[p]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 1; r < NR_REGS; r++) mem_q[r] <= '0;
    end else begin
      for (int p = 0; p < 2; p++)
        if (we_i[p] && waddr_i[p] != '0) mem_q[waddr_i[p]] <= wdata_i[p];
    end
  end
endmodule
