// CSR buffer. CSR instructions (and the other instructions that must only
// act at commit: fences, xRET, WFI, SFENCE.VMA) are "executed" by storing
// their operand and CSR address here and reporting completion to the
// scoreboard at once. The CSR file performs the access when the instruction
// commits, reading the buffered operand; commit_i frees the buffer. Only one
// such instruction can be in flight (ready_o low while the buffer is full).
module csr_buffer import ariane_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic        valid_i,
  input  fu_data_t    fu_data_i,
  output logic        ready_o,
  output wb_t         wb_o,
  input  logic        commit_i,
  output logic [11:0] csr_addr_o,
  output logic [63:0] csr_wdata_o
);
  logic        full_q;
  logic [11:0] addr_q;
  logic [63:0] data_q;

  assign ready_o     = !full_q || commit_i;
  assign csr_addr_o  = addr_q;
  assign csr_wdata_o = data_q;

  always_comb begin
    wb_o = '0;
    wb_o.valid    = valid_i;
    wb_o.trans_id = fu_data_i.trans_id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= 1'b0; addr_q <= '0; data_q <= '0;
    end else if (flush_i) begin
      full_q <= 1'b0;
    end else begin
      if (commit_i) full_q <= 1'b0;
      if (valid_i) begin
        full_q <= 1'b1;
        addr_q <= fu_data_i.imm[11:0];
        data_q <= fu_data_i.operand_a;
      end
    end
  end
endmodule
