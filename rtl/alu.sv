// Integer ALU for RV64I: add/sub, logic, shifts, set-less-than and their
// 32-bit "W" forms (computed on the low word, result sign-extended).
// Purely combinational; with the dispatch register in front of it the
// result is written back one cycle after issue (ALU latency 1).
module alu import ariane_pkg::*; (
  input  fu_data_t    fu_data_i,
  output logic [63:0] result_o
);
  logic [63:0] a, b;
  logic [31:0] w;
  assign a = fu_data_i.operand_a;
  assign b = fu_data_i.operand_b;

  always_comb begin
    w = '0;
    result_o = '0;
    unique case (fu_data_i.op)
      ADD:  result_o = a + b;
      SUB:  result_o = a - b;
      XORL: result_o = a ^ b;
      ORL:  result_o = a | b;
      ANDL: result_o = a & b;
      SLL:  result_o = a << b[5:0];
      SRL:  result_o = a >> b[5:0];
      SRA:  result_o = $unsigned($signed(a) >>> b[5:0]);
      SLT:  result_o = {63'b0, $signed(a) < $signed(b)};
      SLTU: result_o = {63'b0, a < b};
      ADDW: begin w = a[31:0] + b[31:0]; result_o = {{32{w[31]}}, w}; end
      SUBW: begin w = a[31:0] - b[31:0]; result_o = {{32{w[31]}}, w}; end
      SLLW: begin w = a[31:0] << b[4:0]; result_o = {{32{w[31]}}, w}; end
      SRLW: begin w = a[31:0] >> b[4:0]; result_o = {{32{w[31]}}, w}; end
      SRAW: begin w = $unsigned($signed(a[31:0]) >>> b[4:0]); result_o = {{32{w[31]}}, w}; end
      default: result_o = '0;
    endcase
  end
endmodule
