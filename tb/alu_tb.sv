// Testbench of the ALU: 3000 random operations of every ALU operation,
// compared with a reference model written with plain SystemVerilog
// operators, plus corner cases (shift by 63/31, most-negative operands).
// The ALU is combinational: its result is read in the same cycle the
// operation is presented, which is the 1-cycle ALU latency of the core.
module alu_tb;
  import ariane_pkg::*;
  fu_data_t    d;
  logic [63:0] res;
  int checks = 0, failures = 0;

  alu dut (.fu_data_i(d), .result_o(res));

  function automatic logic [63:0] ref_alu(input fu_op_t op, input logic [63:0] a, input logic [63:0] b);
    logic [31:0] w;
    unique case (op)
      ADD:  return a + b;
      SUB:  return a - b;
      ADDW: begin w = a[31:0] + b[31:0]; return {{32{w[31]}}, w}; end
      SUBW: begin w = a[31:0] - b[31:0]; return {{32{w[31]}}, w}; end
      XORL: return a ^ b;
      ORL:  return a | b;
      ANDL: return a & b;
      SLL:  return a << b[5:0];
      SRL:  return a >> b[5:0];
      SRA:  return $signed(a) >>> b[5:0];
      SLLW: begin w = a[31:0] << b[4:0]; return {{32{w[31]}}, w}; end
      SRLW: begin w = a[31:0] >> b[4:0]; return {{32{w[31]}}, w}; end
      SRAW: begin w = $signed(a[31:0]) >>> b[4:0]; return {{32{w[31]}}, w}; end
      SLT:  return {63'b0, $signed(a) < $signed(b)};
      SLTU: return {63'b0, a < b};
      default: return '0;
    endcase
  endfunction

  fu_op_t ops [15] = '{ADD, SUB, ADDW, SUBW, XORL, ORL, ANDL, SLL, SRL, SRA, SLLW, SRLW, SRAW, SLT, SLTU};

  task automatic one(input fu_op_t op, input logic [63:0] a, input logic [63:0] b);
    d = '0; d.fu = FU_ALU; d.op = op; d.operand_a = a; d.operand_b = b;
    #1;
    checks++;
    if (res !== ref_alu(op, a, b)) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d a=%h b=%h got %h exp %h", op, a, b, res, ref_alu(op, a, b));
    end
  endtask

  initial begin
    logic [63:0] corner [5] = '{64'h0, 64'h1, '1, 64'h8000_0000_0000_0000, 64'h0000_0000_8000_0000};
    foreach (ops[i]) foreach (corner[j]) foreach (corner[k]) one(ops[i], corner[j], corner[k]);
    foreach (ops[i]) begin one(ops[i], '1, 64'd63); one(ops[i], 64'h8000_0000_0000_0001, 64'd31); end
    for (int i = 0; i < 3000; i++)
      one(ops[$urandom_range(14)], {$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
