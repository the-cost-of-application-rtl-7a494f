// Fully pipelined two-stage 64x64-bit multiplier for MUL, MULH, MULHSU,
// MULHU and MULW. A new operation can enter every cycle; its result leaves
// two cycles later. Stage 1 forms the 130-bit signed product of the
// (sign- or zero-extended) operands; stage 2 selects the low word, the high
// word or the sign-extended low 32 bits. The paper relies on register
// re-timing to move the first pipeline register into the product logic.
module multiplier import ariane_pkg::*; (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic                     valid_i,
  input  fu_op_t                   op_i,
  input  logic [63:0]              a_i,
  input  logic [63:0]              b_i,
  input  logic [TRANS_ID_BITS-1:0] trans_id_i,
  output logic                     valid_o,
  output logic [63:0]              result_o,
  output logic [TRANS_ID_BITS-1:0] trans_id_o
);
  logic signed [64:0]  a_ext, b_ext;
  logic signed [129:0] prod, prod_q;
  fu_op_t              op_q;
  logic                valid_q;
  logic [TRANS_ID_BITS-1:0] id_q;

  assign a_ext = (op_i == MULH || op_i == MULHSU) ? {a_i[63], a_i} : {1'b0, a_i};
  assign b_ext = (op_i == MULH) ? {b_i[63], b_i} : {1'b0, b_i};
  assign prod  = a_ext * b_ext;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0; prod_q <= '0; op_q <= MUL; id_q <= '0;
      valid_o <= 1'b0; result_o <= '0; trans_id_o <= '0;
    end else if (flush_i) begin
      valid_q <= 1'b0; valid_o <= 1'b0;
    end else begin
      valid_q <= valid_i;
      prod_q  <= prod;
      op_q    <= op_i;
      id_q    <= trans_id_i;
      valid_o <= valid_q;
      trans_id_o <= id_q;
      unique case (op_q)
        MULH, MULHU, MULHSU: result_o <= prod_q[127:64];
        MULW:                result_o <= {{32{prod_q[31]}}, prod_q[31:0]};
        default:             result_o <= prod_q[63:0];
      endcase
    end
  end
endmodule
