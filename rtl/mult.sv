// Multiplier/divider functional unit (M extension). Multiplications go to
// the pipelined two-stage multiplier, divisions and remainders to the serial
// divider. Both share one write-back port; a multiplier result has priority
// and a finished division waits. The unit accepts a new operation whenever
// the divider is idle, so multiplications stream one per cycle.
module mult import ariane_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic        valid_i,
  input  fu_data_t    fu_data_i,
  output logic        ready_o,
  output wb_t         wb_o
);
  logic is_div, mul_valid, div_in_ready, div_valid;
  logic [63:0] mul_res, div_res;
  logic [TRANS_ID_BITS-1:0] mul_id, div_id;

  assign is_div = fu_data_i.op inside {DIV, DIVU, DIVW, DIVUW, REM, REMU, REMW, REMUW};

  multiplier i_mul (.clk_i, .rst_ni, .flush_i, .valid_i(valid_i && !is_div), .op_i(fu_data_i.op),
    .a_i(fu_data_i.operand_a), .b_i(fu_data_i.operand_b), .trans_id_i(fu_data_i.trans_id),
    .valid_o(mul_valid), .result_o(mul_res), .trans_id_o(mul_id));

  serdiv i_div (.clk_i, .rst_ni, .flush_i, .in_valid_i(valid_i && is_div), .in_ready_o(div_in_ready),
    .op_i(fu_data_i.op), .a_i(fu_data_i.operand_a), .b_i(fu_data_i.operand_b),
    .trans_id_i(fu_data_i.trans_id), .out_valid_o(div_valid), .out_ready_i(!mul_valid),
    .result_o(div_res), .trans_id_o(div_id));

  assign ready_o = div_in_ready;

  always_comb begin
    wb_o = '0;
    if (mul_valid) begin
      wb_o.valid = 1'b1; wb_o.trans_id = mul_id; wb_o.data = mul_res;
    end else if (div_valid) begin
      wb_o.valid = 1'b1; wb_o.trans_id = div_id; wb_o.data = div_res;
    end
  end
endmodule
