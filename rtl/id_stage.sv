// Instruction decode stage. The re-aligner extracts one instruction per
// cycle from the instruction queue, the compressed decoder expands it and
// the decoder produces a scoreboard entry, which is registered (a one-entry
// issue queue) and offered to the issue stage with valid_o; it leaves on
// ack_i. A flush (mis-prediction or full pipeline flush) empties the stage.
module id_stage import ariane_pkg::*; (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          flush_i,
  input  fetch_entry_t  fetch_entry_i,
  input  logic          fetch_valid_i,
  output logic          fetch_ack_o,
  output sb_entry_t     instr_o,
  output logic          valid_o,
  output logic          is_ctrl_flow_o,
  input  logic          ack_i,
  input  priv_lvl_t     priv_lvl_i,
  input  logic          debug_mode_i,
  input  logic          tvm_i,
  input  logic          tw_i,
  input  logic          tsr_i
);
  logic [31:0]    ra_instr, exp_instr;
  logic [63:0]    ra_pc;
  branchpredict_t ra_bp;
  exception_t     ra_ex;
  logic           ra_valid, ra_ready, illegal_c, is_c, is_cf;
  sb_entry_t      dec;
  sb_entry_t      instr_q;
  logic           valid_q, cf_q;

  realigner i_realigner (
    .clk_i, .rst_ni, .flush_i, .fetch_entry_i, .fetch_valid_i, .fetch_ack_o,
    .instr_o(ra_instr), .pc_o(ra_pc), .bp_o(ra_bp), .ex_o(ra_ex),
    .instr_valid_o(ra_valid), .instr_ready_i(ra_ready));

  compressed_decoder i_cdec (.instr_i(ra_instr), .instr_o(exp_instr),
    .illegal_instr_o(illegal_c), .is_compressed_o(is_c));

  decoder i_dec (
    .pc_i(ra_pc), .instr_i(exp_instr), .instr_raw_i(ra_instr), .is_compressed_i(is_c),
    .is_illegal_c_i(illegal_c && is_c), .bp_i(ra_bp), .ex_i(ra_ex), .priv_lvl_i,
    .debug_mode_i, .tvm_i, .tw_i, .tsr_i, .instr_o(dec), .is_control_flow_o(is_cf));

  assign ra_ready = !valid_q || ack_i;
  assign instr_o  = instr_q;
  assign valid_o  = valid_q;
  assign is_ctrl_flow_o = cf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0; instr_q <= '0; cf_q <= 1'b0;
    end else if (flush_i) begin
      valid_q <= 1'b0;
    end else if (ra_ready) begin
      valid_q <= ra_valid;
      instr_q <= dec;
      cf_q    <= is_cf;
    end
  end
endmodule
