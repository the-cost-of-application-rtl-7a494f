// Re-aligner of the decode stage. Fetch words are 32-bit aligned, but with
// the compressed extension an instruction starts on any 16-bit boundary and a
// 32-bit instruction may straddle two fetch words. The re-aligner walks the
// half-words of the queue head and hands out one whole instruction per cycle:
// a compressed one, an aligned 32-bit one, or a 32-bit one assembled from the
// upper half of one word (kept in a 16-bit register) and the lower half of
// the next. It pops the queue head once all its valid half-words are used.
// The branch prediction of a fetch word is attached only to the instruction
// that starts at the predicted half-word. A fetch exception is attached to
// the first instruction of the word and the rest of the word is dropped.
// Handshake: instr_valid_o / instr_ready_i; flush_i clears the state.
module realigner import ariane_pkg::*; (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           flush_i,
  input  fetch_entry_t   fetch_entry_i,
  input  logic           fetch_valid_i,
  output logic           fetch_ack_o,
  output logic [31:0]    instr_o,
  output logic [63:0]    pc_o,
  output branchpredict_t bp_o,
  output exception_t     ex_o,
  output logic           instr_valid_o,
  input  logic           instr_ready_i
);
  logic        pos_q, pos_d;          // next half-word of the head to look at
  logic        half_valid_q, half_valid_d;
  logic [15:0] half_q, half_d;
  logic [63:0] half_pc_q, half_pc_d;
  logic        start_hi;
  logic [15:0] hw0, hw1;

  assign hw0 = fetch_entry_i.data[15:0];
  assign hw1 = fetch_entry_i.data[31:16];
  assign start_hi = pos_q || !fetch_entry_i.hw_valid[0];

  always_comb begin
    instr_o = '0; pc_o = '0; bp_o = '0; ex_o = '0;
    instr_valid_o = 1'b0; fetch_ack_o = 1'b0;
    pos_d = pos_q; half_valid_d = half_valid_q; half_d = half_q; half_pc_d = half_pc_q;
    if (fetch_valid_i) begin
      if (fetch_entry_i.ex.valid) begin
        instr_valid_o = 1'b1;
        pc_o  = half_valid_q ? half_pc_q : fetch_entry_i.addr + (start_hi ? 64'd2 : 64'd0);
        ex_o  = fetch_entry_i.ex;
        if (instr_ready_i) begin
          fetch_ack_o = 1'b1; pos_d = 1'b0; half_valid_d = 1'b0;
        end
      end else if (half_valid_q) begin
        instr_valid_o = 1'b1;
        instr_o = {hw0, half_q};
        pc_o    = half_pc_q;
        if (instr_ready_i) begin
          half_valid_d = 1'b0;
          if (fetch_entry_i.hw_valid[1]) pos_d = 1'b1;
          else begin fetch_ack_o = 1'b1; pos_d = 1'b0; end
        end
      end else if (!start_hi) begin
        instr_valid_o = 1'b1;
        pc_o = fetch_entry_i.addr;
        if (!fetch_entry_i.bp_hw) bp_o = fetch_entry_i.bp;
        if (hw0[1:0] != 2'b11) begin
          instr_o = {16'h0, hw0};
          if (instr_ready_i) begin
            if (fetch_entry_i.hw_valid[1]) pos_d = 1'b1;
            else begin fetch_ack_o = 1'b1; pos_d = 1'b0; end
          end
        end else begin
          instr_o = fetch_entry_i.data;
          if (instr_ready_i) begin fetch_ack_o = 1'b1; pos_d = 1'b0; end
        end
      end else if (fetch_entry_i.hw_valid[1]) begin
        if (hw1[1:0] != 2'b11) begin
          instr_valid_o = 1'b1;
          instr_o = {16'h0, hw1};
          pc_o    = fetch_entry_i.addr + 64'd2;
          if (fetch_entry_i.bp_hw) bp_o = fetch_entry_i.bp;
          if (instr_ready_i) begin fetch_ack_o = 1'b1; pos_d = 1'b0; end
        end else begin
          // lower half of a straddling instruction: keep it, no output
          fetch_ack_o  = 1'b1; pos_d = 1'b0;
          half_valid_d = 1'b1; half_d = hw1; half_pc_d = fetch_entry_i.addr + 64'd2;
        end
      end else begin
        fetch_ack_o = 1'b1; pos_d = 1'b0;   // nothing valid in this word
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pos_q <= 1'b0; half_valid_q <= 1'b0; half_q <= '0; half_pc_q <= '0;
    end else if (flush_i) begin
      pos_q <= 1'b0; half_valid_q <= 1'b0;
    end else begin
      pos_q <= pos_d; half_valid_q <= half_valid_d; half_q <= half_d; half_pc_q <= half_pc_d;
    end
  end
endmodule
