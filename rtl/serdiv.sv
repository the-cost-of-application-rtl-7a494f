// Bit-serial radix-2 divider for DIV, DIVU, REM, REMU and the W forms.
// Input preparation takes the magnitudes of signed operands (32-bit
// operands of W forms are first sign- or zero-extended) and counts leading
// zeros: the divisor is aligned to the dividend's most significant one, so
// only as many restoring steps are made as the quotient has significant bits
// (one step per cycle). Division by zero, or a divisor larger than the
// dividend, finishes at once (early out). Quotient and remainder signs are
// corrected in the output cycle; W results are sign-extended from bit 31.
// Timing: accepted in cycle 0, the result is valid in cycle 1 (early out)
// up to cycle 65 (quotient with 64 significant bits) and is held until
// out_ready_i. The paper gives "2 to 64 cycles" for its divider.
module serdiv import ariane_pkg::*; (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic                     in_valid_i,
  output logic                     in_ready_o,
  input  fu_op_t                   op_i,
  input  logic [63:0]              a_i,
  input  logic [63:0]              b_i,
  input  logic [TRANS_ID_BITS-1:0] trans_id_i,
  output logic                     out_valid_o,
  input  logic                     out_ready_i,
  output logic [63:0]              result_o,
  output logic [TRANS_ID_BITS-1:0] trans_id_o
);
  typedef enum logic [1:0] { IDLE, DIVIDE, FINISH } state_e;
  state_e state_q;

  logic        is_signed, is_w, is_rem;
  logic [63:0] a_ext, b_ext, a_mag, b_mag;
  logic [6:0]  lz_a, lz_b;
  logic        neg_q_d, neg_r_d;

  logic [63:0] rem_q, div_q, quo_q, a_orig_q;
  logic [6:0]  cnt_q;
  logic        neg_q_q, neg_r_q, is_w_q, is_rem_q, by_zero_q;
  logic [TRANS_ID_BITS-1:0] id_q;

  assign is_signed = op_i inside {DIV, DIVW, REM, REMW};
  assign is_w      = op_i inside {DIVW, DIVUW, REMW, REMUW};
  assign is_rem    = op_i inside {REM, REMU, REMW, REMUW};

  always_comb begin
    a_ext = is_w ? (is_signed ? {{32{a_i[31]}}, a_i[31:0]} : {32'b0, a_i[31:0]}) : a_i;
    b_ext = is_w ? (is_signed ? {{32{b_i[31]}}, b_i[31:0]} : {32'b0, b_i[31:0]}) : b_i;
    a_mag = (is_signed && a_ext[63]) ? -a_ext : a_ext;
    b_mag = (is_signed && b_ext[63]) ? -b_ext : b_ext;
    neg_q_d = is_signed && (a_ext[63] ^ b_ext[63]) && b_ext != 64'd0;
    neg_r_d = is_signed && a_ext[63];
    lz_a = 7'd64; lz_b = 7'd64;
    for (int i = 0; i < 64; i++) begin
      if (a_mag[i]) lz_a = 7'(63 - i);
      if (b_mag[i]) lz_b = 7'(63 - i);
    end
  end

  assign in_ready_o  = state_q == IDLE;
  assign out_valid_o = state_q == FINISH;
  assign trans_id_o  = id_q;

  always_comb begin
    logic [63:0] q, r, res;
    q = neg_q_q ? -quo_q : quo_q;
    r = neg_r_q ? -rem_q : rem_q;
    if (by_zero_q) begin
      q = '1;
      r = a_orig_q;
    end
    res = is_rem_q ? r : q;
    result_o = is_w_q ? {{32{res[31]}}, res[31:0]} : res;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; rem_q <= '0; div_q <= '0; quo_q <= '0; a_orig_q <= '0; cnt_q <= '0;
      neg_q_q <= 1'b0; neg_r_q <= 1'b0; is_w_q <= 1'b0; is_rem_q <= 1'b0; by_zero_q <= 1'b0;
      id_q <= '0;
    end else if (flush_i) begin
      state_q <= IDLE;
    end else begin
      unique case (state_q)
        IDLE: if (in_valid_i) begin
          id_q <= trans_id_i; is_w_q <= is_w; is_rem_q <= is_rem;
          neg_q_q <= neg_q_d; neg_r_q <= neg_r_d;
          a_orig_q <= a_ext; by_zero_q <= b_ext == 64'd0;
          rem_q <= a_mag; quo_q <= '0;
          if (b_ext == 64'd0 || lz_b < lz_a) begin
            state_q <= FINISH;           // early out
          end else begin
            div_q <= b_mag << (lz_b - lz_a);
            cnt_q <= lz_b - lz_a;
            state_q <= DIVIDE;
          end
        end
        DIVIDE: begin
          if (rem_q >= div_q) begin
            rem_q <= rem_q - div_q;
            quo_q <= {quo_q[62:0], 1'b1};
          end else begin
            quo_q <= {quo_q[62:0], 1'b0};
          end
          div_q <= div_q >> 1;
          cnt_q <= cnt_q - 7'd1;
          if (cnt_q == 7'd0) state_q <= FINISH;
        end
        FINISH: if (out_ready_i) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
