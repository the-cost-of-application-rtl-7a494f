// Testbench of the two-stage multiplier. Issues one random operation per
// cycle (MUL, MULH, MULHU, MULHSU, MULW) with a random transaction ID,
// and checks that each result and ID appear exactly two cycles after the
// operation entered, against a 128-bit reference product. Also checks that
// a flush drops the operations in flight.
module multiplier_tb;
  import ariane_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, valid = 0;
  fu_op_t op;
  logic [63:0] a, b, res;
  logic [TRANS_ID_BITS-1:0] tid, tid_o;
  logic vout;
  int checks = 0, failures = 0;

  multiplier dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .valid_i(valid), .op_i(op),
                  .a_i(a), .b_i(b), .trans_id_i(tid), .valid_o(vout), .result_o(res), .trans_id_o(tid_o));
  always #5 clk = ~clk;

  function automatic logic [63:0] ref_mul(input fu_op_t o, input logic [63:0] x, input logic [63:0] y);
    logic signed [129:0] p;
    unique case (o)
      MULH:   p = $signed({{2{x[63]}}, x}) * $signed({{2{y[63]}}, y});
      MULHU:  p = $signed({2'b0, x}) * $signed({2'b0, y});
      MULHSU: p = $signed({{2{x[63]}}, x}) * $signed({2'b0, y});
      default: p = $signed({2'b0, x}) * $signed({2'b0, y});
    endcase
    unique case (o)
      MULH, MULHU, MULHSU: return p[127:64];
      MULW: return {{32{p[31]}}, p[31:0]};
      default: return p[63:0];
    endcase
  endfunction

  // expected results by issue cycle
  logic [63:0] exp_q [$];
  int          exp_t [$];
  logic [TRANS_ID_BITS-1:0] exp_id [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && vout) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected result"); end
    else begin
      if (res !== exp_q[0] || tid_o !== exp_id[0] || cyc - exp_t[0] != 2) begin
        failures++;
        $display("FAIL: got %h id %0d after %0d cycles, exp %h id %0d", res, tid_o, cyc - exp_t[0], exp_q[0], exp_id[0]);
      end
      void'(exp_q.pop_front()); void'(exp_t.pop_front()); void'(exp_id.pop_front());
    end
  end

  initial begin
    fu_op_t ops [5] = '{MUL, MULH, MULHU, MULHSU, MULW};
    op = MUL; a = '0; b = '0; tid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      valid = $urandom_range(3) != 0;
      op = ops[$urandom_range(4)];
      a = ($urandom_range(7) == 0) ? 64'h8000_0000_0000_0000 : {$urandom, $urandom};
      b = ($urandom_range(7) == 0) ? '1 : {$urandom, $urandom};
      tid = TRANS_ID_BITS'($urandom);
      if (valid) begin exp_q.push_back(ref_mul(op, a, b)); exp_t.push_back(cyc); exp_id.push_back(tid); end
    end
    @(negedge clk) valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
    // flush drops the pipeline
    valid = 1; op = MUL; a = 3; b = 4;
    @(negedge clk) valid = 0; flush = 1;
    @(negedge clk) flush = 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
