// Testbench of the serial divider. Runs 600 random divisions of all eight
// kinds (DIV, DIVU, REM, REMU and W forms) including division by zero, the
// signed overflow case and small quotients, and checks each result and
// transaction ID against the RISC-V reference semantics. The latency is
// measured from acceptance to out_valid: it must be between 1 and 65 cycles,
// 1 for the early-out cases (divide by zero, divisor above dividend), and
// grow with the number of quotient bits (a 64-bit quotient takes over 60).
module serdiv_tb;
  import ariane_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  fu_op_t op;
  logic [63:0] a, b, res;
  logic [TRANS_ID_BITS-1:0] tid, tid_o;
  int checks = 0, failures = 0;

  serdiv dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .in_valid_i(in_valid), .in_ready_o(in_ready),
              .op_i(op), .a_i(a), .b_i(b), .trans_id_i(tid), .out_valid_o(out_valid),
              .out_ready_i(out_ready), .result_o(res), .trans_id_o(tid_o));
  always #5 clk = ~clk;

  function automatic logic [63:0] ref_div(input fu_op_t o, input logic [63:0] x, input logic [63:0] y);
    logic [31:0] r;
    unique case (o)
      DIVU:  return y == 0 ? '1 : x / y;
      REMU:  return y == 0 ? x : x % y;
      DIV:   return y == 0 ? '1 : (x == 64'h8000_0000_0000_0000 && y == '1) ? x : 64'($signed(x) / $signed(y));
      REM:   return y == 0 ? x : (x == 64'h8000_0000_0000_0000 && y == '1) ? 64'd0 : 64'($signed(x) % $signed(y));
      DIVUW: begin r = y[31:0] == 0 ? '1 : x[31:0] / y[31:0]; return {{32{r[31]}}, r}; end
      REMUW: begin r = y[31:0] == 0 ? x[31:0] : x[31:0] % y[31:0]; return {{32{r[31]}}, r}; end
      DIVW:  begin r = y[31:0] == 0 ? '1 : (x[31:0] == 32'h8000_0000 && y[31:0] == '1) ? x[31:0] :
                        32'($signed(x[31:0]) / $signed(y[31:0])); return {{32{r[31]}}, r}; end
      REMW:  begin r = y[31:0] == 0 ? x[31:0] : (x[31:0] == 32'h8000_0000 && y[31:0] == '1) ? 32'd0 :
                        32'($signed(x[31:0]) % $signed(y[31:0])); return {{32{r[31]}}, r}; end
      default: return '0;
    endcase
  endfunction

  task automatic run(input fu_op_t o, input logic [63:0] x, input logic [63:0] y, output int lat);
    logic [TRANS_ID_BITS-1:0] id;
    id = TRANS_ID_BITS'($urandom);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1; op = o; a = x; b = y; tid = id;
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (!out_valid || res !== ref_div(o, x, y) || tid_o !== id) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d a=%h b=%h got %h exp %h", o, x, y, res, ref_div(o, x, y));
    end
    checks++;
    if (lat < 1 || lat > 65) begin failures++; $display("FAIL: latency %0d", lat); end
  endtask

  initial begin
    fu_op_t ops [8] = '{DIV, DIVU, REM, REMU, DIVW, DIVUW, REMW, REMUW};
    int lat;
    op = DIV; a = 0; b = 0; tid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(DIVU, 64'd100, 64'd0, lat);   checks++; if (lat != 1) begin failures++; $display("FAIL: /0 latency %0d", lat); end
    run(DIVU, 64'd5, 64'd100, lat);   checks++; if (lat != 1) begin failures++; $display("FAIL: early-out latency %0d", lat); end
    run(DIVU, '1, 64'd1, lat);        checks++; if (lat < 60) begin failures++; $display("FAIL: 64-bit quotient latency %0d", lat); end
    run(DIV, 64'h8000_0000_0000_0000, '1, lat);
    run(DIVW, 64'h8000_0000, 64'hffff_ffff, lat);
    for (int i = 0; i < 600; i++) begin
      logic [63:0] x, y;
      int kind;
      x = {$urandom, $urandom};
      kind = $urandom_range(3);
      unique case (kind)
        0: y = {$urandom, $urandom};
        1: y = 64'($urandom_range(100));
        2: y = {32'b0, $urandom} >> $urandom_range(31);
        default: y = -64'($urandom_range(9));
      endcase
      run(ops[$urandom_range(7)], x, y, lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
