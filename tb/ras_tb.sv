// Testbench of the return address stack. Random pushes, pops and
// push-with-pop are compared with a model stack of DEPTH entries that
// drops its oldest entry on overflow and reports invalid when empty.
// A flush empties the stack. The top is visible combinationally.
module ras_tb;
  localparam int D = 2;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0, valid;
  logic [63:0] din, dout;
  int checks = 0, failures = 0;

  ras #(.DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_i(push), .pop_i(pop),
                        .data_i(din), .valid_o(valid), .data_o(dout));
  always #5 clk = ~clk;

  logic [63:0] st [$];

  task automatic compare();
    checks++;
    if (valid !== (st.size() > 0) || (st.size() > 0 && dout !== st[$])) begin
      failures++;
      if (failures < 10) $display("FAIL valid=%b top=%h model size %0d", valid, dout, st.size());
    end
  endtask

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare();
    for (int k = 0; k < 3000; k++) begin
      int c;
      c = $urandom_range(3);
      push = c == 1 || c == 3; pop = c == 2 || c == 3; din = {$urandom, $urandom};
      @(negedge clk);
      if (pop && st.size() > 0) void'(st.pop_back());
      if (push) begin st.push_back(din); if (st.size() > D) void'(st.pop_front()); end
      push = 0; pop = 0; #1;
      compare();
      if (k == 1500) begin
        flush = 1; @(negedge clk); flush = 0; st.delete(); #1; compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
