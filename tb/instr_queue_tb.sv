// Testbench of the instruction queue: random push/pop traffic against a
// model FIFO of DEPTH entries. Checks head data and valid every cycle, that
// ready_o is low exactly when the queue is full, and that a flush empties
// it. An entry pushed in one cycle is at the head the next cycle.
module instr_queue_tb;
  import ariane_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0, ready, valid;
  fetch_entry_t din, dout;
  int checks = 0, failures = 0;

  instr_queue #(.DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_i(push), .data_i(din),
                                .ready_o(ready), .valid_o(valid), .data_o(dout), .pop_i(pop));
  always #5 clk = ~clk;
  fetch_entry_t q [$];

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      #1;
      checks++;
      if (valid !== (q.size() > 0) || ready !== (q.size() < D) || (q.size() > 0 && dout !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d valid=%b ready=%b size=%0d", k, valid, ready, q.size());
      end
      push = ready && $urandom_range(2) != 0;
      pop  = valid && $urandom_range(2) != 0;
      din  = '0;
      din.addr = {$urandom, $urandom}; din.data = $urandom; din.hw_valid = 2'($urandom);
      flush = $urandom_range(199) == 0;
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
      push = 0; pop = 0; flush = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
