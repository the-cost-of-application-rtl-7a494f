// Testbench of the CSR buffer. It follows the issue/commit protocol the
// pipeline uses: a CSR instruction is offered only while ready_o is high, and
// commit_i only while an instruction is buffered; flushes come at random.
// A model of the one-entry buffer is checked every cycle:
//  - the write-back of an offered instruction happens in the same cycle with
//    its transaction ID (the buffer completes at once);
//  - ready_o is high when the buffer is empty or being freed by a commit in
//    this cycle (back-to-back CSR instructions);
//  - while an instruction is buffered, the CSR address (immediate bits 11:0)
//    and the operand it carries are presented to the CSR file unchanged.
module csr_buffer_tb;
  import ariane_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic flush, valid, ready, commit;
  fu_data_t fu;
  wb_t wb;
  logic [11:0] addr;
  logic [63:0] wdata;

  csr_buffer dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .valid_i(valid), .fu_data_i(fu),
                  .ready_o(ready), .wb_o(wb), .commit_i(commit), .csr_addr_o(addr),
                  .csr_wdata_o(wdata));

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned n_b2b = 0, n_commit = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    int unsigned cyc;
    cyc = 0;
    while (cyc < 30000) begin
      @(posedge clk);
      cyc++;
    end
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit          full;
    logic [11:0] m_addr;
    logic [63:0] m_data;
    full = 1'b0; m_addr = '0; m_data = '0;
    flush = 1'b0; valid = 1'b0; commit = 1'b0; fu = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (20000) begin
      @(negedge clk);
      flush  = $urandom_range(99) < 3;
      commit = full && $urandom_range(99) < 50;
      fu = '0;
      fu.fu = FU_CSR;
      fu.op = CSR_WRITE;
      fu.operand_a = {$urandom, $urandom};
      fu.imm = {$urandom, $urandom};
      fu.trans_id = TRANS_ID_BITS'($urandom);
      #1;
      check(ready == (!full || commit), "ready_o");
      valid = ready && $urandom_range(99) < 60;
      #1;
      check(wb.valid == valid, "write-back in the cycle of the request");
      if (valid) check(wb.trans_id == fu.trans_id && !wb.ex.valid, "write-back transaction ID");
      if (full) check(addr == m_addr && wdata == m_data, "buffered address and operand");
      if (valid && commit) n_b2b++;
      if (commit) n_commit++;
      @(posedge clk);
      if (flush) full = 1'b0;
      else begin
        if (commit) full = 1'b0;
        if (valid) begin full = 1'b1; m_addr = fu.imm[11:0]; m_data = fu.operand_a; end
      end
    end
    check(n_b2b > 500 && n_commit > 2000, "back-to-back instructions and commits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
