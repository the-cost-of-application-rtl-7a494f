// Testbench of the branch target buffer. Writes random jump targets for
// random pcs and compares every lookup with a model of a direct-mapped table
// with full tags: a hit only for the pc that wrote the entry, the newest
// target wins, other pcs mapping to the same entry miss. A flush empties
// the table. Lookups are combinational (same cycle).
module btb_tb;
  import ariane_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [63:0] vpc, target;
  btb_update_t upd;
  logic valid;
  int checks = 0, failures = 0;

  btb #(.NR_ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .vpc_i(vpc),
                             .btb_update_i(upd), .valid_o(valid), .target_o(target));
  always #5 clk = ~clk;

  logic [63:0] m_pc [N], m_tgt [N];
  bit          m_v [N];

  task automatic look(input logic [63:0] pc);
    int i; bit hit;
    i = int'(pc[$clog2(N):1]);
    hit = m_v[i] && m_pc[i] == pc;
    vpc = pc; #1;
    checks++;
    if (valid !== hit || (hit && target !== m_tgt[i])) begin
      failures++;
      if (failures < 10) $display("FAIL pc=%h valid=%b tgt=%h exp %b %h", pc, valid, target, hit, m_tgt[i]);
    end
  endtask

  initial begin
    upd = '0; vpc = '0;
    foreach (m_v[i]) begin m_v[i] = 0; m_pc[i] = 0; m_tgt[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      logic [63:0] pc;
      pc = 64'h8000_0000 + 64'($urandom_range(63) * 2);
      if ($urandom_range(1)) begin
        @(negedge clk);
        upd = '{valid: 1'b1, pc: pc, target_address: {$urandom, $urandom} & ~64'h1};
        @(negedge clk);
        m_v[int'(pc[$clog2(N):1])] = 1; m_pc[int'(pc[$clog2(N):1])] = pc;
        m_tgt[int'(pc[$clog2(N):1])] = upd.target_address;
        upd = '0;
      end
      look(64'h8000_0000 + 64'($urandom_range(63) * 2));
      look(pc);
    end
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    foreach (m_v[i]) m_v[i] = 0;
    for (int i = 0; i < 64; i++) look(64'h8000_0000 + 64'(2 * i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
