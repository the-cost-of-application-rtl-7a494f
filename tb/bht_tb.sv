// Testbench of the branch history table. Compares the table against a
// model of NR_ENTRIES two-bit counters over 3000 random updates and
// lookups of pcs that alias onto the same entries. Also checks that an
// entry is invalid until its first update, that the first update sets
// weakly taken / weakly not-taken, saturation at both ends, and that a flush
// invalidates all entries. Lookups are combinational (same cycle).
module bht_tb;
  import ariane_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [63:0] vpc;
  bht_update_t upd;
  logic valid, taken;
  int checks = 0, failures = 0;

  bht #(.NR_ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .vpc_i(vpc),
                             .bht_update_i(upd), .valid_o(valid), .taken_o(taken));
  always #5 clk = ~clk;

  logic [1:0] cnt [N];
  bit         vld [N];

  task automatic look(input logic [63:0] pc);
    int i;
    vpc = pc; #1;
    i = int'(pc[$clog2(N):1]);
    checks++;
    if (valid !== vld[i] || (vld[i] && taken !== cnt[i][1])) begin
      failures++;
      if (failures < 10) $display("FAIL pc=%h valid=%b taken=%b exp %b %b", pc, valid, taken, vld[i], cnt[i][1]);
    end
  endtask

  task automatic update(input logic [63:0] pc, input logic t);
    int i;
    i = int'(pc[$clog2(N):1]);
    @(negedge clk);
    upd = '{valid: 1'b1, pc: pc, taken: t};
    @(negedge clk);
    upd = '0;
    if (!vld[i]) cnt[i] = t ? 2'b10 : 2'b01;
    else if (t && cnt[i] != 2'b11) cnt[i]++;
    else if (!t && cnt[i] != 2'b00) cnt[i]--;
    vld[i] = 1'b1;
  endtask

  initial begin
    upd = '0; vpc = '0;
    foreach (vld[i]) begin vld[i] = 0; cnt[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) look(64'h8000_0000 + 64'(2 * i));
    // saturation
    repeat (5) update(64'h8000_0004, 1'b1);
    look(64'h8000_0004);
    update(64'h8000_0004, 1'b0); look(64'h8000_0004);
    repeat (5) update(64'h8000_0004, 1'b0);
    update(64'h8000_0004, 1'b1); look(64'h8000_0004);
    for (int k = 0; k < 3000; k++) begin
      logic [63:0] pc;
      pc = 64'h8000_0000 + 64'($urandom_range(255) * 2);
      if ($urandom_range(1)) update(pc, 1'($urandom_range(1)));
      look(64'h8000_0000 + 64'($urandom_range(255) * 2));
    end
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    foreach (vld[i]) vld[i] = 0;
    for (int i = 0; i < N; i++) look(64'h8000_0000 + 64'(2 * i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
