// Testbench of the scoreboard / re-order buffer. A reference model keeps the
// in-flight instructions as a queue of transaction IDs in program order plus
// a per-ID copy of each entry. Every cycle the bench issues a random
// instruction, writes back results on up to three ports to random
// unfinished in-flight instructions (in any order), retires zero, one or two
// of the oldest entries and, rarely, flushes. Before each clock edge it
// compares:
//  - full_o, empty_o and the transaction ID the next issue will get;
//  - the two oldest entries offered to commit (valid flags, pc, renamed rd,
//    result and finished flag), which proves in-order retirement;
//  - the operand lookup for two random 6-bit source names: found only for
//    the youngest in-flight writer, with its result taken from the entry or,
//    for a result on a write-back port in this cycle, from that port;
//  - the destination check rd_clobber_o.
// Destination names are drawn from 8 values so that several writers of one
// register are in flight at once. Size 8 is the paper's ROB size.
module scoreboard_tb;
  import ariane_pkg::*;

  localparam int unsigned N = NR_SB_ENTRIES, P = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic flush, full, empty, issue, rd_clobber;
  sb_entry_t issue_instr;
  logic [TRANS_ID_BITS-1:0] issue_id;
  logic [1:0][5:0]  rs;
  logic [1:0]       rs_found, rs_valid;
  logic [1:0][63:0] rs_data;
  logic [5:0]       rd;
  wb_t [P-1:0]      wb;
  sb_entry_t [1:0]  cinstr;
  logic [1:0]       cvalid, cack;

  scoreboard #(.NR_ENTRIES(N), .NR_WB_PORTS(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .full_o(full), .empty_o(empty),
    .issue_instr_i(issue_instr), .issue_i(issue), .issue_trans_id_o(issue_id),
    .rs_i(rs), .rs_found_o(rs_found), .rs_valid_o(rs_valid), .rs_data_o(rs_data),
    .rd_i(rd), .rd_clobber_o(rd_clobber), .wb_i(wb),
    .commit_instr_o(cinstr), .commit_valid_o(cvalid), .commit_ack_i(cack));

  always #5 clk = ~clk;

  int unsigned q[$];           // in-flight IDs, oldest first
  sb_entry_t   m [N];          // model copy of each entry
  int unsigned next_id;
  int unsigned checks = 0, failures = 0;
  int unsigned n_fwd_port = 0, n_found = 0, n_dual = 0, n_full = 0, n_ooo = 0;

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
    while (cyc < 40000) begin
      @(posedge clk);
      cyc++;
    end
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n_ack, pick, youngest;
    bit found, ok_valid;
    logic [63:0] exp_data;
    bit used [N];
    bit exp_clobber, do_issue;
    flush = 1'b0; issue = 1'b0; issue_instr = '0; rs = '0; rd = '0; wb = '0; cack = '0;
    next_id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (30000) begin
      @(negedge clk);
      // stimulus
      issue = $urandom_range(99) < 70;
      issue_instr = '0;
      issue_instr.pc = {$urandom, $urandom};
      issue_instr.rd = 6'($urandom_range(7)) | (6'($urandom_range(1)) << 5);
      issue_instr.result = {$urandom, $urandom};
      issue_instr.fu = FU_ALU;
      flush = $urandom_range(999) < 5;
      foreach (used[i]) used[i] = 1'b0;
      wb = '0;
      for (int p = 0; p < P; p++) begin
        if (q.size() != 0 && $urandom_range(99) < 45) begin
          pick = q[$urandom_range(q.size() - 1)];
          if (!used[pick] && !m[pick].valid) begin
            used[pick] = 1'b1;
            wb[p].valid = 1'b1;
            wb[p].trans_id = TRANS_ID_BITS'(pick);
            wb[p].data = {$urandom, $urandom};
            if (pick != q[0]) n_ooo++;
          end
        end
      end
      n_ack = ($urandom_range(99) < 50) ? 0 : $urandom_range(2, 1);
      if (n_ack > q.size()) n_ack = q.size();
      cack = n_ack == 0 ? 2'b00 : (n_ack == 1 ? 2'b01 : 2'b11);
      rs[0] = 6'($urandom_range(7)) | (6'($urandom_range(1)) << 5);
      rs[1] = 6'($urandom_range(7)) | (6'($urandom_range(1)) << 5);
      rd    = 6'($urandom_range(7)) | (6'($urandom_range(1)) << 5);
      #1;
      // checks
      check(full == (q.size() == N), "full_o");
      check(empty == (q.size() == 0), "empty_o");
      check(int'(issue_id) == next_id, "issue transaction ID");
      for (int c = 0; c < 2; c++) begin
        check(cvalid[c] == (q.size() > c), "commit_valid_o");
        if (q.size() > c) begin
          check(cinstr[c].pc == m[q[c]].pc && cinstr[c].rd == m[q[c]].rd &&
                cinstr[c].valid == m[q[c]].valid && cinstr[c].result == m[q[c]].result,
                "commit entry in program order");
        end
      end
      for (int s = 0; s < 2; s++) begin
        found = 1'b0; youngest = 0;
        foreach (q[i]) if (m[q[i]].rd == rs[s]) begin found = 1'b1; youngest = q[i]; end
        check(rs_found[s] == found, "rs_found_o");
        if (found) begin
          n_found++;
          ok_valid = m[youngest].valid;
          exp_data = m[youngest].result;
          for (int p = 0; p < P; p++)
            if (!m[youngest].valid && wb[p].valid && int'(wb[p].trans_id) == youngest) begin
              ok_valid = 1'b1; exp_data = wb[p].data; n_fwd_port++;
            end
          check(rs_valid[s] == ok_valid, "rs_valid_o");
          if (ok_valid) check(rs_data[s] == exp_data, "rs_data_o from youngest writer");
        end
      end
      exp_clobber = 1'b0;
      foreach (q[i]) if (m[q[i]].rd == rd) exp_clobber = 1'b1;
      check(rd_clobber == exp_clobber, "rd_clobber_o");
      if (q.size() == N) n_full++;
      if (n_ack == 2) n_dual++;
      // model update at the clock edge
      do_issue = issue && q.size() != N;
      @(posedge clk);
      if (flush) begin
        q.delete();
        next_id = 0;
      end else begin
        for (int p = 0; p < P; p++)
          if (wb[p].valid) begin
            m[wb[p].trans_id].valid  = 1'b1;
            m[wb[p].trans_id].result = wb[p].data;
          end
        repeat (n_ack) void'(q.pop_front());
        if (do_issue) begin
          m[next_id] = issue_instr;
          q.push_back(next_id);
          next_id = (next_id + 1) % N;
        end
      end
    end
    check(n_full > 100 && n_dual > 1000 && n_ooo > 1000 && n_fwd_port > 100 && n_found > 1000,
          "full buffer, dual commit, out-of-order write-back and port forwarding exercised");
    $display("full=%0d dual=%0d ooo_wb=%0d port_fwd=%0d found=%0d",
             n_full, n_dual, n_ooo, n_fwd_port, n_found);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
