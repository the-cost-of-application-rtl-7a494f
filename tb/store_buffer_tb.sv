// Testbench of the store buffer. A reference model keeps the speculative and
// the committed stores in two SV queues. Every cycle the bench drives random
// stores, commits, flushes and cache grants, and random check addresses, then
// compares all outputs with the model before the clock edge:
//  - ready_o, commit_ready_o and empty_o against the fill levels;
//  - the cache request (valid, address, data, byte enables) against the head
//    of the committed queue, which also proves that stores leave in commit
//    order and that a flush never removes a committed store;
//  - page_offset_match_o against a search of both queues for the same
//    8-byte word.
// The buffer has no latency that the paper specifies; the model requires a
// committed store to be offered to the cache in the cycle after its commit.
// Addresses are drawn from a small range so that word matches are frequent.
module store_buffer_tb;
  import ariane_pkg::*;

  localparam int unsigned DS = 4, DC = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic flush, ready, valid, commit, commit_ready, match, empty;
  logic [PLEN-1:0] paddr, check_paddr;
  logic [63:0] data;
  logic [7:0]  be;
  dcache_req_t req;
  dcache_rsp_t rsp;

  store_buffer #(.DEPTH_SPEC(DS), .DEPTH_COMMIT(DC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .ready_o(ready), .valid_i(valid),
    .paddr_i(paddr), .data_i(data), .be_i(be), .commit_i(commit),
    .commit_ready_o(commit_ready), .check_paddr_i(check_paddr),
    .page_offset_match_o(match), .empty_o(empty), .req_port_o(req), .req_port_i(rsp));

  always #5 clk = ~clk;

  typedef struct packed {
    logic [PLEN-1:0] paddr;
    logic [63:0]     data;
    logic [7:0]      be;
  } st_t;

  st_t sq[$], cq[$];
  int unsigned checks = 0, failures = 0;
  int unsigned n_commit = 0, n_drain = 0, n_flush_drop = 0, n_match = 0, n_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic logic [PLEN-1:0] rand_addr();
    // 64 words in one page plus a random page number: matches on [11:3] only
    return {PLEN'($urandom_range(15)) << 12} | PLEN'({$urandom_range(63), 3'b000});
  endfunction

  initial begin
    int unsigned cyc;
    cyc = 0;
    while (cyc < 20000) begin
      @(posedge clk);
      cyc++;
    end
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_match;
    bit do_commit, do_drain, acc;
    int unsigned pc, pv, pf, pg;
    flush = 1'b0; valid = 1'b0; commit = 1'b0; paddr = '0; data = '0; be = '0;
    check_paddr = '0; rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int phase = 0; phase < 4; phase++) begin
      // phases: balanced traffic, slow cache (queues fill), fast cache, many flushes
      case (phase)
        0: begin pv = 50; pc = 40; pg = 60; pf = 3;  end
        1: begin pv = 70; pc = 60; pg = 10; pf = 2;  end
        2: begin pv = 40; pc = 50; pg = 90; pf = 2;  end
        default: begin pv = 60; pc = 30; pg = 50; pf = 20; end
      endcase
      repeat (3000) begin
        @(negedge clk);
        valid  = $urandom_range(99) < pv;
        commit = $urandom_range(99) < pc;
        flush  = $urandom_range(99) < pf;
        rsp.gnt = $urandom_range(99) < pg;
        paddr  = rand_addr();
        data   = {$urandom, $urandom};
        be     = 8'($urandom);
        check_paddr = rand_addr();
        #1;
        check(ready == (sq.size() != DS), "ready_o");
        check(commit_ready == (cq.size() != DC), "commit_ready_o");
        check(empty == (cq.size() == 0), "empty_o");
        check(req.req == (cq.size() != 0), "cache request valid");
        if (cq.size() != 0) begin
          check(req.we && req.addr == cq[0].paddr && req.wdata == cq[0].data && req.be == cq[0].be,
                "cache request carries the oldest committed store");
        end
        exp_match = 1'b0;
        foreach (sq[i]) if (sq[i].paddr[11:3] == check_paddr[11:3]) exp_match = 1'b1;
        foreach (cq[i]) if (cq[i].paddr[11:3] == check_paddr[11:3]) exp_match = 1'b1;
        check(match == exp_match, "page_offset_match_o");
        if (exp_match) n_match++;
        if (sq.size() == DS) n_full++;
        // model update at the clock edge
        do_commit = commit && sq.size() != 0 && cq.size() != DC;
        do_drain  = cq.size() != 0 && rsp.gnt;
        acc       = valid && sq.size() != DS;
        @(posedge clk);
        if (do_drain) begin void'(cq.pop_front()); n_drain++; end
        if (do_commit) begin cq.push_back(sq[0]); n_commit++; end
        if (flush) begin
          n_flush_drop += sq.size() - (do_commit ? 1 : 0) + (acc ? 1 : 0);
          sq.delete();
        end else begin
          if (do_commit) void'(sq.pop_front());
          if (acc) sq.push_back('{paddr: paddr, data: data, be: be});
        end
      end
    end
    // drain everything and check that the buffer reports empty
    @(negedge clk);
    valid = 1'b0; commit = 1'b0; flush = 1'b0; rsp.gnt = 1'b1;
    repeat (DC + 1) @(negedge clk);
    check(empty && !req.req, "buffer drains to empty");
    check(n_commit > 1000 && n_drain > 1000, "enough commits and drains");
    check(n_flush_drop > 100, "flushes dropped speculative stores");
    check(n_match > 300 && n_full > 100, "matches and full queue were exercised");
    $display("commits=%0d drains=%0d flushed=%0d matches=%0d spec_full=%0d",
             n_commit, n_drain, n_flush_drop, n_match, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
