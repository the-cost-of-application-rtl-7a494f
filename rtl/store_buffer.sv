// Store buffer between the store unit and the data cache, in two parts.
// The speculative queue (DEPTH_SPEC entries) takes translated stores as soon
// as they execute; they may still be squashed by an older exception, so a
// flush empties it. When the commit stage retires a store, commit_i moves the
// oldest speculative entry into the commit queue (DEPTH_COMMIT entries),
// whose stores are architectural and drain to the data cache's store port in
// order, one per grant, unaffected by flushes. A load whose address falls in
// the same 8-byte word as any buffered store must wait (page_offset_match_o);
// empty_o tells fences that every committed store has reached the cache
// (speculative entries are younger than a fence at the head of the ROB).
module store_buffer import ariane_pkg::*; #(
  parameter int unsigned DEPTH_SPEC   = 4,
  parameter int unsigned DEPTH_COMMIT = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_i,
  output logic            ready_o,
  input  logic            valid_i,
  input  logic [PLEN-1:0] paddr_i,
  input  logic [63:0]     data_i,
  input  logic [7:0]      be_i,
  input  logic            commit_i,
  output logic            commit_ready_o,
  input  logic [PLEN-1:0] check_paddr_i,
  output logic            page_offset_match_o,
  output logic            empty_o,
  output dcache_req_t     req_port_o,
  input  dcache_rsp_t     req_port_i
);
  typedef struct packed {
    logic [PLEN-1:0] paddr;
    logic [63:0]     data;
    logic [7:0]      be;
  } st_t;

  st_t  spec_q [DEPTH_SPEC];
  st_t  com_q  [DEPTH_COMMIT];
  logic [$clog2(DEPTH_SPEC):0]   spec_cnt_q;
  logic [$clog2(DEPTH_COMMIT):0] com_cnt_q;
  logic do_commit, do_drain;

  assign ready_o        = spec_cnt_q != ($clog2(DEPTH_SPEC)+1)'(DEPTH_SPEC);
  assign commit_ready_o = com_cnt_q != ($clog2(DEPTH_COMMIT)+1)'(DEPTH_COMMIT);
  assign empty_o        = com_cnt_q == '0;
  assign do_commit      = commit_i && spec_cnt_q != '0 && commit_ready_o;
  assign do_drain       = com_cnt_q != '0 && req_port_i.gnt;

  always_comb begin
    req_port_o = '0;
    req_port_o.req   = com_cnt_q != '0;
    req_port_o.we    = 1'b1;
    req_port_o.addr  = com_q[0].paddr;
    req_port_o.wdata = com_q[0].data;
    req_port_o.be    = com_q[0].be;
    page_offset_match_o = 1'b0;
    for (int i = 0; i < DEPTH_SPEC; i++)
      if (($clog2(DEPTH_SPEC)+1)'(i) < spec_cnt_q && spec_q[i].paddr[11:3] == check_paddr_i[11:3])
        page_offset_match_o = 1'b1;
    for (int i = 0; i < DEPTH_COMMIT; i++)
      if (($clog2(DEPTH_COMMIT)+1)'(i) < com_cnt_q && com_q[i].paddr[11:3] == check_paddr_i[11:3])
        page_offset_match_o = 1'b1;
  end

  // queues kept as shift registers: entry 0 is always the oldest
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      spec_cnt_q <= '0; com_cnt_q <= '0;
      for (int i = 0; i < DEPTH_SPEC; i++) spec_q[i] <= '0;
      for (int i = 0; i < DEPTH_COMMIT; i++) com_q[i] <= '0;
    end else begin
      // commit queue
      begin
        logic [$clog2(DEPTH_COMMIT):0] n;
        n = com_cnt_q;
        if (do_drain) begin
          for (int i = 0; i < DEPTH_COMMIT-1; i++) com_q[i] <= com_q[i+1];
          n = n - 1'b1;
        end
        if (do_commit) com_q[n[$clog2(DEPTH_COMMIT)-1:0]] <= spec_q[0];
        com_cnt_q <= n + ($clog2(DEPTH_COMMIT)+1)'(do_commit);
      end
      // speculative queue
      if (flush_i) begin
        spec_cnt_q <= '0;
      end else begin
        logic [$clog2(DEPTH_SPEC):0] m;
        m = spec_cnt_q;
        if (do_commit) begin
          for (int i = 0; i < DEPTH_SPEC-1; i++) spec_q[i] <= spec_q[i+1];
          m = m - 1'b1;
        end
        if (valid_i && ready_o) spec_q[m[$clog2(DEPTH_SPEC)-1:0]] <= '{paddr: paddr_i, data: data_i, be: be_i};
        spec_cnt_q <= m + ($clog2(DEPTH_SPEC)+1)'(valid_i && ready_o);
      end
    end
  end
endmodule
