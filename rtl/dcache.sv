// Data cache: write-back, write-allocate, SIZE_BYTES in WAYS ways of
// LINE_BYTES lines (32 KiB, 8 ways, 16-byte lines = 256 sets, so the set
// index lies in the page offset: the cache is virtually indexed and
// physically tagged in effect, and the ports hand it physical addresses).
// Three request ports: 0 page table walker, 1 load unit, 2 store buffer,
// served one request at a time with that fixed priority.
// Timing of a hit: the request is granted (gnt) in cycle 0 and the arrays
// are read; cycle 1 compares the tags of all ways; the load data leaves
// through an output register and rvalid rises LATENCY cycles after the
// grant (3 by default). A store hit writes the bytes in cycle 1 and marks
// the line dirty; a store needs no response beyond its grant.
// A miss picks an invalid way or a round-robin victim, writes a dirty victim
// back (one AXI write burst), refills the line (one AXI read burst), re-reads
// the arrays and completes as a hit. Addresses below CACHED_BASE bypass the
// cache: a single-beat AXI read or write (the uncached path used for
// peripherals). flush_i (fence.i) writes back every dirty line and
// invalidates the whole cache, then pulses flush_ack_o.
// The paper's cache serves hits on one port while another port misses; this
// one finishes each request before the next.
module dcache import ariane_pkg::*; #(
  parameter int unsigned SIZE_BYTES  = 32768,
  parameter int unsigned WAYS        = 8,
  parameter int unsigned LINE_BYTES  = 16,
  parameter int unsigned LATENCY     = 3,
  parameter logic [63:0] CACHED_BASE = 64'h8000_0000
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             flush_i,
  output logic             flush_ack_o,
  input  dcache_req_t [2:0] req_i,
  output dcache_rsp_t [2:0] rsp_o,
  output logic             miss_o,
  output axi_req_t         axi_req_o,
  input  axi_rsp_t         axi_rsp_i
);
  localparam int unsigned SETS  = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned OFFW  = $clog2(LINE_BYTES);
  localparam int unsigned IDXW  = $clog2(SETS);
  localparam int unsigned LINEW = LINE_BYTES * 8;
  localparam int unsigned BEATS = LINE_BYTES / 8;
  localparam int unsigned TAGW  = PLEN - OFFW - IDXW;
  localparam int unsigned TAGSW = ((TAGW + 7) / 8) * 8;
  localparam int unsigned WAYW  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned BW    = $clog2(BEATS) + 1;

  typedef enum logic [3:0] {
    IDLE, TAG, OUT, WB_AW, WB_W, WB_B, RF_AR, RF_R, REREAD,
    BYP_AR, BYP_R, BYP_AW, BYP_W, BYP_B, FL_READ, FL_CHECK
  } state_e;
  state_e state_q;

  dcache_req_t     req_q;
  logic [1:0]      port_q;
  logic [IDXW-1:0] idx_q, flush_idx_q;
  logic            flush_pend_q;   // flush requested while busy
  logic [WAYS-1:0] valid_q [SETS];
  logic [WAYS-1:0] dirty_q [SETS];
  logic [WAYW-1:0] victim_q, rr_q;
  logic [LINEW-1:0] wb_line_q, line_q;
  logic [PLEN-1:0] wb_addr_q;
  logic [BW-1:0]   beat_q;
  logic [63:0]     rdata_q;
  logic [3:0]      out_cnt_q;
  logic            flushing_q;

  // arbitration in IDLE
  logic [1:0] sel;
  logic       any_req, cacheable;
  always_comb begin
    sel = 2'd0;
    if (!req_i[0].req) sel = req_i[1].req ? 2'd1 : 2'd2;
  end
  assign any_req   = (req_i[0].req || req_i[1].req || req_i[2].req) && !flush_i && !flush_pend_q;
  assign cacheable = 64'(req_i[sel].addr) >= CACHED_BASE;

  // arrays
  logic             arr_req, arr_we;
  logic [IDXW-1:0]  arr_idx;
  logic [WAYS-1:0]  way_sel;
  logic [LINEW-1:0] arr_wdata;
  logic [LINEW/8-1:0] arr_be;
  logic [LINEW-1:0] data_rd [WAYS];
  logic [TAGSW-1:0] tag_rd  [WAYS];
  logic             tag_we;
  logic [WAYS-1:0]  hit_way;
  logic             hit;
  logic [WAYW-1:0]  hit_idx;
  logic [LINEW-1:0] hit_line;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    sram #(.WIDTH(LINEW), .DEPTH(SETS)) i_data (.clk_i, .req_i(arr_req && (!arr_we || way_sel[w])),
      .we_i(arr_we), .addr_i(arr_idx), .wdata_i(arr_wdata), .be_i(arr_be), .rdata_o(data_rd[w]));
    sram #(.WIDTH(TAGSW), .DEPTH(SETS)) i_tag (.clk_i,
      .req_i(arr_req && (!arr_we || (way_sel[w] && tag_we))), .we_i(arr_we), .addr_i(arr_idx),
      .wdata_i(TAGSW'(req_q.addr[PLEN-1 -: TAGW])), .be_i('1), .rdata_o(tag_rd[w]));
    assign hit_way[w] = valid_q[idx_q][w] && tag_rd[w][TAGW-1:0] == req_q.addr[PLEN-1 -: TAGW];
  end

  always_comb begin
    hit_line = '0; hit_idx = '0;
    for (int w = 0; w < WAYS; w++) if (hit_way[w]) begin hit_line |= data_rd[w]; hit_idx = WAYW'(w); end
  end
  assign hit = |hit_way;

  logic refill_done;
  assign refill_done = state_q == RF_R && axi_rsp_i.r_valid && axi_rsp_i.r_last;

  always_comb begin
    arr_req = 1'b0; arr_we = 1'b0; arr_idx = idx_q; way_sel = '0; tag_we = 1'b0;
    arr_wdata = '0; arr_be = '0;
    unique case (state_q)
      IDLE: if (flush_i || flush_pend_q) begin
              arr_req = 1'b1; arr_idx = '0;
            end else if (any_req && cacheable) begin
              arr_req = 1'b1; arr_idx = req_i[sel].addr[OFFW +: IDXW];
            end
      TAG: if (hit && req_q.we) begin
             arr_req = 1'b1; arr_we = 1'b1; way_sel = hit_way;
             arr_wdata = {(LINEW/64){req_q.wdata}};
             arr_be = (LINEW/8)'(req_q.be) << (8 * req_q.addr[OFFW-1:3]);
           end
      RF_R: if (refill_done) begin
              arr_req = 1'b1; arr_we = 1'b1; tag_we = 1'b1;
              way_sel = WAYS'(1) << victim_q;
              arr_wdata = {axi_rsp_i.r_data, line_q[LINEW-1:64]};
              arr_be = '1;
            end
      REREAD:  arr_req = 1'b1;
      FL_READ: begin arr_req = 1'b1; arr_idx = flush_idx_q; end
      default: ;
    endcase
  end

  // responses
  always_comb begin
    rsp_o = '0;
    if (state_q == IDLE && any_req) rsp_o[sel].gnt = 1'b1;
    for (int p = 0; p < 3; p++) rsp_o[p].rdata = rdata_q;
    if (state_q == OUT && out_cnt_q == '0) rsp_o[port_q].rvalid = 1'b1;
    if (state_q == BYP_R && axi_rsp_i.r_valid) begin
      rsp_o[port_q].rvalid = 1'b1;
      rsp_o[port_q].rdata  = axi_rsp_i.r_data;
    end
  end
  assign miss_o = state_q == TAG && !hit;

  // AXI
  always_comb begin
    axi_req_o = '0;
    axi_req_o.b_ready = state_q == WB_B || state_q == BYP_B;
    axi_req_o.r_ready = state_q == RF_R || state_q == BYP_R;
    unique case (state_q)
      WB_AW: begin axi_req_o.aw_valid = 1'b1; axi_req_o.aw_addr = 64'(wb_addr_q);
                   axi_req_o.aw_len = 8'(BEATS-1); end
      WB_W:  begin axi_req_o.w_valid = 1'b1; axi_req_o.w_data = wb_line_q[beat_q*64 +: 64];
                   axi_req_o.w_strb = '1; axi_req_o.w_last = beat_q == BW'(BEATS-1); end
      RF_AR: begin axi_req_o.ar_valid = 1'b1;
                   axi_req_o.ar_addr = 64'({req_q.addr[PLEN-1:OFFW], {OFFW{1'b0}}});
                   axi_req_o.ar_len = 8'(BEATS-1); end
      BYP_AR: begin axi_req_o.ar_valid = 1'b1; axi_req_o.ar_addr = 64'({req_q.addr[PLEN-1:3], 3'b0}); end
      BYP_AW: begin axi_req_o.aw_valid = 1'b1; axi_req_o.aw_addr = 64'({req_q.addr[PLEN-1:3], 3'b0}); end
      BYP_W:  begin axi_req_o.w_valid = 1'b1; axi_req_o.w_data = req_q.wdata;
                    axi_req_o.w_strb = req_q.be; axi_req_o.w_last = 1'b1; end
      default: ;
    endcase
  end

  // first dirty line of the set being flushed
  logic            fl_found;
  logic [WAYW-1:0] fl_way;
  always_comb begin
    fl_found = 1'b0; fl_way = '0;
    for (int w = WAYS-1; w >= 0; w--)
      if (valid_q[flush_idx_q][w] && dirty_q[flush_idx_q][w]) begin fl_found = 1'b1; fl_way = WAYW'(w); end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; req_q <= '0; port_q <= '0; idx_q <= '0; flush_idx_q <= '0;
      victim_q <= '0; rr_q <= '0; wb_line_q <= '0; line_q <= '0; wb_addr_q <= '0;
      beat_q <= '0; rdata_q <= '0; out_cnt_q <= '0; flushing_q <= 1'b0; flush_ack_o <= 1'b0; flush_pend_q <= 1'b0;
      for (int s = 0; s < SETS; s++) begin valid_q[s] <= '0; dirty_q[s] <= '0; end
    end else begin
      flush_ack_o <= 1'b0;
      if (flush_i && state_q != IDLE) flush_pend_q <= 1'b1;
      unique case (state_q)
        IDLE: begin
          if (flush_i || flush_pend_q) begin
            flush_pend_q <= 1'b0;
            flushing_q <= 1'b1; flush_idx_q <= '0; state_q <= FL_CHECK;
          end else if (any_req) begin
            req_q  <= req_i[sel];
            port_q <= sel;
            idx_q  <= req_i[sel].addr[OFFW +: IDXW];
            if (cacheable) state_q <= TAG;
            else state_q <= req_i[sel].we ? BYP_AW : BYP_AR;
          end
        end
        TAG: begin
          if (hit) begin
            if (req_q.we) begin
              dirty_q[idx_q][hit_idx] <= 1'b1;
              state_q <= IDLE;
            end else begin
              rdata_q   <= hit_line[req_q.addr[OFFW-1:3]*64 +: 64];
              out_cnt_q <= 4'(LATENCY - 2);
              state_q   <= OUT;
            end
          end else begin
            logic [WAYW-1:0] v;
            logic            found;
            v = rr_q; found = 1'b0;
            for (int w = 0; w < WAYS; w++)
              if (!valid_q[idx_q][w] && !found) begin v = WAYW'(w); found = 1'b1; end
            victim_q <= v;
            rr_q <= (rr_q == WAYW'(WAYS-1)) ? '0 : rr_q + 1'b1;
            beat_q <= '0;
            if (valid_q[idx_q][v] && dirty_q[idx_q][v]) begin
              wb_line_q <= data_rd[v];
              wb_addr_q <= {tag_rd[v][TAGW-1:0], idx_q, {OFFW{1'b0}}};
              state_q   <= WB_AW;
            end else begin
              state_q <= RF_AR;
            end
          end
        end
        OUT: if (out_cnt_q == '0) state_q <= IDLE; else out_cnt_q <= out_cnt_q - 1'b1;
        WB_AW: if (axi_rsp_i.aw_ready) state_q <= WB_W;
        WB_W: if (axi_rsp_i.w_ready) begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == BW'(BEATS-1)) state_q <= WB_B;
        end
        WB_B: if (axi_rsp_i.b_valid) begin
          beat_q <= '0;
          state_q <= flushing_q ? FL_CHECK : RF_AR;
        end
        RF_AR: if (axi_rsp_i.ar_ready) state_q <= RF_R;
        RF_R: if (axi_rsp_i.r_valid) begin
          line_q <= {axi_rsp_i.r_data, line_q[LINEW-1:64]};
          if (axi_rsp_i.r_last) begin
            valid_q[idx_q][victim_q] <= 1'b1;
            dirty_q[idx_q][victim_q] <= 1'b0;
            state_q <= REREAD;
          end
        end
        REREAD: state_q <= TAG;
        BYP_AR: if (axi_rsp_i.ar_ready) state_q <= BYP_R;
        BYP_R:  if (axi_rsp_i.r_valid) state_q <= IDLE;
        BYP_AW: if (axi_rsp_i.aw_ready) state_q <= BYP_W;
        BYP_W:  if (axi_rsp_i.w_ready) state_q <= BYP_B;
        BYP_B:  if (axi_rsp_i.b_valid) state_q <= IDLE;
        FL_READ: state_q <= FL_CHECK;
        FL_CHECK: begin
          if (fl_found) begin
            wb_line_q <= data_rd[fl_way];
            wb_addr_q <= {tag_rd[fl_way][TAGW-1:0], flush_idx_q, {OFFW{1'b0}}};
            dirty_q[flush_idx_q][fl_way] <= 1'b0;
            beat_q  <= '0;
            state_q <= WB_AW;
          end else begin
            valid_q[flush_idx_q] <= '0;
            if (flush_idx_q == IDXW'(SETS-1)) begin
              flushing_q <= 1'b0; flush_ack_o <= 1'b1; state_q <= IDLE;
            end else begin
              flush_idx_q <= flush_idx_q + 1'b1;
              state_q <= FL_READ;
            end
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
