// Instruction cache, virtually indexed and physically tagged.
// SIZE_BYTES / WAYS / LINE_BYTES set the geometry (16 KiB, 4 ways, 16-byte
// lines = 256 sets, so the set index lies in the 12-bit page offset and can be
// taken from the virtual address while the ITLB translates the page number).
// Timing: a request (req_i & ready_o) carries the virtual address and the
// already translated physical address; the tag and data arrays (sram macros)
// are read at that clock edge, and in the next cycle the tags of all ways are
// compared and, on a hit, the 32-bit word is presented on valid_o/data_o
// (fetch latency 1). The output is held until out_ready_i. On a miss the line
// is refilled over the AXI read channel (one burst of LINE_BYTES/8 beats),
// written into an invalid way or, if none, a way picked by a round-robin
// counter, and the lookup is replayed from the arrays. kill_i drops the request in flight
// (a refill that has started still completes). flush_i (fence.i) invalidates
// every line in one cycle. A request that already carries a fetch exception
// bypasses the arrays and is returned with the exception.
// Geometry from the paper; line size, replacement and refill protocol are
// this design's choices.
module icache import ariane_pkg::*; #(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned LINE_BYTES = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_i,
  input  logic            kill_i,
  input  logic            req_i,
  input  logic [63:0]     vaddr_i,
  input  logic [PLEN-1:0] paddr_i,
  input  exception_t      ex_i,
  output logic            ready_o,
  output logic            valid_o,
  output logic [31:0]     data_o,
  output logic [63:0]     vaddr_o,
  output exception_t      ex_o,
  input  logic            out_ready_i,
  output logic            miss_o,
  output axi_req_t        axi_req_o,
  input  axi_rsp_t        axi_rsp_i
);
  localparam int unsigned SETS  = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned OFFW  = $clog2(LINE_BYTES);
  localparam int unsigned IDXW  = $clog2(SETS);
  localparam int unsigned LINEW = LINE_BYTES * 8;
  localparam int unsigned BEATS = LINE_BYTES / 8;
  localparam int unsigned TAGW  = PLEN - OFFW - IDXW;
  localparam int unsigned TAGSW = ((TAGW + 7) / 8) * 8;
  localparam int unsigned WAYW  = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [2:0] { IDLE, LOOKUP, REFILL_AR, REFILL_R, REREAD } state_e;
  state_e state_q, state_d;

  logic [63:0]     vaddr_q;
  logic [PLEN-1:0] paddr_q;
  exception_t      ex_q;
  logic            killed_q;
  logic [WAYS-1:0] valid_q [SETS];
  logic [WAYW-1:0] rr_q, victim_q;
  logic [LINEW-1:0] line_q;
  logic [$clog2(BEATS+1)-1:0] beat_q;

  // array ports
  logic             arr_req, arr_we;
  logic [IDXW-1:0]  arr_idx;
  logic [WAYS-1:0]  way_we;
  logic [LINEW-1:0] data_rd [WAYS];
  logic [TAGSW-1:0] tag_rd  [WAYS];

  logic accept, replay;
  logic [WAYS-1:0] hit_way;
  logic            hit;
  logic [LINEW-1:0] hit_line;
  logic [IDXW-1:0]  idx_q;

  assign idx_q   = vaddr_q[OFFW +: IDXW];
  assign ready_o = (state_q == IDLE) || (state_q == LOOKUP && (valid_o ? out_ready_i : !miss_o));
  assign accept  = req_i && ready_o && !flush_i;
  assign replay  = state_q == REFILL_R && axi_rsp_i.r_valid && axi_rsp_i.r_last;

  assign arr_req = accept || replay || state_q == REREAD;
  assign arr_we  = replay;
  assign arr_idx = accept ? vaddr_i[OFFW +: IDXW] : idx_q;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    assign way_we[w] = arr_we && victim_q == WAYW'(w);
    sram #(.WIDTH(LINEW), .DEPTH(SETS)) i_data (
      .clk_i, .req_i(arr_req && (!arr_we || way_we[w])), .we_i(arr_we),
      .addr_i(arr_idx), .wdata_i({axi_rsp_i.r_data, line_q[LINEW-1:64]}),
      .be_i('1), .rdata_o(data_rd[w]));
    sram #(.WIDTH(TAGSW), .DEPTH(SETS)) i_tag (
      .clk_i, .req_i(arr_req && (!arr_we || way_we[w])), .we_i(arr_we),
      .addr_i(arr_idx), .wdata_i(TAGSW'(paddr_q[PLEN-1 -: TAGW])),
      .be_i('1), .rdata_o(tag_rd[w]));
    assign hit_way[w] = valid_q[idx_q][w] && tag_rd[w][TAGW-1:0] == paddr_q[PLEN-1 -: TAGW];
  end

  always_comb begin
    hit_line = '0;
    for (int w = 0; w < WAYS; w++) if (hit_way[w]) hit_line |= data_rd[w];
  end
  assign hit = |hit_way;

  // output in LOOKUP: a hit or a pass-through exception
  assign valid_o = state_q == LOOKUP && !killed_q && (hit || ex_q.valid);
  assign miss_o  = state_q == LOOKUP && !killed_q && !hit && !ex_q.valid;
  assign data_o  = hit_line[vaddr_q[OFFW-1:2]*32 +: 32];
  assign vaddr_o = vaddr_q;
  assign ex_o    = ex_q;

  // AXI read channel only
  always_comb begin
    axi_req_o = '0;
    axi_req_o.ar_valid = state_q == REFILL_AR;
    axi_req_o.ar_addr  = 64'({paddr_q[PLEN-1:OFFW], {OFFW{1'b0}}});
    axi_req_o.ar_len   = 8'(BEATS - 1);
    axi_req_o.r_ready  = state_q == REFILL_R;
    axi_req_o.b_ready  = 1'b1;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      IDLE:      if (accept) state_d = LOOKUP;
      LOOKUP:    if (miss_o) state_d = REFILL_AR;
                 else if (accept) state_d = LOOKUP;
                 else if (!valid_o || out_ready_i) state_d = IDLE;
      REFILL_AR: if (axi_rsp_i.ar_ready) state_d = REFILL_R;
      REFILL_R:  if (replay) state_d = REREAD;
      REREAD:    state_d = LOOKUP;
      default:   state_d = IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= IDLE;
      vaddr_q  <= '0;
      paddr_q  <= '0;
      ex_q     <= '0;
      killed_q <= 1'b0;
      rr_q     <= '0;
      victim_q <= '0;
      line_q   <= '0;
      beat_q   <= '0;
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end else begin
      state_q <= state_d;
      if (accept) begin
        vaddr_q  <= vaddr_i;
        paddr_q  <= paddr_i;
        ex_q     <= ex_i;
        killed_q <= 1'b0;
      end else if (kill_i) begin
        killed_q <= 1'b1;
      end
      if (miss_o) begin
        // pick an invalid way if there is one, otherwise round robin
        victim_q <= rr_q;
        for (int w = WAYS-1; w >= 0; w--) if (!valid_q[idx_q][w]) victim_q <= WAYW'(w);
        rr_q <= (rr_q == WAYW'(WAYS-1)) ? '0 : rr_q + 1'b1;
        beat_q <= '0;
      end
      if (state_q == REFILL_R && axi_rsp_i.r_valid) begin
        line_q <= {axi_rsp_i.r_data, line_q[LINEW-1:64]};
        beat_q <= beat_q + 1'b1;
      end
      if (replay) valid_q[idx_q][victim_q] <= 1'b1;
      if (flush_i) begin
        for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
        killed_q <= 1'b1;
      end
    end
  end
endmodule
