// Performance counters, mapped into the CSR space: mcycle (0xB00),
// minstret (0xB02) and NR_PERF_COUNTERS event counters mhpmcounter3.. at
// 0xB03.., with read-only user shadows at 0xC00, 0xC02, 0xC03... Event inputs
// are one bit per cycle: L1 I$ miss, L1 D$ miss, ITLB miss, DTLB miss, load,
// store, exception, branch resolved, branch mis-predicted, call/return
// (in that order). Instructions retired counts 0, 1 or 2 per cycle because
// the commit stage retires up to two. Machine-mode writes set a counter.
// hit_o tells the CSR file whether the address names a counter.
module perf_counters import ariane_pkg::*; #(
  parameter int unsigned NR_COUNTERS = NR_PERF_COUNTERS
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [1:0]             instret_i,
  input  logic [NR_COUNTERS-1:0] events_i,
  input  logic [11:0]            addr_i,
  input  logic                   we_i,
  input  logic [63:0]            wdata_i,
  output logic [63:0]            rdata_o,
  output logic                   hit_o
);
  logic [63:0] cycle_q, instret_q;
  logic [63:0] cnt_q [NR_COUNTERS];
  localparam int unsigned CW = $clog2(NR_COUNTERS);
  logic [4:0]  idx;
  logic [CW-1:0] cidx;
  assign cidx = CW'(idx - 5'd3);
  logic        space;

  assign idx   = addr_i[4:0];
  assign space = addr_i[11:5] == 7'b1011000 || addr_i[11:5] == 7'b1100000;  // 0xB00.., 0xC00..

  always_comb begin
    hit_o = 1'b0; rdata_o = '0;
    if (space) begin
      if (idx == 5'd0) begin hit_o = 1'b1; rdata_o = cycle_q; end
      else if (idx == 5'd2) begin hit_o = 1'b1; rdata_o = instret_q; end
      else if (idx >= 5'd3 && idx < 5'(3 + NR_COUNTERS)) begin
        hit_o = 1'b1; rdata_o = cnt_q[cidx];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cycle_q <= '0; instret_q <= '0;
      for (int i = 0; i < NR_COUNTERS; i++) cnt_q[i] <= '0;
    end else begin
      cycle_q   <= cycle_q + 64'd1;
      instret_q <= instret_q + 64'(instret_i);
      for (int i = 0; i < NR_COUNTERS; i++) if (events_i[i]) cnt_q[i] <= cnt_q[i] + 64'd1;
      if (we_i && hit_o && addr_i[11:8] == 4'hb) begin
        if (idx == 5'd0) cycle_q <= wdata_i;
        else if (idx == 5'd2) instret_q <= wdata_i;
        else cnt_q[cidx] <= wdata_i;
      end
    end
  end
endmodule
