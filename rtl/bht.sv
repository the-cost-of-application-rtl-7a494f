// Branch history table: NR_ENTRIES two-bit saturating counters indexed by the
// instruction address (bits above the half-word offset). A lookup is
// combinational; an entry is only valid after a branch that maps to it has
// been resolved once, otherwise the frontend falls back to static prediction.
// Updates come from the branch unit one per cycle: counters count up on taken
// and down on not-taken, saturating at 3 and 0; prediction is bit 1.
// The table size is the paper's; indexing and the valid bit are this
// design's choices. A flush clears all valid bits.
module bht #(
  parameter int unsigned NR_ENTRIES = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic [63:0]              vpc_i,
  input  ariane_pkg::bht_update_t  bht_update_i,
  output logic                     valid_o,
  output logic                     taken_o
);
  localparam int unsigned IW = $clog2(NR_ENTRIES);
  logic [1:0] cnt_q [NR_ENTRIES];
  logic [NR_ENTRIES-1:0] valid_q;
  logic [IW-1:0] ridx, widx;

  assign ridx    = vpc_i[IW:1];
  assign widx    = bht_update_i.pc[IW:1];
  assign valid_o = valid_q[ridx];
  assign taken_o = cnt_q[ridx][1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < NR_ENTRIES; i++) cnt_q[i] <= 2'b00;
    end else if (flush_i) begin
      valid_q <= '0;
    end else if (bht_update_i.valid) begin
      valid_q[widx] <= 1'b1;
      if (!valid_q[widx])
        cnt_q[widx] <= bht_update_i.taken ? 2'b10 : 2'b01;
      else if (bht_update_i.taken && cnt_q[widx] != 2'b11)
        cnt_q[widx] <= cnt_q[widx] + 2'd1;
      else if (!bht_update_i.taken && cnt_q[widx] != 2'b00)
        cnt_q[widx] <= cnt_q[widx] - 2'd1;
    end
  end
endmodule
