// Branch target buffer: a direct-mapped table of NR_ENTRIES jump targets for
// register-indirect jumps that are not function returns. Lookup by
// instruction address is combinational and checks a stored tag made of the
// remaining address bits, so an entry only predicts the jump that wrote it.
// The branch unit writes the resolved target of every such jump. Size from
// the paper; direct mapping and the full tag are this design's choices.
module btb #(
  parameter int unsigned NR_ENTRIES = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic [63:0]              vpc_i,
  input  ariane_pkg::btb_update_t  btb_update_i,
  output logic                     valid_o,
  output logic [63:0]              target_o
);
  localparam int unsigned IW = $clog2(NR_ENTRIES);
  logic [NR_ENTRIES-1:0] valid_q;
  logic [63:0] tag_q [NR_ENTRIES];
  logic [63:0] tgt_q [NR_ENTRIES];
  logic [IW-1:0] ridx, widx;

  assign ridx     = vpc_i[IW:1];
  assign widx     = btb_update_i.pc[IW:1];
  assign valid_o  = valid_q[ridx] && tag_q[ridx] == vpc_i;
  assign target_o = tgt_q[ridx];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < NR_ENTRIES; i++) begin
        tag_q[i] <= '0;
        tgt_q[i] <= '0;
      end
    end else if (flush_i) begin
      valid_q <= '0;
    end else if (btb_update_i.valid) begin
      valid_q[widx] <= 1'b1;
      tag_q[widx]   <= btb_update_i.pc;
      tgt_q[widx]   <= btb_update_i.target_address;
    end
  end
endmodule
