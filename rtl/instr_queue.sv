// Instruction queue (fetch FIFO) decoupling the frontend from the back-end.
// It holds DEPTH fetch words exactly as fetched, i.e. still in compressed
// form, together with their address, valid half-words, branch prediction and
// fetch exception. Push/pop handshake: push when ready_o, the head is valid_o
// and leaves on pop_i. A flush empties it. Simultaneous push and pop on a full
// queue is not allowed (ready_o is low when full). Configurable depth is the
// paper's; DEPTH = 4 is this design's choice.
module instr_queue #(
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic                     push_i,
  input  ariane_pkg::fetch_entry_t data_i,
  output logic                     ready_o,
  output logic                     valid_o,
  output ariane_pkg::fetch_entry_t data_o,
  input  logic                     pop_i
);
  localparam int unsigned AW = $clog2(DEPTH);
  ariane_pkg::fetch_entry_t mem_q [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW:0]   cnt_q;

  assign ready_o = cnt_q != DEPTH[AW:0];
  assign valid_o = cnt_q != '0;
  assign data_o  = mem_q[rd_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push_i && ready_o) begin
        mem_q[wr_q] <= data_i;
        wr_q <= (wr_q == AW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      end
      if (pop_i && valid_o)
        rd_q <= (rd_q == AW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push_i && ready_o) - (AW+1)'(pop_i && valid_o);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i && !valid_o));
endmodule
