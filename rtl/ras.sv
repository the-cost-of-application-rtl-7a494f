// Return address stack. A call (jal/jalr writing x1 or x5) pushes its return
// address, a return (jalr x0, 0(x1|x5)) pops the predicted target. The stack
// has DEPTH entries; pushing onto a full stack drops the oldest entry, popping
// an empty stack yields an invalid prediction. Push and pop in the same cycle
// replace the top entry. The paper names the unit only; depth and overflow
// policy are this design's choices.
module ras #(
  parameter int unsigned DEPTH = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic        push_i,
  input  logic        pop_i,
  input  logic [63:0] data_i,
  output logic        valid_o,
  output logic [63:0] data_o
);
  logic [63:0] stack_q [DEPTH];
  logic [DEPTH-1:0] valid_q;

  assign valid_o = valid_q[0];
  assign data_o  = stack_q[0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < DEPTH; i++) stack_q[i] <= '0;
    end else if (flush_i) begin
      valid_q <= '0;
    end else if (push_i && pop_i) begin
      stack_q[0] <= data_i;
      valid_q[0] <= 1'b1;
    end else if (push_i) begin
      stack_q[0] <= data_i;
      valid_q[0] <= 1'b1;
      for (int i = 1; i < DEPTH; i++) begin
        stack_q[i] <= stack_q[i-1];
        valid_q[i] <= valid_q[i-1];
      end
    end else if (pop_i) begin
      for (int i = 0; i < DEPTH-1; i++) begin
        stack_q[i] <= stack_q[i+1];
        valid_q[i] <= valid_q[i+1];
      end
      valid_q[DEPTH-1] <= 1'b0;
    end
  end
endmodule
