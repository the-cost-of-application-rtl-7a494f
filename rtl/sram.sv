// Single-port synchronous memory, the behaviour of the register-file macros
// that hold the cache tag and data arrays. One access per cycle: a read
// returns the addressed word on rdata in the next cycle; a write updates the
// bytes selected by be (one bit per byte, WIDTH a multiple of 8) and leaves
// rdata unchanged. The memory is an array, so it synthesises to a memory cell;
// the macro generator of the silicon flow is not modelled. Contents start
// undefined, as in a real macro: the caches keep their own valid bits.
module sram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic [WIDTH/8-1:0]       be_i,
  output logic [WIDTH-1:0]         rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < WIDTH/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
