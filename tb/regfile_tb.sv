// Testbench of the integer register file: two write ports and two read
// ports, random traffic against a model of 31 registers plus x0. Checks
// that x0 reads zero after writes to it, that a write is visible on the
// next cycle (flip-flop array, reads combinational), and that port 1 wins
// when both ports write the same register (it commits the younger
// instruction).
module regfile_tb;
  logic clk = 0, rst_n = 0;
  logic [1:0][4:0]  raddr, waddr;
  logic [1:0][63:0] rdata, wdata;
  logic [1:0]       we;
  int checks = 0, failures = 0;

  regfile #(.NR_REGS(32), .XLEN(64)) dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata),
                                          .waddr_i(waddr), .wdata_i(wdata), .we_i(we));
  always #5 clk = ~clk;
  logic [63:0] m [32];

  initial begin
    raddr = '0; waddr = '0; wdata = '0; we = '0;
    foreach (m[i]) m[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        raddr[p] = 5'($urandom); #0;
      end
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rdata[p] !== m[raddr[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL read x%0d got %h exp %h", raddr[p], rdata[p], m[raddr[p]]);
        end
      end
      for (int p = 0; p < 2; p++) begin
        we[p] = 1'($urandom_range(1)); waddr[p] = 5'($urandom); wdata[p] = {$urandom, $urandom};
      end
      if ($urandom_range(9) == 0) waddr[1] = waddr[0];
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) if (we[p] && waddr[p] != 0) m[waddr[p]] = wdata[p];
      we = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
