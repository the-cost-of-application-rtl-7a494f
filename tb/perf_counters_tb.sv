// Testbench of the performance counters. Drives random event bits and
// retire counts for 2000 cycles, keeps model counts, and reads every
// counter through both the machine (0xB..) and user (0xC..) addresses.
// Also checks writes from machine mode, that user addresses cannot be
// written, and that unmapped addresses (time, 0xB01) report no hit.
module perf_counters_tb;
  import ariane_pkg::*;
  localparam int N = NR_PERF_COUNTERS;
  logic clk = 0, rst_n = 0, we = 0, hit;
  logic [1:0] instret = '0;
  logic [N-1:0] ev = '0;
  logic [11:0] addr = '0;
  logic [63:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  perf_counters #(.NR_COUNTERS(N)) dut (.clk_i(clk), .rst_ni(rst_n), .instret_i(instret), .events_i(ev),
                                        .addr_i(addr), .we_i(we), .wdata_i(wdata), .rdata_o(rdata), .hit_o(hit));
  always #5 clk = ~clk;

  longint unsigned m_cyc = 0, m_ret, m_ev [N];
  always @(posedge clk) if (rst_n) m_cyc <= m_cyc + 1;

  task automatic rd(input logic [11:0] a, input longint unsigned e, input bit h);
    addr = a; #1;
    if (a[7:0] == 8'h00) e = m_cyc;
    checks++;
    if (hit !== h || (h && rdata !== e)) begin
      failures++;
      if (failures < 10) $display("FAIL addr=%h hit=%b data=%0d exp %b %0d", a, hit, rdata, h, e);
    end
  endtask

  initial begin
    m_ret = 0; foreach (m_ev[i]) m_ev[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      instret = 2'($urandom_range(2)); ev = N'($urandom);
      @(posedge clk); #1;
      m_ret += instret;
      for (int i = 0; i < N; i++) if (ev[i]) m_ev[i]++;
      if (k % 97 == 0) begin
        ev = '0; instret = '0;
        // read right after the edge, before the next one
        rd(12'hb00, m_cyc, 1); rd(12'hc00, m_cyc, 1);
        rd(12'hb02, m_ret, 1); rd(12'hc02, m_ret, 1);
        for (int i = 0; i < N; i++) begin rd(12'hb03 + 12'(i), m_ev[i], 1); rd(12'hc03 + 12'(i), m_ev[i], 1); end
        rd(12'hb01, 0, 0); rd(12'hc01, 0, 0); rd(12'hb03 + 12'(N), 0, 0);
      end
    end
    ev = '0; instret = '0;
    @(negedge clk);
    addr = 12'hb05; wdata = 64'd1234; we = 1;
    @(posedge clk); #1; we = 0; m_ev[2] = 1234;
    rd(12'hb05, m_ev[2], 1);
    addr = 12'hc05; wdata = 64'd7; we = 1;
    @(posedge clk); #1; we = 0;
    rd(12'hc05, m_ev[2], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
