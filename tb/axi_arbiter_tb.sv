// Testbench of the two-master AXI arbiter. Both masters issue random
// read bursts (1-4 beats) and master 1 also single-beat writes, against a
// slave that answers after random delays. Each master checks that every
// beat it receives carries the data the slave produced for that master's
// own address (the slave returns address + beat number), that bursts are
// never interleaved, and that every transaction completes. When both
// masters request at once, the winner must alternate (round robin).
module axi_arbiter_tb;
  import ariane_pkg::*;
  logic clk = 0, rst_n = 0;
  axi_req_t [1:0] m_req;
  axi_rsp_t [1:0] m_rsp;
  axi_req_t s_req;
  axi_rsp_t s_rsp;
  int checks = 0, failures = 0;

  axi_arbiter dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp), .s_req_o(s_req), .s_rsp_i(s_rsp));
  always #5 clk = ~clk;

  // slave
  logic        r_busy, w_busy, b_pend;
  logic [63:0] r_addr;
  logic [7:0]  r_cnt, r_len;
  logic [3:0]  r_id;
  always_comb begin
    s_rsp = '0;
    s_rsp.ar_ready = !r_busy;
    s_rsp.r_valid = r_busy;
    s_rsp.r_data = r_addr + 64'(r_cnt);
    s_rsp.r_last = r_cnt == r_len;
    s_rsp.r_id = r_id;
    s_rsp.aw_ready = !w_busy && !b_pend;
    s_rsp.w_ready = w_busy;
    s_rsp.b_valid = b_pend;
  end
  int last_winner = -1, contested = 0, alternations = 0;
  always @(posedge clk) begin
    if (!rst_n) begin r_busy <= 0; w_busy <= 0; b_pend <= 0; r_cnt <= 0; r_len <= 0; r_addr <= 0; r_id <= 0; end
    else begin
      if (s_req.ar_valid && s_rsp.ar_ready) begin
        r_busy <= 1; r_addr <= s_req.ar_addr; r_len <= s_req.ar_len; r_cnt <= 0; r_id <= s_req.ar_id;
        if (m_req[0].ar_valid && m_req[1].ar_valid) begin
          contested++;
          if (last_winner != -1 && int'(s_req.ar_id[0]) != last_winner) alternations++;
          last_winner = int'(s_req.ar_id[0]);
        end
      end else if (r_busy && s_req.r_ready) begin
        if (r_cnt == r_len) r_busy <= 0;
        r_cnt <= r_cnt + 1;
      end
      if (s_req.aw_valid && s_rsp.aw_ready) w_busy <= 1;
      if (w_busy && s_req.w_valid && s_req.w_last) begin w_busy <= 0; b_pend <= 1; end
      if (b_pend && s_req.b_ready) b_pend <= 0;
    end
  end

  int done_rd [2] = '{0, 0};
  int done_wr = 0;
  task automatic master_read(input int m, input int n);
    for (int k = 0; k < n; k++) begin
      logic [63:0] a; int len;
      a = 64'({$urandom} & 32'hffff_ff00) | 64'(m << 4); len = $urandom_range(3);
      @(negedge clk);
      m_req[m].ar_valid = 1; m_req[m].ar_addr = a; m_req[m].ar_len = 8'(len);
      #1; while (!m_rsp[m].ar_ready) begin @(negedge clk); #1; end
      @(negedge clk); m_req[m].ar_valid = 0; m_req[m].r_ready = 1;
      for (int b = 0; b <= len; b++) begin
        #1; while (!m_rsp[m].r_valid) begin @(negedge clk); #1; end
        checks++;
        if (m_rsp[m].r_data !== a + 64'(b) || m_rsp[m].r_last !== (b == len)) begin
          failures++; $display("FAIL master %0d beat %0d data %h exp %h", m, b, m_rsp[m].r_data, a + 64'(b));
        end
        @(negedge clk);
      end
      m_req[m].r_ready = 0;
      done_rd[m]++;
    end
  endtask
  task automatic master_write(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      m_req[1].aw_valid = 1; m_req[1].aw_addr = 64'($urandom); m_req[1].aw_len = 0;
      #1; while (!m_rsp[1].aw_ready) begin @(negedge clk); #1; end
      @(negedge clk); m_req[1].aw_valid = 0; m_req[1].w_valid = 1; m_req[1].w_last = 1;
      #1; while (!m_rsp[1].w_ready) begin @(negedge clk); #1; end
      @(negedge clk); m_req[1].w_valid = 0; m_req[1].b_ready = 1;
      #1; while (!m_rsp[1].b_valid) begin @(negedge clk); #1; end
      @(negedge clk); m_req[1].b_ready = 0;
      done_wr++;
    end
  endtask

  initial begin
    m_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      master_read(0, 300);
      master_read(1, 300);
      master_write(100);
    join
    checks++; if (done_rd[0] != 300 || done_rd[1] != 300 || done_wr != 100) begin failures++; $display("FAIL: incomplete"); end
    checks++; if (contested == 0 || alternations < contested - 1) begin
      failures++; $display("FAIL: round robin contested=%0d alternations=%0d", contested, alternations); end
    $display("contested read arbitrations: %0d", contested);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
