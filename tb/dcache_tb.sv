// Testbench of the data cache with a behavioural AXI memory behind it.
// 3000 random loads and stores (random byte enables) from the three ports
// go to addresses chosen so that twelve lines compete for the eight ways
// of a few sets, which forces dirty evictions, plus uncached accesses below
// the cached base. Every load is compared with a reference memory. Each
// access is followed by a load of the same word, which must hit: its
// rvalid must come exactly LATENCY (3) cycles after the grant. Stores are
// complete once granted. At the end a
// flush must write every dirty line back, so the AXI memory then equals the
// reference memory.
module dcache_tb;
  import ariane_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, flush_ack, miss;
  dcache_req_t [2:0] req;
  dcache_rsp_t [2:0] rsp;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  int checks = 0, failures = 0;

  dcache dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_ack_o(flush_ack),
              .req_i(req), .rsp_o(rsp), .miss_o(miss), .axi_req_o(axi_req), .axi_rsp_i(axi_rsp));
  always #5 clk = ~clk;

  // AXI memory: associative array of 64-bit words
  logic [63:0] mem [logic [63:0]];
  logic [63:0] refm [logic [63:0]];
  function automatic logic [63:0] rd(input logic [63:0] a);
    return mem.exists(a >> 3) ? mem[a >> 3] : 64'h0;
  endfunction
  logic        r_busy, w_busy, b_pend;
  logic [63:0] r_addr, w_addr;
  logic [7:0]  r_left;
  int          r_wait;
  always_comb begin
    axi_rsp = '0;
    axi_rsp.ar_ready = !r_busy;
    axi_rsp.r_valid  = r_busy && r_wait == 0;
    axi_rsp.r_data   = rd(r_addr);
    axi_rsp.r_last   = r_left == 0;
    axi_rsp.aw_ready = !w_busy && !b_pend;
    axi_rsp.w_ready  = w_busy;
    axi_rsp.b_valid  = b_pend;
  end
  always @(posedge clk) begin
    if (!rst_n) begin r_busy <= 0; w_busy <= 0; b_pend <= 0; r_wait <= 0; r_left <= 0; r_addr <= 0; w_addr <= 0; end
    else begin
      if (axi_req.ar_valid && axi_rsp.ar_ready) begin
        r_busy <= 1; r_addr <= axi_req.ar_addr; r_left <= axi_req.ar_len; r_wait <= $urandom_range(3);
      end else if (r_busy && r_wait > 0) r_wait <= r_wait - 1;
      else if (axi_rsp.r_valid && axi_req.r_ready) begin
        if (r_left == 0) r_busy <= 0;
        r_left <= r_left - 1; r_addr <= r_addr + 8;
      end
      if (axi_req.aw_valid && axi_rsp.aw_ready) begin w_busy <= 1; w_addr <= axi_req.aw_addr; end
      if (w_busy && axi_req.w_valid) begin
        logic [63:0] m, o;
        for (int i = 0; i < 8; i++) m[i*8 +: 8] = {8{axi_req.w_strb[i]}};
        o = rd(w_addr);
        mem[w_addr >> 3] = (o & ~m) | (axi_req.w_data & m);
        w_addr <= w_addr + 8;
        if (axi_req.w_last) begin w_busy <= 0; b_pend <= 1; end
      end
      if (b_pend && axi_req.b_ready) b_pend <= 0;
    end
  end

  int cyc = 0;
  always @(posedge clk) if (cyc < 40 && $test$plusargs("trace")) $display("cyc %0d state %0d req %b gnt %b rv %b ar %b r %b", cyc, dut.state_q, req[0].req|req[1].req|req[2].req, rsp[0].gnt|rsp[1].gnt|rsp[2].gnt, rsp[0].rvalid|rsp[1].rvalid|rsp[2].rvalid, axi_req.ar_valid, axi_rsp.r_valid);
  always @(posedge clk) cyc <= cyc + 1;

  task automatic access(input int p, input bit we, input logic [63:0] a, input logic [63:0] d,
                        input logic [7:0] be, output int lat);
    int t0;
    @(negedge clk);
    req[p] = '{req: 1'b1, we: we, addr: PLEN'(a), wdata: d, be: be};
    #1;
    while (!rsp[p].gnt) begin @(negedge clk); #1; end
    t0 = cyc;
    @(negedge clk); req[p] = '0;
    // stores are done once granted; only loads return data
    if (!we) begin
      #1;
      while (!rsp[p].rvalid) begin @(negedge clk); #1; end
    end
    lat = cyc - t0;
    if (we) begin
      logic [63:0] m, o;
      for (int i = 0; i < 8; i++) m[i*8 +: 8] = {8{be[i]}};
      o = refm.exists(a >> 3) ? refm[a >> 3] : 64'h0;
      refm[a >> 3] = (o & ~m) | (d & m);
    end else begin
      checks++;
      if (rsp[p].rdata !== (refm.exists(a >> 3) ? refm[a >> 3] : 64'h0)) begin
        failures++;
        if (failures < 10) $display("FAIL load %h got %h exp %h", a, rsp[p].rdata, refm[a >> 3]);
      end
    end
  endtask

  initial begin
    int lat, hits_checked;
    req = '0;
    hits_checked = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      logic [63:0] a;
      int p;
      bit unc;
      unc = $urandom_range(15) == 0;
      if (unc) a = 64'h1000_0000 + 64'($urandom_range(15) * 8);
      else a = 64'h8000_0000 + 64'($urandom_range(11)) * 64'h1000 + 64'($urandom_range(3) * 16) + 64'($urandom_range(1) * 8);
      p = $urandom_range(2);
      access(p, $urandom_range(1), a, {$urandom, $urandom}, 8'($urandom_range(255)), lat);
      if (!unc) begin
        access($urandom_range(2), 1'b0, a, '0, '0, lat);
        checks++; hits_checked++;
        if (lat != 3) begin failures++; $display("FAIL: hit latency %0d", lat); end
      end
    end
    // write back everything
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    while (!flush_ack) @(negedge clk);
    foreach (refm[w]) begin
      checks++;
      if (rd(w << 3) !== refm[w]) begin failures++; $display("FAIL: after flush %h = %h exp %h", w << 3, rd(w << 3), refm[w]); end
    end
    $display("hit latencies checked: %0d", hits_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20_000_000; $display("FAIL: watchdog state=%0d req=%b cyc=%0d", dut.state_q, req, cyc); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
