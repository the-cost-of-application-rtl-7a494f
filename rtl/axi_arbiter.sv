// Two-master AXI arbiter placing the instruction cache (master 0) and the
// data cache (master 1) on the core's single AXI port. Read and write
// channels are arbitrated independently; each keeps one transaction in
// flight. A read is owned from its AR handshake until the R beat with
// r_last, a write from its AW handshake until the B response. When both
// masters request in the same cycle the one that did not win last time goes
// first (round robin). The ID field is replaced by the master number so the
// responses can be checked; the masters see their own ID echoed back.
module axi_arbiter import ariane_pkg::*; (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  axi_req_t [1:0] m_req_i,
  output axi_rsp_t [1:0] m_rsp_o,
  output axi_req_t      s_req_o,
  input  axi_rsp_t      s_rsp_i
);
  logic rd_busy_q, rd_owner_q, rd_last_q, wr_busy_q, wr_owner_q, wr_last_q;
  logic rd_sel, wr_sel;

  // choose among requesters when idle
  always_comb begin
    rd_sel = rd_owner_q;
    if (!rd_busy_q) begin
      if (m_req_i[0].ar_valid && m_req_i[1].ar_valid) rd_sel = !rd_last_q;
      else rd_sel = m_req_i[1].ar_valid;
    end
    wr_sel = wr_owner_q;
    if (!wr_busy_q) begin
      if (m_req_i[0].aw_valid && m_req_i[1].aw_valid) wr_sel = !wr_last_q;
      else wr_sel = m_req_i[1].aw_valid;
    end
  end

  always_comb begin
    s_req_o = '0;
    m_rsp_o = '0;
    // read address / data
    s_req_o.ar_valid = !rd_busy_q && m_req_i[rd_sel].ar_valid;
    s_req_o.ar_addr  = m_req_i[rd_sel].ar_addr;
    s_req_o.ar_len   = m_req_i[rd_sel].ar_len;
    s_req_o.ar_id    = {3'b0, rd_sel};
    s_req_o.r_ready  = rd_busy_q && m_req_i[rd_owner_q].r_ready;
    m_rsp_o[rd_sel].ar_ready = !rd_busy_q && s_rsp_i.ar_ready;
    m_rsp_o[rd_owner_q].r_valid = rd_busy_q && s_rsp_i.r_valid;
    m_rsp_o[0].r_data = s_rsp_i.r_data; m_rsp_o[1].r_data = s_rsp_i.r_data;
    m_rsp_o[0].r_resp = s_rsp_i.r_resp; m_rsp_o[1].r_resp = s_rsp_i.r_resp;
    m_rsp_o[0].r_last = s_rsp_i.r_last; m_rsp_o[1].r_last = s_rsp_i.r_last;
    m_rsp_o[0].r_id   = m_req_i[0].ar_id; m_rsp_o[1].r_id = m_req_i[1].ar_id;
    // write address / data / response
    s_req_o.aw_valid = !wr_busy_q && m_req_i[wr_sel].aw_valid;
    s_req_o.aw_addr  = m_req_i[wr_sel].aw_addr;
    s_req_o.aw_len   = m_req_i[wr_sel].aw_len;
    s_req_o.aw_id    = {3'b0, wr_sel};
    s_req_o.w_valid  = wr_busy_q && m_req_i[wr_owner_q].w_valid;
    s_req_o.w_data   = m_req_i[wr_owner_q].w_data;
    s_req_o.w_strb   = m_req_i[wr_owner_q].w_strb;
    s_req_o.w_last   = m_req_i[wr_owner_q].w_last;
    s_req_o.b_ready  = wr_busy_q && m_req_i[wr_owner_q].b_ready;
    m_rsp_o[wr_sel].aw_ready = !wr_busy_q && s_rsp_i.aw_ready;
    m_rsp_o[wr_owner_q].w_ready = wr_busy_q && s_rsp_i.w_ready;
    m_rsp_o[wr_owner_q].b_valid = wr_busy_q && s_rsp_i.b_valid;
    m_rsp_o[0].b_resp = s_rsp_i.b_resp; m_rsp_o[1].b_resp = s_rsp_i.b_resp;
    m_rsp_o[0].b_id   = m_req_i[0].aw_id; m_rsp_o[1].b_id = m_req_i[1].aw_id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_busy_q <= 1'b0; rd_owner_q <= 1'b0; rd_last_q <= 1'b1;
      wr_busy_q <= 1'b0; wr_owner_q <= 1'b0; wr_last_q <= 1'b1;
    end else begin
      if (s_req_o.ar_valid && s_rsp_i.ar_ready) begin
        rd_busy_q <= 1'b1; rd_owner_q <= rd_sel; rd_last_q <= rd_sel;
      end else if (rd_busy_q && s_rsp_i.r_valid && s_req_o.r_ready && s_rsp_i.r_last) begin
        rd_busy_q <= 1'b0;
      end
      if (s_req_o.aw_valid && s_rsp_i.aw_ready) begin
        wr_busy_q <= 1'b1; wr_owner_q <= wr_sel; wr_last_q <= wr_sel;
      end else if (wr_busy_q && s_rsp_i.b_valid && s_req_o.b_ready) begin
        wr_busy_q <= 1'b0;
      end
    end
  end
endmodule
