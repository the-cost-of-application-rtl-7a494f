// Frontend: PC generation and instruction fetch, speculative and decoupled
// from the back-end by the instruction queue.
//
// PC select chooses, highest priority first: the trap vector (exception,
// interrupt or debug entry, from the commit stage), the return address of
// mret/sret/dret, the restart PC after a pipeline flush (CSR write, fence),
// the corrected target of a mis-predicted branch from the branch unit, the
// target predicted by the pre-decoder, and finally the next sequential 32-bit
// fetch word. Fetches are always 32-bit aligned; a target at a half-word
// offset fetches the aligned word with its lower half marked invalid.
//
// Pipeline: cycle 0 the ITLB translates and the I$ arrays are read; cycle 1
// the I$ compares tags and delivers the word, which is registered (s2);
// cycle 2 the registered word is pre-decoded (instr_scan), predicted
// (BHT, BTB, RAS) and pushed into the instruction queue. A taken prediction
// therefore kills the one request in flight: one bubble per taken branch.
// Prediction: conditional branches use the BHT counter when its entry is
// valid and otherwise the static rule (backward taken, forward not taken);
// jal is always taken; returns pop the RAS; other jalr use the BTB; calls
// push the RAS. Only instructions wholly inside one fetch word are predicted;
// a 32-bit instruction straddling two words is fetched as not taken and,
// if it jumps, corrected by the branch unit. The BHT and BTB have one lookup
// port, used by the first control-flow instruction of the word.
// Back-end redirects flush the queue, the s2 register and the request in
// flight.
module frontend import ariane_pkg::*; #(
  parameter logic [63:0] BOOT_ADDR = 64'h8000_0000
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_icache_i,
  input  logic            flush_bp_i,
  // redirects from the back-end
  input  bp_resolve_t     resolved_branch_i,
  input  logic            set_pc_commit_i,
  input  logic [63:0]     pc_commit_i,
  input  logic            eret_i,
  input  logic [63:0]     epc_i,
  input  logic            ex_valid_i,
  input  logic [63:0]     trap_vector_base_i,
  // address translation (ITLB in the MMU)
  output logic            fetch_req_o,
  output logic [63:0]     fetch_vaddr_o,
  input  logic            fetch_valid_i,
  input  logic [PLEN-1:0] fetch_paddr_i,
  input  exception_t      fetch_ex_i,
  // memory
  output axi_req_t        axi_req_o,
  input  axi_rsp_t        axi_rsp_i,
  output logic            icache_miss_o,
  // to decode
  output fetch_entry_t    fetch_entry_o,
  output logic            fetch_valid_o,
  input  logic            fetch_ack_i
);
  logic [63:0] npc_q, npc_d;
  logic        backend_redirect, predict_redirect;
  logic [63:0] predict_target;

  // ---------------- I$ request ----------------
  logic ic_ready, ic_valid, ic_req;
  logic [31:0] ic_data;
  logic [63:0] ic_vaddr;
  exception_t  ic_ex;
  logic [1:0]  inflight_hw_q;
  logic        s2_accept;

  assign backend_redirect = ex_valid_i || eret_i || set_pc_commit_i ||
                            (resolved_branch_i.valid && resolved_branch_i.is_mispredict);
  assign fetch_vaddr_o = {npc_q[63:2], 2'b00};
  assign fetch_req_o   = ic_ready && !backend_redirect && !predict_redirect;
  assign ic_req        = fetch_req_o && fetch_valid_i;

  icache i_icache (
    .clk_i, .rst_ni, .flush_i(flush_icache_i),
    .kill_i(backend_redirect || predict_redirect),
    .req_i(ic_req), .vaddr_i(fetch_vaddr_o), .paddr_i(fetch_paddr_i), .ex_i(fetch_ex_i),
    .ready_o(ic_ready), .valid_o(ic_valid), .data_o(ic_data), .vaddr_o(ic_vaddr),
    .ex_o(ic_ex), .out_ready_i(s2_accept), .miss_o(icache_miss_o),
    .axi_req_o, .axi_rsp_i);

  // ---------------- s2: registered cache output ----------------
  logic        s2_valid_q, pending_q, pending_d;
  logic [31:0] s2_data_q;
  logic [63:0] s2_vaddr_q;
  logic [1:0]  s2_hw_q;
  exception_t  s2_ex_q;
  logic        q_ready, push;

  assign push      = s2_valid_q && q_ready && !backend_redirect;
  assign s2_accept = !s2_valid_q || push;

  // ---------------- pre-decode ----------------
  logic        start0, start1, is32_0;
  logic        rvc0, br0, jal0, jalr0, call0, ret0;
  logic        rvc1, br1, jal1, jalr1, call1, ret1;
  logic [63:0] imm0, imm1, pc0, pc1;

  instr_scan i_scan0 (.instr_i(s2_data_q), .is_rvc_o(rvc0), .is_branch_o(br0),
    .is_jal_o(jal0), .is_jalr_o(jalr0), .is_call_o(call0), .is_return_o(ret0), .imm_o(imm0));
  instr_scan i_scan1 (.instr_i({16'h0, s2_data_q[31:16]}), .is_rvc_o(rvc1), .is_branch_o(br1),
    .is_jal_o(jal1), .is_jalr_o(jalr1), .is_call_o(call1), .is_return_o(ret1), .imm_o(imm1));

  assign pc0    = s2_vaddr_q;
  assign pc1    = s2_vaddr_q + 64'd2;
  assign start0 = s2_hw_q[0] && !pending_q;
  assign is32_0 = start0 && !rvc0;
  assign start1 = s2_hw_q[1] && !is32_0;

  // predictor lookups
  logic        bht_valid, bht_taken, btb_valid, ras_valid;
  logic [63:0] btb_target, ras_data, lookup_pc;
  logic        ras_push, ras_pop;
  logic [63:0] ras_push_data;
  bht_update_t bht_update;
  btb_update_t btb_update;

  assign lookup_pc = (start0 && (br0 || jalr0)) ? pc0 : pc1;

  assign bht_update.valid = resolved_branch_i.valid && resolved_branch_i.cf == Branch;
  assign bht_update.pc    = resolved_branch_i.pc;
  assign bht_update.taken = resolved_branch_i.is_taken;
  assign btb_update.valid = resolved_branch_i.valid && resolved_branch_i.cf == JumpR;
  assign btb_update.pc    = resolved_branch_i.pc;
  assign btb_update.target_address = resolved_branch_i.target_address;

  bht i_bht (.clk_i, .rst_ni, .flush_i(flush_bp_i), .vpc_i(lookup_pc), .bht_update_i(bht_update),
             .valid_o(bht_valid), .taken_o(bht_taken));
  btb i_btb (.clk_i, .rst_ni, .flush_i(flush_bp_i), .vpc_i(lookup_pc), .btb_update_i(btb_update),
             .valid_o(btb_valid), .target_o(btb_target));
  ras i_ras (.clk_i, .rst_ni, .flush_i(flush_bp_i), .push_i(ras_push), .pop_i(ras_pop),
             .data_i(ras_push_data), .valid_o(ras_valid), .data_o(ras_data));

  // prediction for the instruction starting at half-word k
  fetch_entry_t entry;
  always_comb begin
    logic        first_cf_used;
    logic        tk;
    logic [63:0] tgt;
    cf_t         cf;
    predict_redirect = 1'b0;
    predict_target   = '0;
    ras_push = 1'b0; ras_pop = 1'b0; ras_push_data = '0;
    pending_d = pending_q;
    entry = '0;
    entry.addr     = s2_vaddr_q;
    entry.data     = s2_data_q;
    entry.hw_valid = s2_hw_q;
    entry.ex       = s2_ex_q;
    first_cf_used  = 1'b0;
    tk = 1'b0; tgt = '0; cf = NoCF;
    if (s2_valid_q && !s2_ex_q.valid) begin
      pending_d = start1 && !rvc1;
      // candidate 0
      if (start0 && (br0 || jal0 || jalr0)) begin
        first_cf_used = br0 || jalr0;
        tk = 1'b0; tgt = pc0 + (rvc0 ? 64'd2 : 64'd4); cf = NoCF;
        if (br0) begin
          cf = Branch; tk = bht_valid ? bht_taken : imm0[63];
          if (tk) tgt = pc0 + imm0;
        end else if (jal0) begin
          cf = Jump; tk = 1'b1; tgt = pc0 + imm0;
        end else if (ret0) begin
          cf = Return; tk = ras_valid; if (ras_valid) tgt = ras_data;
          ras_pop = ras_valid;
        end else begin
          cf = JumpR; tk = btb_valid; if (btb_valid) tgt = btb_target;
        end
        if (call0) begin
          ras_push = 1'b1; ras_push_data = pc0 + (rvc0 ? 64'd2 : 64'd4);
        end
        entry.bp_hw = 1'b0;
        entry.bp    = '{cf: cf, taken: tk, predict_address: tgt};
        if (tk) begin
          predict_redirect = 1'b1; predict_target = tgt;
          entry.hw_valid[1] = is32_0;  // drop the half-word behind a taken C instruction
          pending_d = 1'b0;
        end
      end
      // candidate 1 (compressed instruction in the upper half)
      if (!predict_redirect && start1 && rvc1 && (br1 || jal1 || jalr1)) begin
        tk = 1'b0; tgt = pc1 + 64'd2; cf = NoCF;
        if (br1) begin
          cf = Branch; tk = first_cf_used ? imm1[63] : (bht_valid ? bht_taken : imm1[63]);
          if (tk) tgt = pc1 + imm1;
        end else if (jal1) begin
          cf = Jump; tk = 1'b1; tgt = pc1 + imm1;
        end else if (ret1) begin
          cf = Return; tk = ras_valid && !ras_push; if (tk) tgt = ras_data;
          ras_pop = tk;
        end else begin
          cf = JumpR; tk = btb_valid && !first_cf_used; if (tk) tgt = btb_target;
        end
        if (call1) begin
          ras_push = 1'b1; ras_push_data = pc1 + 64'd2;
        end
        entry.bp_hw = 1'b1;
        entry.bp    = '{cf: cf, taken: tk, predict_address: tgt};
        if (tk) begin
          predict_redirect = 1'b1; predict_target = tgt;
        end
      end
    end
    if (!push) begin
      predict_redirect = 1'b0;
      ras_push = 1'b0; ras_pop = 1'b0;
      pending_d = pending_q;
    end
  end

  instr_queue i_queue (
    .clk_i, .rst_ni, .flush_i(backend_redirect),
    .push_i(push), .data_i(entry), .ready_o(q_ready),
    .valid_o(fetch_valid_o), .data_o(fetch_entry_o), .pop_i(fetch_ack_i));

  // ---------------- PC select ----------------
  always_comb begin
    npc_d = npc_q;
    if (ic_req && ic_ready) npc_d = {npc_q[63:2], 2'b00} + 64'd4;
    if (predict_redirect)                       npc_d = predict_target;
    if (resolved_branch_i.valid && resolved_branch_i.is_mispredict)
                                                npc_d = resolved_branch_i.target_address;
    if (set_pc_commit_i)                        npc_d = pc_commit_i;
    if (eret_i)                                 npc_d = epc_i;
    if (ex_valid_i)                             npc_d = trap_vector_base_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      npc_q         <= BOOT_ADDR;
      inflight_hw_q <= 2'b11;
      s2_valid_q    <= 1'b0;
      s2_data_q     <= '0;
      s2_vaddr_q    <= '0;
      s2_hw_q       <= '0;
      s2_ex_q       <= '0;
      pending_q     <= 1'b0;
    end else begin
      npc_q <= npc_d;
      if (ic_req && ic_ready) inflight_hw_q <= npc_q[1] ? 2'b10 : 2'b11;
      if (backend_redirect || predict_redirect) begin
        s2_valid_q <= 1'b0;
        pending_q  <= 1'b0;
      end else begin
        if (push) pending_q <= pending_d;
        if (s2_accept) begin
          s2_valid_q <= ic_valid;
          s2_data_q  <= ic_data;
          s2_vaddr_q <= ic_vaddr;
          s2_hw_q    <= inflight_hw_q;
          s2_ex_q    <= ic_ex;
        end
      end
    end
  end
endmodule
