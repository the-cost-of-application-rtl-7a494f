// Control and status registers and privilege state of the hart.
// Holds the machine and supervisor CSRs of the RISC-V privileged
// specification (mstatus/sstatus, misa, medeleg, mideleg, mie/sie, mip/sip,
// mtvec/stvec, mscratch/sscratch, mepc/sepc, mcause/scause, mtval/stval,
// satp, mcounteren/scounteren, ID registers), the debug CSRs dcsr, dpc and
// dscratch0, and the performance counters. All accesses happen at commit,
// never speculatively:
//  - csr_valid_i performs a CSR instruction with the buffered operand and
//    returns the old value; an access above the current privilege level, a
//    write to a read-only CSR, satp with TVM in S mode, a debug CSR outside
//    debug mode or an unknown address raises an illegal instruction.
//  - ex_i takes a trap for the instruction at pc_i: exceptions and
//    interrupts delegated by medeleg/mideleg go to S mode when the hart is
//    not in M mode, all others to M mode. The trap vector (direct, or
//    vectored for interrupts) is returned combinationally on
//    trap_vector_base_o in the same cycle so the frontend can be redirected.
//  - a debug request (or ebreak with dcsr.ebreakX set) enters debug mode: dpc
//    and dcsr are written and the hart jumps to the halt address of the
//    debug module's memory; exceptions in debug mode go to its exception
//    address. mret, sret and dret return through epc_o.
// Interrupts: the four platform lines (machine external, supervisor external,
// machine timer, machine software) and the software-writable supervisor bits
// are combined with mie/mideleg and the global enables into irq_o, the
// interrupt the commit stage should take on the next retiring instruction,
// in the priority order of the specification.
module csr_regfile import ariane_pkg::*; #(
  parameter logic [63:0] HART_ID    = 64'd0,
  parameter logic [63:0] DM_BASE    = 64'h0000_0000,
  parameter logic [63:0] HALT_ADDR  = 64'h800,
  parameter logic [63:0] EXCEPT_ADDR = 64'h808
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // CSR instruction at commit
  input  logic        csr_valid_i,
  input  fu_op_t      csr_op_i,
  input  logic [11:0] csr_addr_i,
  input  logic [63:0] csr_wdata_i,
  output logic [63:0] csr_rdata_o,
  output logic        csr_illegal_o,
  // traps and returns
  input  exception_t  ex_i,
  input  logic [63:0] pc_i,
  input  logic        debug_enter_i,
  input  logic        mret_i,
  input  logic        sret_i,
  input  logic        dret_i,
  output logic [63:0] trap_vector_base_o,
  output logic [63:0] epc_o,
  // interrupts and debug
  input  logic [1:0]  irq_i,       // [0] machine external, [1] supervisor external
  input  logic        ipi_i,       // machine software interrupt
  input  logic        time_irq_i,  // machine timer interrupt
  input  logic        debug_req_i,
  output exception_t  irq_o,
  output logic        wfi_wakeup_o,
  output logic        debug_mode_o,
  output logic        ebreak_to_debug_o,
  // state for the rest of the core
  output priv_lvl_t   priv_lvl_o,
  output priv_lvl_t   ld_st_priv_lvl_o,
  output logic        satp_sv39_o,
  output logic [43:0] satp_ppn_o,
  output logic        sum_o,
  output logic        mxr_o,
  output logic        tvm_o,
  output logic        tw_o,
  output logic        tsr_o,
  // performance events
  input  logic [1:0]  instret_i,
  input  logic [NR_PERF_COUNTERS-1:0] perf_events_i
);
  priv_lvl_t   priv_q;
  logic        debug_q;
  logic        mie_q, sie_q, mpie_q, spie_q, spp_q, mprv_q, sum_q, mxr_q, tvm_q, tw_q, tsr_q;
  priv_lvl_t   mpp_q;
  logic [63:0] medeleg_q, mideleg_q, mie_r_q, mip_sw_q, mtvec_q, stvec_q, mscratch_q, sscratch_q;
  logic [63:0] mepc_q, sepc_q, mcause_q, scause_q, mtval_q, stval_q, dpc_q, dscratch_q;
  logic [31:0] mcounteren_q, scounteren_q;
  logic [3:0]  satp_mode_q;
  logic [43:0] satp_ppn_q;
  logic        ebreakm_q, ebreaks_q, ebreaku_q;
  logic [2:0]  dcause_q;
  priv_lvl_t   dprv_q;

  logic [63:0] mstatus, mip, mie_v, misa, dcsr;
  logic [63:0] rdata, wdata;
  logic        read_ok, writes, we;
  logic [63:0] perf_rdata;
  logic        perf_hit;

  localparam logic [63:0] SSTATUS_MASK = 64'h8000_0003_000d_e122;
  localparam logic [63:0] MIP_S_MASK   = 64'h222;
  localparam logic [63:0] MEDELEG_MASK = 64'hb3ff;  // all causes 0..15 except 11, 10, 14
  localparam logic [63:0] MIDELEG_MASK = 64'h222;
  localparam logic [63:0] MIE_MASK     = 64'haaa;

  assign mstatus = {1'b0, 27'b0, 2'b10, 2'b10, 9'b0, tsr_q, tw_q, tvm_q, mxr_q, sum_q, mprv_q,
                    4'b0, mpp_q, 2'b0, spp_q, mpie_q, 1'b0, spie_q, 1'b0, mie_q, 1'b0, sie_q, 1'b0};
  assign mip     = mip_sw_q | {52'b0, irq_i[0], 1'b0, irq_i[1], 1'b0, time_irq_i, 3'b0, ipi_i, 3'b0};
  assign mie_v   = mie_r_q;
  assign misa    = {2'b10, 36'b0, 26'b00000101000001000100000100};
  assign dcsr    = {32'b0, 4'd4, 12'b0, ebreakm_q, 1'b0, ebreaks_q, ebreaku_q, 3'b0, dcause_q, 4'b0, dprv_q};

  assign priv_lvl_o       = priv_q;
  assign ld_st_priv_lvl_o = mprv_q ? mpp_q : priv_q;
  assign satp_sv39_o      = satp_mode_q == 4'd8;
  assign satp_ppn_o       = satp_ppn_q;
  assign sum_o = sum_q; assign mxr_o = mxr_q; assign tvm_o = tvm_q; assign tw_o = tw_q; assign tsr_o = tsr_q;
  assign debug_mode_o = debug_q;

  perf_counters #(.NR_COUNTERS(NR_PERF_COUNTERS)) i_perf (.clk_i, .rst_ni, .instret_i,
    .events_i(perf_events_i), .addr_i(csr_addr_i), .we_i(we), .wdata_i(wdata),
    .rdata_o(perf_rdata), .hit_o(perf_hit));

  // ---------------- read ----------------
  always_comb begin
    rdata = '0; read_ok = 1'b1;
    unique case (csr_addr_i)
      CSR_SSTATUS:    rdata = mstatus & SSTATUS_MASK;
      CSR_SIE:        rdata = mie_v & mideleg_q;
      CSR_SIP:        rdata = mip & mideleg_q;
      CSR_STVEC:      rdata = stvec_q;
      CSR_SCOUNTEREN: rdata = {32'b0, scounteren_q};
      CSR_SSCRATCH:   rdata = sscratch_q;
      CSR_SEPC:       rdata = sepc_q;
      CSR_SCAUSE:     rdata = scause_q;
      CSR_STVAL:      rdata = stval_q;
      CSR_SATP: begin rdata = {satp_mode_q, 16'b0, satp_ppn_q}; read_ok = !(priv_q == PRIV_S && tvm_q); end
      CSR_MSTATUS:    rdata = mstatus;
      CSR_MISA:       rdata = misa;
      CSR_MEDELEG:    rdata = medeleg_q;
      CSR_MIDELEG:    rdata = mideleg_q;
      CSR_MIE:        rdata = mie_v;
      CSR_MIP:        rdata = mip;
      CSR_MTVEC:      rdata = mtvec_q;
      CSR_MCOUNTEREN: rdata = {32'b0, mcounteren_q};
      CSR_MSCRATCH:   rdata = mscratch_q;
      CSR_MEPC:       rdata = mepc_q;
      CSR_MCAUSE:     rdata = mcause_q;
      CSR_MTVAL:      rdata = mtval_q;
      CSR_DCSR:     begin rdata = dcsr;       read_ok = debug_q; end
      CSR_DPC:      begin rdata = dpc_q;      read_ok = debug_q; end
      CSR_DSCRATCH0:begin rdata = dscratch_q; read_ok = debug_q; end
      CSR_MVENDORID, CSR_MARCHID, CSR_MIMPID: rdata = '0;
      CSR_MHARTID:    rdata = HART_ID;
      default: begin
        rdata = perf_rdata; read_ok = perf_hit;
        // user shadows need the counter-enable bits below M mode
        if (perf_hit && csr_addr_i[11:8] == 4'hc) begin
          if (priv_q != PRIV_M && !mcounteren_q[csr_addr_i[4:0]]) read_ok = 1'b0;
          if (priv_q == PRIV_U && !scounteren_q[csr_addr_i[4:0]]) read_ok = 1'b0;
        end
      end
    endcase
  end

  assign writes = csr_op_i inside {CSR_WRITE, CSR_SET, CSR_CLEAR};
  always_comb begin
    unique case (csr_op_i)
      CSR_WRITE: wdata = csr_wdata_i;
      CSR_SET:   wdata = rdata | csr_wdata_i;
      CSR_CLEAR: wdata = rdata & ~csr_wdata_i;
      default:   wdata = rdata;
    endcase
  end
  assign csr_illegal_o = csr_valid_i && (!read_ok || csr_addr_i[9:8] > priv_q ||
                         (writes && csr_addr_i[11:10] == 2'b11));
  assign we          = csr_valid_i && writes && !csr_illegal_o;
  assign csr_rdata_o = rdata;

  // ---------------- interrupts ----------------
  always_comb begin
    logic [63:0] pend, m_en, s_en;
    pend = mip & mie_v;
    m_en = (priv_q != PRIV_M || mie_q) ? (pend & ~mideleg_q) : 64'd0;
    s_en = (priv_q == PRIV_U || (priv_q == PRIV_S && sie_q)) ? (pend & mideleg_q) : 64'd0;
    irq_o = '0;
    if (!debug_q) begin
      if      (m_en[11]) irq_o = '{cause: IRQ_M_EXT,   tval: '0, valid: 1'b1};
      else if (m_en[3])  irq_o = '{cause: IRQ_M_SOFT,  tval: '0, valid: 1'b1};
      else if (m_en[7])  irq_o = '{cause: IRQ_M_TIMER, tval: '0, valid: 1'b1};
      else if (s_en[9])  irq_o = '{cause: IRQ_S_EXT,   tval: '0, valid: 1'b1};
      else if (s_en[1])  irq_o = '{cause: IRQ_S_SOFT,  tval: '0, valid: 1'b1};
      else if (s_en[5])  irq_o = '{cause: IRQ_S_TIMER, tval: '0, valid: 1'b1};
    end
    wfi_wakeup_o = pend != 64'd0 || debug_req_i;
  end

  // ---------------- traps ----------------
  logic to_s, is_irq;
  assign is_irq = ex_i.cause[63];
  assign to_s = priv_q != PRIV_M &&
                (is_irq ? mideleg_q[ex_i.cause[5:0]] : medeleg_q[ex_i.cause[5:0]]);
  assign ebreak_to_debug_o = !debug_q &&
         ((priv_q == PRIV_M && ebreakm_q) || (priv_q == PRIV_S && ebreaks_q) ||
          (priv_q == PRIV_U && ebreaku_q));

  always_comb begin
    logic [63:0] tvec;
    tvec = to_s ? stvec_q : mtvec_q;
    trap_vector_base_o = {tvec[63:2], 2'b00};
    if (is_irq && tvec[0]) trap_vector_base_o = {tvec[63:2], 2'b00} + {ex_i.cause[61:0], 2'b00};
    if (debug_enter_i) trap_vector_base_o = DM_BASE + HALT_ADDR;
    else if (debug_q)  trap_vector_base_o = DM_BASE + (ex_i.cause == BREAKPOINT ? HALT_ADDR : EXCEPT_ADDR);
    epc_o = dret_i ? dpc_q : (sret_i ? sepc_q : mepc_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      priv_q <= PRIV_M; debug_q <= 1'b0;
      mie_q <= 1'b0; sie_q <= 1'b0; mpie_q <= 1'b0; spie_q <= 1'b0; spp_q <= 1'b0; mpp_q <= PRIV_U;
      mprv_q <= 1'b0; sum_q <= 1'b0; mxr_q <= 1'b0; tvm_q <= 1'b0; tw_q <= 1'b0; tsr_q <= 1'b0;
      medeleg_q <= '0; mideleg_q <= '0; mie_r_q <= '0; mip_sw_q <= '0; mtvec_q <= '0; stvec_q <= '0;
      mscratch_q <= '0; sscratch_q <= '0; mepc_q <= '0; sepc_q <= '0; mcause_q <= '0; scause_q <= '0;
      mtval_q <= '0; stval_q <= '0; dpc_q <= '0; dscratch_q <= '0; mcounteren_q <= '0; scounteren_q <= '0;
      satp_mode_q <= '0; satp_ppn_q <= '0; ebreakm_q <= 1'b0; ebreaks_q <= 1'b0; ebreaku_q <= 1'b0;
      dcause_q <= '0; dprv_q <= PRIV_M;
    end else begin
      // CSR writes
      if (we) begin
        unique case (csr_addr_i)
          CSR_SSTATUS: begin
            sie_q <= wdata[1]; spie_q <= wdata[5]; spp_q <= wdata[8]; sum_q <= wdata[18]; mxr_q <= wdata[19];
          end
          CSR_SIE:        mie_r_q <= (mie_r_q & ~mideleg_q) | (wdata & mideleg_q & MIE_MASK);
          CSR_SIP:        mip_sw_q[1] <= mideleg_q[1] ? wdata[1] : mip_sw_q[1];
          CSR_STVEC:      stvec_q <= {wdata[63:2], 1'b0, wdata[0]};
          CSR_SCOUNTEREN: scounteren_q <= wdata[31:0];
          CSR_SSCRATCH:   sscratch_q <= wdata;
          CSR_SEPC:       sepc_q <= {wdata[63:1], 1'b0};
          CSR_SCAUSE:     scause_q <= wdata;
          CSR_STVAL:      stval_q <= wdata;
          CSR_SATP: if (wdata[63:60] == 4'd0 || wdata[63:60] == 4'd8) begin
                      satp_mode_q <= wdata[63:60]; satp_ppn_q <= wdata[43:0];
                    end
          CSR_MSTATUS: begin
            sie_q <= wdata[1]; mie_q <= wdata[3]; spie_q <= wdata[5]; mpie_q <= wdata[7];
            spp_q <= wdata[8]; mpp_q <= (wdata[12:11] == 2'b10) ? PRIV_U : priv_lvl_t'(wdata[12:11]);
            mprv_q <= wdata[17]; sum_q <= wdata[18]; mxr_q <= wdata[19];
            tvm_q <= wdata[20]; tw_q <= wdata[21]; tsr_q <= wdata[22];
          end
          CSR_MEDELEG:    medeleg_q <= wdata & MEDELEG_MASK;
          CSR_MIDELEG:    mideleg_q <= wdata & MIDELEG_MASK;
          CSR_MIE:        mie_r_q <= wdata & MIE_MASK;
          CSR_MIP:        mip_sw_q <= wdata & MIP_S_MASK;
          CSR_MTVEC:      mtvec_q <= {wdata[63:2], 1'b0, wdata[0]};
          CSR_MCOUNTEREN: mcounteren_q <= wdata[31:0];
          CSR_MSCRATCH:   mscratch_q <= wdata;
          CSR_MEPC:       mepc_q <= {wdata[63:1], 1'b0};
          CSR_MCAUSE:     mcause_q <= wdata;
          CSR_MTVAL:      mtval_q <= wdata;
          CSR_DCSR: begin
            ebreakm_q <= wdata[15]; ebreaks_q <= wdata[13]; ebreaku_q <= wdata[12];
            dprv_q <= (wdata[1:0] == 2'b10) ? PRIV_U : priv_lvl_t'(wdata[1:0]);
          end
          CSR_DPC:        dpc_q <= {wdata[63:1], 1'b0};
          CSR_DSCRATCH0:  dscratch_q <= wdata;
          default: ;
        endcase
      end
      // trap entry
      if (debug_enter_i) begin
        debug_q <= 1'b1; dpc_q <= pc_i; dprv_q <= priv_q; priv_q <= PRIV_M;
        dcause_q <= (ex_i.valid && ex_i.cause == BREAKPOINT) ? 3'd1 : 3'd3;
      end else if (ex_i.valid && !debug_q) begin
        if (to_s) begin
          sepc_q <= pc_i; scause_q <= ex_i.cause; stval_q <= ex_i.tval;
          spp_q <= priv_q[0]; spie_q <= sie_q; sie_q <= 1'b0; priv_q <= PRIV_S;
        end else begin
          mepc_q <= pc_i; mcause_q <= ex_i.cause; mtval_q <= ex_i.tval;
          mpp_q <= priv_q; mpie_q <= mie_q; mie_q <= 1'b0; priv_q <= PRIV_M;
        end
      end
      // returns
      if (mret_i) begin
        priv_q <= mpp_q; mie_q <= mpie_q; mpie_q <= 1'b1; mpp_q <= PRIV_U;
        if (mpp_q != PRIV_M) mprv_q <= 1'b0;
      end
      if (sret_i) begin
        priv_q <= spp_q ? PRIV_S : PRIV_U; sie_q <= spie_q; spie_q <= 1'b1; spp_q <= 1'b0;
        mprv_q <= 1'b0;
      end
      if (dret_i) begin
        priv_q <= dprv_q; debug_q <= 1'b0;
      end
    end
  end
endmodule
