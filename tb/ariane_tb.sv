// End-to-end testbench of the core. The core runs at its default
// parameters against a behavioural AXI memory:
//   0x0000_0000 - 0x0000_0FFF  small memory holding the debug halt routine
//   0x1000_0000 - 0x1000_002F  test device: +0 end-of-test, +8 clear timer
//                              interrupt, +0x10 arm timer interrupt, +0x18
//                              raise debug request, +0x20 scratch register
//   0x8000_0000 - 0x8001_FFFF  128 KiB main memory (program, data, page table)
// The program is assembled here by encoding functions and written into the
// memory before reset is released. It exercises, in order: a counted loop
// (branch prediction), multiply/divide, calls and returns (RAS), indirect
// calls (BTB), compressed code with a 32-bit instruction straddling two
// fetch words, loads after stores to the same word, byte/half loads,
// dirty evictions in one D$ set, uncached device accesses, four kinds of
// synchronous exception, self-modifying code with fence.i, a timer
// interrupt woken from wfi, a debug halt, and a switch to S mode with SV39
// translation, including a page fault and an environment call back to M
// mode. It finally reads performance counters and signals the end.
// Checks: the result words the program stores, the trap-cause log written
// by the trap handler, the counters, and that every pipeline mechanism
// listed in mech_name occurred at least once.
module ariane_tb;
  import ariane_pkg::*;

  localparam logic [63:0] MAIN_BASE = 64'h8000_0000;
  localparam int unsigned MAIN_WORDS = 16384;
  localparam logic [63:0] SIG  = 64'h8000_6000, LOGA = 64'h8000_6800, DATA = 64'h8000_8000;
  localparam logic [63:0] TRAP = 64'h8000_1000, FUNC = 64'h8000_1800, FUNC2 = 64'h8000_1900;
  localparam logic [63:0] FUNC3 = 64'h8000_1C00, SCODE = 64'h8000_2000, AFTER_VM = 64'h8000_0C00;
  localparam logic [63:0] PTROOT = 64'h8001_C000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] irq = '0;
  logic ipi = 1'b0, time_irq = 1'b0, debug_req = 1'b0;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;

  ariane dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .ipi_i(ipi), .time_irq_i(time_irq),
              .debug_req_i(debug_req), .axi_req_o(axi_req), .axi_rsp_i(axi_rsp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------------
  // memory
  // ------------------------------------------------------------------
  logic [63:0] mem [MAIN_WORDS];
  logic [63:0] low [512];
  logic [63:0] scratch;
  bit          done;
  int          timer_arm, debug_visits;

  function automatic logic [63:0] rd64(input logic [63:0] a);
    if (a >= MAIN_BASE && a < MAIN_BASE + 64'(MAIN_WORDS * 8)) return mem[(a - MAIN_BASE) >> 3];
    if (a < 64'h1000) return low[a[11:3]];
    if (a == 64'h1000_0020) return scratch;
    return '0;
  endfunction

  task automatic wr64(input logic [63:0] a, input logic [63:0] d, input logic [7:0] strb);
    logic [63:0] m, old;
    for (int i = 0; i < 8; i++) m[i*8 +: 8] = {8{strb[i]}};
    if (a >= MAIN_BASE && a < MAIN_BASE + 64'(MAIN_WORDS * 8)) begin
      old = mem[(a - MAIN_BASE) >> 3]; mem[(a - MAIN_BASE) >> 3] = (old & ~m) | (d & m);
    end else if (a < 64'h1000) begin
      old = low[a[11:3]]; low[a[11:3]] = (old & ~m) | (d & m);
      if (a[11:3] == 9'd2) debug_visits++;
    end else if (a[63:8] == 56'h10_0000) begin
      unique case (a[7:0])
        8'h00: done = 1'b1;
        8'h08: time_irq <= 1'b0;
        8'h10: timer_arm = 40;
        8'h18: debug_req <= 1'b1;
        8'h20: scratch = (scratch & ~m) | (d & m);
        default: ;
      endcase
    end
  endtask

  // read channel: one burst at a time, 2 cycles before the first beat
  logic        r_busy;
  logic [63:0] r_addr;
  logic [7:0]  r_left;
  logic [3:0]  r_id;
  int          r_wait;
  // write channel
  logic        w_busy, b_pend;
  logic [63:0] w_addr;
  logic [3:0]  w_id;

  always_comb begin
    axi_rsp = '0;
    axi_rsp.ar_ready = !r_busy;
    axi_rsp.r_valid  = r_busy && r_wait == 0;
    axi_rsp.r_data   = rd64(r_addr);
    axi_rsp.r_last   = r_left == 8'd0;
    axi_rsp.r_id     = r_id;
    axi_rsp.aw_ready = !w_busy && !b_pend;
    axi_rsp.w_ready  = w_busy;
    axi_rsp.b_valid  = b_pend;
    axi_rsp.b_id     = w_id;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      r_busy <= 1'b0; w_busy <= 1'b0; b_pend <= 1'b0; r_wait <= 0;
      r_addr <= '0; r_left <= '0; r_id <= '0; w_addr <= '0; w_id <= '0;
    end else begin
      if (axi_req.ar_valid && axi_rsp.ar_ready) begin
        r_busy <= 1'b1; r_addr <= axi_req.ar_addr; r_left <= axi_req.ar_len; r_id <= axi_req.ar_id;
        r_wait <= 2;
      end else if (r_busy && r_wait > 0) begin
        r_wait <= r_wait - 1;
      end else if (axi_rsp.r_valid && axi_req.r_ready) begin
        if (r_left == 8'd0) r_busy <= 1'b0;
        r_left <= r_left - 8'd1; r_addr <= r_addr + 64'd8;
      end
      if (axi_req.aw_valid && axi_rsp.aw_ready) begin
        w_busy <= 1'b1; w_addr <= axi_req.aw_addr; w_id <= axi_req.aw_id;
      end
      if (w_busy && axi_req.w_valid) begin
        wr64(w_addr, axi_req.w_data, axi_req.w_strb);
        w_addr <= w_addr + 64'd8;
        if (axi_req.w_last) begin w_busy <= 1'b0; b_pend <= 1'b1; end
      end
      if (b_pend && axi_req.b_ready) b_pend <= 1'b0;
      // test device: timer and debug request
      if (timer_arm > 0) begin
        timer_arm = timer_arm - 1;
        if (timer_arm == 0) time_irq <= 1'b1;
      end
      if (dut.debug_mode) debug_req <= 1'b0;
    end
  end

  // ------------------------------------------------------------------
  // a small assembler
  // ------------------------------------------------------------------
  localparam int RA = 1, T0 = 5, T1 = 6, T2 = 7, S0 = 8, S1 = 9, A0 = 10, A1 = 11, A2 = 12,
                 A3 = 13, A4 = 14, A5 = 15, A6 = 16, T3 = 28, T4 = 29, T5 = 30, T6 = 31;
  logic [63:0] pc;

  task automatic put16(input logic [63:0] a, input logic [15:0] h);
    if (a < 64'h1000) low[a[11:3]][a[2:1]*16 +: 16] = h;
    else mem[(a - MAIN_BASE) >> 3][a[2:1]*16 +: 16] = h;
  endtask
  task automatic e32(input logic [31:0] w);
    put16(pc, w[15:0]); put16(pc + 2, w[31:16]); pc = pc + 4;
  endtask
  task automatic e16(input logic [15:0] h);
    put16(pc, h); pc = pc + 2;
  endtask

  function automatic logic [31:0] ri(input int imm, input int rs1, input int f3, input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), op};
  endfunction
  function automatic logic [31:0] rr(input int f7, input int rs2, input int rs1, input int f3, input int rd, input logic [6:0] op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), op};
  endfunction
  function automatic logic [31:0] rs(input int imm, input int rs2, input int rs1, input int f3);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'h23};
  endfunction
  task automatic addi(input int rd, input int rs1, input int imm); e32(ri(imm, rs1, 0, rd, 7'h13)); endtask
  task automatic slli(input int rd, input int rs1, input int sh); e32(ri(sh, rs1, 1, rd, 7'h13)); endtask
  task automatic srli(input int rd, input int rs1, input int sh); e32(ri(sh, rs1, 5, rd, 7'h13)); endtask
  task automatic add(input int rd, input int rs1, input int rs2); e32(rr(0, rs2, rs1, 0, rd, 7'h33)); endtask
  task automatic orr(input int rd, input int rs1, input int rs2); e32(rr(0, rs2, rs1, 6, rd, 7'h33)); endtask
  task automatic mdop(input int f3, input int rd, input int rs1, input int rs2); e32(rr(1, rs2, rs1, f3, rd, 7'h33)); endtask
  task automatic ld(input int f3, input int rd, input int rs1, input int imm); e32(ri(imm, rs1, f3, rd, 7'h03)); endtask
  task automatic st(input int f3, input int rs2, input int rs1, input int imm); e32(rs(imm, rs2, rs1, f3)); endtask
  task automatic lui(input int rd, input int imm20); e32({20'(imm20), 5'(rd), 7'h37}); endtask
  task automatic csr(input int f3, input int rd, input int rs1, input int a); e32(ri(a, rs1, f3, rd, 7'h73)); endtask
  task automatic jalr(input int rd, input int rs1, input int imm); e32(ri(imm, rs1, 0, rd, 7'h67)); endtask
  task automatic ret(); jalr(0, RA, 0); endtask
  task automatic jal(input int rd, input logic [63:0] target);
    logic [20:0] o; o = 21'(target - pc);
    e32({o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'h6f});
  endtask
  task automatic br(input int f3, input int rs1, input int rs2, input logic [63:0] target);
    logic [12:0] o; o = 13'(target - pc);
    e32({o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'h63});
  endtask
  task automatic la(input int rd, input logic [63:0] target);
    logic [63:0] off, hi;
    off = target - pc;
    hi  = (off + 64'h800) >> 12;
    e32({hi[19:0], 5'(rd), 7'h17});
    addi(rd, rd, int'(off - (hi << 12)));
  endtask

  localparam int CSRRW = 1, CSRRS = 2, CSRRC = 3, CSRRSI = 6, CSRRCI = 7;
  localparam int BEQ = 0, BNE = 1, BLT = 4;
  localparam int LB = 0, LH = 1, LW = 2, LD = 3, LBU = 4, SB = 0, SH = 1, SW = 2, SD = 3;

  task automatic build_program();
    logic [63:0] loop_pc;
    for (int i = 0; i < MAIN_WORDS; i++) mem[i] = '0;
    for (int i = 0; i < 512; i++) low[i] = '0;
    // debug halt routine: note the visit, return
    pc = 64'h800;
    st(SW, 0, 0, 16);
    e32(32'h7b20_0073);                       // dret
    // ---- trap handler (M mode) ----
    pc = TRAP;
    csr(CSRRS, T6, 0, 12'h342);               // mcause
    st(SD, T6, S1, 0);
    addi(S1, S1, 8);
    br(BLT, T6, 0, TRAP + 64'h100);
    addi(T5, 0, 9);
    br(BEQ, T6, T5, TRAP + 64'h200);
    csr(CSRRS, T5, 0, 12'h341);               // mepc += 4
    addi(T5, T5, 4);
    csr(CSRRW, 0, T5, 12'h341);
    e32(32'h3020_0073);                       // mret
    pc = TRAP + 64'h100;                      // interrupt: clear the timer
    lui(T5, 32'h10000);
    st(SD, 0, T5, 8);
    e32(32'h3020_0073);
    pc = TRAP + 64'h200;                      // ecall from S: back to M mode
    la(T5, AFTER_VM);
    csr(CSRRW, 0, T5, 12'h341);
    lui(T5, 2); addi(T5, T5, -2048);          // MPP = M
    csr(CSRRS, 0, T5, 12'h300);
    e32(32'h3020_0073);
    // ---- subroutines ----
    pc = FUNC;  addi(T4, T4, 3); ret();
    pc = FUNC2; addi(T4, T4, 1); ret();
    pc = FUNC3; addi(A0, 0, 1);  ret();
    // ---- main ----
    pc = MAIN_BASE;
    la(T0, TRAP); csr(CSRRW, 0, T0, 12'h305);
    la(S0, SIG); la(S1, LOGA);
    // counted loop: sum 0..19
    addi(T1, 0, 0); addi(T2, 0, 20); addi(T3, 0, 0);
    loop_pc = pc;
    add(T3, T3, T1); addi(T1, T1, 1); br(BNE, T1, T2, loop_pc);
    st(SD, T3, S0, 0);
    // multiply / divide
    addi(A0, 0, -7); addi(A1, 0, 3);
    mdop(0, A2, A0, A1); st(SD, A2, S0, 8);   // mul
    mdop(4, A3, A0, A1); st(SD, A3, S0, 16);  // div
    mdop(6, A4, A0, A1); st(SD, A4, S0, 24);  // rem
    mdop(5, A5, A1, 0);  st(SD, A5, S0, 32);  // divu by zero
    mdop(3, A6, A0, A1); st(SD, A6, S0, 40);  // mulhu
    // calls and returns
    addi(T4, 0, 0); addi(T5, 0, 5);
    loop_pc = pc;
    jal(RA, FUNC); addi(T5, T5, -1); br(BNE, T5, 0, loop_pc);
    st(SD, T4, S0, 48);
    // indirect calls
    la(T6, FUNC2); addi(T5, 0, 5);
    loop_pc = pc;
    jalr(RA, T6, 0); addi(T5, T5, -1); br(BNE, T5, 0, loop_pc);
    st(SD, T4, S0, 56);
    // compressed code; the addi after five 16-bit instructions straddles
    e16(16'h0001);                                   // c.nop
    e16({3'b010, 1'b0, 5'(A0), 5'd5, 2'b01});        // c.li a0, 5
    e16({3'b000, 1'b0, 5'(A0), 5'd3, 2'b01});        // c.addi a0, 3
    e16({4'b1000, 5'(A1), 5'(A0), 2'b10});           // c.mv a1, a0
    e16({4'b1001, 5'(A1), 5'(A0), 2'b10});           // c.add a1, a0
    addi(A2, A1, 100);
    e16(16'h0001);                                   // back to 4-byte alignment
    st(SD, A2, S0, 64);
    // loads after stores, sub-word accesses
    lui(T0, 32'h12345); addi(T0, T0, 32'h678);
    st(SD, T0, S0, 72); ld(LD, T1, S0, 72); addi(T1, T1, 1); st(SD, T1, S0, 80);
    ld(LB, T2, S0, 72);  st(SD, T2, S0, 88);
    ld(LH, T2, S0, 72);  st(SD, T2, S0, 96);
    st(SB, T0, S0, 104); ld(LD, T3, S0, 104); st(SD, T3, S0, 112);
    ld(LBU, T2, S0, 75); st(SD, T2, S0, 120);
    // ten stores into one cache set, read back
    la(T0, DATA); addi(T1, 0, 10); addi(T2, 0, 1); lui(T3, 1);
    loop_pc = pc;
    st(SD, T2, T0, 0); add(T0, T0, T3); addi(T2, T2, 1); addi(T1, T1, -1); br(BNE, T1, 0, loop_pc);
    la(T0, DATA); addi(T1, 0, 10); addi(T4, 0, 0);
    loop_pc = pc;
    ld(LD, T2, T0, 0); add(T4, T4, T2); add(T0, T0, T3); addi(T1, T1, -1); br(BNE, T1, 0, loop_pc);
    st(SD, T4, S0, 128);
    // uncached device register
    lui(T0, 32'h10000); addi(T1, 0, 77); st(SD, T1, T0, 32); ld(LD, T2, T0, 32); st(SD, T2, S0, 136);
    // synchronous exceptions
    e32(32'h0000_0073);                       // ecall
    csr(CSRRS, T1, 0, 12'h7c0);               // unknown CSR
    e32(32'hffff_ffff);                       // illegal encoding
    e32(32'h0010_0073);                       // ebreak
    ld(LD, T1, S0, 1);                        // misaligned load
    // self-modifying code
    jal(RA, FUNC3); st(SD, A0, S0, 144);
    lui(T0, 32'h02a00); addi(T0, T0, 32'h513); // addi a0, zero, 42
    la(T1, FUNC3); st(SW, T0, T1, 0);
    e32(32'h0000_100f);                       // fence.i
    jal(RA, FUNC3); st(SD, A0, S0, 152);
    // timer interrupt while waiting in wfi
    addi(T0, 0, 128); csr(CSRRS, 0, T0, 12'h304);   // mie.MTIE
    csr(CSRRSI, 0, 8, 12'h300);                     // mstatus.MIE
    lui(T1, 32'h10000); st(SD, 0, T1, 16);          // arm the timer
    e32(32'h1050_0073);                             // wfi
    addi(T2, 0, 1);
    csr(CSRRCI, 0, 8, 12'h300);
    // debug halt request
    st(SD, 0, T1, 24);
    for (int i = 0; i < 12; i++) addi(T2, T2, 1);
    st(SD, T2, S0, 160);
    // switch on SV39 and enter S mode
    la(T0, PTROOT); srli(T0, T0, 12); addi(T1, 0, 1); slli(T1, T1, 63); orr(T0, T0, T1);
    csr(CSRRW, 0, T0, 12'h180);
    e32(32'h1200_0073);                       // sfence.vma
    lui(T0, 2); addi(T0, T0, -2048); csr(CSRRC, 0, T0, 12'h300);
    lui(T0, 1); addi(T0, T0, -2048); csr(CSRRS, 0, T0, 12'h300);  // MPP = S
    la(T0, SCODE); csr(CSRRW, 0, T0, 12'h341);
    e32(32'h3020_0073);
    // S mode, translated
    pc = SCODE;
    lui(T0, 32'h40000); ld(LD, T1, T0, 0);    // unmapped: load page fault
    addi(T1, 0, 99); st(SD, T1, S0, 168); ld(LD, T2, S0, 168); addi(T2, T2, 1); st(SD, T2, S0, 176);
    e32(32'h0000_0073);                       // ecall from S
    // back in M mode
    pc = AFTER_VM;
    csr(CSRRW, 0, 0, 12'h180);
    csr(CSRRS, T0, 0, 12'hb02); st(SD, T0, S0, 184);   // minstret
    csr(CSRRS, T0, 0, 12'hb03); st(SD, T0, S0, 192);   // I$ misses
    csr(CSRRS, T0, 0, 12'hc00); st(SD, T0, S0, 200);   // cycle (user shadow)
    e32(32'h0000_100f);                       // fence.i writes the D$ back
    lui(T0, 32'h10000); addi(T1, 0, 1); st(SD, T1, T0, 0);
    loop_pc = pc; jal(0, loop_pc);
    // page table: 1 GiB leaves for VA 0 (device) and VA 2 GiB (memory), VA 1 GiB unmapped
    mem[(PTROOT - MAIN_BASE) >> 3]       = (64'h0 << 10) | 64'hcf;
    mem[((PTROOT - MAIN_BASE) >> 3) + 2] = (64'h80000 << 10) | 64'hcf;
  endtask

  // ------------------------------------------------------------------
  // mechanism counters
  // ------------------------------------------------------------------
  localparam int NM = 24;
  string mech_name [NM] = '{"mispredict", "predicted_taken_branch", "ras_return", "btb_jump",
    "compressed_commit", "straddling_instr", "dual_commit", "issue_stall", "operand_forward",
    "mul", "div", "store_load_hazard", "icache_miss", "dcache_miss", "dcache_writeback",
    "uncached_access", "exception", "interrupt", "wfi", "csr_refetch", "fence_i",
    "itlb_miss", "dtlb_miss", "debug_entry"};
  int mech [NM];

  // +trace prints every retired instruction, trap and register write, and
  // every translated load/store address (virtual and physical)
  bit trace;
  initial trace = $test$plusargs("trace");
  always @(posedge clk) if (rst_n && trace) begin
    for (int c = 0; c < 2; c++)
      if (dut.commit_ack[c]) $display("%0t commit %0d pc=%h fu=%0d op=%0d res=%h ex=%b", $time, c,
        dut.commit_instr[c].pc, dut.commit_instr[c].fu, dut.commit_instr[c].op,
        dut.commit_instr[c].result, dut.commit_instr[c].ex.valid);
    if (dut.commit_ex.valid) $display("%0t trap cause=%h pc=%h", $time, dut.commit_ex.cause, dut.commit_ex_pc);
    for (int c = 0; c < 2; c++)
      if (dut.rf_we[c] && dut.rf_waddr[c] != 5'd0)
        $display("%0t write x%0d=%h", $time, dut.rf_waddr[c], dut.rf_wdata[c]);
    if (dut.mmu_req && dut.mmu_valid)
      $display("%0t %s vaddr=%h paddr=%h", $time, dut.mmu_is_store ? "store" : "load",
               dut.mmu_vaddr, dut.mmu_paddr);
  end

  always @(posedge clk) if (rst_n) begin
    automatic bp_resolve_t rb = dut.resolved_branch;
    if (rb.valid && rb.is_mispredict) mech[0]++;
    if (rb.valid && !rb.is_mispredict && rb.cf == Branch && rb.is_taken) mech[1]++;
    if (rb.valid && !rb.is_mispredict && rb.cf == Return) mech[2]++;
    if (rb.valid && !rb.is_mispredict && rb.cf == JumpR) mech[3]++;
    for (int c = 0; c < 2; c++)
      if (dut.commit_ack[c] && dut.commit_instr[c].is_compressed) mech[4]++;
    for (int c = 0; c < 2; c++)
      if (dut.commit_ack[c] && !dut.commit_instr[c].is_compressed && dut.commit_instr[c].pc[1]) mech[5]++;
    if (dut.commit_ack == 2'b11) mech[6]++;
    if (dut.decoded_valid && !dut.decoded_ack && !dut.sb_full) mech[7]++;
    if (dut.decoded_ack && (|(dut.i_issue_stage.rs_found & dut.i_issue_stage.rs_valid))) mech[8]++;
    if (dut.mult_valid && dut.fu_data.op inside {MUL, MULH, MULHU, MULHSU, MULW}) mech[9]++;
    if (dut.mult_valid && dut.fu_data.op inside {DIV, DIVU, REM, REMU, DIVW, DIVUW, REMW, REMUW}) mech[10]++;
    if (dut.i_ex_stage.i_lsu.sb_match_i && dut.i_ex_stage.i_lsu.trans_ok && !dut.i_ex_stage.i_lsu.is_store) mech[11]++;
    if (dut.icache_miss) mech[12]++;
    if (dut.dcache_miss) mech[13]++;
    if (axi_req.aw_valid && axi_rsp.aw_ready && axi_req.aw_addr >= MAIN_BASE) mech[14]++;
    if (axi_req.ar_valid && axi_rsp.ar_ready && axi_req.ar_id[0] && axi_req.ar_addr < MAIN_BASE) mech[15]++;
    if (dut.commit_ex.valid && !dut.commit_ex.cause[63]) mech[16]++;
    if (dut.commit_ex.valid && dut.commit_ex.cause[63]) mech[17]++;
    if (dut.commit_ack[0] && dut.commit_instr[0].op == WFI && !dut.commit_instr[0].ex.valid) mech[18]++;
    if (dut.set_pc) mech[19]++;
    if (dut.flush_icache) mech[20]++;
    if (dut.itlb_miss) mech[21]++;
    if (dut.dtlb_miss) mech[22]++;
    if (dut.debug_enter) mech[23]++;
  end

  // ------------------------------------------------------------------
  // run
  // ------------------------------------------------------------------
  int cycles;
  initial begin
    logic [63:0] exp_log [8];
    done = 1'b0; timer_arm = 0; debug_visits = 0; scratch = '0;
    foreach (mech[i]) mech[i] = 0;
    build_program();
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    cycles = 0;
    while (!done && cycles < 100000) begin @(posedge clk); cycles++; end
    check(done, "program reached its end");
    if (!done) $display("stuck: head valid=%b pc=%h op=%0d done=%b ctrl=%0d sb_empty=%b dstate=%0d",
      dut.commit_valid, dut.commit_instr[0].pc, dut.commit_instr[0].op, dut.commit_instr[0].valid,
      dut.i_controller.state_q, dut.st_empty, dut.i_dcache.state_q);
    repeat (5) @(posedge clk);
    $display("program ran %0d cycles", cycles);
    check(rd64(SIG + 0)   == 64'd190,               "loop sum");
    check(rd64(SIG + 8)   == -64'sd21,              "mul");
    check(rd64(SIG + 16)  == -64'sd2,               "div");
    check(rd64(SIG + 24)  == -64'sd1,               "rem");
    check(rd64(SIG + 32)  == '1,                    "divu by zero");
    check(rd64(SIG + 40)  == 64'd2,                 "mulhu");
    check(rd64(SIG + 48)  == 64'd15,                "calls");
    check(rd64(SIG + 56)  == 64'd20,                "indirect calls");
    check(rd64(SIG + 64)  == 64'd116,               "compressed code");
    check(rd64(SIG + 72)  == 64'h1234_5678,         "store");
    check(rd64(SIG + 80)  == 64'h1234_5679,         "load after store");
    check(rd64(SIG + 88)  == 64'h78,                "lb");
    check(rd64(SIG + 96)  == 64'h5678,              "lh");
    check(rd64(SIG + 112) == 64'h78,                "sb then ld");
    check(rd64(SIG + 120) == 64'h12,                "lbu");
    check(rd64(SIG + 128) == 64'd55,                "evicted lines read back");
    for (int k = 0; k < 10; k++)
      check(rd64(DATA + 64'(k) * 64'h1000) == 64'(k + 1), "data in set");
    check(rd64(SIG + 136) == 64'd77,                "uncached register");
    check(rd64(SIG + 144) == 64'd1,                 "code before fence.i");
    check(rd64(SIG + 152) == 64'd42,                "code after fence.i");
    check(rd64(SIG + 160) == 64'd13,                "execution around debug halt");
    check(rd64(SIG + 168) == 64'd99,                "store under translation");
    check(rd64(SIG + 176) == 64'd100,               "load under translation");
    check(rd64(SIG + 184) > 64'd150,                "minstret");
    check(rd64(SIG + 192) > 64'd0,                  "I$ miss counter");
    check(rd64(SIG + 200) > rd64(SIG + 184),        "cycle above instret");
    exp_log = '{ENV_CALL_MMODE, ILLEGAL_INSTR, ILLEGAL_INSTR, BREAKPOINT, LD_ADDR_MISALIGNED,
                IRQ_M_TIMER, LOAD_PAGE_FAULT, ENV_CALL_SMODE};
    for (int i = 0; i < 8; i++)
      check(rd64(LOGA + 64'(i * 8)) == exp_log[i], $sformatf("trap %0d cause %h", i, rd64(LOGA + 64'(i * 8))));
    check(rd64(LOGA + 64) == 64'd0, "no further traps");
    check(debug_visits == 1, "one debug halt");
    for (int i = 0; i < NM; i++) begin
      $display("mechanism %-24s %0d", mech_name[i], mech[i]);
      check(mech[i] > 0, {"mechanism never happened: ", mech_name[i]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
