// Kernel testbench of the whole core, at its default parameters. It runs
// small versions of the micro-benchmarks the paper measures energy on
// (Table III), one after the other, from the same program:
//   ALU  - 200 iterations of a dependent add/xor/addi chain;
//   Mul  - 100 iterations of a dependent multiply-add;
//   Div  - 20 long signed divisions whose quotients have 61..62 significant
//          bits, so each takes close to the divider's worst case;
//   LS   - copy of 256 double words (2 KiB) from one array to another;
//   IGEMM - 8x8 64-bit integer matrix product, C = A * B.
// Around each kernel the program reads mcycle and minstret and stores their
// differences. The bench checks every result against arithmetic done in
// SystemVerilog, prints cycles and IPC per kernel, and checks the division
// time per iteration against the divider's latency (the paper gives up to 64
// cycles per division; this divider needs up to 65, plus the loop).
// Memory is the same behavioural AXI model as in the core's end-to-end
// bench: 128 KiB at 0x8000_0000 and an end-of-test register at 0x1000_0000.
// Matrix and array contents are generated here with $urandom.
module ariane_kernels_tb;
  import ariane_pkg::*;

  localparam logic [63:0] MAIN_BASE = 64'h8000_0000;
  localparam int unsigned MAIN_WORDS = 16384;
  localparam logic [63:0] SIG = 64'h8000_6000;
  localparam logic [63:0] MA = 64'h8000_8000, MB = 64'h8000_8200, MC = 64'h8000_8400;
  localparam logic [63:0] SRCA = 64'h8000_A000, DSTA = 64'h8000_B000;
  localparam int NCOPY = 256, NDIV = 20;

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

  localparam int SUBOP = 32, XOR3 = 4, MUL3 = 0, DIV3 = 4;

  task automatic sub(input int rd, input int rs1, input int rs2); e32(rr(SUBOP, rs2, rs1, 0, rd, 7'h33)); endtask
  task automatic xorr(input int rd, input int rs1, input int rs2); e32(rr(0, rs2, rs1, XOR3, rd, 7'h33)); endtask
  // t5/t6 <- mcycle/minstret at kernel start
  task automatic mark_start(); csr(CSRRS, T5, 0, CSR_MCYCLE); csr(CSRRS, T6, 0, CSR_MINSTRET); endtask
  // SIG[k*16] <- cycles, SIG[k*16+8] <- instructions of kernel k (s0 = SIG)
  task automatic mark_end(input int k);
    csr(CSRRS, T3, 0, CSR_MCYCLE); csr(CSRRS, T4, 0, CSR_MINSTRET);
    sub(T3, T3, T5); sub(T4, T4, T6);
    st(SD, T3, S0, k * 16); st(SD, T4, S0, k * 16 + 8);
  endtask

  localparam int S2 = 18, S3 = 19, S4 = 20, S5 = 21;
  logic [63:0] ma [64], mb [64];
  logic [63:0] copy_src [NCOPY];
  localparam logic [63:0] DIV_A = 64'h3FFF_FFFF_FFFF_FF00;
  localparam logic [63:0] DIV_B = 64'd3;

  task automatic build_program();
    logic [63:0] l0, l1, l2;
    pc = MAIN_BASE;
    la(S0, SIG);
    // ---- ALU ----
    addi(A0, 0, 0); addi(A1, 0, 1234); addi(T0, 0, 200);
    mark_start();
    l0 = pc;
    add(A0, A0, A1); xorr(A1, A1, A0); addi(A1, A1, 7); addi(T0, T0, -1); br(BNE, T0, 0, l0);
    mark_end(0);
    st(SD, A0, S0, 'h100);
    // ---- Mul ----
    addi(A0, 0, 1); addi(A1, 0, 3); addi(T0, 0, 100);
    mark_start();
    l0 = pc;
    mdop(MUL3, A0, A0, A1); addi(A0, A0, 1); addi(T0, T0, -1); br(BNE, T0, 0, l0);
    mark_end(1);
    st(SD, A0, S0, 'h108);
    // ---- Div ----
    la(A2, SIG + 64'h200); ld(LD, A2, A2, 0); ld(LD, A3, S0, 'h208);
    addi(A0, 0, 0); addi(T0, 0, NDIV);
    mark_start();
    l0 = pc;
    mdop(DIV3, A4, A2, A3); add(A0, A0, A4); addi(A2, A2, -123); addi(T0, T0, -1); br(BNE, T0, 0, l0);
    mark_end(2);
    st(SD, A0, S0, 'h110);
    // ---- LS: copy ----
    la(A1, SRCA); la(A2, DSTA); addi(T0, 0, NCOPY);
    mark_start();
    l0 = pc;
    ld(LD, T1, A1, 0); st(SD, T1, A2, 0); addi(A1, A1, 8); addi(A2, A2, 8); addi(T0, T0, -1);
    br(BNE, T0, 0, l0);
    mark_end(3);
    // ---- IGEMM 8x8 ----
    la(S1, MA); la(S3, MC); addi(S4, 0, 8);
    mark_start();
    l0 = pc;
    la(S2, MB); addi(S5, 0, 8);
    l1 = pc;
    addi(A0, 0, 0); addi(A1, S1, 0); addi(A2, S2, 0); addi(T0, 0, 8);
    l2 = pc;
    ld(LD, T1, A1, 0); ld(LD, T2, A2, 0); mdop(MUL3, T3, T1, T2); add(A0, A0, T3);
    addi(A1, A1, 8); addi(A2, A2, 64); addi(T0, T0, -1); br(BNE, T0, 0, l2);
    st(SD, A0, S3, 0); addi(S3, S3, 8); addi(S2, S2, 8); addi(S5, S5, -1); br(BNE, S5, 0, l1);
    addi(S1, S1, 64); addi(S4, S4, -1); br(BNE, S4, 0, l0);
    mark_end(4);
    // ---- end of test: fence.i writes the data cache back to memory ----
    e32(32'h0000_100f);
    lui(T0, 32'h10000); st(SD, 0, T0, 0);
    l0 = pc;
    jal(0, l0);
    // ---- data ----
    wr64(SIG + 64'h200, DIV_A, 8'hff); wr64(SIG + 64'h208, DIV_B, 8'hff);
    for (int i = 0; i < 64; i++) begin
      ma[i] = {$urandom, $urandom}; mb[i] = {$urandom, $urandom};
      wr64(MA + 64'(i * 8), ma[i], 8'hff); wr64(MB + 64'(i * 8), mb[i], 8'hff);
    end
    for (int i = 0; i < NCOPY; i++) begin
      copy_src[i] = {$urandom, $urandom};
      wr64(SRCA + 64'(i * 8), copy_src[i], 8'hff);
    end
  endtask

  string kname [5] = '{"ALU", "Mul", "Div", "LS", "IGEMM"};
  int cycles;
  initial begin
    logic [63:0] a, b, e, acc;
    logic signed [63:0] q;
    int unsigned kc, ki;
    real ipc;
    done = 1'b0; timer_arm = 0; debug_visits = 0; scratch = '0;
    foreach (low[i]) low[i] = '0;
    build_program();
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    cycles = 0;
    while (!done && cycles < 200000) begin @(posedge clk); cycles++; end
    check(done, "program reached its end");
    repeat (5) @(posedge clk);
    $display("program ran %0d cycles", cycles);
    // ALU
    a = 0; b = 1234;
    repeat (200) begin a = a + b; b = b ^ a; b = b + 7; end
    check(rd64(SIG + 64'h100) == a, "ALU kernel result");
    // Mul
    a = 1;
    repeat (100) a = a * 64'd3 + 64'd1;
    check(rd64(SIG + 64'h108) == a, "Mul kernel result");
    // Div
    acc = 0; a = DIV_A;
    repeat (NDIV) begin q = $signed(a) / $signed(DIV_B); acc = acc + 64'(q); a = a - 64'd123; end
    check(rd64(SIG + 64'h110) == acc, "Div kernel result");
    // LS
    for (int i = 0; i < NCOPY; i++)
      check(rd64(DSTA + 64'(i * 8)) == copy_src[i], "LS kernel copied word");
    // IGEMM
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        e = 0;
        for (int k = 0; k < 8; k++) e = e + ma[i * 8 + k] * mb[k * 8 + j];
        check(rd64(MC + 64'((i * 8 + j) * 8)) == e, $sformatf("IGEMM C[%0d][%0d]", i, j));
      end
    for (int k = 0; k < 5; k++) begin
      kc = int'(rd64(SIG + 64'(k * 16)));
      ki = int'(rd64(SIG + 64'(k * 16 + 8)));
      ipc = (kc == 0) ? 0.0 : real'(ki) / real'(kc);
      $display("kernel %-6s cycles=%0d instructions=%0d IPC=%0.2f", kname[k], kc, ki, ipc);
      check(ki > 0 && kc > ki / 2, {"plausible counters for ", kname[k]});
    end
    // each division iteration: the division (61..62 quotient bits) plus four
    // single-cycle instructions that overlap with it only partly
    kc = int'(rd64(SIG + 64'd32));
    check(kc >= NDIV * 60 && kc <= NDIV * 80, $sformatf("Div kernel %0d cycles per iteration", kc / NDIV));
    // the ALU chain retires at least one instruction every two cycles
    check(rd64(SIG + 64'd8) * 2 >= rd64(SIG + 64'd0), "ALU kernel IPC at least 0.5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
