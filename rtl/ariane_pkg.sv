// Shared types and constants of the in-order RV64IMC application-class core.
// Everything the pipeline stages exchange is a packed struct defined here:
// fetch entries, decoded scoreboard entries, functional-unit requests,
// branch resolution, cache ports and the 64-bit AXI master port.
// The widths follow the RISC-V privileged specification (SV39 virtual
// memory, 56-bit physical addresses); the bundle layouts are this design's
// own choice.
package ariane_pkg;

  localparam int unsigned XLEN = 64;
  localparam int unsigned VLEN = 39;
  localparam int unsigned PLEN = 56;
  localparam int unsigned NR_SB_ENTRIES = 8;        // ROB entries, Table II
  localparam int unsigned TRANS_ID_BITS = $clog2(NR_SB_ENTRIES);

  // ---------------------------------------------------------------------
  // Exceptions
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [63:0] cause;
    logic [63:0] tval;
    logic        valid;
  } exception_t;

  localparam logic [63:0] INSTR_ADDR_MISALIGNED = 64'd0;
  localparam logic [63:0] INSTR_ACCESS_FAULT    = 64'd1;
  localparam logic [63:0] ILLEGAL_INSTR         = 64'd2;
  localparam logic [63:0] BREAKPOINT            = 64'd3;
  localparam logic [63:0] LD_ADDR_MISALIGNED    = 64'd4;
  localparam logic [63:0] LD_ACCESS_FAULT       = 64'd5;
  localparam logic [63:0] ST_ADDR_MISALIGNED    = 64'd6;
  localparam logic [63:0] ST_ACCESS_FAULT       = 64'd7;
  localparam logic [63:0] ENV_CALL_UMODE        = 64'd8;
  localparam logic [63:0] ENV_CALL_SMODE        = 64'd9;
  localparam logic [63:0] ENV_CALL_MMODE        = 64'd11;
  localparam logic [63:0] INSTR_PAGE_FAULT      = 64'd12;
  localparam logic [63:0] LOAD_PAGE_FAULT       = 64'd13;
  localparam logic [63:0] STORE_PAGE_FAULT      = 64'd15;

  localparam logic [63:0] IRQ_S_SOFT  = {1'b1, 63'd1};
  localparam logic [63:0] IRQ_M_SOFT  = {1'b1, 63'd3};
  localparam logic [63:0] IRQ_S_TIMER = {1'b1, 63'd5};
  localparam logic [63:0] IRQ_M_TIMER = {1'b1, 63'd7};
  localparam logic [63:0] IRQ_S_EXT   = {1'b1, 63'd9};
  localparam logic [63:0] IRQ_M_EXT   = {1'b1, 63'd11};

  typedef enum logic [1:0] { PRIV_U = 2'b00, PRIV_S = 2'b01, PRIV_M = 2'b11 } priv_lvl_t;

  // ---------------------------------------------------------------------
  // Branch prediction
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] { NoCF, Branch, Jump, JumpR, Return } cf_t;

  typedef struct packed {
    cf_t         cf;              // kind of control flow instruction
    logic        taken;           // frontend redirected fetch
    logic [63:0] predict_address; // where the frontend went
  } branchpredict_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] pc;
    logic [63:0] target_address;
    logic        is_mispredict;
    logic        is_taken;
    cf_t         cf;
  } bp_resolve_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] pc;
    logic        taken;
  } bht_update_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] pc;
    logic [63:0] target_address;
  } btb_update_t;

  // One 32-bit fetch word as it is kept in the instruction queue
  typedef struct packed {
    logic [63:0]    addr;       // virtual address of the (aligned) word
    logic [31:0]    data;
    logic [1:0]     hw_valid;   // which 16-bit halves hold instruction bits
    logic           bp_hw;      // half-word index of the predicted instruction
    branchpredict_t bp;
    exception_t     ex;
  } fetch_entry_t;

  // ---------------------------------------------------------------------
  // Functional units and operations
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] { FU_NONE, FU_LOAD, FU_STORE, FU_ALU, FU_CTRL, FU_MULT, FU_CSR } fu_t;

  typedef enum logic [6:0] {
    ADD, SUB, ADDW, SUBW, XORL, ORL, ANDL, SLL, SRL, SRA, SLLW, SRLW, SRAW, SLT, SLTU,
    EQ, NE, LTS, GES, LTU, GEU, JAL, JALR,
    LD, LW, LWU, LH, LHU, LB, LBU, SD, SW, SH, SB,
    MUL, MULH, MULHU, MULHSU, MULW, DIV, DIVU, DIVW, DIVUW, REM, REMU, REMW, REMUW,
    CSR_WRITE, CSR_SET, CSR_CLEAR, CSR_READ,
    ECALL, EBREAK, MRET, SRET, DRET, WFI, FENCE, FENCE_I, SFENCE_VMA
  } fu_op_t;

  typedef struct packed {
    logic [63:0]              pc;
    logic [TRANS_ID_BITS-1:0] trans_id;
    fu_t                      fu;
    fu_op_t                   op;
    logic [5:0]               rs1;     // bit 5 is the renaming bit
    logic [5:0]               rs2;
    logic [5:0]               rd;
    logic [63:0]              result;  // immediate until the unit writes back
    logic                     valid;   // result is valid
    logic                     use_imm;
    logic                     use_zimm;
    logic                     use_pc;
    exception_t               ex;
    branchpredict_t           bp;
    logic                     is_compressed;
  } sb_entry_t;

  typedef struct packed {
    fu_t                      fu;
    fu_op_t                   op;
    logic [63:0]              operand_a;
    logic [63:0]              operand_b;
    logic [63:0]              imm;
    logic [TRANS_ID_BITS-1:0] trans_id;
  } fu_data_t;

  // Write-back of one functional unit into the scoreboard
  typedef struct packed {
    logic                     valid;
    logic [TRANS_ID_BITS-1:0] trans_id;
    logic [63:0]              data;
    exception_t               ex;
  } wb_t;

  // ---------------------------------------------------------------------
  // Cache ports (physical addresses; index bits lie inside the page offset)
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic            req;
    logic            we;
    logic [PLEN-1:0] addr;
    logic [63:0]     wdata;
    logic [7:0]      be;
  } dcache_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [63:0] rdata;
  } dcache_rsp_t;

  // ---------------------------------------------------------------------
  // AXI (64-bit data, 64-bit address, bursts, single ID per master)
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic        aw_valid;
    logic [63:0] aw_addr;
    logic [7:0]  aw_len;
    logic [3:0]  aw_id;
    logic        w_valid;
    logic [63:0] w_data;
    logic [7:0]  w_strb;
    logic        w_last;
    logic        b_ready;
    logic        ar_valid;
    logic [63:0] ar_addr;
    logic [7:0]  ar_len;
    logic [3:0]  ar_id;
    logic        r_ready;
  } axi_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic        b_valid;
    logic [1:0]  b_resp;
    logic [3:0]  b_id;
    logic        ar_ready;
    logic        r_valid;
    logic [63:0] r_data;
    logic [1:0]  r_resp;
    logic        r_last;
    logic [3:0]  r_id;
  } axi_rsp_t;

  // ---------------------------------------------------------------------
  // Virtual memory
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [9:0]  reserved;
    logic [43:0] ppn;
    logic [1:0]  rsw;
    logic d, a, g, u, x, w, r, v;
  } pte_t;

  typedef struct packed {
    logic [26:0] vpn;
    logic [1:0]  level;   // 0: 4 KiB, 1: 2 MiB, 2: 1 GiB page
    pte_t        pte;
  } tlb_update_t;

  // ---------------------------------------------------------------------
  // CSR addresses
  // ---------------------------------------------------------------------
  localparam logic [11:0] CSR_SSTATUS = 12'h100, CSR_SIE = 12'h104, CSR_STVEC = 12'h105,
    CSR_SCOUNTEREN = 12'h106, CSR_SSCRATCH = 12'h140, CSR_SEPC = 12'h141, CSR_SCAUSE = 12'h142,
    CSR_STVAL = 12'h143, CSR_SIP = 12'h144, CSR_SATP = 12'h180,
    CSR_MSTATUS = 12'h300, CSR_MISA = 12'h301, CSR_MEDELEG = 12'h302, CSR_MIDELEG = 12'h303,
    CSR_MIE = 12'h304, CSR_MTVEC = 12'h305, CSR_MCOUNTEREN = 12'h306, CSR_MSCRATCH = 12'h340,
    CSR_MEPC = 12'h341, CSR_MCAUSE = 12'h342, CSR_MTVAL = 12'h343, CSR_MIP = 12'h344,
    CSR_DCSR = 12'h7b0, CSR_DPC = 12'h7b1, CSR_DSCRATCH0 = 12'h7b2,
    CSR_MCYCLE = 12'hb00, CSR_MINSTRET = 12'hb02, CSR_MHPM_BASE = 12'hb03,
    CSR_CYCLE = 12'hc00, CSR_INSTRET = 12'hc02, CSR_HPM_BASE = 12'hc03,
    CSR_MVENDORID = 12'hf11, CSR_MARCHID = 12'hf12, CSR_MIMPID = 12'hf13, CSR_MHARTID = 12'hf14;

  localparam int unsigned NR_PERF_COUNTERS = 10;

  // helper: sign-extend an SV39 virtual address to 64 bit
  function automatic logic [63:0] sext_vaddr(input logic [63:0] a);
    return {{25{a[38]}}, a[38:0]};
  endfunction

endpackage
