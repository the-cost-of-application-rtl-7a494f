// Load/store unit. It takes one load or store at a time from the issue
// stage: it adds base and offset, checks natural alignment, has the address
// translated by the DTLB (the MMU answers in the same cycle on a hit and
// walks the page table on a miss) and then
//  - for a store: shifts data and byte enables to the 8-byte word and puts
//    the store into the speculative store buffer, then reports completion;
//    the store reaches the cache only after the commit stage retired it;
//  - for a load: waits while a buffered store touches the same 8-byte word,
//    sends the physical address to the cache's load port and, when the data
//    returns (LATENCY cycles after the grant), extracts and sign- or
//    zero-extends the addressed bytes and writes them back.
// Misaligned addresses and translation faults are written back as
// exceptions instead. On a flush a load already granted by the cache is
// allowed to return and its data is dropped. ready_o is high when idle.
module lsu import ariane_pkg::*; (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_i,
  input  logic            valid_i,
  input  fu_data_t        fu_data_i,
  output logic            ready_o,
  output wb_t             wb_o,
  // MMU data side
  output logic            mmu_req_o,
  output logic [63:0]     mmu_vaddr_o,
  output logic            mmu_is_store_o,
  input  logic            mmu_valid_i,
  input  logic [PLEN-1:0] mmu_paddr_i,
  input  exception_t      mmu_ex_i,
  // store buffer
  output logic            sb_valid_o,
  input  logic            sb_ready_i,
  output logic [PLEN-1:0] sb_paddr_o,
  output logic [63:0]     sb_data_o,
  output logic [7:0]      sb_be_o,
  input  logic            sb_match_i,
  // data cache load port
  output dcache_req_t     ld_req_o,
  input  dcache_rsp_t     ld_rsp_i
);
  typedef enum logic [1:0] { IDLE, TRANSLATE, LOAD_WAIT, DROP } state_e;
  state_e   state_q;
  fu_data_t op_q;
  logic [63:0] vaddr_q;
  logic     is_store, misaligned;
  logic [7:0] be;
  logic [63:0] shifted, ld_data, ld_res;
  logic [2:0] off;

  assign ready_o  = state_q == IDLE;
  assign is_store = op_q.op inside {SD, SW, SH, SB};
  assign off      = vaddr_q[2:0];

  always_comb begin
    unique case (op_q.op)
      LD, SD:        begin misaligned = off != 3'd0;  be = 8'hff; end
      LW, LWU, SW:   begin misaligned = off[1:0] != 2'd0; be = 8'h0f; end
      LH, LHU, SH:   begin misaligned = off[0];       be = 8'h03; end
      default:       begin misaligned = 1'b0;         be = 8'h01; end
    endcase
    be      = be << off;
    shifted = op_q.operand_b << {off, 3'b000};
    ld_data = ld_rsp_i.rdata >> {off, 3'b000};
    unique case (op_q.op)
      LW:      ld_res = {{32{ld_data[31]}}, ld_data[31:0]};
      LWU:     ld_res = {32'b0, ld_data[31:0]};
      LH:      ld_res = {{48{ld_data[15]}}, ld_data[15:0]};
      LHU:     ld_res = {48'b0, ld_data[15:0]};
      LB:      ld_res = {{56{ld_data[7]}}, ld_data[7:0]};
      LBU:     ld_res = {56'b0, ld_data[7:0]};
      default: ld_res = ld_data;
    endcase
  end

  assign mmu_req_o      = state_q == TRANSLATE && !misaligned;
  assign mmu_vaddr_o    = vaddr_q;
  assign mmu_is_store_o = is_store;
  assign sb_paddr_o     = mmu_paddr_i;
  assign sb_data_o      = shifted;
  assign sb_be_o        = be;

  logic trans_ok;
  assign trans_ok   = state_q == TRANSLATE && !misaligned && mmu_valid_i && !mmu_ex_i.valid;
  assign sb_valid_o = trans_ok && is_store && !flush_i;

  always_comb begin
    ld_req_o = '0;
    ld_req_o.req  = trans_ok && !is_store && !sb_match_i && !flush_i;
    ld_req_o.addr = mmu_paddr_i;
    ld_req_o.be   = be;
  end

  always_comb begin
    wb_o = '0;
    wb_o.trans_id = op_q.trans_id;
    if (state_q == TRANSLATE && !flush_i) begin
      if (misaligned) begin
        wb_o.valid = 1'b1;
        wb_o.ex = '{cause: is_store ? ST_ADDR_MISALIGNED : LD_ADDR_MISALIGNED, tval: vaddr_q, valid: 1'b1};
      end else if (mmu_valid_i && mmu_ex_i.valid) begin
        wb_o.valid = 1'b1;
        wb_o.ex    = mmu_ex_i;
      end else if (sb_valid_o && sb_ready_i) begin
        wb_o.valid = 1'b1;
      end
    end else if (state_q == LOAD_WAIT && ld_rsp_i.rvalid && !flush_i) begin
      wb_o.valid = 1'b1;
      wb_o.data  = ld_res;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; op_q <= '0; vaddr_q <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (valid_i && !flush_i) begin
          op_q    <= fu_data_i;
          vaddr_q <= fu_data_i.operand_a + fu_data_i.imm;
          state_q <= TRANSLATE;
        end
        TRANSLATE: begin
          if (flush_i) state_q <= IDLE;
          else if (wb_o.valid) state_q <= IDLE;
          else if (ld_req_o.req && ld_rsp_i.gnt) state_q <= LOAD_WAIT;
        end
        LOAD_WAIT: if (ld_rsp_i.rvalid) state_q <= IDLE;
                   else if (flush_i) state_q <= DROP;
        DROP:      if (ld_rsp_i.rvalid) state_q <= IDLE;
        default:   state_q <= IDLE;
      endcase
    end
  end
endmodule
