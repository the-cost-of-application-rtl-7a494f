// Testbench of the branch unit. For random conditional branches (all six
// conditions), jal and jalr, with operands biased towards equal values,
// sign boundaries and small differences, random even offsets, 16- and
// 32-bit instruction sizes and random frontend predictions (not taken,
// taken to the right address, taken to a wrong one), it computes here the
// branch outcome, the next PC, the link address and whether the frontend
// was wrong, and compares them with the unit's resolution record. The unit
// is combinational; outputs are sampled 1 time unit after the inputs.
module branch_unit_tb;
  import ariane_pkg::*;

  logic           valid, is_c;
  fu_data_t       fu;
  logic [63:0]    pc, link;
  branchpredict_t bp;
  bp_resolve_t    res;

  branch_unit dut (.valid_i(valid), .fu_data_i(fu), .pc_i(pc), .is_compressed_i(is_c),
                   .bp_i(bp), .link_o(link), .resolved_branch_o(res));

  int unsigned checks = 0, failures = 0;
  int unsigned n_mis = 0, n_taken = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s op=%s a=%h b=%h", $time, what, fu.op.name(),
                                   fu.operand_a, fu.operand_b);
    end
  endtask

  function automatic logic [63:0] rand_operand(input logic [63:0] other);
    int unsigned sel;
    sel = $urandom_range(5);
    unique case (sel)
      0: return other;
      1: return other + 64'd1;
      2: return other - 64'd1;
      3: return 64'h8000_0000_0000_0000 + 64'($urandom_range(2)) - 64'd1;
      4: return 64'($signed(32'($urandom_range(7))) - 32'sd3);
      default: return {$urandom, $urandom};
    endcase
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fu_op_t ops [8] = '{EQ, NE, LTS, GES, LTU, GEU, JAL, JALR};
    logic [63:0] a, b, nxt, tgt, pred;
    bit tk;
    int unsigned psel;
    valid = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      fu = '0;
      fu.op = ops[$urandom_range(7)];
      fu.fu = FU_CTRL;
      a = {$urandom, $urandom};
      b = rand_operand(a);
      if ($urandom_range(1) == 0) begin logic [63:0] x; x = a; a = b; b = x; end
      fu.operand_a = a; fu.operand_b = b;
      fu.imm = 64'($signed(13'($urandom))) & ~64'd1;
      pc = {$urandom, $urandom} & ~64'd1;
      is_c = 1'($urandom);
      nxt = pc + (is_c ? 64'd2 : 64'd4);
      unique case (fu.op)
        EQ:  tk = a == b;
        NE:  tk = a != b;
        LTS: tk = $signed(a) < $signed(b);
        GES: tk = !($signed(a) < $signed(b));
        LTU: tk = a < b;
        GEU: tk = !(a < b);
        default: tk = 1'b1;
      endcase
      tgt = fu.op == JALR ? ((a + fu.imm) & ~64'd1) : (tk ? pc + fu.imm : nxt);
      bp = '0;
      psel = $urandom_range(2);
      unique case (psel)
        0: bp.taken = 1'b0;
        1: begin bp.taken = 1'b1; bp.predict_address = tgt; end
        default: begin bp.taken = 1'b1; bp.predict_address = {$urandom, $urandom} & ~64'd1; end
      endcase
      if (fu.op == JALR && $urandom_range(1) == 0) bp.cf = Return;
      pred = bp.taken ? bp.predict_address : nxt;
      #1;
      check(res.valid && res.pc == pc, "resolution valid for this pc");
      check(res.is_taken == tk, "branch outcome");
      check(res.target_address == tgt, "next pc");
      check(res.is_mispredict == (pred != tgt), "mis-prediction flag");
      check(link == nxt, "link address");
      check(res.cf == (fu.op == JAL ? Jump : fu.op == JALR ? (bp.cf == Return ? Return : JumpR) : Branch),
            "control-flow kind");
      if (pred != tgt) n_mis++;
      if (tk) n_taken++;
      #1;
    end
    // an idle unit never reports a mis-prediction
    valid = 1'b0; bp = '0; #1;
    check(!res.valid && !res.is_mispredict, "idle unit is quiet");
    check(n_mis > 5000 && n_taken > 5000, "both outcomes and mis-predictions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
