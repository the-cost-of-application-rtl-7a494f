// Testbench of the fetch pre-decoder. Instructions are assembled here from
// random fields with the RISC-V encoding formats (B, J, I for jalr, and the
// compressed CJ, CB and CR formats), so the expected flags and immediate are
// the random values the word was built from, not a second copy of the
// decoder. It covers:
//  - conditional branches and c.beqz/c.bnez with their sign-extended offsets;
//  - jal and c.j, with calls recognised by a link register rd (x1 or x5);
//  - jalr, c.jr and c.jalr, with returns recognised as a jump through x1/x5
//    that does not link, and calls as jumps that do;
//  - ordinary 32-bit and 16-bit instructions, which must raise no flag.
// The pre-decoder is combinational; values are checked 1 time unit after
// they are applied.
module instr_scan_tb;
  logic [31:0] instr;
  logic is_rvc, is_branch, is_jal, is_jalr, is_call, is_return;
  logic [63:0] imm;

  instr_scan dut (.instr_i(instr), .is_rvc_o(is_rvc), .is_branch_o(is_branch),
                  .is_jal_o(is_jal), .is_jalr_o(is_jalr), .is_call_o(is_call),
                  .is_return_o(is_return), .imm_o(imm));

  int unsigned checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s instr=%h imm=%h", $time, what, instr, imm);
    end
  endtask

  task automatic expect_flags(input bit rvc, input bit br, input bit jal, input bit jalr,
                              input bit call, input bit ret, input string what);
    #1;
    check(is_rvc == rvc && is_branch == br && is_jal == jal && is_jalr == jalr &&
          is_call == call && is_return == ret, what);
  endtask

  function automatic bit is_link(input logic [4:0] r);
    return r == 5'd1 || r == 5'd5;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [12:0] bimm;
    logic [20:0] jimm;
    logic [11:0] cjimm;
    logic [8:0]  cbimm;
    logic [4:0]  rd, rs1, rs2;
    logic [2:0]  f3;
    logic [6:0]  plain [10] = '{7'b0010011, 7'b0110011, 7'b0000011, 7'b0100011, 7'b0110111,
                                7'b0010111, 7'b1110011, 7'b0001111, 7'b0011011, 7'b0111011};
    for (int n = 0; n < 1000; n++) begin
      // B-type branch
      bimm = {13'($urandom) & 13'h1ffe};
      rs1 = 5'($urandom); rs2 = 5'($urandom);
      f3 = 3'($urandom_range(7));
      instr = {bimm[12], bimm[10:5], rs2, rs1, f3, bimm[4:1], bimm[11], 7'b1100011};
      expect_flags(0, 1, 0, 0, 0, 0, "branch flags");
      check(imm == {{51{bimm[12]}}, bimm}, "branch offset");
      // jal
      jimm = {21'($urandom) & 21'h1ffffe};
      rd = 5'($urandom);
      instr = {jimm[20], jimm[10:1], jimm[11], jimm[19:12], rd, 7'b1101111};
      expect_flags(0, 0, 1, 0, is_link(rd), 0, "jal flags");
      check(imm == {{43{jimm[20]}}, jimm}, "jal offset");
      // jalr
      rd = ($urandom_range(2) == 0) ? 5'd0 : 5'($urandom);
      rs1 = ($urandom_range(1) == 0) ? (($urandom_range(1) == 0) ? 5'd1 : 5'd5) : 5'($urandom);
      instr = {12'($urandom), rs1, 3'b000, rd, 7'b1100111};
      expect_flags(0, 0, 0, 1, is_link(rd), is_link(rs1) && rd == 5'd0, "jalr flags");
      // plain 32-bit instruction
      instr = {25'($urandom), plain[$urandom_range(9)]};
      expect_flags(0, 0, 0, 0, 0, 0, "non-control 32-bit instruction");
      // c.j
      cjimm = {12'($urandom) & 12'hffe};
      instr = {16'($urandom), 3'b101, cjimm[11], cjimm[4], cjimm[9:8], cjimm[10], cjimm[6],
               cjimm[7], cjimm[3:1], cjimm[5], 2'b01};
      expect_flags(1, 0, 1, 0, 0, 0, "c.j flags");
      check(imm == {{52{cjimm[11]}}, cjimm}, "c.j offset");
      // c.beqz / c.bnez
      cbimm = {9'($urandom) & 9'h1fe};
      instr = {16'($urandom), 2'b11, 1'($urandom), cbimm[8], cbimm[4:3], 3'($urandom),
               cbimm[7:6], cbimm[2:1], cbimm[5], 2'b01};
      expect_flags(1, 1, 0, 0, 0, 0, "c.beqz/c.bnez flags");
      check(imm == {{55{cbimm[8]}}, cbimm}, "c.beqz/c.bnez offset");
      // c.jr / c.jalr (rs1 != 0)
      rs1 = ($urandom_range(1) == 0) ? (($urandom_range(1) == 0) ? 5'd1 : 5'd5)
                                     : 5'($urandom_range(31, 1));
      if ($urandom_range(1) == 0) begin
        instr = {16'($urandom), 3'b100, 1'b0, rs1, 5'd0, 2'b10};
        expect_flags(1, 0, 0, 1, 0, is_link(rs1), "c.jr flags");
      end else begin
        instr = {16'($urandom), 3'b100, 1'b1, rs1, 5'd0, 2'b10};
        expect_flags(1, 0, 0, 1, 1, 0, "c.jalr flags");
      end
      // c.mv / c.add (rs2 != 0) and c.addi are not jumps
      instr = {16'($urandom), 3'b100, 1'($urandom), 5'($urandom), 5'($urandom_range(31, 1)), 2'b10};
      expect_flags(1, 0, 0, 0, 0, 0, "c.mv/c.add");
      instr = {16'($urandom), 3'b000, 11'($urandom), 2'b01};
      expect_flags(1, 0, 0, 0, 0, 0, "c.addi");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
