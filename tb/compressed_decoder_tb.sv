// Testbench of the RVC expander. Checks hand-assembled compressed
// instructions of every format class (CI, CSS, CIW, CL, CS, CA, CB, CJ, CR)
// against their 32-bit expansions, that the all-zero half-word and
// floating-point forms are illegal, and that 32-bit instructions pass
// through unchanged and are not flagged as compressed. A second, random part
// builds every RV64C integer instruction from random fields (register
// numbers, immediates and offsets, avoiding the reserved values) and compares
// the result with the 32-bit instruction assembled from the same fields by
// base-format encoders. Combinational.
module compressed_decoder_tb;
  logic [31:0] in, out;
  logic illegal, is_c;
  int checks = 0, failures = 0;

  compressed_decoder dut (.instr_i(in), .instr_o(out), .illegal_instr_o(illegal), .is_compressed_o(is_c));

  task automatic t(input logic [15:0] c, input logic [31:0] e, input string name);
    in = {16'h0, c}; #1;
    checks++;
    if (out !== e || illegal !== 1'b0 || is_c !== 1'b1) begin
      failures++; $display("FAIL %s: %h -> %h (illegal %b) exp %h", name, c, out, illegal, e);
    end
  endtask
  task automatic bad(input logic [15:0] c, input string name);
    in = {16'h0, c}; #1;
    checks++;
    if (illegal !== 1'b1) begin failures++; $display("FAIL %s: %h not illegal", name, c); end
  endtask


  // base-format encoders of the expected expansions
  function automatic logic [31:0] ei(input logic [11:0] imm, input logic [4:0] rs1, input logic [2:0] f3,
                                     input logic [4:0] rd, input logic [6:0] op);
    return {imm, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] es(input logic [11:0] imm, input logic [4:0] rs2, input logic [4:0] rs1,
                                     input logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] er(input logic [6:0] f7, input logic [4:0] rs2, input logic [4:0] rs1,
                                     input logic [2:0] f3, input logic [4:0] rd, input logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction

  task automatic random_part();
    logic [9:0]  u;
    logic [11:0] j;
    logic [8:0]  b;
    logic [5:0]  i6;
    logic [2:0]  rp, rq;
    logic [4:0]  rd, rs2;
    logic [4:0]  xp, xq;
    for (int n = 0; n < 300; n++) begin
      u = 10'($urandom); j = 12'($urandom); b = 9'($urandom); i6 = 6'($urandom);
      rp = 3'($urandom); rq = 3'($urandom); xp = {2'b01, rp}; xq = {2'b01, rq};
      rd = 5'($urandom_range(31, 1)); rs2 = 5'($urandom_range(31, 1));
      // quadrant 0
      u[1:0] = 2'b00; if (u[9:2] == 8'd0) u[2] = 1'b1;
      t({3'b000, u[5:4], u[9:6], u[2], u[3], rq, 2'b00}, ei({2'b0, u}, 5'd2, 3'd0, xq, 7'h13), "c.addi4spn");
      t({3'b010, u[5:3], rp, u[2], u[6], rq, 2'b00}, ei({5'b0, u[6:2], 2'b0}, xp, 3'd2, xq, 7'h03), "c.lw");
      t({3'b011, u[5:3], rp, u[7:6], rq, 2'b00}, ei({4'b0, u[7:3], 3'b0}, xp, 3'd3, xq, 7'h03), "c.ld");
      t({3'b110, u[5:3], rp, u[2], u[6], rq, 2'b00}, es({5'b0, u[6:2], 2'b0}, xq, xp, 3'd2), "c.sw");
      t({3'b111, u[5:3], rp, u[7:6], rq, 2'b00}, es({4'b0, u[7:3], 3'b0}, xq, xp, 3'd3), "c.sd");
      // quadrant 1
      if (i6 == 6'd0) i6 = 6'd1;
      t({3'b000, i6[5], rd, i6[4:0], 2'b01}, ei({{6{i6[5]}}, i6}, rd, 3'd0, rd, 7'h13), "c.addi");
      t({3'b001, i6[5], rd, i6[4:0], 2'b01}, ei({{6{i6[5]}}, i6}, rd, 3'd0, rd, 7'h1b), "c.addiw");
      t({3'b010, i6[5], rd, i6[4:0], 2'b01}, ei({{6{i6[5]}}, i6}, 5'd0, 3'd0, rd, 7'h13), "c.li");
      if (rd != 5'd2)
        t({3'b011, i6[5], rd, i6[4:0], 2'b01}, {{14{i6[5]}}, i6, rd, 7'h37}, "c.lui");
      u[3:0] = 4'b0; if (u[9:4] == 6'd0) u[4] = 1'b1;
      t({3'b011, u[9], 5'd2, u[4], u[6], u[8:7], u[5], 2'b01},
        ei({{2{u[9]}}, u}, 5'd2, 3'd0, 5'd2, 7'h13), "c.addi16sp");
      t({3'b100, i6[5], 2'b00, rp, i6[4:0], 2'b01}, ei({6'b0, i6}, xp, 3'd5, xp, 7'h13), "c.srli");
      t({3'b100, i6[5], 2'b01, rp, i6[4:0], 2'b01}, ei({6'b010000, i6}, xp, 3'd5, xp, 7'h13), "c.srai");
      t({3'b100, i6[5], 2'b10, rp, i6[4:0], 2'b01}, ei({{6{i6[5]}}, i6}, xp, 3'd7, xp, 7'h13), "c.andi");
      t({6'b100011, rp, 2'b00, rq, 2'b01}, er(7'h20, xq, xp, 3'd0, xp, 7'h33), "c.sub");
      t({6'b100011, rp, 2'b01, rq, 2'b01}, er(7'h00, xq, xp, 3'd4, xp, 7'h33), "c.xor");
      t({6'b100011, rp, 2'b10, rq, 2'b01}, er(7'h00, xq, xp, 3'd6, xp, 7'h33), "c.or");
      t({6'b100011, rp, 2'b11, rq, 2'b01}, er(7'h00, xq, xp, 3'd7, xp, 7'h33), "c.and");
      t({6'b100111, rp, 2'b00, rq, 2'b01}, er(7'h20, xq, xp, 3'd0, xp, 7'h3b), "c.subw");
      t({6'b100111, rp, 2'b01, rq, 2'b01}, er(7'h00, xq, xp, 3'd0, xp, 7'h3b), "c.addw");
      j[0] = 1'b0;
      t({3'b101, j[11], j[4], j[9:8], j[10], j[6], j[7], j[3:1], j[5], 2'b01},
        {j[11], j[10:1], j[11], {8{j[11]}}, 5'd0, 7'h6f}, "c.j");
      b[0] = 1'b0;
      t({3'b110, b[8], b[4:3], rp, b[7:6], b[2:1], b[5], 2'b01},
        {b[8], {3{b[8]}}, b[7:5], 5'd0, xp, 3'd0, b[4:1], b[8], 7'h63}, "c.beqz");
      t({3'b111, b[8], b[4:3], rp, b[7:6], b[2:1], b[5], 2'b01},
        {b[8], {3{b[8]}}, b[7:5], 5'd0, xp, 3'd1, b[4:1], b[8], 7'h63}, "c.bnez");
      // quadrant 2
      t({3'b000, i6[5], rd, i6[4:0], 2'b10}, ei({6'b0, i6}, rd, 3'd1, rd, 7'h13), "c.slli");
      t({3'b010, u[5], rd, u[4:2], u[7:6], 2'b10}, ei({4'b0, u[7:2], 2'b0}, 5'd2, 3'd2, rd, 7'h03), "c.lwsp");
      t({3'b011, u[5], rd, u[4:3], u[8:6], 2'b10}, ei({3'b0, u[8:3], 3'b0}, 5'd2, 3'd3, rd, 7'h03), "c.ldsp");
      t({4'b1000, rd, 5'd0, 2'b10}, ei(12'd0, rd, 3'd0, 5'd0, 7'h67), "c.jr");
      t({4'b1000, rd, rs2, 2'b10}, er(7'h00, rs2, 5'd0, 3'd0, rd, 7'h33), "c.mv");
      t({4'b1001, rd, 5'd0, 2'b10}, ei(12'd0, rd, 3'd0, 5'd1, 7'h67), "c.jalr");
      t({4'b1001, rd, rs2, 2'b10}, er(7'h00, rs2, rd, 3'd0, rd, 7'h33), "c.add");
      t({3'b110, u[5:2], u[7:6], rs2, 2'b10}, es({4'b0, u[7:2], 2'b0}, rs2, 5'd2, 3'd2), "c.swsp");
      t({3'b111, u[5:3], u[8:6], rs2, 2'b10}, es({3'b0, u[8:3], 3'b0}, rs2, 5'd2, 3'd3), "c.sdsp");
      // reserved encodings
      bad({3'b000, 8'd0, rq, 2'b00}, "c.addi4spn with zero immediate");
      bad({3'b010, i6[5], 5'd0, i6[4:0], 2'b10}, "c.lwsp with rd = x0");
      bad({4'b1000, 5'd0, 5'd0, 2'b10}, "c.jr with rs1 = x0");
    end
  endtask

  initial begin
    random_part();
    t(16'h4515, 32'h0050_0513, "c.li");
    t(16'h050d, 32'h0035_0513, "c.addi");
    t(16'h85aa, 32'h00a0_05b3, "c.mv");
    t(16'h95aa, 32'h00a5_85b3, "c.add");
    t(16'h0001, 32'h0000_0013, "c.nop");
    t(16'h4188, 32'h0005_a503, "c.lw");
    t(16'h6588, 32'h0085_b503, "c.ld");
    t(16'he588, 32'h00a5_b423, "c.sd");
    t(16'ha001, 32'h0000_006f, "c.j");
    t(16'h8082, 32'h0000_8067, "c.jr");
    t(16'hc101, 32'h0005_0063, "c.beqz");
    t(16'h0506, 32'h0015_1513, "c.slli");
    t(16'h2505, 32'h0015_051b, "c.addiw");
    t(16'h6505, 32'h0000_1537, "c.lui");
    t(16'h6141, 32'h0101_0113, "c.addi16sp");
    t(16'h8d0d, 32'h40b5_0533, "c.sub");
    t(16'h9002, 32'h0010_0073, "c.ebreak");
    bad(16'h0000, "zero");
    bad(16'h2000, "c.fld");
    in = 32'h0050_0513; #1;
    checks++;
    if (out !== 32'h0050_0513 || is_c !== 1'b0 || illegal !== 1'b0) begin failures++; $display("FAIL: 32-bit pass-through"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
