// Compressed instruction decoder: expands a 16-bit RV64C instruction into
// the equivalent 32-bit RV64I instruction, so the main decoder sees only
// 32-bit encodings. Floating-point compressed loads and stores are illegal
// (the core has no F/D), as are the reserved encodings. A 32-bit instruction
// passes through unchanged with is_compressed_o low. Purely combinational.
module compressed_decoder (
  input  logic [31:0] instr_i,
  output logic [31:0] instr_o,
  output logic        illegal_instr_o,
  output logic        is_compressed_o
);
  logic [4:0]  rdp, rs1p, rs2p, rd;
  logic [20:0] j;
  logic [12:0] b;
  assign rdp  = {2'b01, instr_i[4:2]};
  assign rs1p = {2'b01, instr_i[9:7]};
  assign rs2p = {2'b01, instr_i[4:2]};
  assign rd   = instr_i[11:7];
  assign j = {{10{instr_i[12]}}, instr_i[8], instr_i[10:9], instr_i[6], instr_i[7],
              instr_i[2], instr_i[11], instr_i[5:3], 1'b0};
  assign b = {{5{instr_i[12]}}, instr_i[6:5], instr_i[2], instr_i[11:10], instr_i[4:3], 1'b0};

  always_comb begin
    illegal_instr_o = 1'b0;
    is_compressed_o = 1'b1;
    instr_o         = instr_i;
    unique case (instr_i[1:0])
      2'b00: unique case (instr_i[15:13])
        3'b000: begin // c.addi4spn
          instr_o = {2'b0, instr_i[10:7], instr_i[12:11], instr_i[5], instr_i[6], 2'b00,
                     5'd2, 3'b000, rdp, 7'b0010011};
          illegal_instr_o = instr_i[12:5] == 8'd0;
        end
        3'b010: instr_o = {5'b0, instr_i[5], instr_i[12:10], instr_i[6], 2'b00, rs1p, 3'b010, rdp, 7'b0000011};
        3'b011: instr_o = {4'b0, instr_i[6:5], instr_i[12:10], 3'b000, rs1p, 3'b011, rdp, 7'b0000011};
        3'b110: instr_o = {5'b0, instr_i[5], instr_i[12], rs2p, rs1p, 3'b010, instr_i[11:10], instr_i[6], 2'b00, 7'b0100011};
        3'b111: instr_o = {4'b0, instr_i[6:5], instr_i[12], rs2p, rs1p, 3'b011, instr_i[11:10], 3'b000, 7'b0100011};
        default: illegal_instr_o = 1'b1;
      endcase
      2'b01: unique case (instr_i[15:13])
        3'b000: instr_o = {{6{instr_i[12]}}, instr_i[12], instr_i[6:2], rd, 3'b000, rd, 7'b0010011};
        3'b001: begin // c.addiw
          instr_o = {{6{instr_i[12]}}, instr_i[12], instr_i[6:2], rd, 3'b000, rd, 7'b0011011};
          illegal_instr_o = rd == 5'd0;
        end
        3'b010: instr_o = {{6{instr_i[12]}}, instr_i[12], instr_i[6:2], 5'd0, 3'b000, rd, 7'b0010011};
        3'b011: begin
          if (rd == 5'd2) begin // c.addi16sp
            instr_o = {{3{instr_i[12]}}, instr_i[4:3], instr_i[5], instr_i[2], instr_i[6], 4'b0,
                       5'd2, 3'b000, 5'd2, 7'b0010011};
          end else begin // c.lui
            instr_o = {{15{instr_i[12]}}, instr_i[6:2], rd, 7'b0110111};
          end
          illegal_instr_o = {instr_i[12], instr_i[6:2]} == 6'd0;
        end
        3'b100: unique case (instr_i[11:10])
          2'b00: instr_o = {6'b000000, instr_i[12], instr_i[6:2], rs1p, 3'b101, rs1p, 7'b0010011};
          2'b01: instr_o = {6'b010000, instr_i[12], instr_i[6:2], rs1p, 3'b101, rs1p, 7'b0010011};
          2'b10: instr_o = {{6{instr_i[12]}}, instr_i[12], instr_i[6:2], rs1p, 3'b111, rs1p, 7'b0010011};
          default: begin
            unique case ({instr_i[12], instr_i[6:5]})
              3'b000: instr_o = {7'b0100000, rs2p, rs1p, 3'b000, rs1p, 7'b0110011};
              3'b001: instr_o = {7'b0000000, rs2p, rs1p, 3'b100, rs1p, 7'b0110011};
              3'b010: instr_o = {7'b0000000, rs2p, rs1p, 3'b110, rs1p, 7'b0110011};
              3'b011: instr_o = {7'b0000000, rs2p, rs1p, 3'b111, rs1p, 7'b0110011};
              3'b100: instr_o = {7'b0100000, rs2p, rs1p, 3'b000, rs1p, 7'b0111011};
              3'b101: instr_o = {7'b0000000, rs2p, rs1p, 3'b000, rs1p, 7'b0111011};
              default: illegal_instr_o = 1'b1;
            endcase
          end
        endcase
        3'b101: instr_o = {j[20], j[10:1], j[11], j[19:12], 5'd0, 7'b1101111};
        3'b110: instr_o = {b[12], b[10:5], 5'd0, rs1p, 3'b000, b[4:1], b[11], 7'b1100011};
        default: instr_o = {b[12], b[10:5], 5'd0, rs1p, 3'b001, b[4:1], b[11], 7'b1100011};
      endcase
      2'b10: unique case (instr_i[15:13])
        3'b000: instr_o = {6'b0, instr_i[12], instr_i[6:2], rd, 3'b001, rd, 7'b0010011};
        3'b010: begin
          instr_o = {4'b0, instr_i[3:2], instr_i[12], instr_i[6:4], 2'b00, 5'd2, 3'b010, rd, 7'b0000011};
          illegal_instr_o = rd == 5'd0;
        end
        3'b011: begin
          instr_o = {3'b0, instr_i[4:2], instr_i[12], instr_i[6:5], 3'b000, 5'd2, 3'b011, rd, 7'b0000011};
          illegal_instr_o = rd == 5'd0;
        end
        3'b100: begin
          if (!instr_i[12]) begin
            if (instr_i[6:2] == 5'd0) begin // c.jr
              instr_o = {12'b0, rd, 3'b000, 5'd0, 7'b1100111};
              illegal_instr_o = rd == 5'd0;
            end else begin                  // c.mv
              instr_o = {7'b0, instr_i[6:2], 5'd0, 3'b000, rd, 7'b0110011};
            end
          end else begin
            if (instr_i[6:2] == 5'd0) begin
              if (rd == 5'd0) instr_o = 32'h0010_0073;                       // c.ebreak
              else            instr_o = {12'b0, rd, 3'b000, 5'd1, 7'b1100111}; // c.jalr
            end else begin                                                   // c.add
              instr_o = {7'b0, instr_i[6:2], rd, 3'b000, rd, 7'b0110011};
            end
          end
        end
        3'b110: instr_o = {4'b0, instr_i[8:7], instr_i[12], instr_i[6:2], 5'd2, 3'b010, instr_i[11:9], 2'b00, 7'b0100011};
        3'b111: instr_o = {3'b0, instr_i[9:7], instr_i[12], instr_i[6:2], 5'd2, 3'b011, instr_i[11:10], 3'b000, 7'b0100011};
        default: illegal_instr_o = 1'b1;
      endcase
      default: is_compressed_o = 1'b0;
    endcase
    if (instr_i[15:0] == 16'h0) illegal_instr_o = 1'b1;
  end
endmodule
