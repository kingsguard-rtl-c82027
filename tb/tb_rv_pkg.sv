// tb_rv_pkg -- RISC-V instruction encoders used by the testbenches to write
// small test programs (RV64I base encodings).
package tb_rv_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input int rs2, input int rs1, input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input int rs1, input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] ADD (input int rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (input int rd, rs1, rs2); return r_type(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR_(input int rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] ADDI(input int rd, rs1, imm); return i_type(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(input int rd, rs1, sh);  return i_type(sh & 63, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] LD  (input int rd, rs1, imm); return i_type(imm, rs1, 3'b011, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SD  (input int rs2, rs1, imm);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b011, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] BR(input logic [2:0] f3, input int rs1, rs2, off);
    logic [12:0] i; i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] BEQ(input int rs1, rs2, off); return BR(3'b000, rs1, rs2, off); endfunction
  function automatic logic [31:0] BNE(input int rs1, rs2, off); return BR(3'b001, rs1, rs2, off); endfunction
  function automatic logic [31:0] BLT(input int rs1, rs2, off); return BR(3'b100, rs1, rs2, off); endfunction
  function automatic logic [31:0] JAL(input int rd, off);
    logic [20:0] i; i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(input int rd, rs1, imm); return i_type(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic logic [31:0] LUI(input int rd, input logic [19:0] imm); return {imm, 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] CSRRW(input int rd, csr, rs1); return {12'(csr), 5'(rs1), 3'b001, 5'(rd), 7'b1110011}; endfunction
  function automatic logic [31:0] CSRRS(input int rd, csr, rs1); return {12'(csr), 5'(rs1), 3'b010, 5'(rd), 7'b1110011}; endfunction
  function automatic logic [31:0] ECALL(); return 32'h00000073; endfunction
endpackage
