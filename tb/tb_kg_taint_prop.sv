// tb_kg_taint_prop -- applies every input-taint combination to one
// instruction of each class and checks the destination and store taints
// against the propagation table (OR for register ops, rs1 for immediate ops,
// shadow taint for loads, data-register taint for stores, 0 for the rest).
module tb_kg_taint_prop;
  import kg_pkg::*;
  import tb_rv_pkg::*;
  logic [31:0] instr;
  logic rs1_t, rs2_t, mem_t, sreg_t, rd_t, st_t;
  op_class_e cls;
  int checks = 0, failures = 0;

  kg_taint_prop dut (.instr, .rs1_t, .rs2_t, .mem_t, .sreg_t, .cls, .rd_t, .st_t);

  task automatic try(input logic [31:0] i, input op_class_e ecls, input int kind);
    for (int v = 0; v < 16; v++) begin
      logic erd, est;
      instr = i; {rs1_t, rs2_t, mem_t, sreg_t} = 4'(v); #1;
      unique case (kind)
        0: erd = rs1_t | rs2_t;
        1: erd = rs1_t;
        2: erd = mem_t;
        3: erd = sreg_t;
        default: erd = 0;
      endcase
      est = (ecls == CLS_STORE) ? rs2_t : 1'b0;
      checks++;
      if (cls !== ecls || rd_t !== erd || st_t !== est) begin
        failures++; $display("FAIL instr=%h v=%b cls=%s rd_t=%b st_t=%b", i, 4'(v), cls.name(), rd_t, st_t);
      end
    end
  endtask

  initial begin
    try(ADD(3, 1, 2), CLS_REG, 0);
    try(SUB(3, 1, 2), CLS_REG, 0);
    try(XOR_(5, 6, 7), CLS_REG, 0);
    try(ADDI(3, 1, -5), CLS_IMM, 1);
    try(SLLI(1, 1, 12), CLS_IMM, 1);
    try(LD(4, 1, 16), CLS_LOAD, 2);
    try(SD(4, 1, 16), CLS_STORE, 4);
    try(LUI(3, 20'h12345), CLS_UPPER, 4);
    try(JAL(1, 64), CLS_JUMP, 4);
    try(JALR(1, 2, 0), CLS_JUMP, 4);
    try(BEQ(1, 2, -8), CLS_BRANCH, 4);
    try(CSRRS(5, 12'h800, 0), CLS_SREG, 3);
    try(ECALL(), CLS_ECALL, 4);
    try(32'h0000_000F, CLS_ILLEGAL, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
