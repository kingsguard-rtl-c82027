// kg_taint_prop -- taint-propagation rules for RISC-V instructions.
//
// Decodes the instruction class and gives the taint of the destination
// register and the taint a store writes into shadow memory:
//   register-register ops (OP)      rd_t = rs1_t | rs2_t
//   register-immediate ops (OP-IMM) rd_t = rs1_t
//   loads                           rd_t = taint read from shadow memory
//   stores                          shadow taint = taint of the data register
//   shared-register CSR reads       rd_t = taint of the shared register
//   LUI, AUIPC, JAL, JALR           rd_t = 0 (no register source)
// Purely combinational; also reports the class so the core can steer the
// instruction.
//
// The first four rules are the paper's propagation table (the paper writes the
// store with the operand names swapped against the RISC-V encoding, where rs2
// holds the data). The rules for upper-immediate, jump and CSR instructions
// are this design's choice.
module kg_taint_prop
  import kg_pkg::*;
(
  input  logic [31:0] instr,
  input  logic        rs1_t,
  input  logic        rs2_t,
  input  logic        mem_t,
  input  logic        sreg_t,
  output op_class_e   cls,
  output logic        rd_t,
  output logic        st_t
);

  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [11:0] csr;

  always_comb begin
    opc = instr[6:0];
    f3  = instr[14:12];
    csr = instr[31:20];
    unique case (opc)
      OPC_OP:     cls = CLS_REG;
      OPC_OPIMM:  cls = CLS_IMM;
      OPC_LUI,
      OPC_AUIPC:  cls = CLS_UPPER;
      OPC_JAL,
      OPC_JALR:   cls = CLS_JUMP;
      OPC_BRANCH: cls = CLS_BRANCH;
      OPC_LOAD:   cls = CLS_LOAD;
      OPC_STORE:  cls = CLS_STORE;
      OPC_SYSTEM: begin
        if (f3 == 3'b000 && instr[31:7] == '0)            cls = CLS_ECALL;
        else if ((f3 == 3'b001 || f3 == 3'b010) &&
                 csr[11:4] == CSR_SHARED_BASE[11:4])      cls = CLS_SREG;
        else                                              cls = CLS_ILLEGAL;
      end
      default:    cls = CLS_ILLEGAL;
    endcase

    unique case (cls)
      CLS_REG:  rd_t = rs1_t | rs2_t;
      CLS_IMM:  rd_t = rs1_t;
      CLS_LOAD: rd_t = mem_t;
      CLS_SREG: rd_t = sreg_t;
      default:  rd_t = 1'b0;
    endcase

    st_t = (cls == CLS_STORE) ? rs2_t : 1'b0;
  end

endmodule
