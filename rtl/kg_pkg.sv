// kg_pkg -- shared types and constants of the KingsGuard enclave-protection
// hardware.
//
// Holds the widths that every block agrees on (64-bit data words and EIDs,
// 256-bit hashes), the RISC-V opcodes the taint logic decodes, the instruction
// classes used for taint propagation, and the Security Monitor commands that
// switch the core into and out of enclave mode. The widths follow the paper
// (64-bit registers, 64-bit ownership-table entries, SHA-256); the command
// encoding and the CSR numbers of the shared registers are this design's own.
package kg_pkg;

  localparam int unsigned XLEN   = 64;
  localparam int unsigned EID_W  = 64;
  localparam int unsigned HASH_W = 256;

  // RISC-V major opcodes (instr[6:0])
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;

  // First CSR number of the user-accessible shared registers.
  localparam logic [11:0] CSR_SHARED_BASE = 12'h800;

  // Instruction classes as seen by the taint-propagation rules.
  typedef enum logic [3:0] {
    CLS_OTHER,     // no destination written
    CLS_REG,       // rd <- rs1 op rs2
    CLS_IMM,       // rd <- rs1 op imm
    CLS_UPPER,     // LUI / AUIPC
    CLS_JUMP,      // JAL / JALR
    CLS_BRANCH,    // conditional branch
    CLS_LOAD,
    CLS_STORE,
    CLS_SREG,      // CSR access to a shared register
    CLS_ECALL,
    CLS_ILLEGAL
  } op_class_e;

  // Security Monitor commands to the enclave control registers.
  typedef enum logic [2:0] {
    ENC_NONE    = 3'd0,
    ENC_EENTER  = 3'd1,
    ENC_EEXIT   = 3'd2,
    ENC_AEX     = 3'd3,
    ENC_ERESUME = 3'd4
  } enc_cmd_e;

endpackage
