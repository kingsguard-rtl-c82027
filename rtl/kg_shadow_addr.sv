// kg_shadow_addr -- data address to shadow-memory taint location.
//
// Every 64-bit word of data memory has one taint bit in a reserved shadow
// region. The taint of the word at data address A lives in the byte
//     taint_byte_addr = ((A - DATA_BASE) >> 6) + SHADOW_BASE
// so a 64-byte block of data shares one taint byte, and a 4 KB page needs 64
// bytes of taints. Inside that byte, bit k is the taint of the k-th word of
// the block (address bits [5:3]). For a 64-bit-wide memory the unit also gives
// the aligned word that holds the byte and the bit position in that word.
//
// Purely combinational. The formula is the paper's; the base addresses and the
// bit order inside a taint byte are this design's choice.
module kg_shadow_addr #(
  parameter logic [63:0] DATA_BASE   = 64'h8000_0000,
  parameter logic [63:0] SHADOW_BASE = 64'h8800_0000
) (
  input  logic [63:0] addr,
  output logic [63:0] taint_byte_addr,
  output logic [63:0] taint_word_addr,
  output logic [5:0]  taint_bit
);

  logic [63:0] off;

  always_comb begin
    off             = addr - DATA_BASE;
    taint_byte_addr = (off >> 6) + SHADOW_BASE;
    taint_word_addr = {taint_byte_addr[63:3], 3'b000};
    taint_bit       = {taint_byte_addr[2:0], off[5:3]};
  end

endmodule
