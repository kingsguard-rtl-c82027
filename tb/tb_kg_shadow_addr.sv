// tb_kg_shadow_addr -- checks the data-to-taint address mapping: the taint of
// 64-bit word w (counted from the data base) is bit w mod 8 of byte w / 8 of
// the shadow region, so one 4 KB page uses 64 taint bytes.
module tb_kg_shadow_addr;
  localparam logic [63:0] DB = 64'h8000_0000, SB = 64'h8800_0000;
  logic [63:0] addr, tba, twa;
  logic [5:0] tbit;
  int checks = 0, failures = 0;

  kg_shadow_addr #(.DATA_BASE(DB), .SHADOW_BASE(SB)) dut (.addr, .taint_byte_addr(tba), .taint_word_addr(twa), .taint_bit(tbit));

  task automatic check(input logic [63:0] a);
    logic [63:0] w, byte_a;
    addr = a; #1;
    w = (a - DB) / 8;
    byte_a = SB + w / 8;
    checks++;
    if (tba !== byte_a || twa !== (byte_a & ~64'd7) || tbit !== 6'((byte_a % 8) * 8 + w % 8)) begin
      failures++; $display("FAIL a=%h tba=%h twa=%h bit=%0d", a, tba, twa, tbit);
    end
  endtask

  initial begin
    check(DB);
    checks++; if (tba !== SB || tbit !== 0) failures++;
    check(DB + 4096);
    checks++; if (tba !== SB + 64) failures++;   // 64 taint bytes per page
    check(DB + 56);
    checks++; if (tbit !== 6'd7) failures++;
    for (int n = 0; n < 500; n++) check(DB + 64'({$urandom} % 32'h0100_0000));
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
