// tb_kg_enclave_ctrl -- drives EENTER, AEX, ERESUME and EEXIT and checks
// CurrEID, the mode and enable bits and the one-clock hash_clear pulse after
// each command.
module tb_kg_enclave_ctrl;
  import kg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0;
  enc_cmd_e cmd = ENC_NONE;
  logic [63:0] cmd_eid = '0, curr_eid;
  logic enclave_mode, ift_en, hash_en, hash_clear;
  int checks = 0, failures = 0;

  kg_enclave_ctrl dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_eid, .curr_eid, .enclave_mode, .ift_en, .hash_en, .hash_clear);

  task automatic issue(input enc_cmd_e c, input logic [63:0] eid);
    @(negedge clk); cmd_valid = 1; cmd = c; cmd_eid = eid;
    @(negedge clk); cmd_valid = 0; cmd = ENC_NONE;
  endtask
  task automatic expect_state(input logic [63:0] eid, input logic m, input logic clr, input string what);
    checks++;
    if (curr_eid !== eid || enclave_mode !== m || ift_en !== m || hash_en !== m || hash_clear !== clr) begin
      failures++;
      $display("FAIL %s: eid=%0d mode=%b ift=%b hash=%b clr=%b", what, curr_eid, enclave_mode, ift_en, hash_en, hash_clear);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    expect_state(0, 0, 0, "reset");
    rst_n = 1;
    issue(ENC_EENTER, 64'd7);   expect_state(7, 1, 0, "eenter");
    @(negedge clk);             expect_state(7, 1, 0, "hold");
    issue(ENC_AEX, 0);          expect_state(0, 0, 0, "aex keeps hash (no clear)");
    issue(ENC_ERESUME, 0);      expect_state(7, 1, 0, "eresume restores eid");
    issue(ENC_EEXIT, 0);        expect_state(0, 0, 1, "eexit clears hash");
    @(negedge clk);             expect_state(0, 0, 0, "clear is one pulse");
    issue(ENC_EENTER, 64'h1234_5678_9abc); expect_state(64'h1234_5678_9abc, 1, 0, "second enclave");
    issue(ENC_EEXIT, 0);        expect_state(0, 0, 1, "exit 2");
    issue(ENC_ERESUME, 0);      expect_state(0, 1, 0, "resume after exit has no EID");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
