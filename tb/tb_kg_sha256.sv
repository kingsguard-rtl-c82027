// tb_kg_sha256 -- checks the SHA-256 compression core against published test
// vectors ("abc", and 48-byte messages hashed with Python's hashlib) and
// against the behavioural reference model on random blocks and chaining
// values. Also checks the latency: done rises 65 clock edges after the edge that samples start.
module tb_kg_sha256;
  import tb_sha_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [511:0] blk = '0;
  logic [255:0] hin = IV, dig;
  int checks = 0, failures = 0;

  kg_sha256 dut (.clk, .rst_n, .start, .block(blk), .h_in(hin), .busy, .done, .digest(dig));

  task automatic run(input logic [511:0] b, input logic [255:0] h, input logic [255:0] exp, input string name);
    int cyc;
    @(negedge clk); blk = b; hin = h; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (dig !== exp) begin failures++; $display("FAIL %s: got %h exp %h", name, dig, exp); end
    checks++;
    // done rises on the 65th edge after the edge that samples start
    if (cyc != 66) begin failures++; $display("FAIL %s latency %0d", name, cyc); end
  endtask

  initial begin
    logic [511:0] b;
    logic [255:0] h;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run({24'h616263, 8'h80, 416'b0, 64'd24}, IV,
        256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc");
    run({384'b0, 1'b1, 63'b0, 64'd384}, IV,
        256'h17b0761f87b081d5cf10757ccc89f12be355c70e2e29df288b65b30710dcbcd1, "zero48");
    b = '0;
    for (int i = 0; i < 48; i++) b[511-8*i -: 8] = 8'(i);
    b[511-384] = 1'b1; b[63:0] = 64'd384;
    run(b, IV, 256'h4dbdc2b2b62cb00749785bc84202236dbc3777d74660611b8e58812f0cfde6c3, "bytes48");
    // reference model agrees with the published vectors
    checks++;
    if (path_hash('0, '0, '0) !== 256'h17b0761f87b081d5cf10757ccc89f12be355c70e2e29df288b65b30710dcbcd1) begin
      failures++; $display("FAIL reference model");
    end
    for (int n = 0; n < 6; n++) begin
      for (int i = 0; i < 16; i++) b[32*i +: 32] = $urandom;
      for (int i = 0; i < 8; i++)  h[32*i +: 32] = $urandom;
      run(b, h, compress(h, b), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
