// tb_kg_hash_engine -- pushes control-flow events and checks H_current
// against the reference chain H <- SHA-256(H || s || t) from INIT = 0; checks
// that the FIFO fills (ev_ready drops), that idle means every accepted event
// is hashed, that a disabled engine keeps H_current and takes no events (AEX)
// and that clear restores INIT (EEXIT).
module tb_kg_hash_engine;
  import tb_sha_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 1, clear = 0, evv = 0, evr, idle;
  logic [63:0] s = '0, t = '0;
  logic [255:0] hc, ref_h;
  logic [31:0] nh;
  int checks = 0, failures = 0, full_seen = 0;

  kg_hash_engine #(.FIFO_DEPTH(4)) dut (.clk, .rst_n, .enable, .clear, .ev_valid(evv), .ev_ready(evr),
    .ev_s(s), .ev_t(t), .h_current(hc), .idle, .n_hashed(nh));

  task automatic push(input logic [63:0] ss, input logic [63:0] tt);
    @(negedge clk); evv = 1; s = ss; t = tt;
    @(posedge clk);
    while (!evr) begin full_seen++; @(posedge clk); end
    #1 evv = 0;
    ref_h = path_hash(ref_h, ss, tt);
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (!idle) @(negedge clk);
  endtask
  task automatic expect_h(input string what);
    checks++;
    if (hc !== ref_h) begin failures++; $display("FAIL %s: %h exp %h", what, hc, ref_h); end
  endtask

  initial begin
    ref_h = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (hc !== '0 || !idle) failures++;
    push(64'h8000_0104, 64'h8000_0200);
    wait_idle(); expect_h("H0");
    // burst of 8 events: the 4-deep queue must fill
    for (int i = 0; i < 8; i++) push(64'h8000_0000 + 64'(i * 16), 64'h8000_1000 + 64'(i));
    checks++; if (full_seen == 0) begin failures++; $display("FAIL queue never full"); end
    checks++; if (idle) begin failures++; $display("FAIL idle while hashing"); end
    wait_idle(); expect_h("burst");
    checks++; if (nh != 9) begin failures++; $display("FAIL n_hashed %0d", nh); end
    // AEX: disabled, value kept, no events taken
    @(negedge clk); enable = 0; #1;
    checks++; if (evr) begin failures++; $display("FAIL ready while disabled"); end
    repeat (5) @(negedge clk);
    expect_h("kept while disabled");
    enable = 1;
    push(64'h8000_0400, 64'h8000_0404);
    wait_idle(); expect_h("after resume");
    // EEXIT: clear back to INIT
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    ref_h = '0; expect_h("clear");
    push(64'h8000_0104, 64'h8000_0200);
    wait_idle(); expect_h("H0 again");
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
