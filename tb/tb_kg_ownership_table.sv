// tb_kg_ownership_table -- loads the page ownership of the paper's example
// (pages 0 and 3 to enclave 1, page 2 to enclave 2) plus random entries, and
// checks for random addresses and CurrEIDs that an access is allowed exactly
// when the page is free or owned by CurrEID, and that free pages and
// addresses outside the table count as non-enclave memory.
module tb_kg_ownership_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NP = 16;
  localparam logic [63:0] BASE = 64'h8000_0000;
  logic we = 0;
  logic [3:0] widx = '0;
  logic [63:0] weid = '0, addr = '0, curr_eid = '0, owner;
  logic in_range, allowed, non_enclave;
  logic [63:0] model [NP];
  int checks = 0, failures = 0;

  kg_ownership_table #(.NUM_PAGES(NP), .RAM_BASE(BASE)) dut (.clk, .rst_n, .we, .widx, .weid, .addr, .curr_eid,
    .owner, .in_range, .allowed, .non_enclave);

  task automatic wr(input int i, input logic [63:0] e);
    @(negedge clk); we = 1; widx = 4'(i); weid = e; model[i] = e;
    @(negedge clk); we = 0;
  endtask
  task automatic probe(input logic [63:0] a, input logic [63:0] eid);
    logic [63:0] o; logic inr;
    addr = a; curr_eid = eid; #1;
    inr = (a >= BASE) && (a < BASE + NP * 4096);
    o = inr ? model[(a - BASE) / 4096] : 0;
    checks++;
    if (owner !== o || allowed !== (o == 0 || o == eid) || non_enclave !== (o == 0) || in_range !== inr) begin
      failures++;
      $display("FAIL addr=%h eid=%0d owner=%0d allowed=%b ne=%b", a, eid, owner, allowed, non_enclave);
    end
  endtask

  initial begin
    for (int i = 0; i < NP; i++) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    probe(BASE, 0);
    wr(0, 1); wr(2, 2); wr(3, 1);
    @(negedge clk);
    // Enclave A (EID 1): pages 0,1,3 yes, page 2 no; non-enclave: only page 1
    probe(BASE + 0*4096 + 8, 1); checks++; if (!allowed) failures++;
    probe(BASE + 2*4096, 1);     checks++; if (allowed) failures++;
    probe(BASE + 1*4096, 0);     checks++; if (!allowed || !non_enclave) failures++;
    probe(BASE + 3*4096, 0);     checks++; if (allowed) failures++;
    probe(64'h1000_0000, 1);     checks++; if (!non_enclave || !allowed) failures++;
    for (int n = 0; n < 40; n++) wr($urandom_range(0, NP-1), 64'($urandom_range(0, 3)));
    @(negedge clk);
    for (int n = 0; n < 300; n++)
      probe(BASE - 64'h2000 + 64'($urandom_range(0, (NP + 4) * 4096 - 1)), 64'($urandom_range(0, 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
