// tb_kg_adp_table -- loads authorized path hashes and checks that match is
// set exactly for valid stored hashes, not for invalidated or overwritten
// entries, and not after clear.
module tb_kg_adp_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, we = 0, wvalid = 0, match;
  logic [2:0] widx = '0;
  logic [255:0] whash = '0, hc = '0;
  logic [255:0] hv [8];
  int checks = 0, failures = 0;

  kg_adp_table dut (.clk, .rst_n, .clear, .we, .widx, .wvalid, .whash, .h_current(hc), .match);

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction
  task automatic wr(input int i, input logic [255:0] h, input logic v);
    @(negedge clk); we = 1; widx = 3'(i); whash = h; wvalid = v;
    @(negedge clk); we = 0;
  endtask
  task automatic probe(input logic [255:0] h, input logic exp);
    hc = h; #1; checks++;
    if (match !== exp) begin failures++; $display("FAIL match=%b exp=%b", match, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    probe('0, 0);                       // empty table matches nothing, not even 0
    for (int i = 0; i < 8; i++) begin hv[i] = rnd256(); wr(i, hv[i], 1); end
    for (int i = 0; i < 8; i++) probe(hv[i], 1);
    for (int n = 0; n < 20; n++) probe(rnd256(), 0);
    probe(hv[3] ^ 256'd1, 0);           // one bit off
    wr(3, hv[3], 0); probe(hv[3], 0);   // invalidated
    wr(4, rnd256(), 1); probe(hv[4], 0);// overwritten
    probe(hv[5], 1);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    probe(hv[5], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
