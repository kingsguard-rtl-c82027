// tb_kg_shared_regs -- the shared-register storage channel: enclave 1 writes
// a tainted value, then non-enclave code and enclave 2 try to read it (both
// get 0 and the register is wiped), enclave 1 can read its own value, an
// untainted write is readable by everyone, and a write by another enclave
// restamps the register. Then random traffic against a model.
module tb_kg_shared_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 4;
  logic [63:0] eid = '0, wdata = '0, rdata;
  logic we = 0, wt = 0, re = 0, rt, denied;
  logic [1:0] widx = '0, ridx = '0;
  logic [63:0] mv [N], mo [N];
  logic [63:0] got;      // data of the last read
  logic        got_den;  // last read was refused
  int checks = 0, failures = 0;

  kg_shared_regs #(.NUM_REGS(N)) dut (.clk, .rst_n, .curr_eid(eid), .we, .widx, .wdata, .wtaint(wt),
    .re, .ridx, .rdata, .rtaint(rt), .denied);

  task automatic wr(input logic [63:0] e, input int i, input logic [63:0] d, input logic t);
    @(negedge clk); eid = e; we = 1; widx = 2'(i); wdata = d; wt = t;
    @(posedge clk); #1 we = 0;
    mv[i] = d; mo[i] = t ? e : 0;
  endtask
  task automatic rd(input logic [63:0] e, input int i);
    logic deny;
    @(negedge clk); eid = e; re = 1; ridx = 2'(i); #1;
    deny = (mo[i] != 0) && (mo[i] != e);
    checks++;
    if (denied !== deny || rdata !== (deny ? 64'd0 : mv[i]) || rt !== (!deny && mo[i] != 0)) begin
      failures++; $display("FAIL rd eid=%0d reg=%0d data=%h denied=%b", e, i, rdata, denied);
    end
    got = rdata; got_den = denied;
    @(posedge clk); #1 re = 0;
    if (deny) begin mv[i] = 0; mo[i] = 0; end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin mv[i] = 0; mo[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    wr(1, 0, 64'hDEAD_BEEF_0000_0001, 1);
    rd(1, 0);                                    // owner reads
    checks++; if (got !== 64'hDEAD_BEEF_0000_0001) failures++;
    rd(0, 0);                                    // non-enclave: denied
    checks++; if (!got_den || got !== 0) failures++;
    rd(1, 0);                                    // wiped by the denied read
    checks++; if (got !== 0) failures++;
    wr(1, 1, 64'h42, 1);
    rd(2, 1);                                    // other enclave denied
    checks++; if (!got_den) failures++;
    wr(2, 1, 64'h77, 1);                         // restamp by enclave 2
    rd(2, 1);
    checks++; if (got_den || got !== 64'h77) failures++;
    wr(3, 2, 64'h55, 0);                         // untainted: readable by all
    rd(0, 2);
    checks++; if (got_den || got !== 64'h55) failures++;
    for (int n = 0; n < 300; n++) begin
      if ($urandom_range(0, 1)) wr(64'($urandom_range(0, 3)), $urandom_range(0, N-1), {$urandom, $urandom}, 1'($urandom));
      else rd(64'($urandom_range(0, 3)), $urandom_range(0, N-1));
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
