// tb_kg_branch_monitor -- feeds a hand-written commit trace (a jump, a
// forward branch not taken, a three-iteration loop, a return, the same loop
// again, a backward branch that falls through the first time) and checks the
// emitted (source, target, loop) events against the list worked out by hand.
// The hash side accepts events at random to exercise the backpressure, and a
// disabled monitor must emit nothing.
module tb_kg_branch_monitor;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 1, cv = 0, cr, evv, evr = 0, evl;
  logic [63:0] cpc = '0, evs, evt;
  logic [31:0] cin = '0, nsup;
  int checks = 0, failures = 0, stalls = 0;
  typedef struct { logic [63:0] s, t; logic loop; } ev_t;
  ev_t got [$];

  kg_branch_monitor dut (.clk, .rst_n, .enable, .commit_valid(cv), .commit_ready(cr), .commit_pc(cpc),
    .commit_instr(cin), .ev_valid(evv), .ev_ready(evr), .ev_s(evs), .ev_t(evt), .ev_loop(evl),
    .n_loops_suppressed(nsup));

  always @(negedge clk) evr <= 1'($urandom_range(0, 3) == 0);
  always @(posedge clk) if (evv && evr) got.push_back('{evs, evt, evl});

  task automatic commit(input logic [63:0] pc, input logic [31:0] ins);
    @(negedge clk); cv = 1; cpc = pc; cin = ins;
    @(posedge clk);
    while (!cr) begin stalls++; @(posedge clk); end
    #1 cv = 0;
  endtask

  initial begin
    ev_t exp [$];
    repeat (2) @(negedge clk); rst_n = 1;
    commit('h100, ADDI(1, 0, 3));
    commit('h104, JAL(0, 'h0FC));          // -> 0x200
    commit('h200, BEQ(5, 6, 16));          // forward, not taken
    commit('h204, ADDI(1, 1, -1));
    commit('h208, BNE(1, 0, -4));          // loop: taken
    commit('h204, ADDI(1, 1, -1));
    commit('h208, BNE(1, 0, -4));          // taken again: suppressed
    commit('h204, ADDI(1, 1, -1));
    commit('h208, BNE(1, 0, -4));          // exit: suppressed
    commit('h20C, JALR(0, 2, 0));          // -> 0x204
    commit('h204, ADDI(1, 1, -1));
    commit('h208, BNE(1, 0, -4));          // loop entered again: hashed
    commit('h204, ADDI(1, 1, -1));
    commit('h208, BNE(1, 0, -4));          // falls through
    commit('h20C, BLT(3, 4, -12));         // backward, not taken, not a known loop
    commit('h210, ECALL());
    exp = '{'{'h104, 'h200, 0}, '{'h200, 'h204, 0}, '{'h208, 'h204, 1}, '{'h20C, 'h204, 0},
            '{'h208, 'h204, 1}, '{'h20C, 'h210, 0}};
    repeat (10) @(negedge clk);
    // disabled: nothing recorded
    enable = 0;
    commit('h300, JAL(0, 8));
    commit('h308, ADDI(0, 0, 0));
    repeat (10) @(negedge clk);
    checks++;
    if (got.size() != exp.size()) begin failures++; $display("FAIL %0d events, exp %0d", got.size(), exp.size()); end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i].s !== exp[i].s || got[i].t !== exp[i].t || got[i].loop !== exp[i].loop) begin
        failures++; $display("FAIL ev%0d got %h->%h loop=%b exp %h->%h loop=%b", i, got[i].s, got[i].t, got[i].loop,
                             exp[i].s, exp[i].t, exp[i].loop);
      end
    end
    checks++; if (nsup != 3) begin failures++; $display("FAIL suppressed %0d", nsup); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL backpressure never seen"); end
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
