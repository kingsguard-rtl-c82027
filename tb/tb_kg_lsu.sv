// tb_kg_lsu -- checks the shadow-memory requests of the load/store unit.
// With tracking on, a store writes the data and sets or clears exactly its
// taint bit in the shadow byte (neighbouring taints kept), a load returns the
// taint bit; with tracking off only the data word is touched and the taint
// reads 0. Counts memory requests per access (1 untracked, 2 tracked load,
// 3 tracked store) and, with a zero-wait memory, the clocks to done. Then
// random tracked traffic against a model.
module tb_kg_lsu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [63:0] DB = 64'h8000_0000, SB = 64'h8800_0000;
  logic req_valid = 0, req_we = 0, req_wt = 0, track = 0;
  logic [63:0] req_addr = '0, req_wdata = '0, rdata;
  logic ready, done, rtaint, taint_access;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [63:0] mem_addr, mem_wdata, mem_rdata;
  logic [7:0] mem_wstrb;
  int checks = 0, failures = 0;
  logic [63:0] dm [logic [63:0]];   // data model
  logic        tm [logic [63:0]];   // taint model

  kg_lsu #(.DATA_BASE(DB), .SHADOW_BASE(SB)) dut (.clk, .rst_n, .req_valid, .req_we, .req_addr, .req_wdata,
    .req_wtaint(req_wt), .track, .ready, .done, .rdata, .rtaint, .taint_access,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb, .mem_gnt, .mem_rvalid, .mem_rdata);
  tb_mem_model #(.RANDOM_WAIT(1'b0)) u_mem (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_gnt, .mem_rvalid, .mem_rdata);

  // shadow bit of data word a, computed from the layout (word w -> byte w/8, bit w%8)
  function automatic logic shadow_bit(input logic [63:0] a);
    logic [63:0] w, ba, v;
    w = (a - DB) >> 3; ba = SB + (w >> 3);
    v = u_mem.rd(ba);
    return v[ba[2:0]*8 + w[2:0]];
  endfunction

  task automatic access(input logic we, input logic [63:0] a, input logic [63:0] d, input logic t,
                        input logic trk, input int exp_req, input int exp_cyc);
    int r0, cyc;
    r0 = u_mem.n_req;
    @(negedge clk); req_valid = 1; req_we = we; req_addr = a; req_wdata = d; req_wt = t; track = trk;
    @(negedge clk); req_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (u_mem.n_req - r0 != exp_req) begin failures++; $display("FAIL requests %0d exp %0d", u_mem.n_req - r0, exp_req); end
    if (exp_cyc > 0) begin
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
    end
    if (we) begin dm[a] = d; if (trk) tm[a] = t; end
    else begin
      checks++;
      if (rdata !== (dm.exists(a) ? dm[a] : 64'd0) || rtaint !== (trk && tm.exists(a) && tm[a])) begin
        failures++; $display("FAIL load %h: %h/%b", a, rdata, rtaint);
      end
    end
  endtask

  initial begin
    logic [63:0] a;
    repeat (2) @(negedge clk); rst_n = 1;
    // Pre-fill the shadow bytes around the test words with ones.
    u_mem.mem[SB] = 64'hFFFF_FFFF_FFFF_FFFF;
    for (int i = 0; i < 64; i++) tm[DB + 8*i] = 1;
    access(1, DB + 8*10, 64'h1111, 0, 1, 3, 5);  // tracked store, clears bit 10
    checks++; if (shadow_bit(DB + 8*10) !== 0 || shadow_bit(DB + 8*9) !== 1 || shadow_bit(DB + 8*11) !== 1) begin
      failures++; $display("FAIL shadow neighbours");
    end
    access(0, DB + 8*10, 0, 0, 1, 2, 5);          // tracked load, taint 0
    access(0, DB + 8*11, 0, 0, 1, 2, 5);          // tracked load, taint 1
    checks++; if (rtaint !== 1) failures++;
    access(1, DB + 4096, 64'h2222, 1, 1, 3, 5);   // sets bit in byte 64
    checks++; if (u_mem.rd(SB + 64) !== 64'h1) begin failures++; $display("FAIL page 1 taint byte %h", u_mem.rd(SB + 64)); end
    access(1, DB + 8*12, 64'h3333, 0, 0, 1, 2);   // untracked store: data only
    checks++; if (shadow_bit(DB + 8*12) !== 1) failures++;
    access(0, DB + 8*11, 0, 0, 0, 1, 3);          // untracked load: taint 0
    // random tracked traffic
    for (int n = 0; n < 200; n++) begin
      a = DB + 8 * 64'($urandom_range(0, 1023));
      if ($urandom_range(0, 1)) access(1, a, {$urandom, $urandom}, 1'($urandom), 1, 3, 0);
      else access(0, a, 0, 0, 1, 2, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
