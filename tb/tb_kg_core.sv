// tb_kg_core -- runs small RISC-V programs on the core with a behavioural
// ownership table, path-hash status and memory around it.
//  1. Non-enclave mode: a counting loop, a call and return, stores; checks
//     the arithmetic result and that no shadow-memory request is made.
//  2. Enclave mode (EID 1, page 0 owned by it): a tainted secret stored to
//     non-enclave memory is zeroed (and its register wiped) when the path is
//     not authorized and released when it is (the core must wait for the
//     hash to be idle first); a secret-derived address into non-enclave
//     memory is redirected to A_FIXED; the shared register keeps an enclave
//     value for that enclave; a store inside the enclave keeps the taint;
//     an access to another enclave's page faults.
//  3. Non-enclave code reading the stamped shared register gets 0.
// Expected values are worked out by hand from the programs.
module tb_kg_core;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [63:0] DB = 64'h8000_0000, SB = 64'h8800_0000, AF = 64'h8001_0000;
  localparam logic [63:0] PBASE = 64'h1000;

  logic start = 0, reg_clear = 0, enclave_mode = 0, ift_en = 0;
  logic [63:0] start_pc = PBASE, curr_eid = 0;
  logic halted, ecall, fault;
  logic [63:0] pc, imem_addr, ot_addr;
  logic [31:0] imem_rdata;
  logic ot_allowed, ot_non_enclave, adp_match, hash_idle = 1;
  logic commit_valid, commit_ready = 1;
  logic [63:0] commit_pc;
  logic [31:0] commit_instr;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [63:0] mem_addr, mem_wdata, mem_rdata;
  logic [7:0] mem_wstrb;
  logic ev_redirect, ev_declass, ev_block, ev_sreg_denied, ev_hash_wait, ev_commit_wait, ev_taint_access;
  int n_redirect = 0, n_declass = 0, n_block = 0, n_denied = 0, n_hwait = 0, n_cwait = 0, n_taint = 0;
  int checks = 0, failures = 0;
  logic [31:0] prog [64];
  logic [63:0] decl_pc;

  kg_core dut (.clk, .rst_n, .start, .start_pc, .reg_clear, .enclave_mode, .ift_en, .curr_eid,
    .halted, .ecall, .fault, .pc, .imem_addr, .imem_rdata, .ot_addr, .ot_allowed, .ot_non_enclave,
    .adp_match, .hash_idle, .commit_valid, .commit_ready, .commit_pc, .commit_instr,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ev_redirect, .ev_declass, .ev_block, .ev_sreg_denied, .ev_hash_wait, .ev_commit_wait, .ev_taint_access);
  tb_mem_model #(.RANDOM_WAIT(1'b1)) u_mem (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_gnt, .mem_rvalid, .mem_rdata);

  assign imem_rdata = prog[6'((imem_addr - PBASE) >> 2)];
  // ownership: page 0 -> EID 1, page 2 -> EID 2, everything else free
  logic [63:0] owner;
  always_comb begin
    owner = 0;
    if (ot_addr >= DB && ot_addr < DB + 4096) owner = 1;
    if (ot_addr >= DB + 8192 && ot_addr < DB + 12288) owner = 2;
    ot_allowed = (owner == 0) || (owner == curr_eid);
    ot_non_enclave = (owner == 0);
  end
  assign adp_match = (pc == decl_pc);

  always @(negedge clk) begin
    commit_ready <= 1'($urandom_range(0, 3) != 0);
    hash_idle    <= 1'($urandom_range(0, 2) == 0);
  end
  always @(posedge clk) if (rst_n) begin
    n_redirect += int'(ev_redirect); n_declass += int'(ev_declass); n_block += int'(ev_block);
    n_denied += int'(ev_sreg_denied); n_hwait += int'(ev_hash_wait); n_cwait += int'(ev_commit_wait);
    n_taint += int'(ev_taint_access);
  end

  function automatic logic shadow_bit(input logic [63:0] a);
    logic [63:0] w, ba, v;
    w = (a - DB) >> 3; ba = SB + (w >> 3);
    v = u_mem.rd(ba);
    return v[ba[2:0]*8 + w[2:0]];
  endfunction
  task automatic run_prog();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (!halted) @(negedge clk);
  endtask
  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [63:0] secret;
    secret = 64'h1234;
    decl_pc = '1;
    for (int i = 0; i < 64; i++) prog[i] = ECALL();
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- 1. non-enclave: sum 10..1 in a loop, store via a call ----
    prog[0] = ADDI(1, 0, 10);
    prog[1] = ADDI(2, 0, 0);
    prog[2] = ADD(2, 2, 1);            // loop:
    prog[3] = ADDI(1, 1, -1);
    prog[4] = BNE(1, 0, -8);
    prog[5] = JAL(1, 12);              // call prog[8]
    prog[6] = ECALL();
    prog[8] = ADDI(5, 0, 1);
    prog[9] = SLLI(5, 5, 31);          // x5 = 0x8000_0000
    prog[10] = LUI(7, 20'h1);          // x7 = 0x1000
    prog[11] = ADD(6, 5, 7);           // x6 = 0x8000_1000
    prog[12] = SD(2, 6, 256);
    prog[13] = SUB(3, 0, 2);           // -55
    prog[14] = SD(3, 6, 264);
    prog[15] = JALR(0, 1, 0);          // return to prog[6]
    run_prog();
    chk("ecall", ecall, 1);
    chk("sum", u_mem.rd(DB + 4096 + 256), 64'd55);
    chk("neg", u_mem.rd(DB + 4096 + 264), -64'sd55);
    chk("no taint traffic outside enclave", 64'(n_taint), 0);

    // ---- 2. enclave mode ----
    u_mem.mem[DB] = secret;                       // word 0 of the enclave page
    u_mem.mem[SB] = 64'h1;                        // ... is tainted
    u_mem.mem[DB + 16] = 64'hFFFF;
    u_mem.mem[AF] = 64'h5A5A;
    enclave_mode = 1; ift_en = 1; curr_eid = 1;
    for (int i = 0; i < 64; i++) prog[i] = ECALL();
    prog[0]  = ADDI(5, 0, 1);
    prog[1]  = SLLI(5, 5, 31);         // x5 = enclave page
    prog[2]  = LUI(7, 20'h1);
    prog[3]  = ADD(6, 5, 7);           // x6 = non-enclave page
    prog[4]  = LD(1, 5, 0);            // x1 = secret (tainted)
    prog[5]  = SD(1, 6, 0);            // leak attempt: blocked
    prog[6]  = SD(1, 5, 16);           // x1 was wiped -> 0, taint 0
    prog[7]  = LD(2, 5, 0);
    prog[8]  = ADDI(3, 2, 5);          // tainted via immediate op
    prog[9]  = ADD(4, 3, 0);           // tainted via register op
    prog[10] = SD(4, 6, 8);            // authorized release (decl_pc)
    prog[11] = SLLI(8, 2, 3);
    prog[12] = ADD(9, 6, 8);           // secret-derived non-enclave address
    prog[13] = LD(10, 9, 0);           // redirected to A_FIXED
    prog[14] = SD(10, 5, 24);
    prog[15] = CSRRW(0, 12'h800, 2);   // stamp shared register
    prog[16] = CSRRS(11, 12'h800, 0);  // own enclave reads it back
    prog[17] = SD(11, 5, 32);          // enclave store keeps the taint
    prog[18] = ADD(13, 6, 7);          // page 2: enclave 2
    prog[19] = LD(12, 13, 0);          // -> fault
    decl_pc = PBASE + 4 * 10;
    run_prog();
    chk("fault on other enclave page", fault, 1);
    chk("fault pc", dut.pc, PBASE + 4 * 19);
    chk("blocked store wrote 0", u_mem.rd(DB + 4096), 0);
    chk("wiped register stored", u_mem.rd(DB + 16), 0);
    chk("wiped register untainted", 64'(shadow_bit(DB + 16)), 0);
    chk("declassified value", u_mem.rd(DB + 4096 + 8), secret + 5);
    chk("redirected load", u_mem.rd(DB + 24), 64'h5A5A);
    chk("shared reg own read", u_mem.rd(DB + 32), secret);
    chk("enclave store keeps taint", 64'(shadow_bit(DB + 32)), 1);
    chk("blocks", 64'(n_block), 1);
    chk("declassifications", 64'(n_declass), 1);
    chk("redirects", 64'(n_redirect), 1);
    checks++; if (n_taint == 0) begin failures++; $display("FAIL no taint traffic"); end
    checks++; if (n_hwait == 0) begin failures++; $display("FAIL never waited for the hash"); end
    checks++; if (n_cwait == 0) begin failures++; $display("FAIL never waited for commit"); end

    // ---- 3. non-enclave code reads the stamped shared register ----
    enclave_mode = 0; ift_en = 0; curr_eid = 0;
    @(negedge clk); reg_clear = 1; @(negedge clk); reg_clear = 0;
    for (int i = 0; i < 64; i++) prog[i] = ECALL();
    prog[0] = ADDI(5, 0, 1);
    prog[1] = SLLI(5, 5, 31);
    prog[2] = LUI(7, 20'h1);
    prog[3] = ADD(6, 5, 7);
    prog[4] = CSRRS(1, 12'h800, 0);
    prog[5] = SD(1, 6, 40);
    u_mem.mem[DB + 4096 + 40] = 64'hFFFF;
    run_prog();
    chk("stamped register refused", u_mem.rd(DB + 4096 + 40), 0);
    chk("denials", 64'(n_denied), 1);
    chk("ecall 3", ecall, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
