// tb_kingsguard_top -- end-to-end test of the whole design at its default
// parameters. A small Security Monitor model drives the configuration port,
// programs run from an instruction array, and data memory (with random wait
// states) holds both data and shadow taint.
//
// Scenario:
//  1. SM gives page 0 to enclave 5 and page 2 to enclave 9, stores a tainted
//     secret in page 0 and authorizes exactly one path hash H*, computed here
//     with the reference SHA-256 over the (source, target) pairs the enclave
//     program is expected to produce (its loop counted once).
//  2. EENTER(5). The enclave program:
//       - runs a 3-iteration loop (one hashed event, two suppressed),
//       - tries to store the secret to non-enclave memory: path hash is not
//         H* yet -> zero written, register wiped (AV1 leak blocked),
//       - takes a branch, then stores secret+7 out: the path hash is now H*
//         -> released (declassification, after waiting for the hash),
//       - loads through a secret-derived address into non-enclave memory
//         -> redirected to A_FIXED (AV2),
//       - stamps the shared register with the secret, runs a chain of
//         jumps faster than they can be hashed (commit stall), ECALLs.
//  3. AEX: H_current kept, tracking off. OS code reads the shared register
//     -> 0 (AV3), branches (not hashed), then touches page 0 -> fault.
//  4. ERESUME: the enclave continues with a jump; H_current extends from
//     the kept value. 5. EEXIT: H_current back to its initial value.
// Every mechanism is counted; one that never happens is a failure.
module tb_kingsguard_top;
  import tb_rv_pkg::*;
  import tb_sha_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [63:0] DB = 64'h8000_0000, SB = 64'h8800_0000, AF = 64'h8001_0000;
  localparam logic [63:0] PBASE = 64'h1000;

  logic sm_cmd_valid = 0, sm_ot_we = 0, sm_adp_we = 0, sm_adp_valid = 0, sm_adp_clear = 0;
  logic sm_reg_clear = 0, sm_start = 0;
  logic [2:0] sm_cmd = 0;
  logic [63:0] sm_cmd_eid = 0, sm_ot_eid = 0, sm_start_pc = 0;
  logic [3:0] sm_ot_idx = 0;
  logic [2:0] sm_adp_idx = 0;
  logic [255:0] sm_adp_hash = 0;
  logic halted, ecall, fault, enclave_mode, hash_idle;
  logic [63:0] pc, curr_eid, imem_addr;
  logic [255:0] h_current;
  logic [31:0] imem_rdata;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [63:0] mem_addr, mem_wdata, mem_rdata;
  logic [7:0] mem_wstrb;
  logic ev_redirect, ev_declass, ev_block, ev_sreg_denied, ev_hash_wait, ev_commit_wait;
  logic ev_taint_access, ev_cf_event, ev_loop_event;
  logic [31:0] n_hashed, n_loops_suppressed;
  logic [31:0] prog [256];

  kingsguard_top dut (.clk, .rst_n, .sm_cmd_valid, .sm_cmd, .sm_cmd_eid, .sm_ot_we, .sm_ot_idx,
    .sm_ot_eid, .sm_adp_we, .sm_adp_idx, .sm_adp_valid, .sm_adp_hash, .sm_adp_clear, .sm_reg_clear,
    .sm_start, .sm_start_pc, .halted, .ecall, .fault, .pc, .curr_eid, .enclave_mode, .h_current,
    .hash_idle, .imem_addr, .imem_rdata, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_gnt, .mem_rvalid, .mem_rdata, .ev_redirect, .ev_declass, .ev_block, .ev_sreg_denied,
    .ev_hash_wait, .ev_commit_wait, .ev_taint_access, .ev_cf_event, .ev_loop_event, .n_hashed,
    .n_loops_suppressed);
  tb_mem_model #(.RANDOM_WAIT(1'b1)) u_mem (.clk, .mem_req, .mem_we, .mem_addr, .mem_wdata,
    .mem_wstrb, .mem_gnt, .mem_rvalid, .mem_rdata);
  assign imem_rdata = prog[8'((imem_addr - PBASE) >> 2)];

  int checks = 0, failures = 0;
  int n_redirect = 0, n_declass = 0, n_block = 0, n_denied = 0, n_hwait = 0, n_cwait = 0;
  int n_taint = 0, n_cf = 0, n_loop = 0, n_fault = 0, n_mode = 0, n_halt_ecall = 0;
  logic prev_mode = 0;
  always @(posedge clk) if (rst_n) begin
    n_redirect += int'(ev_redirect); n_declass += int'(ev_declass); n_block += int'(ev_block);
    n_denied += int'(ev_sreg_denied); n_hwait += int'(ev_hash_wait); n_cwait += int'(ev_commit_wait);
    n_taint += int'(ev_taint_access); n_cf += int'(ev_cf_event); n_loop += int'(ev_loop_event);
    n_mode += int'(enclave_mode != prev_mode); prev_mode <= enclave_mode;
  end

  function automatic logic [63:0] P(input int i); return PBASE + 64'(4 * i); endfunction
  function automatic logic shadow_bit(input logic [63:0] a);
    logic [63:0] w, ba, v;
    w = (a - DB) >> 3; ba = SB + (w >> 3);
    v = u_mem.rd(ba);
    return v[ba[2:0]*8 + w[2:0]];
  endfunction
  task automatic chk(input string what, input logic [255:0] got, input logic [255:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask
  task automatic cnt(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask
  task automatic sm_command(input logic [2:0] c, input logic [63:0] eid);
    @(negedge clk); sm_cmd_valid = 1; sm_cmd = c; sm_cmd_eid = eid;
    @(negedge clk); sm_cmd_valid = 0;
  endtask
  task automatic sm_ot(input int idx, input logic [63:0] eid);
    @(negedge clk); sm_ot_we = 1; sm_ot_idx = 4'(idx); sm_ot_eid = eid;
    @(negedge clk); sm_ot_we = 0;
  endtask
  task automatic run_at(input int idx);
    @(negedge clk); sm_start = 1; sm_start_pc = P(idx);
    @(negedge clk); sm_start = 0;
    @(negedge clk);
    while (!halted) @(negedge clk);
    if (fault) n_fault++;
    if (ecall) n_halt_ecall++;
  endtask
  task automatic wait_hash();
    repeat (3) @(negedge clk);
    while (!hash_idle) @(negedge clk);
  endtask

  initial begin
    logic [63:0] secret;
    logic [255:0] h1, h2, h3, h4;
    int hashed0;
    secret = 64'h0000_0bad_c0de_0042 & 64'h0000_0000_00FF_FFFF;
    for (int i = 0; i < 256; i++) prog[i] = ECALL();
    // enclave 5 code at 0..
    prog[0]  = ADDI(5, 0, 1);
    prog[1]  = SLLI(5, 5, 31);        // x5 = page 0 (enclave 5)
    prog[2]  = LUI(7, 20'h1);
    prog[3]  = ADD(6, 5, 7);          // x6 = page 1 (free)
    prog[4]  = ADDI(1, 0, 3);
    prog[5]  = LD(2, 5, 0);           // secret, tainted
    prog[6]  = ADDI(1, 1, -1);        // loop body
    prog[7]  = BNE(1, 0, -4);         // loop condition
    prog[8]  = SD(2, 6, 0);           // leak attempt -> blocked
    prog[9]  = LD(2, 5, 0);
    prog[10] = BEQ(0, 0, 8);          // -> 12
    prog[12] = ADDI(3, 2, 7);
    prog[13] = SD(3, 6, 8);           // authorized -> declassified
    prog[14] = SLLI(8, 2, 3);
    prog[15] = ADD(9, 6, 8);
    prog[16] = LD(10, 9, 0);          // tainted address -> A_FIXED
    prog[17] = SD(10, 5, 16);
    prog[18] = CSRRW(0, 12'h800, 2);  // shared register <- secret, stamped EID 5
    for (int i = 19; i < 28; i++)     // chain of jumps: fills the hash queue
      prog[i] = JAL(0, 4);
    prog[28] = ECALL();
    // OS code at 40..
    prog[40] = ADDI(5, 0, 1);
    prog[41] = SLLI(5, 5, 31);
    prog[42] = LUI(7, 20'h1);
    prog[43] = ADD(6, 5, 7);
    prog[44] = CSRRS(1, 12'h800, 0);  // stamped by enclave 5 -> 0
    prog[45] = SD(1, 6, 32);
    prog[46] = BEQ(0, 0, 8);          // not hashed: hashing is off
    prog[48] = LD(2, 5, 0);           // enclave page -> fault
    // enclave 5 resumed at 60..
    prog[60] = JAL(0, 12);            // -> 63
    prog[63] = ECALL();

    // expected path hashes
    h1 = path_hash('0, P(7), P(6));
    h2 = path_hash(h1, P(10), P(12));
    h3 = h2;
    for (int i = 19; i < 28; i++) h3 = path_hash(h3, P(i), P(i + 1));
    h4 = path_hash(h3, P(60), P(63));

    repeat (3) @(negedge clk); rst_n = 1;
    sm_ot(0, 5);
    sm_ot(2, 9);
    u_mem.mem[DB] = secret;
    u_mem.mem[SB] = 64'h1;            // word 0 of page 0 is tainted
    u_mem.mem[AF] = 64'h5A5A;
    u_mem.mem[DB + 4096 + 32] = 64'hFFFF;
    @(negedge clk); sm_adp_we = 1; sm_adp_idx = 3; sm_adp_valid = 1; sm_adp_hash = h2;
    @(negedge clk); sm_adp_we = 0;

    // ---- enclave run ----
    sm_command(3'd1, 64'd5);          // EENTER
    chk("eid", curr_eid, 5);
    chk("mode", enclave_mode, 1);
    run_at(0);
    chk("enclave ecall", ecall, 1);
    wait_hash();
    chk("H after enclave", h_current, h3);
    chk("blocked store", u_mem.rd(DB + 4096), 0);
    chk("declassified", u_mem.rd(DB + 4096 + 8), secret + 7);
    chk("declassified word untainted", shadow_bit(DB + 4096 + 8), 0);
    chk("redirected load", u_mem.rd(DB + 16), 64'h5A5A);
    chk("loops suppressed", n_loops_suppressed, 2);
    chk("hashed events", n_hashed, 11);

    // ---- asynchronous exit, OS runs ----
    sm_command(3'd3, 0);              // AEX
    chk("AEX eid", curr_eid, 0);
    hashed0 = int'(n_hashed);
    run_at(40);
    chk("OS fault", fault, 1);
    chk("OS fault pc", pc, P(48));
    chk("AV3 shared read gives 0", u_mem.rd(DB + 4096 + 32), 0);
    wait_hash();
    chk("H kept over AEX", h_current, h3);
    chk("no hashing outside enclave", n_hashed, 32'(hashed0));

    // ---- resume ----
    sm_command(3'd4, 0);              // ERESUME
    chk("resume eid", curr_eid, 5);
    run_at(60);
    wait_hash();
    chk("H continues after resume", h_current, h4);

    // ---- exit ----
    sm_command(3'd2, 0);              // EEXIT
    @(negedge clk);
    chk("H cleared on EEXIT", h_current, '0);
    chk("exit eid", curr_eid, 0);

    cnt("block (AV1 leak stopped)", n_block);
    cnt("declassify", n_declass);
    cnt("redirect (AV2)", n_redirect);
    cnt("shared-register denial (AV3)", n_denied);
    cnt("ownership fault", n_fault);
    cnt("hash-wait stall", n_hwait);
    cnt("commit-wait stall", n_cwait);
    cnt("shadow taint access", n_taint);
    cnt("control-flow event", n_cf);
    cnt("loop event", n_loop);
    cnt("mode switch", n_mode);
    cnt("ecall halt", n_halt_ecall);
    $display("events: block=%0d declass=%0d redirect=%0d denied=%0d fault=%0d hwait=%0d cwait=%0d taint=%0d cf=%0d loop=%0d mode=%0d",
             n_block, n_declass, n_redirect, n_denied, n_fault, n_hwait, n_cwait, n_taint, n_cf, n_loop, n_mode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
