// kingsguard_top -- KingsGuard: a core whose enclaves cannot leak data, even
// when the enclave code or the platform has exploitable bugs.
//
// The core (kg_core) tags every register and every 64-bit memory word with a
// taint bit and checks each access that leaves the enclave. Around it:
//   kg_enclave_ctrl    CurrEID and the enclave/tracking/hashing enables, set by
//                      the Security Monitor's EENTER, EEXIT, AEX and ERESUME.
//   kg_ownership_table page -> owner EID; isolation and the non-enclave test.
//   kg_branch_monitor  commit stream -> (source, target) control-flow events.
//   kg_hash_engine     running SHA-256 path hash H_current over those events.
//   kg_adp_table       authorized path hashes H*; match enables declassification.
//
// Ports:
//   sm_*      configuration port standing in for the Security Monitor, which
//             runs in machine mode on a real system: enclave commands, OT and
//             ADP writes, register scrub, and start of execution at a PC.
//   imem_*    instruction fetch, combinational read of a 32-bit word.
//   mem_*     data memory (data and shadow regions alike): request held until
//             mem_gnt, read data with mem_rvalid one or more clocks later.
//   status and ev_* outputs for observation; ev_* are one-clock pulses.
//
// The split into these units and their rules follow the paper; the SM port,
// the memory protocol, the table sizes and the memory map are this design's.
module kingsguard_top #(
  parameter int unsigned NUM_PAGES   = 16,
  parameter int unsigned NUM_ADP     = 8,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter int unsigned NUM_SREGS   = 1,
  parameter logic [63:0] RAM_BASE    = 64'h8000_0000,
  parameter logic [63:0] SHADOW_BASE = 64'h8800_0000,
  parameter logic [63:0] A_FIXED     = 64'h8001_0000,
  parameter logic [255:0] HASH_INIT  = '0,
  localparam int unsigned OTW  = (NUM_PAGES > 1) ? $clog2(NUM_PAGES) : 1,
  localparam int unsigned ADPW = (NUM_ADP > 1) ? $clog2(NUM_ADP) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // Security Monitor configuration port
  input  logic           sm_cmd_valid,
  input  logic [2:0]     sm_cmd,
  input  logic [63:0]    sm_cmd_eid,
  input  logic           sm_ot_we,
  input  logic [OTW-1:0] sm_ot_idx,
  input  logic [63:0]    sm_ot_eid,
  input  logic           sm_adp_we,
  input  logic [ADPW-1:0] sm_adp_idx,
  input  logic           sm_adp_valid,
  input  logic [255:0]   sm_adp_hash,
  input  logic           sm_adp_clear,
  input  logic           sm_reg_clear,
  input  logic           sm_start,
  input  logic [63:0]    sm_start_pc,
  // status
  output logic           halted,
  output logic           ecall,
  output logic           fault,
  output logic [63:0]    pc,
  output logic [63:0]    curr_eid,
  output logic           enclave_mode,
  output logic [255:0]   h_current,
  output logic           hash_idle,
  // instruction fetch
  output logic [63:0]    imem_addr,
  input  logic [31:0]    imem_rdata,
  // data memory
  output logic           mem_req,
  output logic           mem_we,
  output logic [63:0]    mem_addr,
  output logic [63:0]    mem_wdata,
  output logic [7:0]     mem_wstrb,
  input  logic           mem_gnt,
  input  logic           mem_rvalid,
  input  logic [63:0]    mem_rdata,
  // observation
  output logic           ev_redirect,
  output logic           ev_declass,
  output logic           ev_block,
  output logic           ev_sreg_denied,
  output logic           ev_hash_wait,
  output logic           ev_commit_wait,
  output logic           ev_taint_access,
  output logic           ev_cf_event,
  output logic           ev_loop_event,
  output logic [31:0]    n_hashed,
  output logic [31:0]    n_loops_suppressed
);

  logic        ift_en, hash_en, hash_clear;
  logic [63:0] ot_addr, ot_owner;
  logic        ot_allowed, ot_non_enclave, ot_in_range;
  logic        adp_match;
  logic        commit_valid, commit_ready;
  logic [63:0] commit_pc;
  logic [31:0] commit_instr;
  logic        cf_valid, cf_ready, cf_loop;
  logic [63:0] cf_s, cf_t;
  logic        he_idle, path_settled;

  kg_enclave_ctrl #(.EID_W(64)) u_ctrl (
    .clk, .rst_n, .cmd_valid(sm_cmd_valid), .cmd(kg_pkg::enc_cmd_e'(sm_cmd)), .cmd_eid(sm_cmd_eid),
    .curr_eid, .enclave_mode, .ift_en, .hash_en, .hash_clear
  );

  kg_ownership_table #(.NUM_PAGES(NUM_PAGES), .EID_W(64), .PAGE_BITS(12), .RAM_BASE(RAM_BASE)) u_ot (
    .clk, .rst_n, .we(sm_ot_we), .widx(sm_ot_idx), .weid(sm_ot_eid),
    .addr(ot_addr), .curr_eid, .owner(ot_owner), .in_range(ot_in_range),
    .allowed(ot_allowed), .non_enclave(ot_non_enclave)
  );

  kg_core #(.A_FIXED(A_FIXED), .DATA_BASE(RAM_BASE), .SHADOW_BASE(SHADOW_BASE),
            .NUM_SREGS(NUM_SREGS)) u_core (
    .clk, .rst_n,
    .start(sm_start), .start_pc(sm_start_pc), .reg_clear(sm_reg_clear),
    .enclave_mode, .ift_en, .curr_eid,
    .halted, .ecall, .fault, .pc,
    .imem_addr, .imem_rdata,
    .ot_addr, .ot_allowed, .ot_non_enclave,
    .adp_match, .hash_idle(path_settled),
    .commit_valid, .commit_ready, .commit_pc, .commit_instr,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb, .mem_gnt, .mem_rvalid, .mem_rdata,
    .ev_redirect, .ev_declass, .ev_block, .ev_sreg_denied, .ev_hash_wait,
    .ev_commit_wait, .ev_taint_access
  );

  kg_branch_monitor u_bm (
    .clk, .rst_n, .enable(hash_en),
    .commit_valid, .commit_ready, .commit_pc, .commit_instr,
    .ev_valid(cf_valid), .ev_ready(cf_ready), .ev_s(cf_s), .ev_t(cf_t), .ev_loop(cf_loop),
    .n_loops_suppressed
  );

  kg_hash_engine #(.FIFO_DEPTH(FIFO_DEPTH), .INIT(HASH_INIT)) u_he (
    .clk, .rst_n, .enable(hash_en), .clear(hash_clear),
    .ev_valid(cf_valid), .ev_ready(cf_ready), .ev_s(cf_s), .ev_t(cf_t),
    .h_current, .idle(he_idle), .n_hashed
  );

  // The path hash is settled when the engine is idle and no event is still
  // waiting in the branch monitor's output register.
  assign hash_idle    = he_idle;
  assign path_settled = he_idle && !cf_valid;

  kg_adp_table #(.NUM_ADP(NUM_ADP), .HASH_W(256)) u_adp (
    .clk, .rst_n, .clear(sm_adp_clear), .we(sm_adp_we), .widx(sm_adp_idx),
    .wvalid(sm_adp_valid), .whash(sm_adp_hash), .h_current, .match(adp_match)
  );

  assign ev_cf_event   = cf_valid && cf_ready;
  assign ev_loop_event = cf_valid && cf_ready && cf_loop;

endmodule
