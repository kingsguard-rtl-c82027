// kg_core -- minimal RV64I core carrying the KingsGuard extensions.
//
// A small multi-cycle, non-pipelined in-order core (FETCH, EXEC, MEM, COMMIT)
// that executes the RV64I base subset LUI, AUIPC, JAL, JALR, BEQ..BGEU,
// LD, SD, OP and OP-IMM (64-bit forms), CSRRW/CSRRS on the shared user
// registers (CSR 0x800..0x80F) and ECALL. ECALL (after it commits, so the
// branch monitor sees it as the target of a preceding jump) and any fault
// stop the core (halted) and hand control back to the Security Monitor, which restarts it
// with start/start_pc.
//
// What KingsGuard adds, all inside this core:
//  * kg_taint_regfile: every register carries a taint bit.
//  * kg_taint_prop: destination taints follow the propagation table; taints
//    are forced to 0 while ift_en is low.
//  * Ownership check: each LD/SD address is looked up in the ownership table
//    (ot_* ports); a refused access raises fault and halts.
//  * kg_sink_check: tainted addresses into non-enclave memory go to A_FIXED;
//    tainted stores into non-enclave memory are declassified when adp_match,
//    otherwise written as 0 and the data register and its taint are zeroed.
//    Before deciding, EXEC waits until the hash engine is idle (hash_idle), so
//    H_current covers every branch committed so far.
//  * kg_lsu: taint requests to shadow memory in enclave mode.
//  * kg_shared_regs: the shared registers with their owner stamp.
//  * Commit stream (PC, instruction) to the branch monitor; COMMIT waits while
//    commit_ready is low.
// Timing: an ALU or branch instruction takes 3 clocks (FETCH, EXEC, COMMIT)
// when the monitor is ready; LD/SD add the memory round trips.
//
// The paper builds on a 5-stage Shakti-C core with caches, privilege modes and
// traps; this stand-in core and its timing are this design's own. The
// KingsGuard rules applied inside it are the paper's.
module kg_core
  import kg_pkg::*;
#(
  parameter logic [63:0] A_FIXED     = 64'h8001_0000,
  parameter logic [63:0] DATA_BASE   = 64'h8000_0000,
  parameter logic [63:0] SHADOW_BASE = 64'h8800_0000,
  parameter int unsigned NUM_SREGS   = 1,
  parameter bit          STAMP_ONLY_TAINTED = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // Security Monitor control
  input  logic        start,
  input  logic [63:0] start_pc,
  input  logic        reg_clear,
  input  logic        enclave_mode,
  input  logic        ift_en,
  input  logic [63:0] curr_eid,
  output logic        halted,
  output logic        ecall,
  output logic        fault,
  output logic [63:0] pc,
  // instruction fetch (combinational read)
  output logic [63:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // ownership table lookup
  output logic [63:0] ot_addr,
  input  logic        ot_allowed,
  input  logic        ot_non_enclave,
  // declassification
  input  logic        adp_match,
  input  logic        hash_idle,
  // commit stream to the branch monitor
  output logic        commit_valid,
  input  logic        commit_ready,
  output logic [63:0] commit_pc,
  output logic [31:0] commit_instr,
  // data memory
  output logic        mem_req,
  output logic        mem_we,
  output logic [63:0] mem_addr,
  output logic [63:0] mem_wdata,
  output logic [7:0]  mem_wstrb,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [63:0] mem_rdata,
  // one-clock event pulses
  output logic        ev_redirect,
  output logic        ev_declass,
  output logic        ev_block,
  output logic        ev_sreg_denied,
  output logic        ev_hash_wait,
  output logic        ev_commit_wait,
  output logic        ev_taint_access
);

  typedef enum logic [2:0] {S_HALT, S_FETCH, S_EXEC, S_MEM, S_COMMIT} state_e;
  state_e state;

  logic [31:0] ir;
  logic [63:0] next_pc;
  logic [4:0]  rd_q, rs2_q;
  logic        zero_src_q, is_load_q;

  // ---------------- decode ----------------
  logic [4:0]  rs1_a, rs2_a, rd_a;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [63:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign rs1_a = ir[19:15];
  assign rs2_a = ir[24:20];
  assign rd_a  = ir[11:7];
  assign f3    = ir[14:12];
  assign f7    = ir[31:25];
  assign imm_i = {{52{ir[31]}}, ir[31:20]};
  assign imm_s = {{52{ir[31]}}, ir[31:25], ir[11:7]};
  assign imm_b = {{51{ir[31]}}, ir[31], ir[7], ir[30:25], ir[11:8], 1'b0};
  assign imm_u = {{32{ir[31]}}, ir[31:12], 12'b0};
  assign imm_j = {{43{ir[31]}}, ir[31], ir[19:12], ir[20], ir[30:21], 1'b0};

  // ---------------- register file ----------------
  logic [63:0] rs1_v, rs2_v, rf_wdata;
  logic        rs1_t, rs2_t, rf_we, rf_wt;
  logic [4:0]  rf_waddr;

  kg_taint_regfile #(.NREGS(32), .XLEN(64)) u_rf (
    .clk, .rst_n, .clear(reg_clear),
    .rs1_addr(rs1_a), .rs1_data(rs1_v), .rs1_taint(rs1_t),
    .rs2_addr(rs2_a), .rs2_data(rs2_v), .rs2_taint(rs2_t),
    .we(rf_we), .rd_addr(rf_waddr), .rd_data(rf_wdata), .rd_taint(rf_wt)
  );

  // ---------------- shared registers ----------------
  localparam int unsigned SIW = (NUM_SREGS > 1) ? $clog2(NUM_SREGS) : 1;
  logic [63:0] sreg_rdata, sreg_wdata;
  logic        sreg_rt, sreg_re, sreg_we, sreg_denied, sreg_wt;

  kg_shared_regs #(.NUM_REGS(NUM_SREGS), .XLEN(64), .EID_W(64),
                   .STAMP_ONLY_TAINTED(STAMP_ONLY_TAINTED)) u_sreg (
    .clk, .rst_n, .curr_eid,
    .we(sreg_we), .widx(ir[20 +: SIW]), .wdata(sreg_wdata), .wtaint(sreg_wt),
    .re(sreg_re), .ridx(ir[20 +: SIW]),
    .rdata(sreg_rdata), .rtaint(sreg_rt), .denied(sreg_denied)
  );

  // ---------------- taint propagation ----------------
  logic      lsu_rtaint;
  op_class_e cls;
  logic      prop_rd_t, prop_st_t;

  kg_taint_prop u_tp (
    .instr(ir), .rs1_t, .rs2_t, .mem_t(lsu_rtaint), .sreg_t(sreg_rt),
    .cls, .rd_t(prop_rd_t), .st_t(prop_st_t)
  );

  // ---------------- ALU / branch ----------------
  logic [63:0] op_b, alu;
  logic        br_take;
  always_comb begin
    op_b = (cls == CLS_REG) ? rs2_v : imm_i;
    unique case (f3)
      3'b000:  alu = (cls == CLS_REG && f7[5]) ? rs1_v - op_b : rs1_v + op_b;
      3'b001:  alu = rs1_v << op_b[5:0];
      3'b010:  alu = {63'b0, $signed(rs1_v) < $signed(op_b)};
      3'b011:  alu = {63'b0, rs1_v < op_b};
      3'b100:  alu = rs1_v ^ op_b;
      3'b101:  alu = f7[5] ? 64'($signed(rs1_v) >>> op_b[5:0]) : rs1_v >> op_b[5:0];
      3'b110:  alu = rs1_v | op_b;
      default: alu = rs1_v & op_b;
    endcase
    unique case (f3)
      3'b000:  br_take = rs1_v == rs2_v;
      3'b001:  br_take = rs1_v != rs2_v;
      3'b100:  br_take = $signed(rs1_v) < $signed(rs2_v);
      3'b101:  br_take = $signed(rs1_v) >= $signed(rs2_v);
      3'b110:  br_take = rs1_v < rs2_v;
      3'b111:  br_take = rs1_v >= rs2_v;
      default: br_take = 1'b0;
    endcase
  end

  // ---------------- memory access and sink checks ----------------
  logic        is_ld, is_st, mem_ok;
  logic [63:0] ea, eff_addr, eff_wdata;
  logic        eff_wtaint, zero_src, need_hash, redirected, declassified, blocked;
  logic        lsu_req, lsu_ready, lsu_done;
  logic [63:0] lsu_rdata;

  assign is_ld  = (state == S_EXEC) && (cls == CLS_LOAD)  && f3 == 3'b011;
  assign is_st  = (state == S_EXEC) && (cls == CLS_STORE) && f3 == 3'b011;
  assign ea     = rs1_v + ((cls == CLS_STORE) ? imm_s : imm_i);
  assign ot_addr = ea;

  kg_sink_check #(.A_FIXED(A_FIXED)) u_sink (
    .enclave_mode, .is_load(is_ld), .is_store(is_st),
    .addr(ea), .addr_t(rs1_t && ift_en), .wdata(rs2_v), .wdata_t(prop_st_t && ift_en),
    .non_enclave(ot_non_enclave), .adp_match,
    .eff_addr, .eff_wdata, .eff_wtaint, .zero_src, .need_hash,
    .redirected, .declassified, .blocked
  );

  assign mem_ok  = (is_ld || is_st) && ot_allowed && (!need_hash || hash_idle);
  assign lsu_req = mem_ok && lsu_ready;

  kg_lsu #(.DATA_BASE(DATA_BASE), .SHADOW_BASE(SHADOW_BASE)) u_lsu (
    .clk, .rst_n,
    .req_valid(lsu_req), .req_we(is_st), .req_addr(eff_addr), .req_wdata(eff_wdata),
    .req_wtaint(eff_wtaint), .track(enclave_mode && ift_en),
    .ready(lsu_ready), .done(lsu_done), .rdata(lsu_rdata), .rtaint(lsu_rtaint),
    .taint_access(ev_taint_access),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb, .mem_gnt, .mem_rvalid, .mem_rdata
  );

  // ---------------- register write and shared-register access ----------------
  always_comb begin
    rf_we = 1'b0; rf_waddr = rd_a; rf_wdata = '0; rf_wt = 1'b0;
    sreg_re = 1'b0; sreg_we = 1'b0; sreg_wdata = rs1_v; sreg_wt = 1'b0;
    if (state == S_EXEC) begin
      unique case (cls)
        CLS_REG, CLS_IMM: begin
          rf_we = 1'b1; rf_wdata = alu; rf_wt = prop_rd_t && ift_en;
        end
        CLS_UPPER: begin
          rf_we = 1'b1; rf_wdata = (ir[5] ? 64'd0 : pc) + imm_u;
        end
        CLS_JUMP: begin
          rf_we = 1'b1; rf_wdata = pc + 64'd4;
        end
        CLS_SREG: begin
          sreg_re    = (rd_a != 5'd0);
          sreg_we    = (f3 == 3'b001) || (rs1_a != 5'd0);
          sreg_wdata = (f3 == 3'b001) ? rs1_v : (sreg_rdata | rs1_v);
          sreg_wt    = (rs1_t || (f3 == 3'b010 && sreg_rt)) && ift_en;
          rf_we    = (rd_a != 5'd0);
          rf_wdata = sreg_rdata;
          rf_wt    = prop_rd_t && ift_en;
        end
        default: ;
      endcase
    end else if (state == S_MEM && lsu_done) begin
      if (is_load_q) begin
        rf_we = 1'b1; rf_waddr = rd_q; rf_wdata = lsu_rdata; rf_wt = lsu_rtaint && ift_en;
      end else if (zero_src_q) begin
        rf_we = 1'b1; rf_waddr = rs2_q; rf_wdata = '0; rf_wt = 1'b0;
      end
    end
  end

  // ---------------- control ----------------
  assign imem_addr    = pc;
  assign commit_valid = (state == S_COMMIT);
  assign commit_pc    = pc;
  assign commit_instr = ir;
  assign halted       = (state == S_HALT);

  assign ev_redirect    = lsu_req && redirected;
  assign ev_declass     = lsu_req && declassified;
  assign ev_block       = lsu_req && blocked;
  assign ev_sreg_denied = (state == S_EXEC) && (cls == CLS_SREG) && sreg_denied;
  assign ev_hash_wait   = (is_ld || is_st) && ot_allowed && need_hash && !hash_idle;
  assign ev_commit_wait = commit_valid && !commit_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HALT; pc <= '0; ir <= '0; next_pc <= '0;
      rd_q <= '0; rs2_q <= '0; zero_src_q <= 1'b0; is_load_q <= 1'b0;
      ecall <= 1'b0; fault <= 1'b0;
    end else begin
      unique case (state)
        S_HALT: if (start) begin
          pc    <= start_pc;
          ecall <= 1'b0;
          fault <= 1'b0;
          state <= S_FETCH;
        end
        S_FETCH: begin
          ir    <= imem_rdata;
          state <= S_EXEC;
        end
        S_EXEC: begin
          next_pc <= pc + 64'd4;
          unique case (cls)
            CLS_REG, CLS_IMM, CLS_UPPER, CLS_SREG: state <= S_COMMIT;
            CLS_JUMP: begin
              next_pc <= ir[3] ? pc + imm_j : ((rs1_v + imm_i) & ~64'd1);
              state   <= S_COMMIT;
            end
            CLS_BRANCH: begin
              if (br_take) next_pc <= pc + imm_b;
              state <= S_COMMIT;
            end
            CLS_LOAD, CLS_STORE: begin
              if (!(is_ld || is_st) || !ot_allowed) begin
                fault <= 1'b1;
                state <= S_HALT;
              end else if (lsu_req) begin
                rd_q       <= rd_a;
                rs2_q      <= rs2_a;
                is_load_q  <= is_ld;
                zero_src_q <= zero_src;
                state      <= S_MEM;
              end
            end
            CLS_ECALL: begin
              ecall <= 1'b1;          // retires through COMMIT, then halts
              state <= S_COMMIT;
            end
            default: begin
              fault <= 1'b1;
              state <= S_HALT;
            end
          endcase
        end
        S_MEM: if (lsu_done) state <= S_COMMIT;
        S_COMMIT: if (commit_ready) begin
          if (ecall) state <= S_HALT;
          else begin
            pc    <= next_pc;
            state <= S_FETCH;
          end
        end
        default: state <= S_HALT;
      endcase
    end
  end

endmodule
