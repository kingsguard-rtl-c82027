// kg_branch_monitor -- turns the committed instruction stream into
// control-flow events for the path hash.
//
// For every committed branch or jump (conditional branches, JAL, JALR) the
// source s is its PC and the target t is the PC of the next committed
// instruction, so taken and not-taken branches are both seen with their real
// outcome. The pair (s, t) goes to the hash engine.
//
// Loops: a conditional branch whose offset is negative (instr[31] set) marks
// a loop condition. The first time it is taken, the pair (loop condition PC,
// loop entry PC) is sent with ev_loop set and remembered; further taken
// iterations of the same branch send nothing, so the path hash does not
// depend on the iteration count. When that branch falls through (the loop
// exits) nothing is sent and the loop register is cleared. Only one loop is
// remembered at a time.
//
// Interface: commit_valid/commit_ready handshake from the core (the core must
// not commit while commit_ready is low); ev_valid/ev_ready handshake to the
// hash engine, with the event held stable until taken. With enable low the
// monitor forgets any pending branch and the remembered loop and sends
// nothing. An event leaves one clock after the commit that completes it.
//
// The source/target rule and loop detection by negative offset are the
// paper's; the single loop register, the fall-through handling and the
// handshakes are this design's choice.
module kg_branch_monitor
  import kg_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        commit_valid,
  output logic        commit_ready,
  input  logic [63:0] commit_pc,
  input  logic [31:0] commit_instr,
  output logic        ev_valid,
  input  logic        ev_ready,
  output logic [63:0] ev_s,
  output logic [63:0] ev_t,
  output logic        ev_loop,
  output logic [31:0] n_loops_suppressed
);

  logic        pend, pend_bwd;
  logic [63:0] pend_pc;
  logic        loop_vld;
  logic [63:0] loop_lc;

  logic is_cf, is_bwd, fire;
  logic [6:0] opc;

  always_comb begin
    opc    = commit_instr[6:0];
    is_cf  = (opc == OPC_BRANCH) || (opc == OPC_JAL) || (opc == OPC_JALR);
    is_bwd = (opc == OPC_BRANCH) && commit_instr[31];
    commit_ready = !enable || !ev_valid || ev_ready;
    fire = enable && commit_valid && commit_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 1'b0; pend_bwd <= 1'b0; pend_pc <= '0;
      loop_vld <= 1'b0; loop_lc <= '0;
      ev_valid <= 1'b0; ev_s <= '0; ev_t <= '0; ev_loop <= 1'b0;
      n_loops_suppressed <= '0;
    end else if (!enable) begin
      pend <= 1'b0; loop_vld <= 1'b0; ev_valid <= 1'b0;
    end else begin
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (fire) begin
        if (pend) begin
          if (pend_bwd && loop_vld && loop_lc == pend_pc) begin
            // repeat iteration or exit of the remembered loop
            n_loops_suppressed <= n_loops_suppressed + 1;
            if (commit_pc == pend_pc + 64'd4) loop_vld <= 1'b0;
          end else begin
            ev_valid <= 1'b1;
            ev_s     <= pend_pc;
            ev_t     <= commit_pc;
            ev_loop  <= pend_bwd && (commit_pc != pend_pc + 64'd4);
            if (pend_bwd && commit_pc != pend_pc + 64'd4) begin
              loop_vld <= 1'b1;
              loop_lc  <= pend_pc;
            end
          end
        end
        pend     <= is_cf;
        pend_bwd <= is_bwd;
        pend_pc  <= commit_pc;
      end
    end
  end

  a_ev_stable: assert property (@(posedge clk) disable iff (!rst_n || !enable)
    (ev_valid && !ev_ready) |=> (ev_valid && $stable(ev_s) && $stable(ev_t)));

endmodule
