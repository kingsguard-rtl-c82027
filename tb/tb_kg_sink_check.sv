// tb_kg_sink_check -- enumerates every combination of mode, access kind,
// address class, address taint, data taint and path-hash match and checks
// the three boundary rules: tainted address into non-enclave memory goes to
// A_FIXED; tainted data stored to non-enclave memory is declassified on a
// match and zeroed (with the source register) otherwise; all else unchanged.
module tb_kg_sink_check;
  localparam logic [63:0] AF = 64'h8001_0000;
  logic em, ld, st, at, wt, ne, m;
  logic [63:0] addr, wdata, ea, ewd;
  logic ewt, zs, nh, rdr, dcl, blk;
  int checks = 0, failures = 0;

  kg_sink_check #(.A_FIXED(AF)) dut (.enclave_mode(em), .is_load(ld), .is_store(st), .addr, .addr_t(at),
    .wdata, .wdata_t(wt), .non_enclave(ne), .adp_match(m), .eff_addr(ea), .eff_wdata(ewd), .eff_wtaint(ewt),
    .zero_src(zs), .need_hash(nh), .redirected(rdr), .declassified(dcl), .blocked(blk));

  initial begin
    for (int v = 0; v < 128; v++) begin
      logic x_rdr, x_leak, x_blk;
      logic [63:0] x_ea, x_wd;
      logic x_wt;
      {em, ld, st, at, wt, ne, m} = 7'(v);
      if (ld && st) continue;
      addr = {$urandom, $urandom}; wdata = {$urandom, $urandom} | 64'd1;
      #1;
      x_rdr  = em && (ld || st) && ne && at;
      x_leak = em && st && ne && wt;
      x_blk  = x_leak && !m;
      x_ea   = x_rdr ? AF : addr;
      x_wd   = x_blk ? 64'd0 : wdata;
      x_wt   = em && st && !ne && wt;
      checks++;
      if (ea !== x_ea || ewd !== x_wd || ewt !== x_wt || zs !== x_blk || nh !== x_leak ||
          rdr !== x_rdr || dcl !== (x_leak && m) || blk !== x_blk) begin
        failures++;
        $display("FAIL v=%b ea=%h wd=%h wt=%b zs=%b nh=%b rdr=%b dcl=%b blk=%b", 7'(v), ea, ewd, ewt, zs, nh, rdr, dcl, blk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
