// kg_sink_check -- enforcement at the enclave boundary (the taint sinks).
//
// Applied to every data access the core makes while in enclave mode, after
// the ownership table has said whether the address is non-enclave memory:
//  * Tainted address into non-enclave memory: the access goes to the fixed,
//    harmless non-enclave address A_FIXED instead, so a secret cannot be
//    encoded in which non-enclave location is touched.
//  * Store of tainted data into non-enclave memory: if the running path hash
//    matches an authorized declassification path (adp_match), the data is
//    declassified -- written out with its taint cleared. Otherwise the store
//    writes 0 with taint 0 and the core zeroes the source register and its
//    taint (zero_src).
//  * Everything else passes unchanged; stores into enclave memory carry the
//    data taint into shadow memory.
// need_hash flags a store whose outcome depends on adp_match, so the core can
// wait until the hash engine has absorbed all earlier control flow.
// Outside enclave mode nothing is changed. Purely combinational.
//
// The three rules are the paper's (store-to-non-enclave, tainted-address,
// declassify). The value of A_FIXED is this design's choice.
module kg_sink_check #(
  parameter logic [63:0] A_FIXED = 64'h8001_0000
) (
  input  logic        enclave_mode,
  input  logic        is_load,
  input  logic        is_store,
  input  logic [63:0] addr,
  input  logic        addr_t,
  input  logic [63:0] wdata,
  input  logic        wdata_t,
  input  logic        non_enclave,
  input  logic        adp_match,
  output logic [63:0] eff_addr,
  output logic [63:0] eff_wdata,
  output logic        eff_wtaint,
  output logic        zero_src,
  output logic        need_hash,
  output logic        redirected,
  output logic        declassified,
  output logic        blocked
);

  logic mem_op, leak;

  always_comb begin
    mem_op       = is_load || is_store;
    redirected   = enclave_mode && mem_op && non_enclave && addr_t;
    leak         = enclave_mode && is_store && non_enclave && wdata_t;
    need_hash    = leak;
    declassified = leak && adp_match;
    blocked      = leak && !adp_match;
    zero_src     = blocked;

    eff_addr   = redirected ? A_FIXED : addr;
    eff_wdata  = blocked ? '0 : wdata;
    eff_wtaint = (enclave_mode && is_store && !non_enclave) ? wdata_t : 1'b0;
  end

endmodule
