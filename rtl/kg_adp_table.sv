// kg_adp_table -- table of Authorized Declassification Path hashes (H*).
//
// Each authorized path through the enclave program that may release data has
// a precomputed cumulative hash. The Security Monitor loads those hashes into
// this table before the enclave runs; the table compares the running hash
// H_current with every valid entry in parallel, and `match` says that the
// current execution path is an authorized one, so a tainted store to
// non-enclave memory may be declassified.
//
// Interface: SM write of entry widx (hash and valid bit) in one clock; clear
// invalidates all entries; match is combinational from h_current.
//
// From the paper: the set H*, the comparison H_current in H*. This design's
// choice: the hashes sit in registers (the paper keeps them in an SM buffer
// and does not say how the hardware reads them) and the table size.
module kg_adp_table #(
  parameter int unsigned NUM_ADP = 8,
  parameter int unsigned HASH_W  = 256,
  localparam int unsigned IW = (NUM_ADP > 1) ? $clog2(NUM_ADP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              we,
  input  logic [IW-1:0]     widx,
  input  logic              wvalid,
  input  logic [HASH_W-1:0] whash,
  input  logic [HASH_W-1:0] h_current,
  output logic              match
);

  logic [HASH_W-1:0]  tbl [NUM_ADP];
  logic [NUM_ADP-1:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < NUM_ADP; i++) tbl[i] <= '0;
    end else if (clear) begin
      vld <= '0;
    end else if (we) begin
      tbl[widx] <= whash;
      vld[widx] <= wvalid;
    end
  end

  always_comb begin
    match = 1'b0;
    for (int i = 0; i < NUM_ADP; i++)
      if (vld[i] && tbl[i] == h_current) match = 1'b1;
  end

endmodule
