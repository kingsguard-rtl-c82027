// kg_ownership_table -- Ownership Table (OT) enforcing enclave isolation.
//
// One EID entry per physical page of the covered RAM window. An entry of 0
// means the page is free and any software may use it; a non-zero entry means
// the page belongs to that enclave. A data access is allowed when the page is
// free or is owned by CurrEID, so non-enclave code (CurrEID 0) can only touch
// free pages, and an enclave can touch its own pages and free ones.
//
// The same lookup also classifies the address for the taint sinks: an address
// in a free page, or outside the covered window (peripherals, other RAM), is
// "non-enclave memory".
//
// Interface: the SM writes entry widx with weid (one clock, we high). The
// lookup (addr -> owner, allowed, non_enclave) is combinational. All entries
// reset to 0.
//
// From the paper: one 64-bit register per page, reset to zero, the
// own-EID-or-free access rule. This design's choice: the table covers
// NUM_PAGES pages from RAM_BASE (the paper gives no size).
module kg_ownership_table #(
  parameter int unsigned NUM_PAGES = 16,
  parameter int unsigned EID_W     = 64,
  parameter int unsigned PAGE_BITS = 12,
  parameter logic [63:0] RAM_BASE  = 64'h8000_0000,
  localparam int unsigned IW = (NUM_PAGES > 1) ? $clog2(NUM_PAGES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // SM write port
  input  logic             we,
  input  logic [IW-1:0]    widx,
  input  logic [EID_W-1:0] weid,
  // lookup
  input  logic [63:0]      addr,
  input  logic [EID_W-1:0] curr_eid,
  output logic [EID_W-1:0] owner,
  output logic             in_range,
  output logic             allowed,
  output logic             non_enclave
);

  logic [EID_W-1:0] ot [NUM_PAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PAGES; i++) ot[i] <= '0;
    end else if (we) begin
      ot[widx] <= weid;
    end
  end

  logic [63:0] off;
  logic [63:0] page;

  always_comb begin
    off      = addr - RAM_BASE;
    page     = off >> PAGE_BITS;
    in_range = (addr >= RAM_BASE) && (page < 64'(NUM_PAGES));
    owner    = in_range ? ot[page[IW-1:0]] : '0;
    allowed     = (owner == '0) || (owner == curr_eid);
    non_enclave = (owner == '0);
  end

endmodule
