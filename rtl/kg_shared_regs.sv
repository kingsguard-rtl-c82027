// kg_shared_regs -- user-accessible shared registers stamped with an owner EID.
//
// Registers that enclave and non-enclave code can both reach are a storage
// channel: an enclave could leave a secret there for code that runs after it.
// Each register here carries an owner field. When code writes tainted data,
// the register is stamped with CurrEID; an untainted write leaves it
// unstamped (owner 0). A read is allowed when the register is unstamped or its
// owner equals CurrEID. Any other read returns 0, and the register is cleared,
// so the secret is gone. Writing the register always succeeds and restamps it.
//
// Interface: one write and one read per clock, both synchronous to clk. The
// read result (rdata, rtaint, denied) is combinational from ridx and the
// current contents; the clear caused by a denied read happens at the clock
// edge. rtaint is 1 for a register holding stamped (tainted) data.
//
// From the paper: the owner field, stamping with CurrEID, refusing reads from
// other EIDs and zeroing the register. The paper states the stamping rule two
// ways: as "writes tainted data" in the overview and as every write in the
// formal rule. STAMP_ONLY_TAINTED = 1 (default) follows the overview, 0 the
// formal rule. Letting anyone read an unstamped register is this design's
// reading of the overview.
module kg_shared_regs #(
  parameter int unsigned NUM_REGS           = 1,
  parameter int unsigned XLEN               = 64,
  parameter int unsigned EID_W              = 64,
  parameter bit          STAMP_ONLY_TAINTED = 1'b1,
  localparam int unsigned IW = (NUM_REGS > 1) ? $clog2(NUM_REGS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [EID_W-1:0] curr_eid,
  input  logic             we,
  input  logic [IW-1:0]    widx,
  input  logic [XLEN-1:0]  wdata,
  input  logic             wtaint,
  input  logic             re,
  input  logic [IW-1:0]    ridx,
  output logic [XLEN-1:0]  rdata,
  output logic             rtaint,
  output logic             denied
);

  logic [XLEN-1:0]  val   [NUM_REGS];
  logic [EID_W-1:0] owner [NUM_REGS];

  always_comb begin
    denied = re && (owner[ridx] != '0) && (owner[ridx] != curr_eid);
    rdata  = denied ? '0 : val[ridx];
    rtaint = !denied && (owner[ridx] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) begin
        val[i]   <= '0;
        owner[i] <= '0;
      end
    end else begin
      if (denied) begin
        val[ridx]   <= '0;
        owner[ridx] <= '0;
      end
      if (we) begin
        val[widx]   <= wdata;
        owner[widx] <= (wtaint || !STAMP_ONLY_TAINTED) ? curr_eid : '0;
      end
    end
  end

endmodule
