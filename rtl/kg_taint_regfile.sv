// kg_taint_regfile -- integer register file extended with one taint bit per
// register.
//
// 32 registers of XLEN bits, each paired with a taint bit that says whether
// the value was derived from sensitive enclave data. Two combinational read
// ports return value and taint together; one synchronous write port writes
// both. Register x0 always reads 0, untainted. The clear input zeroes every
// value and taint in one clock; the core uses it when it leaves an enclave so
// no enclave value or taint survives in the registers.
//
// From the paper: one taint bit per 64-bit register, read and written along
// with the value. This design's choice: the one-clock clear (the paper has the
// Security Monitor clear the registers in software).
module kg_taint_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned XLEN  = 64,
  localparam int unsigned AW = $clog2(NREGS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [AW-1:0]   rs1_addr,
  output logic [XLEN-1:0] rs1_data,
  output logic            rs1_taint,
  input  logic [AW-1:0]   rs2_addr,
  output logic [XLEN-1:0] rs2_data,
  output logic            rs2_taint,
  input  logic            we,
  input  logic [AW-1:0]   rd_addr,
  input  logic [XLEN-1:0] rd_data,
  input  logic            rd_taint
);

  logic [XLEN-1:0] regs  [NREGS];
  logic [NREGS-1:0] taints;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      taints <= '0;
    end else if (clear) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      taints <= '0;
    end else if (we && rd_addr != '0) begin
      regs[rd_addr]   <= rd_data;
      taints[rd_addr] <= rd_taint;
    end
  end

  always_comb begin
    rs1_data  = (rs1_addr == '0) ? '0 : regs[rs1_addr];
    rs1_taint = (rs1_addr == '0) ? 1'b0 : taints[rs1_addr];
    rs2_data  = (rs2_addr == '0) ? '0 : regs[rs2_addr];
    rs2_taint = (rs2_addr == '0) ? 1'b0 : taints[rs2_addr];
  end

endmodule
