// tb_mem_model -- behavioural word memory for the testbenches.
//
// Sparse 64-bit-word memory (unwritten words read 0) behind the request/grant
// port of kg_lsu: a request is granted in the clock it is seen or, with
// RANDOM_WAIT, after random wait states; a granted write updates the bytes
// enabled by mem_wstrb; a granted read returns its data with a one-clock
// mem_rvalid pulse 1 clock (or, with RANDOM_WAIT, 1..3 clocks) later.
// Testbenches reach the contents through mem[] hierarchically.
module tb_mem_model #(
  parameter bit RANDOM_WAIT = 1'b0
) (
  input  logic        clk,
  input  logic        mem_req,
  input  logic        mem_we,
  input  logic [63:0] mem_addr,
  input  logic [63:0] mem_wdata,
  input  logic [7:0]  mem_wstrb,
  output logic        mem_gnt,
  output logic        mem_rvalid,
  output logic [63:0] mem_rdata
);
  logic [63:0] mem [logic [63:0]];
  int          pend_cnt = -1;
  logic [63:0] pend_data;
  int          n_req = 0;

  initial begin mem_gnt = 0; mem_rvalid = 0; mem_rdata = '0; end

  always @(negedge clk) mem_gnt <= RANDOM_WAIT ? 1'($urandom_range(0, 2) != 0) : 1'b1;

  function automatic logic [63:0] rd(input logic [63:0] a);
    logic [63:0] wa;
    wa = {a[63:3], 3'b000};
    return mem.exists(wa) ? mem[wa] : 64'd0;
  endfunction

  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (pend_cnt > 0) pend_cnt--;
    else if (pend_cnt == 0) begin
      mem_rvalid <= 1'b1; mem_rdata <= pend_data; pend_cnt = -1;
    end
    if (mem_req && mem_gnt) begin
      n_req++;
      if (mem_we) begin
        logic [63:0] v;
        v = rd(mem_addr);
        for (int b = 0; b < 8; b++) if (mem_wstrb[b]) v[8*b +: 8] = mem_wdata[8*b +: 8];
        mem[{mem_addr[63:3], 3'b000}] = v;
      end else begin
        pend_data = rd(mem_addr);
        pend_cnt  = RANDOM_WAIT ? $urandom_range(0, 2) : 0;
        if (pend_cnt == 0) begin
          mem_rvalid <= 1'b1; mem_rdata <= pend_data; pend_cnt = -1;
        end
      end
    end
  end
endmodule
