// tb_kg_taint_regfile -- random writes and reads against a model; checks
// that value and taint travel together, x0 stays 0/untainted and clear
// scrubs every register.
module tb_kg_taint_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, we = 0, rd_t = 0, t1, t2;
  logic [4:0] a1 = '0, a2 = '0, wa = '0;
  logic [63:0] wd = '0, d1, d2;
  logic [63:0] mv [32];
  logic        mt [32];
  int checks = 0, failures = 0;

  kg_taint_regfile dut (.clk, .rst_n, .clear, .rs1_addr(a1), .rs1_data(d1), .rs1_taint(t1),
    .rs2_addr(a2), .rs2_data(d2), .rs2_taint(t2), .we, .rd_addr(wa), .rd_data(wd), .rd_taint(rd_t));

  task automatic rd_check();
    a1 = 5'($urandom); a2 = 5'($urandom); #1;
    checks++;
    if (d1 !== mv[a1] || t1 !== mt[a1] || d2 !== mv[a2] || t2 !== mt[a2]) begin
      failures++; $display("FAIL r%0d=%h/%b r%0d=%h/%b", a1, d1, t1, a2, d2, t2);
    end
  endtask

  initial begin
    for (int i = 0; i < 32; i++) begin mv[i] = 0; mt[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      rd_check();
      we = 1; wa = 5'($urandom); wd = {$urandom, $urandom}; rd_t = 1'($urandom);
      if (n == 200) begin we = 0; clear = 1; end
      @(posedge clk); #1;
      if (clear) begin for (int i = 0; i < 32; i++) begin mv[i] = 0; mt[i] = 0; end end
      else if (wa != 0) begin mv[wa] = wd; mt[wa] = rd_t; end
      we = 0; clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
