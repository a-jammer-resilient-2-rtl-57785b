// tb_jass_sample_mem -- writes all 1024 words with random receive vectors,
// reads them back in a scrambled order and checks the registered read
// (data valid the cycle after rd_en) and that data hold while rd_en = 0.
module tb_jass_sample_mem;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  localparam int D = 1024;
  logic clk = 0, we = 0, rd_en = 0;
  logic [9:0] waddr = 0, raddr = 0;
  cy_t wdata [B];
  cy_t rdata [B];
  always #1 clk = ~clk;

  jass_sample_mem dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [D][B];
  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      waddr = 10'(a); we = 1;
      for (int n = 0; n < B; n++) begin wdata[n] = cy_t'($urandom); model[a][n] = 32'(wdata[n]); end
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < D; t++) begin
      int a;
      a = (t * 37 + 11) % D;
      raddr = 10'(a); rd_en = 1;
      @(negedge clk);
      rd_en = 0;
      raddr = 10'(a + 1);
      @(negedge clk);
      for (int n = 0; n < B; n++) begin
        checks++;
        if (32'(rdata[n]) != model[a][n]) begin failures++; $display("FAIL addr %0d n %0d", a, n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
