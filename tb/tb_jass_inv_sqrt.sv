// tb_jass_inv_sqrt -- inverse square root: 2000 random inputs x = X/2^22
// in [1, 512) plus the range ends. Compares r (Q1.21) with 1/sqrt(x) from
// floating point (tolerance 8 LSB) and checks the 6-cycle latency.
module tb_jass_inv_sqrt;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [30:0] x;
  logic [21:0] r;
  always #1 clk = ~clk;

  jass_inv_sqrt dut (.*);

  int checks = 0, failures = 0, maxerr = 0;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [30:0] xv);
    int lat, err;
    real rv;
    x = xv;
    start = 1;
    @(posedge clk); #0.1;
    start = 0;
    lat = 1;
    while (!done && lat < 50) begin @(posedge clk); #0.1; lat++; end
    rv = 2.0 ** 21 / $sqrt(real'(xv) / (2.0 ** 22));
    err = int'(r) - $rtoi(rv);
    if (err < 0) err = -err;
    if (err > maxerr) maxerr = err;
    checks++;
    if (err > 8 || lat != 6) begin
      failures++;
      $display("FAIL x=%0d r=%0d rv=%f lat=%0d", xv, r, rv, lat);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #0.1;
    one(31'd1 << 22);
    one(31'h7FFF_FFFF);
    for (int i = 0; i < 2000; i++) begin
      logic [30:0] v;
      v = 31'($urandom) >> ($urandom % 9);
      if (v < (31'd1 << 22)) v = v | (31'd1 << 22);
      one(v);
    end
    $display("max error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
