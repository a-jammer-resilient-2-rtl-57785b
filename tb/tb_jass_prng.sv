// tb_jass_prng -- checks the PRNG against a reference xorshift32 chain:
// outputs for 200 steps after a seed load, hold when en = 0, re-seeding,
// and the all-zero seed guard.
module tb_jass_prng;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [31:0] seed = 0;
  logic signed [20:0] re, im;
  always #1 clk = ~clk;

  jass_prng dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    return y ^ (y << 5);
  endfunction

  logic [31:0] st;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    seed = 32'hDEAD_BEEF;
    load = 1;
    @(posedge clk); #0.1;
    load = 0;
    st = seed;
    en = 1;
    for (int i = 0; i < 200; i++) begin
      checks++;
      if (re !== 21'(step(st) >> 11) || im !== 21'(step(step(st)) >> 11)) begin
        failures++;
        $display("FAIL step %0d: %h %h", i, re, im);
      end
      st = step(step(st));
      @(posedge clk); #0.1;
    end
    en = 0;
    repeat (3) @(posedge clk); #0.1;
    checks++;
    if (re !== 21'(step(st) >> 11)) begin failures++; $display("FAIL hold"); end
    seed = 32'd0; load = 1;
    @(posedge clk); #0.1;
    load = 0;
    checks++;
    if (re !== 21'(step(32'd1) >> 11)) begin failures++; $display("FAIL zero seed"); end
    seed = 32'h1234_5678; load = 1;
    @(posedge clk); #0.1;
    load = 0;
    checks++;
    if (im !== 21'(step(step(32'h1234_5678)) >> 11)) begin failures++; $display("FAIL reseed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
