// tb_jass_bvw_regs -- writes b~, v_1, v_2 and all 32 W entries from random
// 40-bit tree sums and checks that each lands in its place, saturated to its
// width, and that other entries are untouched.
module tb_jass_bvw_regs;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, i = 0;
  logic [1:0] sel = 0;
  logic [KIW-1:0] k = 0;
  ctr_t din;
  ca_t bt;
  cv_t v [IMAX];
  cv_t w [IMAX][K];
  always #1 clk = ~clk;

  jass_bvw_regs dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  function automatic longint sat(input longint x, input int wd);
    longint hi, lo;
    hi = (longint'(1) <<< (wd - 1)) - 1; lo = -(longint'(1) <<< (wd - 1));
    return x > hi ? hi : (x < lo ? lo : x);
  endfunction

  longint er [2][K], ei [2][K];
  task automatic wr(input int s, input int ii, input int kk);
    @(negedge clk);
    din.re = $signed(40'({$urandom, $urandom})) >>> ($urandom % 30);
    din.im = $signed(40'({$urandom, $urandom})) >>> ($urandom % 30);
    sel = 2'(s); i = ii[0]; k = KIW'(kk); we = 1;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(0, 0, 0);
    chk(longint'(bt.re) == sat(longint'(din.re), BTW) && longint'(bt.im) == sat(longint'(din.im), BTW), "b~");
    for (int ii = 0; ii < 2; ii++) begin
      wr(1, ii, 0);
      chk(longint'(v[ii].re) == sat(longint'(din.re), VW) && longint'(v[ii].im) == sat(longint'(din.im), VW), "v");
    end
    for (int ii = 0; ii < 2; ii++)
      for (int kk = 0; kk < K; kk++) begin
        wr(2, ii, kk);
        er[ii][kk] = sat(longint'(din.re), VW); ei[ii][kk] = sat(longint'(din.im), VW);
      end
    for (int ii = 0; ii < 2; ii++)
      for (int kk = 0; kk < K; kk++)
        chk(longint'(w[ii][kk].re) == er[ii][kk] && longint'(w[ii][kk].im) == ei[ii][kk], $sformatf("W[%0d][%0d]", ii, kk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
