// tb_jass_interconnect -- fills every source with random data and checks, for
// every source selection, k and i, the broadcast operand, each PE's operand
// and s_k.
module tb_jass_interconnect;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  bc_src_e bc_src;
  ext_src_e ext_src;
  logic [KIW-1:0] k;
  logic i, sk;
  logic [K-1:0] s;
  cy_t ynew [B];
  cy_t ywin [K][B];
  cc_t c [B];
  ca_t a1 [B], a2 [B];
  cv_t w [IMAX][K];
  logic signed [PNW-1:0] prng_re, prng_im;
  cmb_t bc;
  cma_t ext [B];

  jass_interconnect dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    s = 16'($urandom);
    prng_re = PNW'($urandom); prng_im = PNW'($urandom);
    for (int n = 0; n < B; n++) begin
      ynew[n] = cy_t'($urandom); c[n] = cc_t'({$urandom, $urandom});
      a1[n] = ca_t'({$urandom, $urandom}); a2[n] = ca_t'({$urandom, $urandom});
      for (int kk = 0; kk < K; kk++) ywin[kk][n] = cy_t'($urandom);
      for (int ii = 0; ii < 2; ii++) w[ii][n] = cv_t'({$urandom, $urandom});
    end
    for (int kk = 0; kk < K; kk++)
      for (int ii = 0; ii < 2; ii++) begin
        k = KIW'(kk); i = ii[0];
        bc_src = BC_YNEW; ext_src = EXT_YNEW; #1;
        chk(longint'(bc.re) == longint'(ynew[kk].re) && longint'(bc.im) == longint'(ynew[kk].im), "bc ynew");
        chk(sk == s[kk], "s_k");
        for (int n = 0; n < B; n++) chk(longint'(ext[n].im) == longint'(ynew[n].im) && longint'(ext[n].re) == longint'(ynew[n].re), "ext ynew");
        bc_src = BC_YOLD; ext_src = EXT_YOLD; #1;
        chk(longint'(bc.re) == longint'(ywin[0][kk].re) && longint'(bc.im) == longint'(ywin[0][kk].im), "bc yold");
        for (int n = 0; n < B; n++) chk(longint'(ext[n].re) == longint'(ywin[0][n].re), "ext yold");
        bc_src = BC_C; ext_src = EXT_YWIN; #1;
        chk(longint'(bc.re) == longint'(c[kk].re) && longint'(bc.im) == longint'(c[kk].im), "bc c");
        for (int n = 0; n < B; n++) chk(longint'(ext[n].re) == longint'(ywin[kk][n].re) && longint'(ext[n].im) == longint'(ywin[kk][n].im), "ext ywin");
        bc_src = BC_PRNG; ext_src = EXT_W; #1;
        chk(longint'(bc.re) == longint'(prng_re) && longint'(bc.im) == longint'(prng_im), "bc prng");
        for (int n = 0; n < B; n++) chk(longint'(ext[n].re) == longint'(w[ii][n].re) && longint'(ext[n].im) == longint'(w[ii][n].im), "ext W");
        bc_src = BC_A; ext_src = EXT_ZERO; #1;
        chk(longint'(bc.re) == (ii ? longint'(a2[kk].re) : longint'(a1[kk].re)) &&
            longint'(bc.im) == (ii ? longint'(a2[kk].im) : longint'(a1[kk].im)), "bc a_i");
        chk(ext[5] == '0, "ext zero");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
