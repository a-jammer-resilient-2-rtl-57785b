// tb_jass_pe -- one processing element (row n = 3) driven command by command.
// A software model of the row (Phi, Lambda, c_n, a'_n, a_n) is kept in the
// testbench and compared after each operation group:
//   Phi += y_n conj(y_k) twice and -= once (rank-one updates), c_n = sum s_k Y_kn,
//   Lambda = (16 Phi - c_n conj(c_k)) / 2^13, a' = Lambda a (checking that the
//   result appears 19 cycles after the first issue), Lambda -= a' conj(a_k),
//   a = pn * r, and two adder-tree products (|c_n|^2/16, 2 cycles after issue).
module tb_jass_pe;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, clr = 0, sk = 0;
  pe_cmd_t cmd;
  cmb_t bc;
  cma_t ext;
  cpn_t pn;
  logic [ISQW-1:0] r;
  cc_t c_o;
  ca_t a1_o, a2_o;
  logic acc_valid, tree_valid;
  cacc_t acc_out;
  cpr_t tree_out;
  always #1 clk = ~clk;

  jass_pe #(.IDX(N)) dut (.*);

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

  function automatic longint sat(input longint x, input int w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1; lo = -(longint'(1) <<< (w - 1));
    return x > hi ? hi : (x < lo ? lo : x);
  endfunction

  // model state
  longint pr [K], pim [K], lr [K], li [K], cr, ci, apr, api, acr, aci;
  longint yr [K], yi [K], ar [K], ai [K];

  task automatic issue(input pe_op_e op, input int k, input bit last, input bit isel);
    cmd.op = op; cmd.k = KIW'(k); cmd.last = last; cmd.isel = isel;
    @(posedge clk); #0.1;
    cmd = '0;
  endtask
  task automatic drain(); repeat (3) @(posedge clk); #0.1; endtask

  task automatic phi_update(input bit sub);
    for (int k = 0; k < K; k++) begin yr[k] = $signed(15'($urandom)); yi[k] = $signed(15'($urandom)); end
    ext.re = MAW'(yr[N]); ext.im = MAW'(yi[N]);
    for (int k = 0; k < K; k++) begin
      longint tr, ti;
      bc.re = MBW'(yr[k]); bc.im = MBW'(yi[k]);
      tr = yr[N] * yr[k] + yi[N] * yi[k];
      ti = yi[N] * yr[k] - yr[N] * yi[k];
      pr[k] = sat(sub ? pr[k] - tr : pr[k] + tr, PHIW);
      pim[k] = sat(sub ? pim[k] - ti : pim[k] + ti, PHIW);
      issue(sub ? OP_PHI_SUB : OP_PHI_ADD, k, k == K - 1, 0);
    end
    drain();
    for (int k = 0; k < K; k++)
      chk(dut.phi[k].re == pr[k] && dut.phi[k].im == pim[k], $sformatf("phi[%0d]", k));
  endtask

  initial begin
    int t0, tv;
    cmd = '0; bc = '0; ext = '0; pn = '0; r = '0;
    for (int k = 0; k < K; k++) begin pr[k] = 0; pim[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    clr = 1; @(posedge clk); #0.1; clr = 0;
    phi_update(0);
    phi_update(0);
    phi_update(1);

    // c_n = sum_k s_k Y[k][n]
    cr = 0; ci = 0;
    for (int k = 0; k < K; k++) begin
      sk = $urandom % 2;
      ext.re = MAW'($signed(15'($urandom))); ext.im = MAW'($signed(15'($urandom)));
      cr += sk ? longint'(ext.re) : -longint'(ext.re);
      ci += sk ? longint'(ext.im) : -longint'(ext.im);
      issue(OP_C, k, k == K - 1, 0);
    end
    drain();
    chk(c_o.re == cr && c_o.im == ci, $sformatf("c_n %0d %0d vs %0d %0d", c_o.re, c_o.im, cr, ci));

    // Lambda row
    for (int k = 0; k < K; k++) begin
      longint ckr, cki, tr, ti;
      ckr = $signed(19'($urandom)); cki = $signed(19'($urandom));
      bc.re = MBW'(ckr); bc.im = MBW'(cki);
      tr = (cr * ckr + ci * cki) >>> 4;
      ti = (ci * ckr - cr * cki) >>> 4;
      lr[k] = sat((pr[k] - tr) >>> 9, LAMW);
      li[k] = sat((pim[k] - ti) >>> 9, LAMW);
      issue(OP_LAM, k, k == K - 1, 0);
    end
    drain();
    for (int k = 0; k < K; k++)
      chk(dut.lam[k].re == lr[k] && dut.lam[k].im == li[k], $sformatf("lam[%0d]", k));

    // a' = Lambda a, 19-cycle latency
    acr = 0; aci = 0;
    t0 = $time;
    for (int k = 0; k < K; k++) begin
      ar[k] = $signed(21'($urandom)); ai[k] = $signed(21'($urandom));
      bc.re = MBW'(ar[k]); bc.im = MBW'(ai[k]);
      acr = sat(acr + sat((lr[k] * ar[k] - li[k] * ai[k]) >>> 17, PRW), ACCW);
      aci = sat(aci + sat((lr[k] * ai[k] + li[k] * ar[k]) >>> 17, PRW), ACCW);
      cmd.op = OP_MV; cmd.k = KIW'(k); cmd.last = (k == K - 1); cmd.isel = 0;
      @(posedge clk); #0.1;
    end
    cmd = '0;
    tv = 16;
    while (!acc_valid && tv < 40) begin @(posedge clk); #0.1; tv++; end
    chk(tv == 18, $sformatf("a' ready in cycle %0d (19th cycle = index 18)", tv));
    chk(acc_out.re == acr && acc_out.im == aci, "a' = Lambda a");
    apr = sat(acr >>> 8, APW); api = sat(aci >>> 8, APW);

    // Lambda -= a' conj(a_k)
    for (int k = 0; k < K; k++) begin
      ar[k] = $signed(21'($urandom)); ai[k] = $signed(21'($urandom));
      bc.re = MBW'(ar[k]); bc.im = MBW'(ai[k]);
      lr[k] = sat(lr[k] - sat((apr * ar[k] + api * ai[k]) >>> 15, PRW), LAMW);
      li[k] = sat(li[k] - sat((api * ar[k] - apr * ai[k]) >>> 15, PRW), LAMW);
      issue(OP_DEFL, k, k == K - 1, 0);
    end
    drain();
    for (int k = 0; k < K; k++)
      chk(dut.lam[k].re == lr[k] && dut.lam[k].im == li[k], $sformatf("deflated lam[%0d]", k));

    // a_{n,2} = pn * r
    pn.re = $signed(21'($urandom)); pn.im = $signed(21'($urandom));
    r = 22'($urandom);
    issue(OP_SCALE, 0, 1, 1);
    drain();
    chk(longint'(a2_o.re) == sat((longint'(pn.re) * longint'(r)) >>> 20, AW) &&
        longint'(a2_o.im) == sat((longint'(pn.im) * longint'(r)) >>> 20, AW), "scale into a_2");

    // tree product |c_n|^2 / 16, two cycles after issue
    issue(OP_T_CN, 0, 1, 0);
    @(posedge clk); #0.1;
    chk(tree_valid && tree_out.re == sat((cr * cr + ci * ci) >>> 4, PRW) && tree_out.im == 0, "|c_n|^2 product");
    @(posedge clk); #0.1;
    chk(!tree_valid, "tree_valid one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
