// tb_jass_pn -- pseudonormalization: random 16-entry complex vectors with
// magnitudes from 2^3 to 2^33. Checks one-cycle latency, the exponent
// n = floor(log2(max |component|)) found by comparison, each output against
// floor(x * 2^(19-n)) computed in floating point, that the largest output
// lies in [1, 2) (Q2.19), and the all-zero flag.
module tb_jass_pn;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, zero_o;
  logic signed [33:0] in_re [16], in_im [16];
  logic signed [20:0] out_re [16], out_im [16];
  logic [5:0] n_o;
  always #1 clk = ~clk;

  jass_pn dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic longint exp_out(input longint x, input int n);
    return longint'($floor(real'(x) * (2.0 ** (19 - n))));
  endfunction

  initial begin
    longint mx, v;
    int n, bits;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      bits = 3 + ($urandom % 31);
      for (int i = 0; i < 16; i++) begin
        in_re[i] = 34'($signed(64'($urandom) << 32 | 64'($urandom)) >>> (63 - bits));
        in_im[i] = 34'($signed(64'($urandom) << 32 | 64'($urandom)) >>> (63 - bits));
      end
      mx = 0;
      for (int i = 0; i < 16; i++) begin
        v = in_re[i] < 0 ? -longint'(in_re[i]) : longint'(in_re[i]); if (v > mx) mx = v;
        v = in_im[i] < 0 ? -longint'(in_im[i]) : longint'(in_im[i]); if (v > mx) mx = v;
      end
      n = 0;
      while ((longint'(1) << (n + 1)) <= mx) n++;
      in_valid = 1;
      @(posedge clk); #0.1;
      in_valid = 0;
      chk(out_valid, "latency 1");
      chk(int'(n_o) == n, $sformatf("n %0d vs %0d", n_o, n));
      mx = 0;
      for (int i = 0; i < 16; i++) begin
        chk(longint'(out_re[i]) == exp_out(in_re[i], n) && longint'(out_im[i]) == exp_out(in_im[i], n),
            $sformatf("entry %0d", i));
        v = out_re[i] < 0 ? -longint'(out_re[i]) : longint'(out_re[i]); if (v > mx) mx = v;
        v = out_im[i] < 0 ? -longint'(out_im[i]) : longint'(out_im[i]); if (v > mx) mx = v;
      end
      chk(mx >= (1 << 19) && mx <= (1 << 20), "max in [1,2]");
      @(posedge clk); #0.1;
      chk(!out_valid, "single valid");
    end
    for (int i = 0; i < 16; i++) begin in_re[i] = 0; in_im[i] = 0; end
    in_valid = 1;
    @(posedge clk); #0.1;
    in_valid = 0;
    chk(zero_o && out_re[3] == 0, "zero vector");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
