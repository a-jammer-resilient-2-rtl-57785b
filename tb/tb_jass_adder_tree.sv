// tb_jass_adder_tree -- 16-input complex adder tree: back-to-back random
// (including extreme) inputs, sums checked against a software sum, tag and
// valid checked to arrive exactly 3 cycles after the input.
module tb_jass_adder_tree;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cpr_t in [B];
  ctr_t out;
  logic [$bits(pe_cmd_t)-1:0] tag_in = '0, tag_out;
  always #1 clk = ~clk;

  jass_adder_tree dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint er [$], ei [$];
  int tg [$];
  int cyc = 0;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      checks++;
      if (er.size() == 0 || out.re != er[0] || out.im != ei[0] || int'(tag_out) != tg[0]) begin
        failures++;
        $display("FAIL sum at cycle %0d", cyc);
      end
      if (er.size() > 0) begin void'(er.pop_front()); void'(ei.pop_front()); void'(tg.pop_front()); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      longint sr, si;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      tag_in = $bits(pe_cmd_t)'($urandom);
      sr = 0; si = 0;
      for (int n = 0; n < B; n++) begin
        if (t < 4) begin
          in[n].re = t[0] ? {1'b1, 35'd0} : {1'b0, {35{1'b1}}};
          in[n].im = t[1] ? {1'b1, 35'd0} : {1'b0, {35{1'b1}}};
        end else begin
          in[n].re = $signed(36'({$urandom, $urandom}));
          in[n].im = $signed(36'({$urandom, $urandom}));
        end
        sr += longint'(in[n].re);
        si += longint'(in[n].im);
      end
      if (in_valid) begin er.push_back(sr); ei.push_back(si); tg.push_back(int'(tag_in)); end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (er.size() != 0) begin failures++; $display("FAIL %0d sums missing", er.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
