// tb_jass_y_window -- shifts 40 random receive vectors into the window and
// checks after each shift that column k holds the (k+1)-th newest-but-15
// vector, i.e. the window is [y[l], ..., y[l+15]]; also checks hold.
module tb_jass_y_window;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  logic clk = 0, rst_n = 0, shift = 0;
  cy_t din [B];
  cy_t y [K][B];
  always #1 clk = ~clk;

  jass_y_window dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cy_t hist [64][B];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int n = 0; n < B; n++) begin din[n] = cy_t'($urandom); hist[t][n] = din[n]; end
      shift = 1;
      @(negedge clk);
      shift = 0;
      din[0] = '0;
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        int src;
        src = t - (K - 1) + k;
        for (int n = 0; n < B; n++) begin
          checks++;
          if (y[k][n] != (src >= 0 ? hist[src][n] : '0)) begin
            failures++;
            $display("FAIL t=%0d k=%0d n=%0d", t, k, n);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
