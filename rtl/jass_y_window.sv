// jass_y_window -- FF array holding the windowed receive matrix
// Y_l = [y[l], ..., y[l+K-1]] (K = 16 samples of B = 16 antennas, 15-bit
// real and imaginary parts, i.e. the 2x16x16x15 b array of the paper).
//
// It is a shift register of samples: `shift` moves every column one place
// towards index 0 (dropping y[l]) and writes `din` into column K-1, which
// advances the window from Y_l to Y_{l+1}. All columns are readable at once
// through `y`, so the interconnect can hand each PE its own antenna entry.
// The organisation as a sample shift register is this design's choice; the
// paper gives only the array's contents and size.
module jass_y_window
  import jass_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  shift,
  input  cy_t   din [B],
  output cy_t   y   [K][B]   // y[k][n]: sample l+k, antenna n
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '{default: '0};
    end else if (shift) begin
      for (int k = 0; k < K - 1; k++) y[k] <= y[k+1];
      y[K-1] <= din;
    end
  end

endmodule
