// jass_pn -- ||.||_inf^ pseudonormalization of the power-method vector a'_i
// (Algorithm 1, line 9, first step).
//
// The 2*B real components of a' (ACCW = 34 bits each) are registered, their
// absolute values are OR-ed together (OR-tree) and a leading-one detector
// (LOD2) returns n = floor(log2(max |component|)). Every component is then
// arithmetically shifted so that the largest lands in [1,2): the result is
// Q2.19 in OW = 21 bits, i.e. value a'/2^n in [-2,2). For n < 19 the shift
// is to the left. An all-zero vector gives an all-zero output and zero_o.
// The OR-tree, LOD2, shift and the 34 -> 21 bit widths are the paper's; the
// position of the binary point in the output is this design's choice.
//
// Timing: in_valid registers the vector; out/out_valid follow one cycle
// later (one register stage, as drawn in the paper's figure).
module jass_pn
  import jass_pkg::*;
#(
  parameter int unsigned N  = B,
  parameter int unsigned IW = ACCW,
  parameter int unsigned OW = PNW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IW-1:0]   in_re [N],
  input  logic signed [IW-1:0]   in_im [N],
  output logic                   out_valid,
  output logic signed [OW-1:0]   out_re [N],
  output logic signed [OW-1:0]   out_im [N],
  output logic [$clog2(IW)-1:0]  n_o,
  output logic                   zero_o
);

  logic signed [IW-1:0] r_re [N];
  logic signed [IW-1:0] r_im [N];
  logic [IW-1:0] ortree;
  logic [$clog2(IW)-1:0] n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      r_re <= in_re;
      r_im <= in_im;
    end
  end

  function automatic logic [IW-1:0] absval(input logic signed [IW-1:0] x);
    return x[IW-1] ? IW'(-x) : IW'(x);
  endfunction

  // OR-tree over |Re| and |Im| of all entries, then the leading-one detector
  always_comb begin
    ortree = '0;
    for (int i = 0; i < N; i++) ortree |= absval(r_re[i]) | absval(r_im[i]);
    n = '0;
    for (int b = 0; b < IW; b++) if (ortree[b]) n = b[$clog2(IW)-1:0];
  end

  localparam int unsigned FRAC = OW - 2;  // output fraction bits

  function automatic logic signed [OW-1:0] shift(input logic signed [IW-1:0] x,
                                                 input logic [$clog2(IW)-1:0] sh);
    logic signed [IW+FRAC-1:0] w;
    w = {{FRAC{x[IW-1]}}, x} <<< FRAC;     // x * 2^FRAC
    w = w >>> sh;                           // / 2^n
    return w[OW-1:0];
  endfunction

  always_comb begin
    for (int i = 0; i < N; i++) begin
      out_re[i] = shift(r_re[i], n);
      out_im[i] = shift(r_im[i], n);
    end
  end

  assign n_o    = n;
  assign zero_o = (ortree == '0);

endmodule
