// jass_bvw_regs -- FF arrays for b~ = a_1^H a_2 (22 b), v = A^H c (2 x 26 b)
// and W = A^H Phi (2 x 16 x 26 b), written from the adder-tree output.
//
// Each write takes the tree's 40-bit complex sum, saturates it to the
// array's width and stores it at the addressed entry: sel chooses the array,
// i the row (vector a_i) and k the column of W. The arrays and their widths
// are the paper's; saturation on overflow is this design's choice.
module jass_bvw_regs
  import jass_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [1:0]      sel,    // 0: b~, 1: v, 2: W
  input  logic            i,
  input  logic [KIW-1:0]  k,
  input  ctr_t            din,
  output ca_t             bt,
  output cv_t             v [IMAX],
  output cv_t             w [IMAX][K]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bt <= '0;
      v  <= '{default: '0};
      w  <= '{default: '0};
    end else if (we) begin
      unique case (sel)
        2'd0: begin
          bt.re <= BTW'(sat(128'(din.re), BTW));
          bt.im <= BTW'(sat(128'(din.im), BTW));
        end
        2'd1: begin
          v[i].re <= VW'(sat(128'(din.re), VW));
          v[i].im <= VW'(sat(128'(din.im), VW));
        end
        2'd2: begin
          w[i][k].re <= VW'(sat(128'(din.re), VW));
          w[i][k].im <= VW'(sat(128'(din.im), VW));
        end
        default: ;
      endcase
    end
  end

endmodule
