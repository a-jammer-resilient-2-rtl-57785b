// jass_inv_sqrt -- inverse square root r = 1/sqrt(x) of an unsigned
// fixed-point number x (ISQIW = 31 bits, XF = 22 fraction bits, so
// x = X / 2^22), used to normalise the pseudonormalized power-method vector
// (Algorithm 1, line 9, second step). After pseudonormalization x lies in
// [1, 128), so r lies in (0.088, 1].
//
// Rescaling: a base-4 leading-one detector (LOD4) finds the highest non-zero
// base-4 digit p of X, and x' = X / 4^(p+1) lies in [0.25, 1); x' is kept as
// a 21-bit fraction (Q0.21). Its top 11 bits address a look-up table whose
// 13-bit entries (Q2.11) are 1/sqrt of the bin centre:
//     LUT[i] = floor(sqrt(2^34 / (2i + 1))) ~ 2^11 / sqrt((i + 0.5) / 2048).
// Newton-Raphson: y = y_LUT * (3 - y_LUT^2 * x') / 2 is evaluated on one
// real 13 x 23 bit multiplier in three passes (y*x', y*(y*x'), y*(3 - ..)),
// with a 23-bit working register and a 22-bit result register (Q2.20).
// Finally 1/sqrt(x) = y * 2^(XF/2) / 2^(p+1), returned as Q1.21 in 22 bits,
// which is a right shift of y by alpha = p - XF/2 (4 bits). Inputs x < 1
// (alpha < 0, not produced by the pseudonormalized vectors) return the
// largest code.
// The structure (LOD4, 11-bit LUT address, 13-bit LUT, one NR step, widths
// 31/21/13/23/36/22 bits) is the paper's; the binary points, the LUT
// contents formula and the multi-pass schedule are this design's.
//
// Timing: start with x registered; done pulses 6 cycles later with r valid
// and held until the next start.
module jass_inv_sqrt
  import jass_pkg::*;
#(
  parameter int unsigned XF = 22   // fraction bits of x (even)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ISQIW-1:0]  x,
  output logic              done,
  output logic [ISQW-1:0]   r
);

  localparam int unsigned LUTN = 2048;
  typedef logic [LUTN-1:0][12:0] lut_t;

  function automatic logic [17:0] isqrt(input logic [35:0] v);
    logic [35:0] rem, root, bitv;
    rem = v; root = '0; bitv = 36'd1 << 34;
    while (bitv > rem) bitv = bitv >> 2;
    while (bitv != 0) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[17:0];
  endfunction

  function automatic lut_t make_lut();
    lut_t t;
    logic [35:0] q;
    logic [17:0] sq;
    for (int i = 0; i < LUTN; i++) begin
      q = (36'd1 << 34) / 36'(2 * i + 1);
      sq = isqrt(q);
      t[i] = (sq > 18'd8191) ? 13'd8191 : sq[12:0];
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  typedef enum logic [2:0] {S_IDLE, S_M1, S_M2, S_SUB, S_M3, S_OUT} state_e;
  state_e state;

  logic [ISQIW-1:0] xr;      // 31-bit input register
  logic [3:0]       alpha;   // LOD4 result p
  logic [12:0]      ylut;    // 13-bit LUT register
  logic [22:0]      opb;     // 23-bit multiplier operand register
  logic [22:0]      tmp;     // 23-bit product register
  logic [35:0]      prod;
  logic [3:0]       p_c;
  logic [20:0]      xs_c;
  logic [22:0]      sub_c;

  // LOD4 and rescaling of the registered input
  always_comb begin
    p_c = '0;
    for (int d = 0; d < 16; d++)
      if (xr[2*d +: 2] != 2'b00 || (d == 15 && xr[30])) p_c = d[3:0];
    if (2 * (int'(p_c) + 1) <= 21) xs_c = 21'(xr << (21 - 2 * (int'(p_c) + 1)));
    else                           xs_c = 21'(xr >> (2 * (int'(p_c) + 1) - 21));
  end

  assign prod  = 36'(ylut) * 36'(opb);
  assign sub_c = 23'(3 << 20) - tmp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      r     <= '0;
      xr    <= '0;
      alpha <= '0;
      ylut  <= '0;
      opb   <= '0;
      tmp   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xr    <= x;
          state <= S_M1;
        end
        S_M1: begin  // rescale, fetch LUT
          alpha <= p_c;
          ylut  <= LUT[xs_c[20:10]];
          opb   <= {2'b00, xs_c};
          state <= S_M2;
        end
        S_M2: begin  // y*x' : Q2.11 * Q0.21 = Q.32 -> Q.20
          tmp   <= 23'(prod >> 12);
          opb   <= 23'(prod >> 12);
          state <= S_SUB;
        end
        S_SUB: begin // y^2 x' : Q2.11 * Q.20 = Q.31 -> Q.20, then 3 - (.)
          tmp   <= 23'(prod >> 11);
          state <= S_M3;
        end
        S_M3: begin
          opb   <= sub_c;
          state <= S_OUT;
        end
        S_OUT: begin // y = ylut*(3-..)/2 : Q.31 / 2 -> Q2.20
          r     <= (alpha < 4'(XF / 2)) ? '1 : 22'(22'(prod >> 12) >> (alpha - 4'(XF / 2)));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
