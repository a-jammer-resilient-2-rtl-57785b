// jass_pkg -- shared sizes, fixed-point formats and the PE operation set of
// the JASS (jammer-aware synchronisation) core.
//
// Sizes B = K = 16 and Imax = tmax = 2 are the chip's. Storage widths follow
// the widths printed in the architecture figure (Y 15 b, Lambda 25 b, Phi 34 b,
// a 22 b, a' 26 b, c 22 b, b~ 22 b, v and W 26 b, multiplier output 36 b,
// accumulator 34 b, pseudonormalized a' 21 b). Where each value sits in its
// word (the binary point) is this design's choice and is listed below.
//
//   y, Phi, c, tr(Phi)  : integers in units of the ADC sample (Y units)
//   a_{n,i}, b~         : Q2.20 (value 1.0 = 2^20)
//   PN output           : Q2.19 (value in [-2,2))
//   Lambda              : (16*Phi - c c^H) / 2^13
//   v                   : A^H c * 2^4
//   W                   : A^H Phi / 2^10
//   1/sqrt output       : Q1.21
package jass_pkg;

  localparam int unsigned B = 16;   // receive antennas = number of PEs
  localparam int unsigned K = 16;   // synchronisation sequence length
  localparam int unsigned IMAX = 2; // jammer antennas that can be removed
  localparam int unsigned TMAX = 2; // power-method iterations

  localparam int unsigned YW    = 15; // sample component
  localparam int unsigned PHIW  = 34; // Phi entry component
  localparam int unsigned LAMW  = 25; // Lambda entry component
  localparam int unsigned AW    = 22; // normalised a entry component
  localparam int unsigned APW   = 26; // stored a'_n component
  localparam int unsigned CW    = 22; // c_n component
  localparam int unsigned MAW   = 26; // multiplier port A
  localparam int unsigned MBW   = 23; // multiplier port B
  localparam int unsigned PRW   = 36; // multiplier output
  localparam int unsigned ACCW  = 34; // adder / accumulator
  localparam int unsigned PNW   = 21; // pseudonormalised a'
  localparam int unsigned TRW   = 40; // adder-tree sum
  localparam int unsigned VW    = 26; // v and W entries
  localparam int unsigned BTW   = 22; // b~
  localparam int unsigned ISQW  = 22; // inverse square root output
  localparam int unsigned ISQIW = 31; // inverse square root input
  localparam int unsigned TAUW  = 16; // threshold tau, Q4.12
  localparam int unsigned LW    = 10; // delay index / sample address (1024 samples)
  localparam int unsigned KIW   = $clog2(K);

  typedef struct packed { logic signed [YW-1:0]   re, im; } cy_t;
  typedef struct packed { logic signed [PHIW-1:0] re, im; } cphi_t;
  typedef struct packed { logic signed [LAMW-1:0] re, im; } clam_t;
  typedef struct packed { logic signed [AW-1:0]   re, im; } ca_t;
  typedef struct packed { logic signed [APW-1:0]  re, im; } cap_t;
  typedef struct packed { logic signed [CW-1:0]   re, im; } cc_t;
  typedef struct packed { logic signed [MAW-1:0]  re, im; } cma_t;
  typedef struct packed { logic signed [MBW-1:0]  re, im; } cmb_t;
  typedef struct packed { logic signed [PRW-1:0]  re, im; } cpr_t;
  typedef struct packed { logic signed [ACCW-1:0] re, im; } cacc_t;
  typedef struct packed { logic signed [PNW-1:0]  re, im; } cpn_t;
  typedef struct packed { logic signed [TRW-1:0]  re, im; } ctr_t;
  typedef struct packed { logic signed [VW-1:0]   re, im; } cv_t;

  typedef cy_t ysample_t [B];  // one receive vector y[k]

  // Operations a PE can be issued; one issue per clock, k = column index.
  typedef enum logic [3:0] {
    OP_NOP,
    OP_PHI_ADD,   // phi[k] += y_n conj(y_k)          (Alg. 1 lines 1, 17)
    OP_PHI_SUB,   // phi[k] -= y_n conj(y_k)          (line 17)
    OP_C,         // acc (+)= s_k y_{n,k}; c_n at k=15 (line 3)
    OP_LAM,       // lam[k] = (16 phi[k] - c_n conj(c_k)) / 2^13 (line 4)
    OP_MV,        // acc (+)= lam[k] a_k; a'_n at k=15 (line 8)
    OP_DEFL,      // lam[k] -= a'_n conj(a_k)         (line 10)
    OP_SCALE,     // a_{n,i} = pn_n * r               (line 9)
    OP_T_NORM,    // tree: |pn_n|^2                   (line 9)
    OP_T_BT,      // tree: conj(a_{n,1}) a_{n,2}      (line 11)
    OP_T_V,       // tree: conj(a_{n,i}) c_n          (line 12)
    OP_T_W,       // tree: conj(a_{n,i}) phi[k]       (line 12)
    OP_T_CN,      // tree: |c_n|^2                    (line 13)
    OP_T_TR,      // tree: phi[n] (diagonal)          (line 14)
    OP_T_WA       // tree: W[i][n] a_{n,j}            (line 14)
  } pe_op_e;

  typedef struct packed {
    pe_op_e          op;
    logic [KIW-1:0]  k;     // column index of this issue
    logic            isel;  // which a vector (0: a_1, 1: a_2)
    logic            last;  // last issue of an accumulation
  } pe_cmd_t;

  // Interconnect sources for the broadcast operand (same for all PEs) and
  // for the per-PE operand.
  typedef enum logic [2:0] {BC_ZERO, BC_YNEW, BC_YOLD, BC_C, BC_PRNG, BC_A} bc_src_e;
  typedef enum logic [2:0] {EXT_ZERO, EXT_YNEW, EXT_YOLD, EXT_YWIN, EXT_W} ext_src_e;

  function automatic logic signed [63:0] sat(input logic signed [127:0] x, input int unsigned w);
    logic signed [127:0] hi, lo;
    hi = (128'sd1 <<< (w - 1)) - 128'sd1;
    lo = -(128'sd1 <<< (w - 1));
    if (x > hi) return hi[63:0];
    if (x < lo) return lo[63:0];
    return x[63:0];
  endfunction

endpackage
