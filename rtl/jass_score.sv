// jass_score -- score module: decides whether the current delay index l is
// the start of the synchronisation sequence (Algorithm 1, lines 13-15).
//
// With a_1, a_2 of unit norm, b~ = a_1^H a_2, B~ = [1 -b~; -conj(b~) 1],
// v = A^H c and W = A^H Phi it evaluates
//   N = (1 - |b~|^2) ||c||^2 - v^H B~ v
//     = (1 - |b~|^2) ||c||^2 - |v1|^2 - |v2|^2 + 2 Re(b~ conj(v1) v2)
//   D = (1 - |b~|^2) tr(Phi) - tr(B~ W A)
//     = (1 - |b~|^2) tr(Phi) - Re(WA11) - Re(WA22) + Re(b~ WA21) + Re(conj(b~) WA12)
// and reports pass = (N - tau D >= 0), which avoids the division N/D. All
// arithmetic is real-valued, on the module's own multipliers and subtractors,
// as in the paper. The scalar inputs ||c||^2, tr(Phi) and the four entries
// of W A arrive from the adder tree (captured with the *_we strobes); b~ and v
// come from their FF arrays. The number formats (see jass_pkg) are aligned
// here: N is formed in units of 2^16 * ||c||^2 scale, D in units of 2^20,
// tau is Q4.12. These internal alignments are this design's choice.
//
// Timing: start -> done three cycles later with pass, n_o and d_o valid
// until the next start.
module jass_score
  import jass_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cn2_we,      // ||c||^2 / 16 from the tree
  input  logic             tr_we,       // tr(Phi) from the tree
  input  logic             wa_we,       // (W A)_{ij} from the tree
  input  logic [1:0]       wa_idx,      // {i, j}
  input  ctr_t             tree_sum,
  input  ca_t              bt,          // b~, Q2.20
  input  cv_t              v [IMAX],    // v * 2^4
  input  logic [TAUW-1:0]  tau,         // Q4.12
  input  logic             start,
  output logic             done,
  output logic             pass,
  output logic signed [95:0] n_o,       // N * 2^16 (in Y^2 units)
  output logic signed [95:0] d_o        // D * 2^20
);

  typedef logic signed [127:0] w_t;

  logic signed [TRW-1:0] cn2, trphi;
  ctr_t wa [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cn2   <= '0;
      trphi <= '0;
      wa    <= '{default: '0};
    end else begin
      if (cn2_we) cn2 <= tree_sum.re;
      if (tr_we)  trphi <= tree_sum.re;
      if (wa_we)  wa[wa_idx] <= tree_sum;
    end
  end

  // stage 1: products
  w_t t_n1, t_d1, v1sq, v2sq, pre, pim, wa21r, wa12r;
  w_t omb_c, b2_c;
  w_t s1_tn, s1_vv, s1_td, s1_tw, s2_n, s2_d;
  logic [1:0] st;

  always_comb begin
    b2_c  = w_t'(bt.re) * w_t'(bt.re) + w_t'(bt.im) * w_t'(bt.im);  // Q.40
    omb_c = (w_t'(1) <<< 20) - (b2_c >>> 20);                        // Q.20
    // conj(v1) v2
    pre = w_t'(v[0].re) * w_t'(v[1].re) + w_t'(v[0].im) * w_t'(v[1].im);
    pim = w_t'(v[0].re) * w_t'(v[1].im) - w_t'(v[0].im) * w_t'(v[1].re);
    v1sq = w_t'(v[0].re) * w_t'(v[0].re) + w_t'(v[0].im) * w_t'(v[0].im);
    v2sq = w_t'(v[1].re) * w_t'(v[1].re) + w_t'(v[1].im) * w_t'(v[1].im);
    // Re(b~ WA21) + Re(conj(b~) WA12); wa index = {i, j}
    wa21r = w_t'(bt.re) * w_t'(wa[2].re) - w_t'(bt.im) * w_t'(wa[2].im);
    wa12r = w_t'(bt.re) * w_t'(wa[1].re) + w_t'(bt.im) * w_t'(wa[1].im);
    t_n1  = omb_c * w_t'(cn2);     // ||c||^2 * 2^16
    t_d1  = omb_c * w_t'(trphi);   // tr(Phi) * 2^20
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= '0; done <= 1'b0; pass <= 1'b0;
      s1_tn <= '0; s1_vv <= '0; s1_td <= '0; s1_tw <= '0; s2_n <= '0; s2_d <= '0;
      n_o <= '0; d_o <= '0;
    end else begin
      st   <= {st[0], start};
      done <= st[1];
      // stage 1: real products
      s1_tn <= t_n1;
      s1_vv <= v1sq + v2sq - 2 * (((w_t'(bt.re) * pre - w_t'(bt.im) * pim)) >>> 20);  // v^H B v * 2^8
      s1_td <= t_d1;
      s1_tw <= w_t'(wa[0].re) + w_t'(wa[3].re) - ((wa21r + wa12r) >>> 20);          // tr(B W A) / 2^10
      // stage 2: N and D
      s2_n  <= s1_tn - (s1_vv <<< 8);
      s2_d  <= s1_td - (s1_tw <<< 30);
      // stage 3: N - tau D >= 0  <=>  N_int * 2^16 >= tau_int * D_int
      if (st[1]) begin
        pass <= ((s2_n <<< 16) - w_t'({1'b0, tau}) * s2_d) >= 0;
        n_o  <= 96'(s2_n);
        d_o  <= 96'(s2_d);
      end
    end
  end

endmodule
