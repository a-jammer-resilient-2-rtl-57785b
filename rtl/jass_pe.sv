// jass_pe -- one reconfigurable processing element (PE) of the JASS array.
// PE n owns row n of Phi (16 x 34 b) and of Lambda (16 x 25 b) and the
// entries c_n (22 b), a'_n (26 b), a_{n,1} and a_{n,2} (22 b).
//
// Datapath: a three-stage pipeline built around one complex multiplier.
//   stage 1  operand registers: port A (26 b) and port B (23 b), selected by
//            the issued operation from local storage, the per-PE input `ext`
//            or the broadcast input `bc` (both driven by the interconnect);
//   stage 2  complex product, arithmetically shifted by an operation-specific
//            amount and saturated to 36 b (or a bypass value for sign-only
//            operations such as c = Y s*, which need no multiplier);
//   stage 3  34-bit complex add/subtract into the accumulator or into the
//            addressed Phi / Lambda entry, or hand-off of the stage-2 product
//            to the shared adder tree (tree_valid/tree_out).
// The three configurations of the paper map onto this as follows:
// accumulate (OP_C, OP_MV: sum over k of column k times a_k, result after
// 16 issues + 3 pipeline cycles = 19 cycles), multiply-and-subtract (OP_LAM,
// OP_DEFL, OP_PHI_ADD/SUB: one column entry per cycle, 19 cycles for a whole
// rank-one update), and adder tree (OP_T_*, product goes to the tree).
// The storage, the register widths and the three configurations are the
// paper's; the operand multiplexing, the shift amounts (see jass_pkg for the
// number formats) and saturation on overflow are this design's choices.
//
// Interface: clr zeroes Phi (start of a run). One command per clock on `cmd` (OP_NOP when idle). The command
// travels down the pipeline with its data. acc_valid pulses when the last
// OP_MV issue leaves stage 3 (acc_out = a'_n); tree_valid marks products for
// the adder tree, two cycles after the issue.
module jass_pe
  import jass_pkg::*;
#(
  parameter int unsigned IDX = 0  // row index n of this PE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,    // clear Phi at the start of a run
  input  pe_cmd_t          cmd,
  input  cmb_t             bc,     // broadcast operand (column entry k)
  input  cma_t             ext,    // per-PE operand from the interconnect
  input  logic             sk,     // s_k as a bit: 1 -> +1, 0 -> -1
  input  cpn_t             pn,     // pseudonormalized a'_n
  input  logic [ISQW-1:0]  r,      // 1/||pn||, Q1.21
  output cc_t              c_o,
  output ca_t              a1_o,
  output ca_t              a2_o,
  output logic             acc_valid,
  output cacc_t            acc_out,
  output logic             tree_valid,
  output cpr_t             tree_out
);

  localparam int unsigned SH_LAM  = 4;   // c c^H / 16 to align with Phi
  localparam int unsigned SH_LAMO = 9;   // (16 Phi - c c^H)/2^13 -> 25 b
  localparam int unsigned SH_MV   = 17;  // Lambda a -> a' (34 b)
  localparam int unsigned SH_DEFL = 15;  // a'(26 b) a^H -> Lambda units
  localparam int unsigned SH_SCL  = 20;  // Q2.19 * Q1.21 -> Q2.20
  localparam int unsigned SH_NORM = 16;  // |pn|^2 Q.38 -> Q9.22
  localparam int unsigned SH_AA   = 20;  // Q2.20 * Q2.20 -> Q2.20
  localparam int unsigned SH_V    = 16;  // c a -> v * 2^4
  localparam int unsigned SH_W    = 22;  // (Phi/2^8) a -> W = Phi / 2^10
  localparam int unsigned SH_CN   = 4;   // |c|^2 / 16
  localparam int unsigned SH_WA   = 20;  // W a -> W A (same units as W)
  localparam int unsigned SH_APN  = 8;   // a' (34 b) -> stored a'_n (26 b)

  // local storage
  cphi_t phi [K];
  clam_t lam [K];
  cc_t   c_n;
  cap_t  ap_n;
  ca_t   a_n [IMAX];
  cacc_t acc;

  assign c_o  = c_n;
  assign a1_o = a_n[0];
  assign a2_o = a_n[1];

  function automatic cmb_t conjb(input cmb_t x);
    conjb.re = x.re;
    conjb.im = -x.im;
  endfunction

  function automatic cma_t widen_a(input logic signed [63:0] re, input logic signed [63:0] im);
    widen_a.re = MAW'(re);
    widen_a.im = MAW'(im);
  endfunction

  function automatic cmb_t widen_b(input logic signed [63:0] re, input logic signed [63:0] im);
    widen_b.re = MBW'(re);
    widen_b.im = MBW'(im);
  endfunction

  // ---------------- stage 1: operand selection ----------------
  pe_cmd_t cmd1, cmd2;
  cma_t    opa, opa_c;
  cmb_t    opb, opb_c;
  logic    byp1, byp_c;
  logic signed [PRW-1:0] bypre1, bypim1, bypre_c, bypim_c;
  logic [4:0] sh1, sh_c;
  ca_t     ai;

  always_comb begin
    opa_c = '0; opb_c = '0; byp_c = 1'b0; bypre_c = '0; bypim_c = '0; sh_c = '0;
    ai = a_n[cmd.isel];
    unique case (cmd.op)
      OP_PHI_ADD, OP_PHI_SUB: begin
        opa_c = ext; opb_c = conjb(bc); sh_c = 0;
      end
      OP_C: begin
        byp_c = 1'b1;
        bypre_c = sk ? PRW'(ext.re) : -PRW'(ext.re);
        bypim_c = sk ? PRW'(ext.im) : -PRW'(ext.im);
      end
      OP_LAM: begin
        opa_c = widen_a(64'(c_n.re), 64'(c_n.im)); opb_c = conjb(bc); sh_c = 5'(SH_LAM);
      end
      OP_MV: begin
        opa_c = widen_a(64'(lam[cmd.k].re), 64'(lam[cmd.k].im)); opb_c = bc; sh_c = 5'(SH_MV);
      end
      OP_DEFL: begin
        opa_c = widen_a(64'(ap_n.re), 64'(ap_n.im)); opb_c = conjb(bc); sh_c = 5'(SH_DEFL);
      end
      OP_SCALE: begin
        opa_c = widen_a(64'(pn.re), 64'(pn.im)); opb_c = widen_b(64'({1'b0, r}), 64'd0);
        sh_c = 5'(SH_SCL);
      end
      OP_T_NORM: begin
        opa_c = widen_a(64'(pn.re), 64'(pn.im)); opb_c = widen_b(64'(pn.re), -64'(pn.im));
        sh_c = 5'(SH_NORM);
      end
      OP_T_BT: begin
        opa_c = widen_a(64'(a_n[1].re), 64'(a_n[1].im));
        opb_c = widen_b(64'(a_n[0].re), -64'(a_n[0].im)); sh_c = 5'(SH_AA);
      end
      OP_T_V: begin
        opa_c = widen_a(64'(c_n.re), 64'(c_n.im));
        opb_c = widen_b(64'(ai.re), -64'(ai.im)); sh_c = 5'(SH_V);
      end
      OP_T_W: begin
        opa_c = widen_a(64'(phi[cmd.k].re >>> 8), 64'(phi[cmd.k].im >>> 8));
        opb_c = widen_b(64'(ai.re), -64'(ai.im)); sh_c = 5'(SH_W);
      end
      OP_T_CN: begin
        opa_c = widen_a(64'(c_n.re), 64'(c_n.im));
        opb_c = widen_b(64'(c_n.re), -64'(c_n.im)); sh_c = 5'(SH_CN);
      end
      OP_T_TR: begin
        byp_c = 1'b1;
        bypre_c = PRW'(phi[IDX].re);
        bypim_c = PRW'(phi[IDX].im);
      end
      OP_T_WA: begin
        opa_c = ext; opb_c = widen_b(64'(ai.re), 64'(ai.im)); sh_c = 5'(SH_WA);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd1 <= '0;
      cmd2 <= '0;
    end else begin
      cmd1 <= cmd;
      cmd2 <= cmd1;
    end
  end

  always_ff @(posedge clk) begin
    opa    <= opa_c;
    opb    <= opb_c;
    byp1   <= byp_c;
    bypre1 <= bypre_c;
    bypim1 <= bypim_c;
    sh1    <= sh_c;
  end

  // ---------------- stage 2: complex multiplier ----------------
  cpr_t prod;
  logic signed [63:0] pre_c, pim_c;

  always_comb begin
    pre_c = 64'(opa.re) * 64'(opb.re) - 64'(opa.im) * 64'(opb.im);
    pim_c = 64'(opa.re) * 64'(opb.im) + 64'(opa.im) * 64'(opb.re);
    pre_c = pre_c >>> sh1;
    pim_c = pim_c >>> sh1;
  end

  always_ff @(posedge clk) begin
    if (byp1) begin
      prod.re <= bypre1;
      prod.im <= bypim1;
    end else begin
      prod.re <= PRW'(sat(128'(pre_c), PRW));
      prod.im <= PRW'(sat(128'(pim_c), PRW));
    end
  end

  assign tree_out   = prod;
  assign tree_valid = (cmd2.op inside {OP_T_NORM, OP_T_BT, OP_T_V, OP_T_W,
                                       OP_T_CN, OP_T_TR, OP_T_WA});

  // ---------------- stage 3: add / subtract and write-back ----------------
  logic signed [127:0] accre_n, accim_n, sre, sim;

  always_comb begin
    accre_n = (cmd2.k == '0) ? 128'(prod.re) : 128'(acc.re) + 128'(prod.re);
    accim_n = (cmd2.k == '0) ? 128'(prod.im) : 128'(acc.im) + 128'(prod.im);
    unique case (cmd2.op)
      OP_PHI_ADD: begin
        sre = 128'(phi[cmd2.k].re) + 128'(prod.re);
        sim = 128'(phi[cmd2.k].im) + 128'(prod.im);
      end
      OP_PHI_SUB: begin
        sre = 128'(phi[cmd2.k].re) - 128'(prod.re);
        sim = 128'(phi[cmd2.k].im) - 128'(prod.im);
      end
      OP_LAM: begin
        sre = (128'(phi[cmd2.k].re) - 128'(prod.re)) >>> SH_LAMO;
        sim = (128'(phi[cmd2.k].im) - 128'(prod.im)) >>> SH_LAMO;
      end
      OP_DEFL: begin
        sre = 128'(lam[cmd2.k].re) - 128'(prod.re);
        sim = 128'(lam[cmd2.k].im) - 128'(prod.im);
      end
      default: begin
        sre = 128'(prod.re);
        sim = 128'(prod.im);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc_out   <= '0;
      acc       <= '0;
      c_n       <= '0;
      ap_n      <= '0;
      a_n       <= '{default: '0};
      phi       <= '{default: '0};
      lam       <= '{default: '0};
    end else begin
      acc_valid <= 1'b0;
      if (clr) phi <= '{default: '0};
      unique case (cmd2.op)
        OP_PHI_ADD, OP_PHI_SUB: begin
          phi[cmd2.k].re <= PHIW'(sat(sre, PHIW));
          phi[cmd2.k].im <= PHIW'(sat(sim, PHIW));
        end
        OP_LAM, OP_DEFL: begin
          lam[cmd2.k].re <= LAMW'(sat(sre, LAMW));
          lam[cmd2.k].im <= LAMW'(sat(sim, LAMW));
        end
        OP_C: begin
          acc.re <= ACCW'(sat(accre_n, ACCW));
          acc.im <= ACCW'(sat(accim_n, ACCW));
          if (cmd2.last) begin
            c_n.re <= CW'(sat(accre_n, CW));
            c_n.im <= CW'(sat(accim_n, CW));
          end
        end
        OP_MV: begin
          acc.re <= ACCW'(sat(accre_n, ACCW));
          acc.im <= ACCW'(sat(accim_n, ACCW));
          if (cmd2.last) begin
            acc_valid  <= 1'b1;
            acc_out.re <= ACCW'(sat(accre_n, ACCW));
            acc_out.im <= ACCW'(sat(accim_n, ACCW));
            ap_n.re    <= APW'(sat(128'(sat(accre_n, ACCW)) >>> SH_APN, APW));
            ap_n.im    <= APW'(sat(128'(sat(accim_n, ACCW)) >>> SH_APN, APW));
          end
        end
        OP_SCALE: begin
          a_n[cmd2.isel].re <= AW'(sat(sre, AW));
          a_n[cmd2.isel].im <= AW'(sat(sim, AW));
        end
        default: ;
      endcase
    end
  end

endmodule
