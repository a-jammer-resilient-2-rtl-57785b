// jass_interconnect -- the multiplexers in front of the PEs. Every PE can
// read the FF arrays (s, Y_l, W), the incoming sample, the PRNG and the
// outputs of the other PEs (c_k, a_{k,i}).
//
// Two operands are produced each cycle:
//   bc      one value broadcast to all PEs, column entry k of a vector:
//           y_new[k], y_old[k] (= Y_l column 0), c_k, the PRNG output, a_{k,i};
//   ext[n]  one value per PE n: y_new[n], y_old[n], Y_l[k][n] or W[i][n].
// sk is s_k of the programmed sequence. Purely combinational. The set of
// sources is taken from the algorithm; the encoding is this design's.
module jass_interconnect
  import jass_pkg::*;
(
  input  bc_src_e          bc_src,
  input  ext_src_e         ext_src,
  input  logic [KIW-1:0]   k,
  input  logic             i,
  input  logic [K-1:0]     s,          // bit k: s_k = +1 when 1
  input  cy_t              ynew [B],
  input  cy_t              ywin [K][B],
  input  cc_t              c    [B],
  input  ca_t              a1   [B],
  input  ca_t              a2   [B],
  input  cv_t              w    [IMAX][K],
  input  logic signed [PNW-1:0] prng_re,
  input  logic signed [PNW-1:0] prng_im,
  output cmb_t             bc,
  output cma_t             ext [B],
  output logic             sk
);

  assign sk = s[k];

  always_comb begin
    bc = '0;
    unique case (bc_src)
      BC_YNEW: begin bc.re = MBW'(ynew[k].re);    bc.im = MBW'(ynew[k].im);    end
      BC_YOLD: begin bc.re = MBW'(ywin[0][k].re); bc.im = MBW'(ywin[0][k].im); end
      BC_C:    begin bc.re = MBW'(c[k].re);       bc.im = MBW'(c[k].im);       end
      BC_PRNG: begin bc.re = MBW'(prng_re);       bc.im = MBW'(prng_im);       end
      BC_A: begin
        bc.re = i ? MBW'(a2[k].re) : MBW'(a1[k].re);
        bc.im = i ? MBW'(a2[k].im) : MBW'(a1[k].im);
      end
      default: bc = '0;
    endcase
  end

  always_comb begin
    for (int n = 0; n < B; n++) begin
      ext[n] = '0;
      unique case (ext_src)
        EXT_YNEW: begin ext[n].re = MAW'(ynew[n].re);    ext[n].im = MAW'(ynew[n].im);    end
        EXT_YOLD: begin ext[n].re = MAW'(ywin[0][n].re); ext[n].im = MAW'(ywin[0][n].im); end
        EXT_YWIN: begin ext[n].re = MAW'(ywin[k][n].re); ext[n].im = MAW'(ywin[k][n].im); end
        EXT_W:    begin ext[n].re = MAW'(w[i][n].re);    ext[n].im = MAW'(w[i][n].im);    end
        default:  ext[n] = '0;
      endcase
    end
  end

endmodule
