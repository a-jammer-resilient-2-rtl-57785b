// jass_top -- JASS jammer-resilient multi-antenna time-synchronisation core.
//
// Receives a stream of B = 16-antenna receive vectors y[k] and searches for
// the first delay index l at which the programmed K = 16-symbol BPSK sequence
// s starts, while projecting out up to two jammer dimensions estimated from
// the data itself (Algorithm 1 of the JASS method). For each l it computes the
// score ||P Y_l s*||^2 / ||P Y_l||_F^2, with P the projection away from the
// two principal eigenvectors of Lambda = ||s||^2 Y_l Y_l^H - Y_l s* s^T Y_l^H,
// and stops at the first l where score >= tau (found = 1, index = l) or after
// l = lmax (found = 0).
//
// Blocks: 16 PEs (jass_pe) with the adder tree (jass_adder_tree), the
// interconnect, the PRNG, the pseudonormalization (jass_pn) and inverse
// square root units, the score unit, the FF arrays for Y_l, b~, v, W, the
// 1024-sample buffer and the control unit.
//
// Interface (this design's choice; the chip's I/O is not described):
//   s, tau (Q4.12), lmax and seed are captured into registers by start
//   (pulse, while busy = 0), which begins a run; s is held in the s FF
//   array of the architecture, the others in configuration registers.
//   in_valid/in_ready/in_sample write receive vectors into the buffer in
//   order; the first vector written after reset is y[0]. in_ready drops when
//   the buffer holds DEPTH samples that have not been fetched yet.
//   done pulses at the end of a run with found and index valid until the
//   next run; index_tick pulses once per evaluated delay index, with
//   score_num / score_den (N * 2^16 and D * 2^20, so score = 16 num/den)
//   valid from then on; stall is 1 while the core waits for a sample that
//   has not yet been written.
// Lint note: the PN unit's out_valid, zero_o and n_o outputs are left unused
// here; the control unit times the norm from acc_valid. An all-zero a'
// gives a = 0, and the score then falls back to the unprojected one.
module jass_top
  import jass_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic [K-1:0]     s,       // bit k = 1: s_k = +1, 0: s_k = -1
  input  logic [TAUW-1:0]  tau,
  input  logic [LW-1:0]    lmax,
  input  logic [31:0]      seed,
  input  logic             start,
  // receive samples
  input  logic             in_valid,
  output logic             in_ready,
  input  cy_t              in_sample [B],
  // result
  output logic             busy,
  output logic             done,
  output logic             found,
  output logic [LW-1:0]    index,
  output logic             index_tick,
  output logic             stall,
  output logic signed [95:0] score_num,  // N * 2^16 of the last index
  output logic signed [95:0] score_den   // D * 2^20 of the last index
);

  localparam int unsigned CNTW = 16;
  localparam int unsigned TAGW = $bits(pe_cmd_t);

  // ---------------- sample buffer ----------------
  logic [CNTW-1:0] wr_cnt, rd_cnt;
  logic mem_rd_en, wr_fire;
  cy_t  ynew [B];

  assign in_ready = (wr_cnt - rd_cnt) < CNTW'(DEPTH);
  assign wr_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wr_cnt <= '0;
    else if (wr_fire) wr_cnt <= wr_cnt + 1'b1;
  end

  jass_sample_mem #(.DEPTH(DEPTH)) u_mem (
    .clk, .we(wr_fire), .waddr(wr_cnt[$clog2(DEPTH)-1:0]), .wdata(in_sample),
    .rd_en(mem_rd_en), .raddr(rd_cnt[$clog2(DEPTH)-1:0]), .rdata(ynew)
  );

  // ---------------- run configuration (s FF array, tau, lmax, seed) ----------------
  logic [K-1:0]    s_q;
  logic [TAUW-1:0] tau_q;
  logic [LW-1:0]   lmax_q;
  logic [31:0]     seed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; tau_q <= '0; lmax_q <= '0; seed_q <= 32'd1;
    end else if (start && !busy) begin
      s_q <= s; tau_q <= tau; lmax_q <= lmax; seed_q <= seed;
    end
  end

  // ---------------- control ----------------
  pe_cmd_t  cmd;
  bc_src_e  bc_src;
  ext_src_e ext_src;
  logic ic_i, pe_clr, prng_load, prng_en, ywin_shift, acc_valid;
  logic [TAGW-1:0] tree_tag_in, tree_tag_out;
  logic tree_in_valid, tree_out_valid, isq_start, isq_done;
  logic bvw_we, bvw_i, cn2_we, tr_we, wa_we, score_start, score_done, score_pass;
  logic [1:0] bvw_sel, wa_idx;
  logic [KIW-1:0] bvw_k;

  jass_ctrl #(.CNTW(CNTW)) u_ctrl (
    .clk, .rst_n, .start, .lmax(lmax_q), .wr_cnt, .rd_cnt,
    .cmd, .bc_src, .ext_src, .ic_i, .pe_clr, .prng_load, .prng_en, .ywin_shift,
    .mem_rd_en, .acc_valid,
    .tree_tag_in, .tree_valid(tree_out_valid), .tree_tag_out,
    .isq_start, .isq_done, .bvw_we, .bvw_sel, .bvw_i, .bvw_k,
    .cn2_we, .tr_we, .wa_we, .wa_idx, .score_start, .score_done, .score_pass,
    .busy, .done, .found, .index, .index_tick, .stall
  );

  // ---------------- FF arrays ----------------
  cy_t ywin [K][B];
  ca_t bt;
  cv_t v [IMAX];
  cv_t w [IMAX][K];
  ctr_t tree_sum;

  jass_y_window u_ywin (.clk, .rst_n, .shift(ywin_shift), .din(ynew), .y(ywin));

  jass_bvw_regs u_bvw (
    .clk, .rst_n, .we(bvw_we), .sel(bvw_sel), .i(bvw_i), .k(bvw_k), .din(tree_sum),
    .bt, .v, .w
  );

  // ---------------- PRNG, interconnect ----------------
  logic signed [PNW-1:0] prng_re, prng_im;

  jass_prng #(.OW(PNW)) u_prng (
    .clk, .rst_n, .load(prng_load), .seed(seed_q), .en(prng_en), .re(prng_re), .im(prng_im)
  );

  cc_t  c_all  [B];
  ca_t  a1_all [B];
  ca_t  a2_all [B];
  cmb_t bc;
  cma_t ext [B];
  logic sk;

  jass_interconnect u_ic (
    .bc_src, .ext_src, .k(cmd.k), .i(ic_i), .s(s_q), .ynew, .ywin,
    .c(c_all), .a1(a1_all), .a2(a2_all), .w, .prng_re, .prng_im,
    .bc, .ext, .sk
  );

  // ---------------- PE array ----------------
  cpn_t  pn [B];
  logic [ISQW-1:0] rsq;
  logic  acc_v [B];
  logic  tree_v [B];
  cacc_t acc_o [B];
  cpr_t  prods [B];

  for (genvar n = 0; n < B; n++) begin : g_pe
    jass_pe #(.IDX(n)) u_pe (
      .clk, .rst_n, .clr(pe_clr), .cmd, .bc, .ext(ext[n]), .sk, .pn(pn[n]), .r(rsq),
      .c_o(c_all[n]), .a1_o(a1_all[n]), .a2_o(a2_all[n]),
      .acc_valid(acc_v[n]), .acc_out(acc_o[n]),
      .tree_valid(tree_v[n]), .tree_out(prods[n])
    );
  end

  assign acc_valid     = acc_v[0];
  assign tree_in_valid = tree_v[0];

  jass_adder_tree #(.N(B), .TAGW(TAGW)) u_tree (
    .clk, .rst_n, .in_valid(tree_in_valid), .in(prods), .tag_in(tree_tag_in),
    .out_valid(tree_out_valid), .out(tree_sum), .tag_out(tree_tag_out)
  );

  // ---------------- pseudonormalization and inverse square root ----------------
  logic signed [ACCW-1:0] pn_in_re [B];
  logic signed [ACCW-1:0] pn_in_im [B];
  logic signed [PNW-1:0]  pn_re [B];
  logic signed [PNW-1:0]  pn_im [B];
  logic pn_valid, pn_zero;
  logic [$clog2(ACCW)-1:0] pn_n;

  always_comb begin
    for (int n = 0; n < B; n++) begin
      pn_in_re[n] = acc_o[n].re;
      pn_in_im[n] = acc_o[n].im;
      pn[n].re    = pn_re[n];
      pn[n].im    = pn_im[n];
    end
  end

  jass_pn #(.N(B), .IW(ACCW), .OW(PNW)) u_pn (
    .clk, .rst_n, .in_valid(acc_valid), .in_re(pn_in_re), .in_im(pn_in_im),
    .out_valid(pn_valid), .out_re(pn_re), .out_im(pn_im), .n_o(pn_n), .zero_o(pn_zero)
  );

  logic [ISQIW-1:0] isq_x;
  assign isq_x = (tree_sum.re < 0) ? '0 : ISQIW'(sat(128'(tree_sum.re), ISQIW + 1));

  jass_inv_sqrt u_isq (.clk, .rst_n, .start(isq_start), .x(isq_x), .done(isq_done), .r(rsq));

  // ---------------- score ----------------
  jass_score u_score (
    .clk, .rst_n, .cn2_we, .tr_we, .wa_we, .wa_idx, .tree_sum, .bt, .v, .tau(tau_q),
    .start(score_start), .done(score_done), .pass(score_pass), .n_o(score_num), .d_o(score_den)
  );

endmodule
