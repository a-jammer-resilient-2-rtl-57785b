// jass_ctrl -- control unit: runs Algorithm 1 (JASS) on the PE array.
//
// A small issue engine sends one PE command per clock (same command to all
// 16 PEs) together with the interconnect selections, then optionally waits a
// fixed number of drain cycles. A phase FSM chains these issue groups in the
// order of the algorithm (cycles per group for one delay index l > 0):
//   fill     for k = 0..K-1: fetch y[k], Phi += y[k] y[k]^H, shift into Y_l
//   per l    c_l = Y_l s*                          OP_C      18
//            Lambda = 16 Phi - c c^H               OP_LAM    17
//            for i = 1,2 / t = 1,2:                          4 x 35
//              a' = Lambda a (a = PRNG for t = 1)  OP_MV
//              pseudonormalize a'                  jass_pn
//              ||pn||^2 on the adder tree          OP_T_NORM
//              1/sqrt                              jass_inv_sqrt
//              a_i = pn / ||pn||                   OP_SCALE
//            Lambda -= a'_1 a_1^H (only after i = 1; after i = 2 Lambda is
//                                  not used again) OP_DEFL   16
//            b~, v, ||c||^2, tr(Phi), W, W A on the tree     54
//            score                                           5
//            if pass: done, found, index = l;  if l = lmax: done, miss
//            else fetch y[l+K]; Phi -= y[l] y[l]^H; Phi += y[l+K] y[l+K]^H;
//                 shift Y_l, l = l + 1                       36
//            total                                           286
// The drain after each group is the smallest that respects the pipelines:
// a PE result issued in cycle T can be read by an issue in cycle T+3, a tree
// result five cycles after its issue, the pseudonormalized vector one cycle
// after acc_valid. Groups are not overlapped otherwise.
// A sample that has not yet arrived in the sample buffer stalls the fetch
// (stall = 1). The operation order is the paper's Algorithm 1; the schedule
// and its cycle count (286 against the chip's 268) are this design's.
// The tree output is routed by a tag that the adder tree carries alongside
// the data; bvw_i, bvw_k and wa_idx are fields of that tag, passed through.
module jass_ctrl
  import jass_pkg::*;
#(
  parameter int unsigned CNTW = 16   // width of the sample counters
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LW-1:0]    lmax,
  input  logic [CNTW-1:0]  wr_cnt,     // samples written so far
  output logic [CNTW-1:0]  rd_cnt,     // index of the next sample to fetch
  // PE array and interconnect
  output pe_cmd_t          cmd,
  output bc_src_e          bc_src,
  output ext_src_e         ext_src,
  output logic             ic_i,
  output logic             pe_clr,
  output logic             prng_load,
  output logic             prng_en,
  output logic             ywin_shift,
  output logic             mem_rd_en,
  input  logic             acc_valid,
  // adder tree
  output logic [$bits(pe_cmd_t)-1:0] tree_tag_in,
  input  logic             tree_valid,
  input  logic [$bits(pe_cmd_t)-1:0] tree_tag_out,
  output logic             isq_start,
  input  logic             isq_done,
  output logic             bvw_we,
  output logic [1:0]       bvw_sel,
  output logic             bvw_i,
  output logic [KIW-1:0]   bvw_k,
  output logic             cn2_we,
  output logic             tr_we,
  output logic             wa_we,
  output logic [1:0]       wa_idx,
  output logic             score_start,
  input  logic             score_done,
  input  logic             score_pass,
  // status
  output logic             busy,
  output logic             done,
  output logic             found,
  output logic [LW-1:0]    index,
  output logic             index_tick,  // one pulse per evaluated delay index
  output logic             stall        // waiting for a sample
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_FETCH_W, S_FILL_NEXT, S_C, S_LAM, S_MV, S_MV_W,
    S_ISQ_W, S_IT, S_TREE, S_TV, S_TCN, S_TTR, S_TW0, S_TW1, S_TWA, S_SCORE,
    S_SCORE_W, S_UPD_ADD, S_UPD_END, S_ISSUE, S_DRAIN, S_DONE
  } state_e;

  state_e   st, nxt;
  pe_op_e   iop;
  logic [4:0] icnt, inum;
  logic [3:0] idrain;
  bc_src_e  ibc;
  ext_src_e iext;
  logic     iisel;
  logic     filling, it, ii;
  logic [LW-1:0] l;
  logic [KIW-1:0] fcnt;   // samples fetched during the window fill
  pe_cmd_t  d1, d2;

  // ---------------- command output of the issue engine ----------------
  always_comb begin
    cmd     = '0;
    bc_src  = BC_ZERO;
    ext_src = EXT_ZERO;
    ic_i    = 1'b0;
    if (st == S_ISSUE) begin
      cmd.op   = iop;
      cmd.k    = icnt[KIW-1:0];
      cmd.isel = iisel;
      cmd.last = (icnt == inum - 5'd1);
      if (iop == OP_T_V)  cmd.isel = icnt[0];
      if (iop == OP_T_WA) begin
        cmd.k    = KIW'(icnt[1]);  // row i of W
        cmd.isel = icnt[0];        // column j of A
      end
      bc_src  = ibc;
      ext_src = iext;
      ic_i    = (iop == OP_T_WA) ? icnt[1] : cmd.isel;
    end
  end

  assign prng_en   = (st == S_ISSUE) && (ibc == BC_PRNG);
  assign mem_rd_en = (st == S_FETCH) && (rd_cnt < wr_cnt);
  assign stall     = (st == S_FETCH) && !(rd_cnt < wr_cnt);
  assign busy      = (st != S_IDLE);
  assign tree_tag_in = d2;

  // tag delay: products reach the tree two cycles after the issue
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
    end else begin
      d1 <= cmd;
      d2 <= d1;
    end
  end

  // ---------------- routing of adder-tree results ----------------
  pe_cmd_t tt;
  always_comb begin
    tt        = pe_cmd_t'(tree_tag_out);
    isq_start = 1'b0;
    bvw_we    = 1'b0;
    bvw_sel   = 2'd0;
    bvw_i     = tt.isel;
    bvw_k     = tt.k;
    cn2_we    = 1'b0;
    tr_we     = 1'b0;
    wa_we     = 1'b0;
    wa_idx    = {tt.k[0], tt.isel};
    if (tree_valid) begin
      unique case (tt.op)
        OP_T_NORM: isq_start = 1'b1;
        OP_T_BT:   begin bvw_we = 1'b1; bvw_sel = 2'd0; end
        OP_T_V:    begin bvw_we = 1'b1; bvw_sel = 2'd1; end
        OP_T_W:    begin bvw_we = 1'b1; bvw_sel = 2'd2; end
        OP_T_CN:   cn2_we = 1'b1;
        OP_T_TR:   tr_we  = 1'b1;
        OP_T_WA:   wa_we  = 1'b1;
        default: ;
      endcase
    end
  end

  // ---------------- phase FSM ----------------
  task automatic issue(input pe_op_e op, input int unsigned n, input bc_src_e b,
                       input ext_src_e e, input logic isel, input int unsigned drain,
                       input state_e after);
    iop    <= op;
    inum   <= 5'(n);
    icnt   <= '0;
    ibc    <= b;
    iext   <= e;
    iisel  <= isel;
    idrain <= 4'(drain);
    nxt    <= after;
    st     <= S_ISSUE;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; nxt <= S_IDLE; iop <= OP_NOP; icnt <= '0; inum <= '0; idrain <= '0;
      ibc <= BC_ZERO; iext <= EXT_ZERO; iisel <= 1'b0; filling <= 1'b0; it <= 1'b0;
      ii <= 1'b0; l <= '0; rd_cnt <= '0; done <= 1'b0; found <= 1'b0; index <= '0;
      index_tick <= 1'b0; pe_clr <= 1'b0; prng_load <= 1'b0; ywin_shift <= 1'b0;
      score_start <= 1'b0; fcnt <= '0;
    end else begin
      done        <= 1'b0;
      index_tick  <= 1'b0;
      pe_clr      <= 1'b0;
      prng_load   <= 1'b0;
      ywin_shift  <= 1'b0;
      score_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          pe_clr    <= 1'b1;
          prng_load <= 1'b1;
          filling   <= 1'b1;
          fcnt      <= '0;
          l         <= '0;
          found     <= 1'b0;
          st        <= S_FETCH;
        end
        S_FETCH: if (rd_cnt < wr_cnt) st <= S_FETCH_W;
        S_FETCH_W: begin
          if (filling) begin
            ywin_shift <= 1'b1;
            issue(OP_PHI_ADD, K, BC_YNEW, EXT_YNEW, 1'b0, 0, S_FILL_NEXT);
          end else begin
            issue(OP_PHI_SUB, K, BC_YOLD, EXT_YOLD, 1'b0, 0, S_UPD_ADD);
          end
        end
        S_FILL_NEXT: begin
          rd_cnt <= rd_cnt + 1'b1;
          fcnt   <= fcnt + 1'b1;
          if (fcnt == KIW'(K - 1)) begin
            filling <= 1'b0;
            st      <= S_C;
          end else begin
            st <= S_FETCH;
          end
        end
        S_C:   issue(OP_C,   K, BC_ZERO, EXT_YWIN, 1'b0, 1, S_LAM);
        S_LAM: begin
          ii <= 1'b0;
          it <= 1'b0;
          issue(OP_LAM, K, BC_C, EXT_ZERO, 1'b0, 0, S_MV);
        end
        S_MV:  issue(OP_MV, K, it ? BC_A : BC_PRNG, EXT_ZERO, ii, 0, S_MV_W);
        // the PN unit registers a' in the cycle acc_valid is high, so the norm
        // can be issued in the next cycle
        S_MV_W: if (acc_valid) issue(OP_T_NORM, 1, BC_ZERO, EXT_ZERO, ii, 0, S_ISQ_W);
        S_ISQ_W: if (isq_done) issue(OP_SCALE, 1, BC_ZERO, EXT_ZERO, ii, 1, S_IT);
        S_IT: begin
          if (!it) begin
            it <= 1'b1;
            st <= S_MV;
          end else if (!ii) begin
            it <= 1'b0;
            ii <= 1'b1;
            issue(OP_DEFL, K, BC_A, EXT_ZERO, 1'b0, 0, S_MV);
          end else begin
            st <= S_TREE;
          end
        end
        S_TREE: issue(OP_T_BT, 1, BC_ZERO, EXT_ZERO, 1'b0, 0, S_TV);
        S_TV:   issue(OP_T_V,  2, BC_ZERO, EXT_ZERO, 1'b0, 0, S_TCN);
        S_TCN:  issue(OP_T_CN, 1, BC_ZERO, EXT_ZERO, 1'b0, 0, S_TTR);
        S_TTR:  issue(OP_T_TR, 1, BC_ZERO, EXT_ZERO, 1'b0, 0, S_TW0);
        S_TW0:  issue(OP_T_W,  K, BC_ZERO, EXT_ZERO, 1'b0, 0, S_TW1);
        S_TW1:  issue(OP_T_W,  K, BC_ZERO, EXT_ZERO, 1'b1, 2, S_TWA);
        S_TWA:  issue(OP_T_WA, 4, BC_ZERO, EXT_W,    1'b0, 4, S_SCORE);
        S_SCORE: begin
          score_start <= 1'b1;
          st          <= S_SCORE_W;
        end
        S_SCORE_W: if (score_done) begin
          index_tick <= 1'b1;
          if (score_pass) begin
            found <= 1'b1;
            index <= l;
            st    <= S_DONE;
          end else if (l == lmax) begin
            index <= l;
            st    <= S_DONE;
          end else begin
            st <= S_FETCH;
          end
        end
        S_UPD_ADD: issue(OP_PHI_ADD, K, BC_YNEW, EXT_YNEW, 1'b0, 0, S_UPD_END);
        S_UPD_END: begin
          ywin_shift <= 1'b1;
          rd_cnt     <= rd_cnt + 1'b1;
          l          <= l + 1'b1;
          st         <= S_C;
        end
        S_ISSUE: begin
          if (icnt == inum - 5'd1) begin
            if (idrain == '0) st <= nxt;
            else              st <= S_DRAIN;
          end
          icnt <= icnt + 1'b1;
        end
        S_DRAIN: begin
          idrain <= idrain - 1'b1;
          if (idrain == 4'd1) st <= nxt;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
