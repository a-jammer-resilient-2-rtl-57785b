// tb_jass_ctrl -- checks the control unit's schedule with cycle-accurate
// stand-ins for the datapath it drives.
//
// The stand-ins reproduce the latencies of the real blocks: the PE array
// answers the last a' = Lambda a issue with acc_valid three cycles later, the
// adder tree returns each tag three cycles after it enters (five after the
// issue), the inverse square root answers six cycles after isq_start, and
// the score unit three cycles after score_start, passing at a chosen delay
// index. For every evaluated delay index the testbench counts the issued
// operations (16 for c, 16 for Lambda, 4 x 16 matrix-vector products, 16
// deflation updates, 4 scalings, 4 norms, b~, 2 x v, ||c||^2, tr(Phi),
// 2 x 16 W entries, 4 W A entries, 16 + 16 Phi updates), the PRNG draws
// (2 x 16), the writes routed from the tree to b~/v/W, and the cycles per
// delay index (286), and checks with a read-after-write
// scoreboard that no issue reads a PE value, a window column, W or W A
// before the pipeline has written it. Runs: detection at index 4; a miss at lmax = 3; a
// run whose samples arrive late, which must stall without issuing.
module tb_jass_ctrl;
  timeunit 1ns; timeprecision 1ps;
  import jass_pkg::*;
  localparam int unsigned CNTW = 16;

  logic clk = 0, rst_n = 0, start = 0;
  always #1 clk = ~clk;
  logic [LW-1:0] lmax;
  logic [CNTW-1:0] wr_cnt, rd_cnt;
  pe_cmd_t cmd;
  bc_src_e bc_src;
  ext_src_e ext_src;
  logic ic_i, pe_clr, prng_load, prng_en, ywin_shift, mem_rd_en, acc_valid;
  logic [$bits(pe_cmd_t)-1:0] tree_tag_in, tree_tag_out;
  logic tree_valid, isq_start, isq_done, bvw_we, bvw_i, cn2_we, tr_we, wa_we;
  logic [1:0] bvw_sel, wa_idx;
  logic [KIW-1:0] bvw_k;
  logic score_start, score_done, score_pass;
  logic busy, done, found, index_tick, stall;
  logic [LW-1:0] index;

  jass_ctrl #(.CNTW(CNTW)) dut (.*);

  // ---------------- datapath stand-ins ----------------
  logic [2:0] mvd;
  pe_cmd_t t1, t2, t3;
  logic [5:0] isd;
  logic [2:0] scd;
  int pass_at, l_model;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mvd <= '0; t1 <= '0; t2 <= '0; t3 <= '0; isd <= '0; scd <= '0; l_model <= 0;
    end else begin
      mvd <= {mvd[1:0], cmd.op == OP_MV && cmd.last};
      t1 <= pe_cmd_t'(tree_tag_in); t2 <= t1; t3 <= t2;
      isd <= {isd[4:0], isq_start};
      scd <= {scd[1:0], score_start};
      if (start && !busy) l_model <= 0;
      else if (index_tick) l_model <= l_model + 1;
    end
  end
  assign acc_valid    = mvd[2];
  assign tree_tag_out = t3;
  assign tree_valid   = t3.op != OP_NOP;
  assign isq_done     = isd[5];
  assign score_done   = scd[2];
  assign score_pass   = (l_model == pass_at);

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int opc [16];
  int prng_cnt, bt_w, v_w, w_w, wa_w, cn_w, tr_w, shifts, reads, ticks, stall_cyc, stall_issue;
  int wmask [2];
  longint cyc = 0, last_tick = 0, cpi = 0;
  logic seen_first, done_seen;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (cmd.op != OP_NOP) opc[cmd.op]++;
      if (prng_en) prng_cnt++;
      if (bvw_we && bvw_sel == 2'd0) bt_w++;
      if (bvw_we && bvw_sel == 2'd1) v_w++;
      if (bvw_we && bvw_sel == 2'd2) begin w_w++; wmask[bvw_i] |= 1 << bvw_k; end
      if (wa_we) wa_w++;
      if (cn2_we) cn_w++;
      if (tr_we) tr_w++;
      if (done) done_seen = 1;
      if (ywin_shift) shifts++;
      if (mem_rd_en) reads++;
      if (stall) begin stall_cyc++; if (cmd.op != OP_NOP) stall_issue++; end
      if (index_tick) begin
        ticks++;
        if (seen_first) cpi = cyc - last_tick;
        last_tick = cyc;
        seen_first = 1;
      end
    end
  end

  // ---------------- read-after-write scoreboard ----------------
  // A PE result issued in cycle T is written at the end of cycle T+2 and can
  // be read by an issue in cycle T+3; tree results written into b~/v/W or
  // the score unit in cycle X can be used from X+1; the PN output is valid
  // the cycle after acc_valid. Every issue is checked against the cycle at
  // which each value it reads became valid.
  longint rdy_c, rdy_ap, rdy_pn, rdy_wa, rdy_w [2], rdy_a [2], rdy_lam [16], rdy_phi [16], rdy_win;
  int hazards;
  task automatic need(input longint rdy, input longint t, input string what);
    if (t < rdy) begin
      hazards++;
      if (hazards <= 5) $display("HAZARD cycle %0d: %s read before it is valid (cycle %0d)", t, what, rdy);
    end
  endtask
  always @(posedge clk) begin
    if (rst_n) begin
      longint t;
      t = cyc;
      unique case (cmd.op)
        OP_PHI_ADD, OP_PHI_SUB: rdy_phi[cmd.k] = t + 3;
        OP_C: begin need(rdy_win, t, "window"); if (cmd.last) rdy_c = t + 3; end
        OP_LAM: begin need(rdy_c, t, "c"); need(rdy_phi[cmd.k], t, "Phi column"); rdy_lam[cmd.k] = t + 3; end
        OP_MV: begin
          need(rdy_lam[cmd.k], t, "Lambda column");
          if (bc_src == BC_A) need(rdy_a[cmd.isel], t, "a_i");
          if (cmd.last) rdy_ap = t + 3;
        end
        OP_DEFL: begin need(rdy_ap, t, "a'"); need(rdy_a[0], t, "a_1"); rdy_lam[cmd.k] = t + 3; end
        OP_SCALE: begin need(rdy_pn, t, "pn"); rdy_a[cmd.isel] = t + 3; end
        OP_T_NORM: need(rdy_pn, t, "pn");
        OP_T_BT: begin need(rdy_a[0], t, "a_1"); need(rdy_a[1], t, "a_2"); end
        OP_T_V: begin need(rdy_c, t, "c"); need(rdy_a[cmd.isel], t, "a_i"); end
        OP_T_W: begin need(rdy_phi[cmd.k], t, "Phi column"); need(rdy_a[cmd.isel], t, "a_i"); end
        OP_T_CN: need(rdy_c, t, "c");
        OP_T_TR: for (int j = 0; j < 16; j++) need(rdy_phi[j], t, "Phi diagonal");
        OP_T_WA: begin need(rdy_w[cmd.k[0]], t, "W row"); need(rdy_a[cmd.isel], t, "a_j"); end
        default: ;
      endcase
      if (bvw_we && bvw_sel == 2'd2) rdy_w[bvw_i] = t + 1;
      if (wa_we) rdy_wa = t + 1;
      if (acc_valid) rdy_pn = t + 1;
      if (ywin_shift) rdy_win = t + 1;
      if (score_start) need(rdy_wa, t, "W A");
    end
  end

  task automatic clear_counts();
    foreach (opc[j]) opc[j] = 0;
    prng_cnt = 0; bt_w = 0; v_w = 0; w_w = 0; wa_w = 0; cn_w = 0; tr_w = 0;
    shifts = 0; reads = 0; ticks = 0; stall_cyc = 0; stall_issue = 0;
    wmask[0] = 0; wmask[1] = 0; seen_first = 0; cpi = 0;
    done_seen = 0;
    hazards = 0;
  endtask

  // one run: evaluates n indices (0..n-1)
  task automatic run(input int lm, input int pa, input bit slow, input string name);
    int n;
    logic [CNTW-1:0] rd0;
    clear_counts();
    rd0 = rd_cnt;
    lmax = LW'(lm); pass_at = pa;
    @(negedge clk);
    if (!slow) wr_cnt = wr_cnt + CNTW'(K + lm);
    start = 1;
    @(negedge clk);
    start = 0;
    if (slow) begin
      for (int j = 0; j < K + lm && !done_seen; j++) begin
        repeat (500) @(negedge clk);
        wr_cnt = wr_cnt + 1'b1;
      end
    end
    while (!done_seen) @(negedge clk);
    n = (pa <= lm) ? pa + 1 : lm + 1;
    chk(found == (pa <= lm), {name, " found"});
    chk(index == LW'(n - 1), {name, " index"});
    chk(ticks == n, $sformatf("%s indices %0d", name, ticks));
    chk(opc[OP_C] == 16 * n && opc[OP_LAM] == 16 * n, {name, " c/Lambda issues"});
    chk(opc[OP_MV] == 64 * n, {name, " Lambda a issues"});
    chk(opc[OP_DEFL] == 16 * n, {name, " deflation issues"});
    chk(opc[OP_SCALE] == 4 * n && opc[OP_T_NORM] == 4 * n, {name, " normalisations"});
    chk(opc[OP_T_BT] == n && opc[OP_T_V] == 2 * n && opc[OP_T_CN] == n && opc[OP_T_TR] == n, {name, " tree scalars"});
    chk(opc[OP_T_W] == 32 * n && opc[OP_T_WA] == 4 * n, {name, " W and W A issues"});
    chk(opc[OP_PHI_ADD] == 16 * (K + n - 1) && opc[OP_PHI_SUB] == 16 * (n - 1), {name, " Phi updates"});
    chk(prng_cnt == 32 * n, {name, " PRNG draws"});
    chk(bt_w == n && v_w == 2 * n && w_w == 32 * n && wa_w == 4 * n && cn_w == n && tr_w == n, {name, " tree routing"});
    chk(wmask[0] == 32'hffff && wmask[1] == 32'hffff, {name, " W entries"});
    chk(shifts == K + n - 1 && reads == K + n - 1, {name, " window shifts / reads"});
    chk(rd_cnt - rd0 == CNTW'(K + n - 1), {name, " rd_cnt"});
    if (n > 1 && !slow) chk(cpi == 286, $sformatf("%s cycles per delay index %0d", name, cpi));
    chk(stall_issue == 0, {name, " no issue while stalled"});
    chk(hazards == 0, $sformatf("%s read-after-write hazards: %0d", name, hazards));
    if (slow) chk(stall_cyc > 1000, {name, " stalled"});
    else      chk(stall_cyc == 0, {name, " no stall"});
    @(negedge clk);
    chk(!busy, {name, " idle"});
    // samples beyond what was consumed are discarded by the next run's count
    wr_cnt = rd_cnt;
  endtask

  initial begin
    rdy_c = 0; rdy_ap = 0; rdy_pn = 0; rdy_wa = 0; rdy_win = 0;
    foreach (rdy_w[j]) rdy_w[j] = 0;
    foreach (rdy_a[j]) rdy_a[j] = 0;
    foreach (rdy_lam[j]) rdy_lam[j] = 0;
    foreach (rdy_phi[j]) rdy_phi[j] = 0;
    wr_cnt = '0; lmax = '0; pass_at = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(8, 4, 0, "detect");
    run(3, 99, 0, "miss");
    run(2, 1, 1, "stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
