// tb_aqpim_pch: end-to-end test of the AQPIM pseudo-channel.
//
// The testbench plays the GPU and its memory controller. For two page-aware
// windows it writes key and value subvectors and importance weights, seeds
// the codebooks, and runs four iterations of importance-weighted k-means
// (DC + CA, MV_BF IDX, SFM reciprocals, CC) followed by a final assignment,
// for keys and values. Window 1 starts from a copy of window 0's codebooks
// and holds fewer tokens; a decoding step then appends one key and one value
// token to it (DC on one token, MV_BF IDX). Finally it runs PQ-based
// attention: query into the GRFs, ATNK and RET per window, one softmax over
// both windows, MV_BF PROB and ATNV accumulated over the windows, and reads
// the outputs.
//
// A reference model in the testbench repeats the integer k-means and checks
// every centroid and index read back from the banks bit for bit. The
// attention output is checked against a softmax computed with real
// exponentials from the reference scores, within a tolerance. It also checks
// that each window's lookups cost exactly two activations per bank per
// batch of GRF_WORDS tokens (index row and inner-product row), and counts
// every mechanism exercised; one that never happened is a failure.
// Parameters are overridden to a small size (tb_aqpim_full runs the
// defaults).
module tb_aqpim_pch;
  import aqpim_pkg::*;

  localparam int NB = 4, WT = 32, NW = 2, TA = 2;
  localparam int K = 8, D = 4;
  localparam int N0 = 32, N1 = 24;     // tokens of window 0 and window 1
  localparam int ITER = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 1'b0, cmd_ready, rd_valid;
  pim_cmd_t cmd;
  word_t rd_data;
  logic [31:0] act_total, n_assign, n_score;

  aqpim_pch #(.NB(NB), .WIN_TOK(WT), .N_WIN(NW), .T_ACT(TA)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .rd_valid, .rd_data,
    .act_total, .n_assign, .n_score);

  int checks = 0, failures = 0;
  // mechanism counters
  int c_dc = 0, c_cc = 0, c_empty = 0, c_copy = 0, c_append = 0, c_atnk = 0;
  int c_ret = 0, c_sfm = 0, c_prob = 0, c_atnv_acc = 0, c_indirect_ok = 0;

  // reference state
  int x   [NW][2][NB][D][WT];
  int cb  [NW][2][NB][D][K];
  int idx [NW][2][NB][WT];
  int w   [NW][WT];
  int q   [NB][D];

  task automatic issue(input pim_cmd_t c);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd <= c; cmd_valid <= 1'b1;
    @(posedge clk);
    cmd_valid <= 1'b0;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
  endtask

  function automatic pim_cmd_t mk(pim_op_e op, pim_fn_e fn = FN_DC, logic kv = 0,
                                  int row = 0, int a = 0, int b = 0, int c = 0);
    pim_cmd_t r = '0;
    r.op = op; r.fn = fn; r.kv = kv; r.row = 16'(row); r.a = 16'(a); r.b = 16'(b);
    r.c = 16'(c);
    return r;
  endfunction

  task automatic wr_bank(int bank, int row, int col, int data, logic bc = 0);
    pim_cmd_t c = mk(PIM_WR);
    c.tgt = TGT_BANK; c.bank = 8'(bank); c.bcast = bc; c.row = 16'(row); c.a = 16'(col);
    c.data = 16'(data);
    issue(c);
  endtask

  task automatic rd(pim_tgt_e tgt, int bank, int row, int col, output int v);
    pim_cmd_t c = mk(PIM_RD);
    c.tgt = tgt; c.bank = 8'(bank); c.row = 16'(row); c.a = 16'(col);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd <= c; cmd_valid <= 1'b1;
    @(posedge clk);
    cmd_valid <= 1'b0;
    while (!rd_valid) @(posedge clk);
    v = int'($signed(rd_data));
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
  endtask

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // ---------------- reference k-means ----------------
  task automatic ref_assign(int wn, int kv, int t0, int cnt);
    for (int b = 0; b < NB; b++)
      for (int n = t0; n < t0 + cnt; n++) begin
        longint bd = 0; int bk = 0;
        for (int k = 0; k < K; k++) begin
          longint d = 0;
          for (int j = 0; j < D; j++) d += longint'(x[wn][kv][b][j][n] - cb[wn][kv][b][j][k]) ** 2;
          if (k == 0 || d < bd) begin bd = d; bk = k; end
        end
        idx[wn][kv][b][n] = bk;
      end
  endtask

  task automatic ref_cc(int wn, int kv, int nt);
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < K; k++) begin
        longint ws = 0;
        for (int n = 0; n < nt; n++) if (idx[wn][kv][b][n] == k) ws += w[wn][n];
        if (ws == 0) begin
          if (wn == 0 && kv == 0 && b == 0) c_empty++;
          continue;
        end
        for (int j = 0; j < D; j++) begin
          longint num = 0, r;
          for (int n = 0; n < nt; n++)
            if (idx[wn][kv][b][n] == k) num += longint'(w[wn][n]) * x[wn][kv][b][j][n];
          r = (longint'(1) << 24) / ws;
          cb[wn][kv][b][j][k] = sat((num * r) >>> 22);
        end
      end
  endtask

  task automatic check_cb(int wn, int kv, string tag);
    int v, bad = 0;
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < D; j++)
        for (int k = 0; k < K; k++) begin
          rd(TGT_BANK, b, int'(row_cb(WT, wn, kv, j)), k, v);
          checks++;
          if (v != cb[wn][kv][b][j][k]) begin
            failures++; bad++;
            if (bad < 4) $display("FAIL %s cb w%0d kv%0d b%0d j%0d k%0d: got %0d exp %0d",
                                  tag, wn, kv, b, j, k, v, cb[wn][kv][b][j][k]);
          end
        end
  endtask

  task automatic check_idx(int wn, int kv, int t0, int cnt, string tag);
    int v, bad = 0;
    for (int b = 0; b < NB; b++)
      for (int n = t0; n < t0 + cnt; n++) begin
        rd(TGT_BANK, b, int'(row_idx(WT, wn, kv, n)), n % COLS, v);
        checks++;
        if (v != idx[wn][kv][b][n]) begin
          failures++; bad++;
          if (bad < 4) $display("FAIL %s idx w%0d kv%0d b%0d n%0d: got %0d exp %0d",
                                tag, wn, kv, b, n, v, idx[wn][kv][b][n]);
        end
      end
  endtask

  // one k-means pass set on window wn for key and value
  task automatic cluster(int wn, int nt);
    issue(mk(PIM_SET_CONFIG, FN_DC, 0, 0, nt, K, D));
    for (int kv = 0; kv < 2; kv++) begin
      for (int it = 0; it < ITER; it++) begin
        issue(mk(PIM_MAC_AB, FN_DC, kv, wn, 0, nt)); c_dc++;
        issue(mk(PIM_MV_BF, FN_IDX, kv, wn, 0, nt));
        issue(mk(PIM_SFM, pim_fn_e'(SFM_RECIP), kv, wn));
        issue(mk(PIM_MAC_AB, FN_CC, kv, wn)); c_cc++;
        ref_assign(wn, kv, 0, nt);
        ref_cc(wn, kv, nt);
      end
      issue(mk(PIM_MAC_AB, FN_DC, kv, wn, 0, nt)); c_dc++;
      issue(mk(PIM_MV_BF, FN_IDX, kv, wn, 0, nt));
      ref_assign(wn, kv, 0, nt);
      check_cb(wn, kv, "kmeans");
      check_idx(wn, kv, 0, nt, "kmeans");
    end
  endtask

  // ---------------- stimulus ----------------
  int centers [2][NB][3][D];
  real sc [NW*WT];
  real p  [NW*WT];
  int  a0, a1, v, ntot;

  initial begin
    void'($urandom(7));
    cmd = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // clustered key/value data, weights
    for (int kv = 0; kv < 2; kv++)
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < 3; c++)
          for (int j = 0; j < D; j++) centers[kv][b][c][j] = int'($urandom_range(0, 1024)) - 512;
    for (int wn = 0; wn < NW; wn++)
      for (int n = 0; n < WT; n++) begin
        automatic int c = int'($urandom_range(0, 2));
        w[wn][n] = int'($urandom_range(26, 512));
        for (int kv = 0; kv < 2; kv++)
          for (int b = 0; b < NB; b++)
            for (int j = 0; j < D; j++)
              x[wn][kv][b][j][n] = centers[kv][b][c][j] + int'($urandom_range(0, 128)) - 64;
      end

    // window 0 data, weights (banks and BufferPE), seed codebook = first K tokens
    for (int n = 0; n < N0; n++) begin
      for (int kv = 0; kv < 2; kv++)
        for (int b = 0; b < NB; b++)
          for (int j = 0; j < D; j++)
            wr_bank(b, int'(row_x(WT, 0, kv, j, n)), n % COLS, x[0][kv][b][j][n]);
      wr_bank(0, int'(row_w(WT, 0, n)), n % COLS, w[0][n], 1'b1);
      begin
        pim_cmd_t c = mk(PIM_WR); c.tgt = TGT_BUF; c.a = 16'(n); c.data = 16'(w[0][n]);
        issue(c);
      end
    end
    for (int kv = 0; kv < 2; kv++)
      for (int b = 0; b < NB; b++)
        for (int j = 0; j < D; j++)
          for (int k = 0; k < K; k++) begin
            // centroid K-1 of bank 0 starts far away: it stays empty
            cb[0][kv][b][j][k] = (b == 0 && k == K - 1) ? 32000 : x[0][kv][b][j][k];
            wr_bank(b, int'(row_cb(WT, 0, kv, j)), k, cb[0][kv][b][j][k]);
          end

    cluster(0, N0);

    // window 1: copy codebooks, new data and weights, cluster
    for (int kv = 0; kv < 2; kv++) begin
      issue(mk(PIM_MAC_AB, FN_COPY, kv, 1)); c_copy++;
      for (int b = 0; b < NB; b++)
        for (int j = 0; j < D; j++)
          for (int k = 0; k < K; k++) cb[1][kv][b][j][k] = cb[0][kv][b][j][k];
      check_cb(1, kv, "copy");
    end
    for (int n = 0; n < N1 + 1; n++) begin
      for (int kv = 0; kv < 2; kv++)
        for (int b = 0; b < NB; b++)
          for (int j = 0; j < D; j++)
            wr_bank(b, int'(row_x(WT, 1, kv, j, n)), n % COLS, x[1][kv][b][j][n]);
      wr_bank(0, int'(row_w(WT, 1, n)), n % COLS, w[1][n], 1'b1);
      begin
        pim_cmd_t c = mk(PIM_WR); c.tgt = TGT_BUF; c.a = 16'(n); c.data = 16'(w[1][n]);
        issue(c);
      end
    end
    cluster(1, N1);

    // decoding: append index of the new key and value token N1 of window 1
    for (int kv = 0; kv < 2; kv++) begin
      issue(mk(PIM_MAC_AB, FN_DC, kv, 1, N1, 1));
      issue(mk(PIM_MV_BF, FN_IDX, kv, 1, N1, 1));
      ref_assign(1, kv, N1, 1);
      check_idx(1, kv, N1, 1, "append");
      c_append++;
    end

    // attention
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < D; j++) begin
        pim_cmd_t c = mk(PIM_WR);
        q[b][j] = int'($urandom_range(0, 256)) - 128;
        c.tgt = TGT_GRF; c.bank = 8'(b); c.a = 16'(j); c.data = 16'(q[b][j]);
        issue(c);
      end
    for (int wn = 0; wn < NW; wn++) begin
      automatic int nt = (wn == 0) ? N0 : N1 + 1;
      issue(mk(PIM_MAC_AB, FN_ATNK, 0, wn)); c_atnk++;
      a0 = act_total;
      issue(mk(PIM_RET, FN_KEY, 0, wn, 0, nt)); c_ret++;
      a1 = act_total;
      checks++;
      if (a1 - a0 != 2 * NB * ((nt + GRF_WORDS - 1) / GRF_WORDS)) begin
        failures++;
        $display("FAIL RET activations window %0d: %0d, expected %0d", wn, a1 - a0,
                 2 * NB * ((nt + GRF_WORDS - 1) / GRF_WORDS));
      end else c_indirect_ok++;
      // reference scores
      for (int n = 0; n < nt; n++) begin
        automatic longint s = 0;
        for (int b = 0; b < NB; b++) begin
          automatic longint ipv = 0;
          for (int j = 0; j < D; j++) ipv += longint'(q[b][j]) * cb[wn][0][b][j][idx[wn][0][b][n]];
          s += sat(ipv >>> 8);
        end
        sc[wn * WT + n] = real'(s) / 256.0;
      end
    end
    checks++;
    if (n_score != N0 + N1 + 1) begin
      failures++; $display("FAIL score count %0d", n_score);
    end
    ntot = WT + N1 + 1;
    issue(mk(PIM_SFM, pim_fn_e'(SFM_SOFTMAX), 0, 0, 0, ntot)); c_sfm++;
    begin
      real mx = -1e9, sum = 0;
      for (int n = 0; n < ntot; n++) if (sc[n] > mx) mx = sc[n];
      for (int n = 0; n < ntot; n++) begin p[n] = $exp(sc[n] - mx); sum += p[n]; end
      for (int n = 0; n < ntot; n++) p[n] = p[n] / sum;
    end
    issue(mk(PIM_MV_BF, FN_PROB, 0, 0, 0, N0)); c_prob++;
    issue(mk(PIM_MV_BF, FN_PROB, 0, 1, 0, N1 + 1)); c_prob++;
    // probabilities in the banks
    for (int n = 0; n < 4; n++) begin
      rd(TGT_BANK, 2, int'(row_p(WT, 0, n)), n, v);
      checks++;
      if ((real'(v & 16'hffff) / 32768.0 - p[n]) > 0.01 || (p[n] - real'(v & 16'hffff) / 32768.0) > 0.01) begin
        failures++; $display("FAIL prob n%0d got %f exp %f", n, real'(v & 16'hffff) / 32768.0, p[n]);
      end
    end
    issue(mk(PIM_MAC_AB, FN_ATNV, 1, 0, 0, N0, 0));
    issue(mk(PIM_MAC_AB, FN_ATNV, 1, 1, 0, N1 + 1, 1)); c_atnv_acc++;
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < D; j++) begin
        automatic real o = 0.0; real got;
        for (int wn = 0; wn < NW; wn++) begin
          automatic int nt = (wn == 0) ? N0 : N1 + 1;
          for (int n = 0; n < nt; n++)
            o += p[wn * WT + n] * real'(cb[wn][1][b][j][idx[wn][1][b][n]]) / 256.0;
        end
        rd(TGT_GRF, b, 0, j, v);
        got = real'(v) / 256.0;
        checks++;
        if (got - o > 0.03 || o - got > 0.03) begin
          failures++; $display("FAIL out b%0d j%0d got %f exp %f", b, j, got, o);
        end
      end

    // every mechanism must have happened
    $display("mechanisms: dc=%0d cc=%0d empty_cluster=%0d copy=%0d append=%0d atnk=%0d ret=%0d sfm=%0d prob=%0d atnv_acc=%0d single_row_lookups=%0d assign=%0d acts=%0d",
             c_dc, c_cc, c_empty, c_copy, c_append, c_atnk, c_ret, c_sfm, c_prob, c_atnv_acc,
             c_indirect_ok, n_assign, act_total);
    checks++; if (c_dc == 0 || n_assign == 0) failures++;
    checks++; if (c_cc == 0) failures++;
    checks++; if (c_empty == 0) begin failures++; $display("FAIL no empty cluster"); end
    checks++; if (c_copy == 0) failures++;
    checks++; if (c_append == 0) failures++;
    checks++; if (c_atnk == 0 || c_ret == 0 || c_indirect_ok == 0) failures++;
    checks++; if (c_sfm == 0 || c_prob == 0 || c_atnv_acc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
