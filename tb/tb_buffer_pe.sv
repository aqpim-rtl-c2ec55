// tb_buffer_pe: self-checking test of the BufferPE on its own.
//
// The testbench plays NB BankPEs. Each bank offers its MV_BA words with its
// own random gaps, so the join (ba_ready only when all banks offer) is
// exercised, and the banks accept MV_BF words with random readiness.
//   CA      random distances per bank; the assignments read back through
//           the M_BF_IDX stream must equal the argmin (first minimum wins)
//   RECIP   weight sums per cluster from those assignments; the M_BF_RCP
//           stream must carry 2^24 / sum, or the empty flag
//   SUM+SFM per-token scores summed over banks, softmax, then M_BF_PROB;
//           probabilities are compared with a real-valued softmax (+-0.004)
//           and must add up to about 1
// The assignment and score counters are checked too.
module tb_buffer_pe;
  import aqpim_pkg::*;

  localparam int NB = 4, WT = 16, NW = 2;
  localparam int K = 8, N = 16;

  localparam logic [2:0] M_CA = 3'd1, M_RECIP = 3'd2, M_SUM = 3'd3, M_SFM = 3'd4,
                         M_BF_RCP = 3'd5, M_BF_IDX = 3'd6, M_BF_PROB = 3'd7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pq_cfg_t cfg;
  logic start = 0, done, busy;
  logic [2:0] mode = '0;
  logic [15:0] win = 0, tok0 = 0, cnt = 0;
  logic w_we = 0;
  logic [15:0] w_addr = 0, w_data = 0;
  logic [NB-1:0] ba_valid, ba_last;
  logic [15:0] ba_tok [NB];
  logic [9:0] ba_k [NB];
  val_t ba_val [NB];
  logic ba_ready;
  logic bf_valid;
  val_t bf_data [NB];
  logic [NB-1:0] bf_ready;
  logic [31:0] n_assign, n_score;

  buffer_pe #(.NB(NB), .WIN_TOK(WT), .N_WIN(NW)) dut (.*);

  int checks = 0, failures = 0;
  longint dmat [NB][N][K];
  int sc [NB][N];
  int w [N];
  int asg_ref [NB][N];
  real psum;

  // ---- per-bank MV_BA producers ----
  // mode 1: distances (token, centroid); mode 2: scores (token)
  int  prod_mode = 0;
  int  pos [NB];
  int  tot;
  int  sc_base;
  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (prod_mode == 0) begin
        ba_valid[b] <= 1'b0; pos[b] <= 0;
      end else begin
        if (ba_valid[b] && ba_ready) begin
          ba_valid[b] <= 1'b0;
          pos[b] <= pos[b] + 1;
        end else if (!ba_valid[b] && pos[b] < tot && $urandom_range(0, 2) != 0) begin
          ba_valid[b] <= 1'b1;
          if (prod_mode == 1) begin
            ba_tok[b]  <= 16'(pos[b] / K);
            ba_k[b]    <= 10'(pos[b] % K);
            ba_last[b] <= (pos[b] % K) == K - 1;
            ba_val[b]  <= VAL_W'(dmat[b][pos[b] / K][pos[b] % K]);
          end else begin
            ba_tok[b]  <= 16'(sc_base + pos[b]);
            ba_k[b]    <= '0;
            ba_last[b] <= 1'b1;
            ba_val[b]  <= VAL_W'(sc[b][pos[b]]);
          end
        end
      end
    end
  end

  // ---- per-bank MV_BF consumers ----
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++) bf_ready[b] <= ($urandom_range(0, 3) != 0);

  val_t got [NB][$];
  always @(posedge clk) if (bf_valid) for (int b = 0; b < NB; b++) got[b].push_back(bf_data[b]);

  task automatic run(logic [2:0] m, int wn, int t0, int c);
    @(negedge clk);
    mode = m; win = 16'(wn); tok0 = 16'(t0); cnt = 16'(c); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic expect_eq(string what, longint g, longint e);
    checks++;
    if (g != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, g, e);
    end
  endtask

  task automatic expect_near(string what, real g, real e, real tol);
    checks++;
    if (g - e > tol || e - g > tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, g, e);
    end
  endtask

  initial begin
    void'($urandom(5));
    cfg = '0; cfg.n_tok = 16'(N); cfg.n_cent = 10'(K); cfg.d_sub = 3'd4;
    for (int b = 0; b < NB; b++) begin ba_tok[b] = 0; ba_k[b] = 0; ba_last[b] = 0; ba_val[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // weights
    for (int n = 0; n < N; n++) begin
      w[n] = int'($urandom_range(1, 1000));
      @(negedge clk); w_we = 1; w_addr = 16'(n); w_data = 16'(w[n]);
    end
    @(negedge clk); w_we = 0;

    // ---- CA ----
    for (int b = 0; b < NB; b++)
      for (int n = 0; n < N; n++) begin
        automatic longint best = -1;
        for (int k = 0; k < K; k++) begin
          // small range so ties occur; bank 3 never picks centroid 6 or 7
          dmat[b][n][k] = longint'($urandom_range(0, 40)) * 1000;
          if (b == 3 && k >= 6) dmat[b][n][k] = 64'd1 << 36;
          if (best < 0 || dmat[b][n][k] < best) begin best = dmat[b][n][k]; asg_ref[b][n] = k; end
        end
      end
    tot = N * K; prod_mode = 1;
    run(M_CA, 0, 0, N);
    prod_mode = 0;
    expect_eq("assignments counted", n_assign, N);
    for (int b = 0; b < NB; b++) got[b].delete();
    run(M_BF_IDX, 0, 0, N);
    for (int b = 0; b < NB; b++) begin
      expect_eq("IDX stream length", got[b].size(), N);
      for (int n = 0; n < N && n < got[b].size(); n++)
        expect_eq("assignment", longint'(got[b][n]), asg_ref[b][n]);
    end

    // ---- RECIP ----
    run(M_RECIP, 0, 0, 0);
    for (int b = 0; b < NB; b++) got[b].delete();
    run(M_BF_RCP, 0, 0, 0);
    for (int b = 0; b < NB; b++) begin
      expect_eq("RCP stream length", got[b].size(), K);
      for (int k = 0; k < K && k < got[b].size(); k++) begin
        automatic longint s = 0;
        for (int n = 0; n < N; n++) if (asg_ref[b][n] == k) s += w[n];
        if (s == 0) expect_eq("empty cluster flag", longint'(got[b][k]), longint'(1) << 39);
        else        expect_eq("reciprocal", longint'(got[b][k]), (longint'(1) << 24) / s);
      end
    end

    // ---- SUM into window 1, then softmax over window 0 and 1 ----
    for (int b = 0; b < NB; b++)
      for (int n = 0; n < N; n++) sc[b][n] = int'($urandom_range(0, 600)) - 300;
    // window 0 scores first (tokens 0..WT-1), so the softmax range is contiguous
    for (int part = 0; part < 2; part++) begin
      sc_base = part * WT; tot = (part == 0) ? WT : N;
      prod_mode = 2;
      run(M_SUM, part, 0, tot);
      prod_mode = 0;
      @(negedge clk);
    end
    expect_eq("scores counted", n_score, WT + N);
    run(M_SFM, 0, 0, WT + N);
    psum = 0.0;
    for (int part = 0; part < 2; part++) begin
      automatic real ref_e [int];
      automatic real mxr = -1e9, sum = 0.0;
      for (int t = 0; t < WT + N; t++) begin
        automatic int n = t % WT, s = 0;
        for (int b = 0; b < NB; b++) s += sc[b][n];
        ref_e[t] = s / 256.0;
        if (ref_e[t] > mxr) mxr = ref_e[t];
      end
      for (int t = 0; t < WT + N; t++) begin ref_e[t] = $exp(ref_e[t] - mxr); sum += ref_e[t]; end
      for (int b = 0; b < NB; b++) got[b].delete();
      run(M_BF_PROB, part, 0, part == 0 ? WT : N);
      for (int i = 0; i < got[0].size(); i++) begin
        automatic real p = real'(got[0][i]) / 32768.0;
        psum += p;
        expect_near("probability", p, ref_e[part * WT + i] / sum, 0.004);
        for (int b = 1; b < NB; b++) expect_eq("same probability to all banks", got[b][i], got[0][i]);
      end
      expect_eq("PROB stream length", got[0].size(), part == 0 ? WT : N);
    end
    expect_near("probabilities add to one", psum, 1.0, 0.01);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
