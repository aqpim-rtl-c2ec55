// tb_bank_pe: self-checking test of one BankPE on its DRAM bank.
//
// The testbench acts as host and as BufferPE. It loads a key codebook, a
// query, token subvectors, indices, weights and probabilities through the
// host port, then runs every BankPE operation and checks the results bit
// for bit against integer arithmetic done in the testbench:
//   ATNK  inner-product row, read back
//   RET   looked-up values streamed out (with random back-pressure), and the
//         activation count of the lookups
//   DC    every streamed distance and its last-centroid flag
//   CC    new centroids, given reciprocals (one empty cluster)
//   ATNV  output words in GRF_ODD
//   COPY  codebook copied into window 1
//   MV_BF index words written into the index row
module tb_bank_pe;
  import aqpim_pkg::*;

  localparam int WT = 16, NW = 2, TA = 2;
  localparam int ROWS = NW * win_rows(WT);
  localparam int K = 16, D = 4, N = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pq_cfg_t cfg;
  logic op_start = 0, op_done, busy;
  pe_op_t op;
  logic h_req = 0, h_we = 0, h_act = 0, h_ack;
  pim_tgt_e h_tgt = TGT_BANK;
  logic [15:0] h_row = 0, h_col = 0;
  word_t h_wdata = 0, h_rdata;
  logic b_req, b_act_only, b_we, b_ind, b_ack;
  logic [$clog2(ROWS)-1:0] b_row;
  logic [COL_W-1:0] b_col, b_col_ind;
  word_t b_wdata, b_rdata;
  logic ba_valid, ba_last, ba_ready;
  logic [15:0] ba_tok;
  logic [9:0] ba_k;
  val_t ba_val;
  logic bf_valid = 0, bf_ready;
  val_t bf_data = '0;
  logic [31:0] act_count;

  bank_pe #(.WIN_TOK(WT), .N_WIN(NW), .ROWS(ROWS)) dut (.*);
  dram_bank #(.ROWS(ROWS), .T_ACT(TA)) u_bank (
    .clk, .rst_n, .req(b_req), .act_only(b_act_only), .we(b_we), .row(b_row),
    .col_mc(b_col), .col_ind(b_col_ind), .ind(b_ind), .wdata(b_wdata), .ack(b_ack),
    .rdata(b_rdata), .act_count);

  int checks = 0, failures = 0;
  int kcb [D][K], vcb [D][K], x [D][N], kidx [N], vidx [N], w [N], pr [N], q [D];

  // random back-pressure on the MV_BA stream
  always_ff @(posedge clk) ba_ready <= ($urandom_range(0, 3) != 0);

  task automatic host(bit we, pim_tgt_e tgt, int row, int col, int data, output int rv);
    @(negedge clk);
    h_req = 1; h_we = we; h_tgt = tgt; h_row = 16'(row); h_col = 16'(col); h_wdata = 16'(data);
    @(negedge clk);
    h_req = 0;
    while (!h_ack) @(negedge clk);
    rv = int'(h_rdata);
  endtask

  task automatic start(pim_fn_e fn, bit kv, int win, int tok0, int cnt, bit keep = 0);
    @(negedge clk);
    op = '0; op.fn = fn; op.kv = kv; op.win = 16'(win); op.tok0 = 16'(tok0);
    op.cnt = 16'(cnt); op.keep = keep;
    op_start = 1;
    @(negedge clk);
    op_start = 0;
  endtask

  task automatic wait_done();
    while (!op_done) @(negedge clk);
  endtask

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  int rv, a0, got_n;
  longint acc, d;
  int rcp [K];
  int empty_k;

  initial begin
    void'($urandom(11));
    cfg = '0; cfg.n_tok = 16'(N); cfg.n_cent = 10'(K); cfg.d_sub = 3'(D);
    op = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int j = 0; j < D; j++) begin
      q[j] = int'($urandom_range(0, 512)) - 256;
      host(1, TGT_GRF, 0, j, q[j], rv);
      for (int k = 0; k < K; k++) begin
        kcb[j][k] = int'($urandom_range(0, 2048)) - 1024;
        vcb[j][k] = int'($urandom_range(0, 2048)) - 1024;
        host(1, TGT_BANK, int'(row_cb(WT, 0, 0, j)), k, kcb[j][k], rv);
        host(1, TGT_BANK, int'(row_cb(WT, 0, 1, j)), k, vcb[j][k], rv);
      end
      for (int n = 0; n < N; n++) begin
        x[j][n] = int'($urandom_range(0, 2048)) - 1024;
        host(1, TGT_BANK, int'(row_x(WT, 0, 0, j, n)), n, x[j][n], rv);
      end
    end
    empty_k = 5;
    for (int n = 0; n < N; n++) begin
      kidx[n] = int'($urandom_range(0, K - 1));
      if (kidx[n] == empty_k) kidx[n] = 0;
      vidx[n] = int'($urandom_range(0, K - 1));
      w[n] = int'($urandom_range(10, 600));
      pr[n] = int'($urandom_range(0, 4096));
      host(1, TGT_BANK, int'(row_idx(WT, 0, 0, n)), n, kidx[n], rv);
      host(1, TGT_BANK, int'(row_idx(WT, 0, 1, n)), n, vidx[n], rv);
      host(1, TGT_BANK, int'(row_w(WT, 0, n)), n, w[n], rv);
      host(1, TGT_BANK, int'(row_p(WT, 0, n)), n, pr[n], rv);
    end

    // ---- ATNK ----
    start(FN_ATNK, 0, 0, 0, 0);
    wait_done();
    for (int k = 0; k < K; k++) begin
      acc = 0;
      for (int j = 0; j < D; j++) acc += longint'(q[j]) * kcb[j][k];
      host(0, TGT_BANK, int'(row_ip(WT, 0)), k, 0, rv);
      expect_eq("ATNK inner product", rv, sat(acc >>> 8));
    end

    // ---- RET: lookups through the indirection MUX ----
    a0 = act_count;
    start(FN_KEY, 0, 0, 0, N);
    got_n = 0;
    while (!op_done) begin
      @(posedge clk);
      if (ba_valid && ba_ready) begin
        acc = 0;
        for (int j = 0; j < D; j++) acc += longint'(q[j]) * kcb[j][kidx[got_n]];
        expect_eq("RET value", longint'($signed(ba_val)), sat(acc >>> 8));
        expect_eq("RET token", ba_tok, got_n);
        got_n++;
      end
    end
    expect_eq("RET count", got_n, N);
    expect_eq("RET activations (2 per batch)", act_count - a0, 2 * ((N + GRF_WORDS - 1) / GRF_WORDS));

    // ---- DC ----
    start(FN_DC, 0, 0, 0, N);
    got_n = 0;
    while (!op_done) begin
      @(posedge clk);
      if (ba_valid && ba_ready) begin
        automatic int n = got_n / K, k = got_n % K;
        d = 0;
        for (int j = 0; j < D; j++) d += longint'(x[j][n] - kcb[j][k]) ** 2;
        expect_eq("DC distance", longint'(ba_val), d);
        expect_eq("DC token", ba_tok, n);
        expect_eq("DC centroid", ba_k, k);
        expect_eq("DC last", ba_last, k == K - 1);
        got_n++;
      end
    end
    expect_eq("DC count", got_n, N * K);

    // ---- ATNV ----
    start(FN_ATNV, 1, 0, 0, N);
    wait_done();
    for (int j = 0; j < D; j++) begin
      acc = 0;
      for (int n = 0; n < N; n++) acc += longint'(pr[n]) * vcb[j][vidx[n]];
      host(0, TGT_GRF, 0, j, 0, rv);
      expect_eq("ATNV output", rv, sat(acc >>> 15));
    end

    // ---- COPY window 0 -> 1 (key codebook) ----
    start(FN_COPY, 0, 1, 0, 0);
    wait_done();
    for (int j = 0; j < D; j++)
      for (int k = 0; k < K; k += 3) begin
        host(0, TGT_BANK, int'(row_cb(WT, 1, 0, j)), k, 0, rv);
        expect_eq("COPY", rv, kcb[j][k]);
      end

    // ---- CC with reciprocals from the "BufferPE" ----
    for (int k = 0; k < K; k++) begin
      automatic longint ws = 0;
      for (int n = 0; n < N; n++) if (kidx[n] == k) ws += w[n];
      rcp[k] = (ws == 0) ? -1 : int'((longint'(1) << 24) / ws);
    end
    start(FN_CC, 0, 0, 0, 0);
    for (int k = 0; k < K; k++) begin
      while (!bf_ready) @(negedge clk);
      bf_valid = 1;
      bf_data = (rcp[k] < 0) ? {1'b1, 39'd0} : VAL_W'(rcp[k]);
      @(negedge clk);
      bf_valid = 0;
    end
    wait_done();
    for (int k = 0; k < K; k++)
      for (int j = 0; j < D; j++) begin
        automatic longint num = 0;
        automatic int e;
        for (int n = 0; n < N; n++) if (kidx[n] == k) num += longint'(w[n]) * x[j][n];
        e = (rcp[k] < 0) ? kcb[j][k] : sat((num * rcp[k]) >>> 22);
        host(0, TGT_BANK, int'(row_cb(WT, 0, 0, j)), k, 0, rv);
        expect_eq(rcp[k] < 0 ? "CC empty cluster kept" : "CC centroid", rv, e);
      end

    // ---- MV_BF: index words ----
    start(FN_IDX, 1, 1, 2, 5);
    for (int t = 0; t < 5; t++) begin
      while (!bf_ready) @(negedge clk);
      bf_valid = 1; bf_data = VAL_W'(100 + t);
      @(negedge clk);
      bf_valid = 0;
    end
    wait_done();
    for (int t = 0; t < 5; t++) begin
      host(0, TGT_BANK, int'(row_idx(WT, 1, 1, 2 + t)), 2 + t, 0, rv);
      expect_eq("MV_BF index", rv, 100 + t);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
