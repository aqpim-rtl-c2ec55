// bank_pe: bank-level processing element of AQPIM (one per bank, one bank
// per PQ subvector).
//
// It carries out, on its own bank, the bank-side steps of online product
// quantization and of attention on the compressed KV cache:
//   FN_DC   distance calculation. For every token n of [tok0, tok0+cnt) it
//           loads x_n (d/m words) into GRF_EVEN and streams the squared
//           Euclidean distance to every centroid k to the BufferPE, which
//           keeps the running minimum (cluster assignment).
//   FN_CC   weighted centroid update (Eq. 2). For a block of GRF_WORDS
//           centroids it takes the reciprocals 1/sum(w) from the BufferPE
//           into GRF_EVEN, accumulates sum(w_n x_n) over the window's tokens
//           assigned to the block, multiplies and writes the new centroids.
//           A centroid with no members (flag bit VAL_W-1) keeps its value.
//   FN_ATNK inner-product table: IP[k] = q . Kcb[k] for all k, q held in
//           GRF_ODD, written to the window's IP row.
//   FN_KEY  (PIM_RET) for each token, reads its key index into GRF_EVEN and
//           looks up IP[kidx_n] through the intra-row indirection MUX; the
//           values stream to the BufferPE, which sums them over subvectors.
//   FN_ATNV out[j] = sum_n p_n * Vcb_j[vidx_n] by intra-row lookups in value
//           codebook row j, repeated for every j (d/m passes over the
//           indices). The result lands in GRF_ODD for PIM_RD.
//   FN_COPY copies the codebook of window w-1 into window w (window advance).
//   FN_IDX / FN_PROB (PIM_MV_BF) write assignments / probabilities received
//           from the BufferPE into the index / probability rows.
// The split of work between BankPE and BufferPE, the GRF_ODD/GRF_EVEN
// names and the use of GRF-held indices as column addresses follow the
// paper. The loop order, the blocking by GRF_WORDS centroids or tokens,
// fixed-point arithmetic instead of FP16, and one word per bank access are
// this design's choices.
//
// Interfaces: op_start pulses with op; op_done pulses when it finishes.
// Host accesses (h_req pulse, acked by h_ack) are accepted only while idle.
// Bank port: see dram_bank. MV_BA stream to the BufferPE: ba_valid / ba_ready
// with {ba_tok, ba_k, ba_last, ba_val}. MV_BF stream from the BufferPE:
// bf_valid / bf_ready with bf_data; the BufferPE raises bf_valid only when
// every BankPE is ready, so a word is taken whenever bf_valid is seen.
// Every bank access takes two cycles plus activation time on a row miss.
module bank_pe
  import aqpim_pkg::*;
#(
  parameter int unsigned WIN_TOK = 4096,
  parameter int unsigned N_WIN   = 2,
  parameter int unsigned ROWS    = N_WIN * win_rows(WIN_TOK)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  pq_cfg_t                 cfg,
  // operation
  input  logic                    op_start,
  input  pe_op_t                  op,
  output logic                    op_done,
  output logic                    busy,
  // host access
  input  logic                    h_req,
  input  logic                    h_we,
  input  logic                    h_act,
  input  pim_tgt_e                h_tgt,
  input  logic [15:0]             h_row,
  input  logic [15:0]             h_col,
  input  word_t                   h_wdata,
  output logic                    h_ack,
  output word_t                   h_rdata,
  // bank port
  output logic                    b_req,
  output logic                    b_act_only,
  output logic                    b_we,
  output logic [$clog2(ROWS)-1:0] b_row,
  output logic [COL_W-1:0]        b_col,
  output logic [COL_W-1:0]        b_col_ind,
  output logic                    b_ind,
  output word_t                   b_wdata,
  input  logic                    b_ack,
  input  word_t                   b_rdata,
  // MV_BA stream to BufferPE
  output logic                    ba_valid,
  output logic [15:0]             ba_tok,
  output logic [9:0]              ba_k,
  output logic                    ba_last,
  output val_t                    ba_val,
  input  logic                    ba_ready,
  // MV_BF stream from BufferPE
  input  logic                    bf_valid,
  input  val_t                    bf_data,
  output logic                    bf_ready
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned GW = $clog2(GRF_WORDS);
  localparam int unsigned DW = $clog2(DMAX);

  typedef enum logic [5:0] {
    S_IDLE, S_MW, S_DONE, S_H_GOT,
    S_DC_XRD, S_DC_XGOT, S_DC_CBRD, S_DC_CBGOT, S_DC_SEND,
    S_CC_RCP, S_CC_IDXRD, S_CC_IDXGOT, S_CC_WRD, S_CC_WGOT, S_CC_XRD, S_CC_XGOT,
    S_CC_WB, S_CC_WBGOT,
    S_AK_RD, S_AK_GOT, S_AK_WR, S_AK_WGOT,
    S_RK_IRD, S_RK_IGOT, S_RK_LRD, S_RK_LGOT, S_RK_SEND,
    S_AV_IRD, S_AV_IGOT, S_AV_PRD, S_AV_PGOT, S_AV_LRD, S_AV_LGOT, S_AV_FIN,
    S_CP_RD, S_CP_GOT, S_CP_WR, S_CP_WGOT,
    S_BF_WAIT, S_BF_WGOT
  } st_e;

  st_e st, ret;
  pe_op_t o;

  word_t grf_odd  [GRF_WORDS];
  val_t  grf_even [GRF_WORDS];
  logic signed [63:0] acc  [GRF_WORDS];
  logic signed [63:0] acc2 [GRF_WORDS][DMAX];
  logic signed [63:0] out_acc [DMAX];

  logic [15:0] n, nb, n_end;
  logic [2:0]  j;
  logic [9:0]  kb;
  logic [GW:0] kk, i;
  logic [9:0]  m_idx;        // centroid index of current token (CC)
  word_t       wreg;         // weight of current token (CC)
  word_t       rd_q;

  wire [2:0]  D    = cfg.d_sub;
  wire [9:0]  K    = cfg.n_cent;
  wire [15:0] N    = cfg.n_tok;

  // row helpers (win, kv from the latched op)
  function automatic logic [RW-1:0] r_x(input logic [2:0] jj, input logic [15:0] t);
    return RW'(row_x(WIN_TOK, 32'(o.win), 32'(o.kv), 32'(jj), 32'(t)));
  endfunction
  function automatic logic [RW-1:0] r_cb(input logic [15:0] w, input logic [2:0] jj);
    return RW'(row_cb(WIN_TOK, 32'(w), 32'(o.kv), 32'(jj)));
  endfunction
  function automatic logic [RW-1:0] r_idx(input logic [15:0] t);
    return RW'(row_idx(WIN_TOK, 32'(o.win), 32'(o.kv), 32'(t)));
  endfunction
  function automatic logic [RW-1:0] r_w(input logic [15:0] t);
    return RW'(row_w(WIN_TOK, 32'(o.win), 32'(t)));
  endfunction
  function automatic logic [RW-1:0] r_p(input logic [15:0] t);
    return RW'(row_p(WIN_TOK, 32'(o.win), 32'(t)));
  endfunction
  function automatic logic [RW-1:0] r_ip();
    return RW'(row_ip(WIN_TOK, 32'(o.win)));
  endfunction
  function automatic logic [COL_W-1:0] c_of(input logic [15:0] t);
    return t[COL_W-1:0];
  endfunction

  assign busy     = (st != S_IDLE);
  assign bf_ready = (st == S_CC_RCP) || (st == S_BF_WAIT);

  // squared difference and products used by the execution unit
  logic signed [16:0] diff;
  logic signed [63:0] sq;
  always_comb begin
    diff = $signed({grf_even[j][15], grf_even[j][15:0]}) - $signed({rd_q[15], rd_q});
    sq   = 64'(diff) * 64'(diff);
  end

  // new centroid = numerator * reciprocal, Q.16 * 2^24/W8 >> 22 -> Q8.8
  logic signed [95:0] mu_wide;
  always_comb begin
    mu_wide = 96'(acc2[kk[GW-1:0]][j[DW-1:0]]) * $signed({71'd0, grf_even[kk[GW-1:0]][24:0]});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; o <= '0;
      op_done <= 1'b0; h_ack <= 1'b0; h_rdata <= '0;
      b_req <= 1'b0; b_act_only <= 1'b0; b_we <= 1'b0; b_row <= '0; b_col <= '0;
      b_col_ind <= '0; b_ind <= 1'b0; b_wdata <= '0;
      ba_valid <= 1'b0; ba_tok <= '0; ba_k <= '0; ba_last <= 1'b0; ba_val <= '0;
      n <= '0; nb <= '0; n_end <= '0; j <= '0; kb <= '0; kk <= '0; i <= '0;
      m_idx <= '0; wreg <= '0; rd_q <= '0;
      for (int e = 0; e < GRF_WORDS; e++) begin
        grf_odd[e] <= '0; grf_even[e] <= '0; acc[e] <= '0;
        for (int d = 0; d < DMAX; d++) acc2[e][d] <= '0;
      end
      for (int d = 0; d < DMAX; d++) out_acc[d] <= '0;
    end else begin
      op_done <= 1'b0;
      h_ack   <= 1'b0;
      b_req   <= 1'b0;
      unique case (st)
        // ------------------------------------------------------------
        S_IDLE: begin
          if (op_start) begin
            o     <= op;
            n     <= op.tok0;
            nb    <= op.tok0;
            n_end <= op.tok0 + op.cnt;
            j <= '0; kb <= '0; kk <= '0; i <= '0;
            for (int e = 0; e < GRF_WORDS; e++) acc[e] <= '0;
            unique case (op.fn)
              FN_DC:   st <= S_DC_XRD;
              FN_CC:   begin n <= '0; n_end <= N; st <= S_CC_RCP; end
              FN_ATNK: st <= S_AK_RD;
              FN_KEY:  st <= S_RK_IRD;
              FN_ATNV: begin
                if (!op.keep) for (int d = 0; d < DMAX; d++) out_acc[d] <= '0;
                st <= S_AV_IRD;
              end
              FN_COPY: st <= S_CP_RD;
              default: st <= S_BF_WAIT;   // FN_IDX, FN_PROB
            endcase
          end else if (h_req) begin
            if (h_tgt == TGT_GRF) begin
              if (h_we) grf_odd[h_col[GW-1:0]] <= h_wdata;
              h_rdata <= grf_odd[h_col[GW-1:0]];
              h_ack   <= 1'b1;
            end else begin
              b_req <= 1'b1; b_act_only <= h_act; b_we <= h_we;
              b_row <= RW'(h_row); b_col <= h_col[COL_W-1:0]; b_ind <= 1'b0;
              b_wdata <= h_wdata;
              ret <= S_H_GOT; st <= S_MW;
            end
          end
        end
        S_H_GOT: begin
          h_rdata <= rd_q; h_ack <= 1'b1; st <= S_IDLE;
        end
        // memory wait: common to every bank access
        S_MW: if (b_ack) begin rd_q <= b_rdata; st <= ret; end
        S_DONE: begin op_done <= 1'b1; st <= S_IDLE; end

        // ---------------- DC ----------------
        S_DC_XRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_x(j, n); b_col <= c_of(n);
          ret <= S_DC_XGOT; st <= S_MW;
        end
        S_DC_XGOT: begin
          grf_even[j[GW-1:0]] <= VAL_W'(rd_q);
          if (j == D - 3'd1) begin
            j <= '0; kb <= '0; kk <= '0; st <= S_DC_CBRD;
            for (int e = 0; e < GRF_WORDS; e++) acc[e] <= '0;
          end else begin
            j <= j + 3'd1; st <= S_DC_XRD;
          end
        end
        S_DC_CBRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_cb(o.win, j); b_col <= COL_W'(kb + 10'(kk));
          ret <= S_DC_CBGOT; st <= S_MW;
        end
        S_DC_CBGOT: begin
          acc[kk[GW-1:0]] <= acc[kk[GW-1:0]] + sq;
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0;
            if (j == D - 3'd1) begin
              j <= '0;
              // first distance of the block goes out
              ba_valid <= 1'b1; ba_tok <= n; ba_k <= kb;
              ba_val <= VAL_W'(acc[0]);
              ba_last <= (kb == K - 10'd1);
              st <= S_DC_SEND;
            end else begin
              j <= j + 3'd1; st <= S_DC_CBRD;
            end
          end else begin
            kk <= kk + 1'b1; st <= S_DC_CBRD;
          end
        end
        S_DC_SEND: begin
          if (ba_valid && ba_ready) begin
            if (kk == (GW+1)'(GRF_WORDS - 1)) begin
              ba_valid <= 1'b0;
              kk <= '0;
              for (int e = 0; e < GRF_WORDS; e++) acc[e] <= '0;
              if (kb + 10'(GRF_WORDS) >= K) begin
                kb <= '0;
                if (n + 16'd1 >= n_end) st <= S_DONE;
                else begin n <= n + 16'd1; st <= S_DC_XRD; end
              end else begin
                kb <= kb + 10'(GRF_WORDS); st <= S_DC_CBRD;
              end
            end else begin
              kk <= kk + 1'b1;
              ba_k <= kb + 10'(kk) + 10'd1;
              ba_val <= VAL_W'(acc[GW'(kk + 1'b1)]);
              ba_last <= (kb + 10'(kk) + 10'd1 == K - 10'd1);
            end
          end
        end

        // ---------------- CC ----------------
        S_CC_RCP: if (bf_valid) begin
          grf_even[kk[GW-1:0]] <= bf_data;
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0; n <= '0;
            for (int e = 0; e < GRF_WORDS; e++)
              for (int d = 0; d < DMAX; d++) acc2[e][d] <= '0;
            st <= (N == 16'd0) ? S_CC_WB : S_CC_IDXRD;
          end else kk <= kk + 1'b1;
        end
        S_CC_IDXRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_idx(n); b_col <= c_of(n);
          ret <= S_CC_IDXGOT; st <= S_MW;
        end
        S_CC_IDXGOT: begin
          m_idx <= rd_q[9:0];
          if (rd_q[9:0] >= kb && rd_q[9:0] < kb + 10'(GRF_WORDS)) st <= S_CC_WRD;
          else if (n + 16'd1 >= n_end) begin j <= '0; kk <= '0; st <= S_CC_WB; end
          else begin n <= n + 16'd1; st <= S_CC_IDXRD; end
        end
        S_CC_WRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_w(n); b_col <= c_of(n);
          ret <= S_CC_WGOT; st <= S_MW;
        end
        S_CC_WGOT: begin wreg <= rd_q; j <= '0; st <= S_CC_XRD; end
        S_CC_XRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_x(j, n); b_col <= c_of(n);
          ret <= S_CC_XGOT; st <= S_MW;
        end
        S_CC_XGOT: begin
          // weight is unsigned Q8.8, token word signed Q8.8
          acc2[GW'(m_idx - kb)][j[DW-1:0]] <= acc2[GW'(m_idx - kb)][j[DW-1:0]]
                                      + 64'($signed({1'b0, wreg})) * 64'(rd_q);
          if (j == D - 3'd1) begin
            j <= '0;
            if (n + 16'd1 >= n_end) begin kk <= '0; st <= S_CC_WB; end
            else begin n <= n + 16'd1; st <= S_CC_IDXRD; end
          end else begin
            j <= j + 3'd1; st <= S_CC_XRD;
          end
        end
        S_CC_WB: begin
          if (grf_even[kk[GW-1:0]][VAL_W-1]) begin
            st <= S_CC_WBGOT;               // empty cluster: keep centroid
          end else begin
            b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b1; b_ind <= 1'b0;
            b_row <= r_cb(o.win, j); b_col <= COL_W'(kb + 10'(kk));
            b_wdata <= sat16(mu_wide >>> 22);
            ret <= S_CC_WBGOT; st <= S_MW;
          end
        end
        S_CC_WBGOT: begin
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0;
            if (j == D - 3'd1) begin
              j <= '0;
              if (kb + 10'(GRF_WORDS) >= K) st <= S_DONE;
              else begin kb <= kb + 10'(GRF_WORDS); st <= S_CC_RCP; end
            end else begin j <= j + 3'd1; st <= S_CC_WB; end
          end else begin kk <= kk + 1'b1; st <= S_CC_WB; end
        end

        // ---------------- ATNK ----------------
        S_AK_RD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_cb(o.win, j); b_col <= COL_W'(kb + 10'(kk));
          ret <= S_AK_GOT; st <= S_MW;
        end
        S_AK_GOT: begin
          acc[kk[GW-1:0]] <= acc[kk[GW-1:0]] + 64'(grf_odd[j[GW-1:0]]) * 64'(rd_q);
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0;
            if (j == D - 3'd1) begin j <= '0; st <= S_AK_WR; end
            else begin j <= j + 3'd1; st <= S_AK_RD; end
          end else begin kk <= kk + 1'b1; st <= S_AK_RD; end
        end
        S_AK_WR: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b1; b_ind <= 1'b0;
          b_row <= r_ip(); b_col <= COL_W'(kb + 10'(kk));
          b_wdata <= sat16(96'(acc[kk[GW-1:0]]) >>> FRAC);
          ret <= S_AK_WGOT; st <= S_MW;
        end
        S_AK_WGOT: begin
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0;
            for (int e = 0; e < GRF_WORDS; e++) acc[e] <= '0;
            if (kb + 10'(GRF_WORDS) >= K) st <= S_DONE;
            else begin kb <= kb + 10'(GRF_WORDS); st <= S_AK_RD; end
          end else begin kk <= kk + 1'b1; st <= S_AK_WR; end
        end

        // ---------------- RET (key lookups) ----------------
        S_RK_IRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_idx(nb + 16'(i)); b_col <= c_of(nb + 16'(i));
          ret <= S_RK_IGOT; st <= S_MW;
        end
        S_RK_IGOT: begin
          grf_even[i[GW-1:0]] <= VAL_W'(rd_q[COL_W-1:0]);
          if (i == (GW+1)'(GRF_WORDS - 1) || nb + 16'(i) + 16'd1 >= n_end) begin
            i <= '0; st <= S_RK_LRD;
          end else begin i <= i + 1'b1; st <= S_RK_IRD; end
        end
        S_RK_LRD: begin
          // indirect read: column comes from the GRF through the MUX
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b1;
          b_row <= r_ip(); b_col_ind <= grf_even[i[GW-1:0]][COL_W-1:0];
          ret <= S_RK_LGOT; st <= S_MW;
        end
        S_RK_LGOT: begin
          ba_valid <= 1'b1; ba_tok <= 16'(o.win) * 16'(WIN_TOK) + nb + 16'(i);
          ba_k <= '0; ba_last <= 1'b1; ba_val <= VAL_W'($signed(rd_q));
          st <= S_RK_SEND;
        end
        S_RK_SEND: if (ba_ready) begin
          ba_valid <= 1'b0;
          if (nb + 16'(i) + 16'd1 >= n_end) st <= S_DONE;
          else if (i == (GW+1)'(GRF_WORDS - 1)) begin
            i <= '0; nb <= nb + 16'(GRF_WORDS); st <= S_RK_IRD;
          end else begin i <= i + 1'b1; st <= S_RK_LRD; end
        end

        // ---------------- ATNV ----------------
        S_AV_IRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_idx(nb + 16'(i)); b_col <= c_of(nb + 16'(i));
          ret <= S_AV_IGOT; st <= S_MW;
        end
        S_AV_IGOT: begin
          grf_even[i[GW-1:0]] <= VAL_W'(rd_q[COL_W-1:0]);
          if (i == (GW+1)'(GRF_WORDS - 1) || nb + 16'(i) + 16'd1 >= n_end) begin
            i <= '0; st <= S_AV_PRD;
          end else begin i <= i + 1'b1; st <= S_AV_IRD; end
        end
        S_AV_PRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_p(nb + 16'(i)); b_col <= c_of(nb + 16'(i));
          ret <= S_AV_PGOT; st <= S_MW;
        end
        S_AV_PGOT: begin
          grf_odd[i[GW-1:0]] <= rd_q;
          if (i == (GW+1)'(GRF_WORDS - 1) || nb + 16'(i) + 16'd1 >= n_end) begin
            i <= '0; st <= S_AV_LRD;
          end else begin i <= i + 1'b1; st <= S_AV_PRD; end
        end
        S_AV_LRD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b1;
          b_row <= r_cb(o.win, j); b_col_ind <= grf_even[i[GW-1:0]][COL_W-1:0];
          ret <= S_AV_LGOT; st <= S_MW;
        end
        S_AV_LGOT: begin
          // probability is unsigned Q1.15
          out_acc[j[DW-1:0]] <= out_acc[j[DW-1:0]] + 64'($signed({1'b0, grf_odd[i[GW-1:0]]})) * 64'(rd_q);
          if (nb + 16'(i) + 16'd1 >= n_end) begin
            i <= '0; nb <= o.tok0;
            if (j == D - 3'd1) begin j <= '0; st <= S_AV_FIN; end
            else begin j <= j + 3'd1; st <= S_AV_IRD; end
          end else if (i == (GW+1)'(GRF_WORDS - 1)) begin
            i <= '0; nb <= nb + 16'(GRF_WORDS); st <= S_AV_IRD;
          end else begin i <= i + 1'b1; st <= S_AV_LRD; end
        end
        S_AV_FIN: begin
          for (int d = 0; d < DMAX; d++) grf_odd[d] <= sat16(96'(out_acc[d]) >>> 15);
          st <= S_DONE;
        end

        // ---------------- COPY (window advance) ----------------
        S_CP_RD: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b0; b_ind <= 1'b0;
          b_row <= r_cb(o.win - 16'd1, j); b_col <= COL_W'(kb + 10'(kk));
          ret <= S_CP_GOT; st <= S_MW;
        end
        S_CP_GOT: begin
          grf_even[kk[GW-1:0]] <= VAL_W'(rd_q);
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin kk <= '0; st <= S_CP_WR; end
          else begin kk <= kk + 1'b1; st <= S_CP_RD; end
        end
        S_CP_WR: begin
          b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b1; b_ind <= 1'b0;
          b_row <= r_cb(o.win, j); b_col <= COL_W'(kb + 10'(kk));
          b_wdata <= word_t'(grf_even[kk[GW-1:0]][15:0]);
          ret <= S_CP_WGOT; st <= S_MW;
        end
        S_CP_WGOT: begin
          if (kk == (GW+1)'(GRF_WORDS - 1)) begin
            kk <= '0;
            if (kb + 10'(GRF_WORDS) >= K) begin
              kb <= '0;
              if (j == D - 3'd1) st <= S_DONE;
              else begin j <= j + 3'd1; st <= S_CP_RD; end
            end else begin kb <= kb + 10'(GRF_WORDS); st <= S_CP_RD; end
          end else begin kk <= kk + 1'b1; st <= S_CP_WR; end
        end

        // ---------------- MV_BF: index or probability rows ----------------
        S_BF_WAIT: begin
          if (n >= n_end) st <= S_DONE;
          else if (bf_valid) begin
            b_req <= 1'b1; b_act_only <= 1'b0; b_we <= 1'b1; b_ind <= 1'b0;
            b_row <= (o.fn == FN_IDX) ? r_idx(n) : r_p(n);
            b_col <= c_of(n);
            b_wdata <= word_t'(bf_data[15:0]);
            ret <= S_BF_WGOT; st <= S_MW;
          end
        end
        S_BF_WGOT: begin n <= n + 16'd1; st <= S_BF_WAIT; end

        default: st <= S_IDLE;
      endcase
    end
  end

  // stream rules: data is held stable while waiting for ready
  a_ba_stable: assert property (@(posedge clk) disable iff (!rst_n)
      ba_valid && !ba_ready |=> ba_valid && $stable(ba_tok) && $stable(ba_k) && $stable(ba_val));
  a_k_mult: assert property (@(posedge clk) disable iff (!rst_n)
      op_start |-> (32'(cfg.n_cent) % GRF_WORDS == 0) && (32'(cfg.d_sub) <= DMAX) && (cfg.d_sub != 0));

endmodule
