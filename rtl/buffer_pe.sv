// buffer_pe: the AQPIM processing element on the HBM buffer die, shared by
// all NB banks (subvectors) of the pseudo-channel.
//
// It does the data-intensive steps that need values from every bank:
//   M_CA     cluster assignment. Takes the distance streams of all BankPEs
//            (MV_BA) in lockstep; per bank it keeps the running minimum over
//            the centroids of a token (MIN) and, at the last centroid, stores
//            the winner in the assignment table asg[bank][token].
//   M_RECIP  denominator of the weighted centroid (Eq. 2). Sums the weights
//            w_n of each cluster per bank from the assignment table, then
//            computes 2^24 / sum (weights in Q8.8) with one divider per bank.
//            An empty cluster gets bit VAL_W-1 set instead.
//   M_SUM    takes the looked-up inner products of all banks for a token
//            (MV_BA during PIM_RET) and adds them: score_n = q . k_n
//            approximated over all subvectors. Scores go to the softmax
//            buffer at the token's position.
//   M_SFM    softmax over the first cnt entries of the softmax buffer:
//            maximum, e^(s - max) (fx_exp), sum, one division 2^31 / sum and
//            a multiply per entry; probabilities are unsigned Q1.15.
//   M_BF_RCP / M_BF_IDX / M_BF_PROB  MV_BF streams back to the banks:
//            reciprocals (one per centroid, per bank), assignments (per bank)
//            or probabilities (the same word to every bank).
// Placement of CA, the CC reciprocal and softmax here, and the softmax
// buffer, follow the paper. Fixed-point formats, table sizes and the
// lockstep streaming are this design's choices.
//
// Interface: start pulses with mode, win, tok0, cnt; done pulses at the
// end. ba_ready is raised only when every bank offers a word (join) and the
// mode accepts one. bf_valid is raised only when every bank is ready, and
// carries per-bank data bf_data[b]. Weights w_n are written by the host with
// w_we / w_addr / w_data.
module buffer_pe
  import aqpim_pkg::*;
#(
  parameter int unsigned NB      = 32,
  parameter int unsigned WIN_TOK = 4096,
  parameter int unsigned N_WIN   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pq_cfg_t           cfg,
  input  logic              start,
  input  logic [2:0]        mode,
  input  logic [15:0]       win,
  input  logic [15:0]       tok0,
  input  logic [15:0]       cnt,
  output logic              done,
  output logic              busy,
  // host writes of importance weights
  input  logic              w_we,
  input  logic [15:0]       w_addr,
  input  logic [15:0]       w_data,
  // MV_BA streams from the BankPEs
  input  logic [NB-1:0]     ba_valid,
  input  logic [15:0]       ba_tok  [NB],
  input  logic [9:0]        ba_k    [NB],
  input  logic [NB-1:0]     ba_last,
  input  val_t              ba_val  [NB],
  output logic              ba_ready,
  // MV_BF stream to the BankPEs
  output logic              bf_valid,
  output val_t              bf_data [NB],
  input  logic [NB-1:0]     bf_ready,
  // event counters
  output logic [31:0]       n_assign,
  output logic [31:0]       n_score
);
  localparam logic [2:0] M_IDLE = 3'd0, M_CA = 3'd1, M_RECIP = 3'd2, M_SUM = 3'd3,
                         M_SFM = 3'd4, M_BF_RCP = 3'd5, M_BF_IDX = 3'd6, M_BF_PROB = 3'd7;
  localparam int unsigned SMB = N_WIN * WIN_TOK;     // softmax buffer entries
  localparam int unsigned TW  = $clog2(WIN_TOK);
  localparam int unsigned SW  = $clog2(SMB);

  typedef enum logic [3:0] {
    S_IDLE, S_CA, S_SUM, S_RC_CLR, S_RC_ACC, S_RC_DIV, S_RC_WAIT,
    S_SF_MAX, S_SF_EXP, S_SF_DIV, S_SF_WAIT, S_SF_NORM, S_BF, S_DONE
  } st_e;
  st_e st;
  logic [2:0] md;

  // storage shared by all banks; per-bank tables are in g_bank below
  logic [15:0] wbuf [WIN_TOK];        // importance weights (Q8.8)
  val_t        smb  [SMB];            // softmax buffer: scores, e, probabilities

  logic [15:0] n, n_end, wbase;
  val_t        smb_n;               // smb[n]
  assign smb_n = smb[SW'(n)];
  logic [9:0]  k;
  val_t        mx;
  logic [31:0] esum, rs;

  // dividers (one per bank; bank 0's also serves the softmax)
  logic          dv_start;
  logic [31:0]   dv_num;
  logic [31:0]   dv_den [NB];
  logic [31:0]   ws_k   [NB];         // wsum[b][k], read combinationally
  logic [9:0]    asg_n  [NB];         // asg[b][n], read combinationally
  logic [NB-1:0] dv_done, dv_busy;
  logic [31:0]   dv_quo [NB];
  for (genvar b = 0; b < NB; b++) begin : g_div
    seq_div #(.W(32)) u_div (
      .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den[b]),
      .busy(dv_busy[b]), .done(dv_done[b]), .quo(dv_quo[b]));
  end

  // per-bank tables: cluster assignment per token, and weight sums that
  // become reciprocals, with the running argmin of CA
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [9:0]  asg  [WIN_TOK];
    logic [31:0] wsum [KMAX];
    val_t        minv;
    logic [9:0]  argk;
    logic        take;
    logic        ws_we;
    logic [8:0]  ws_wa;
    logic [31:0] ws_wd;

    assign asg_n[b] = asg[TW'(n)];
    assign ws_k[b]  = wsum[k[8:0]];
    // this word is a new minimum (the first centroid always is)
    assign take = (ba_k[b] == 10'd0) || (ba_val[b] < minv);

    always_comb begin
      ws_we = 1'b0; ws_wa = k[8:0]; ws_wd = '0;
      unique case (st)
        S_RC_CLR: ws_we = 1'b1;
        S_RC_ACC: begin
          ws_we = 1'b1; ws_wa = asg_n[b][8:0];
          ws_wd = wsum[asg_n[b][8:0]] + 32'(wbuf[TW'(n)]);
        end
        S_RC_WAIT: begin
          ws_we = dv_done[0] && (ws_k[b] != 32'd0); ws_wd = dv_quo[b];
        end
        default: ;
      endcase
    end

    always_ff @(posedge clk) begin
      if (ws_we) wsum[ws_wa] <= ws_wd;
      if (st == S_CA && ba_ready && ba_last[b])
        asg[TW'(ba_tok[b])] <= take ? ba_k[b] : argk;
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        minv <= '0; argk <= '0;
      end else if (st == S_CA && ba_ready && take) begin
        minv <= ba_val[b]; argk <= ba_k[b];
      end
    end
  end

  // exponent of the current softmax entry
  val_t        ex_y;
  logic [15:0] ex_e;
  fx_exp u_exp (.y(ex_y), .e(ex_e));
  assign ex_y = smb_n - mx;

  // cross-bank sum of looked-up inner products
  val_t bsum;
  always_comb begin
    bsum = '0;
    for (int b = 0; b < NB; b++) bsum = bsum + ba_val[b];
  end

  // softmax buffer: one write port (scores, exponentials, probabilities)
  logic          smb_we;
  logic [SW-1:0] smb_wa;
  val_t          smb_wd;
  always_comb begin
    smb_we = 1'b0; smb_wa = SW'(n); smb_wd = '0;
    unique case (st)
      S_SUM:     begin smb_we = ba_ready; smb_wa = SW'(ba_tok[0]); smb_wd = bsum; end
      S_SF_EXP:  begin smb_we = 1'b1; smb_wd = VAL_W'(ex_e); end
      S_SF_NORM: begin smb_we = 1'b1; smb_wd = VAL_W'((64'(smb_n[15:0]) * 64'(rs)) >> 16); end
      default: ;
    endcase
  end
  always_ff @(posedge clk) begin
    if (smb_we) smb[smb_wa] <= smb_wd;
    if (w_we) wbuf[TW'(w_addr)] <= w_data;
  end

  assign busy     = (st != S_IDLE);
  assign ba_ready = (&ba_valid) && (st == S_CA || st == S_SUM);
  assign bf_valid = (st == S_BF) && (n < n_end) && (&bf_ready);

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      unique case (md)
        M_BF_RCP: bf_data[b] = (ws_k[b] == 32'd0) ? {1'b1, (VAL_W-1)'(0)} : VAL_W'(ws_k[b]);
        M_BF_IDX: bf_data[b] = VAL_W'(asg_n[b]);
        default:  bf_data[b] = smb[SW'(wbase + n)];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; md <= M_IDLE; done <= 1'b0;
      n <= '0; n_end <= '0; wbase <= '0; k <= '0; mx <= '0; esum <= '0; rs <= '0;
      dv_start <= 1'b0; dv_num <= '0;
      n_assign <= '0; n_score <= '0;
      for (int b = 0; b < NB; b++) dv_den[b] <= '0;
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          md <= mode; n <= tok0; n_end <= tok0 + cnt; k <= '0;
          wbase <= 16'(win) * 16'(WIN_TOK);
          unique case (mode)
            M_CA:      st <= S_CA;
            M_SUM:     st <= S_SUM;
            M_RECIP:   begin n <= '0; n_end <= cfg.n_tok; st <= S_RC_CLR; end
            M_SFM:     begin n <= '0; n_end <= cnt; mx <= {1'b1, (VAL_W-1)'(0)}; st <= S_SF_MAX; end
            M_BF_RCP:  begin n <= '0; n_end <= 16'(cfg.n_cent); st <= S_BF; end
            M_BF_PROB: begin n <= '0; n_end <= cnt; st <= S_BF; end
            default:   st <= S_BF;          // M_BF_IDX
          endcase
        end

        // ---- cluster assignment: running argmin per bank ----
        S_CA: begin
          if (ba_ready) begin
            if (ba_last[0]) begin
              n_assign <= n_assign + 32'd1;
              if (ba_tok[0] + 16'd1 >= n_end) st <= S_DONE;
            end
          end
        end

        // ---- inner-product sum over subvectors ----
        S_SUM: begin
          if (ba_ready) begin
            n_score <= n_score + 32'd1;
            if (ba_tok[0] + 16'd1 >= wbase + n_end) st <= S_DONE;
          end
        end

        // ---- CC denominators and reciprocals ----
        S_RC_CLR: begin
          if (k == cfg.n_cent - 10'd1) begin
            k <= '0;
            st <= (n_end == 16'd0) ? S_RC_DIV : S_RC_ACC;
          end else k <= k + 10'd1;
        end
        S_RC_ACC: begin
          if (n + 16'd1 >= n_end) begin n <= '0; st <= S_RC_DIV; end
          else n <= n + 16'd1;
        end
        S_RC_DIV: begin
          dv_start <= 1'b1; dv_num <= 32'h0100_0000;
          for (int b = 0; b < NB; b++) dv_den[b] <= ws_k[b];
          st <= S_RC_WAIT;
        end
        S_RC_WAIT: if (dv_done[0]) begin
          if (k == cfg.n_cent - 10'd1) st <= S_DONE;
          else begin k <= k + 10'd1; st <= S_RC_DIV; end
        end

        // ---- softmax ----
        S_SF_MAX: begin
          if ($signed(smb_n) > $signed(mx)) mx <= smb_n;
          if (n + 16'd1 >= n_end) begin n <= '0; esum <= '0; st <= S_SF_EXP; end
          else n <= n + 16'd1;
        end
        S_SF_EXP: begin
          esum <= esum + 32'(ex_e);
          if (n + 16'd1 >= n_end) begin n <= '0; st <= S_SF_DIV; end
          else n <= n + 16'd1;
        end
        S_SF_DIV: begin
          dv_start <= 1'b1; dv_num <= 32'h8000_0000; dv_den[0] <= esum;
          st <= S_SF_WAIT;
        end
        S_SF_WAIT: if (dv_done[0]) begin rs <= dv_quo[0]; st <= S_SF_NORM; end
        S_SF_NORM: begin
          if (n + 16'd1 >= n_end) st <= S_DONE;
          else n <= n + 16'd1;
        end

        // ---- MV_BF streams ----
        S_BF: begin
          if (n >= n_end) st <= S_DONE;
          else if (bf_valid) begin
            n <= n + 16'd1;
            if (md == M_BF_RCP) k <= k + 10'd1;
          end
        end

        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // all banks work in lockstep on the same token
  a_same_tok: assert property (@(posedge clk) disable iff (!rst_n)
      ba_ready |-> (ba_tok[NB-1] == ba_tok[0]) && (ba_k[NB-1] == ba_k[0]));

endmodule
