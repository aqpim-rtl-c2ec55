// aqpim_pch: one AQPIM pseudo-channel slice serving one attention head.
//
// NB banks, each with its own BankPE, hold one PQ subvector each (subvector
// i in bank i), and one BufferPE on the buffer die joins them. The host
// (GPU-side memory controller) drives a command port with the PIM command
// set; this block decodes each command into work orders for the BankPEs
// and the BufferPE, runs them together and signals the end with cmd_ready.
//
//   PIM_SET_CONFIG  a = tokens N of the window, b = centroids K, c = d/m
//   PIM_WR / PIM_RD tgt BANK (bank, row, a = col), GRF (bank, a = entry),
//                   BUF (a = token, weight buffer). bcast writes all banks.
//                   A read answers on rd_valid / rd_data.
//   PIM_ACT_AB      open row `row` in every bank
//   PIM_MAC_AB      fn DC   distances of tokens [a, a+b) of window `row`,
//                           set kv; the BufferPE assigns clusters (CA)
//                   fn CC   centroid update of window `row` (needs
//                           PIM_SFM fn 1 first)
//                   fn ATNK inner-product table of window `row`
//                   fn ATNV value accumulation over tokens [0, b) of window
//                           `row`; c != 0 adds to the previous window's sum
//                   fn COPY codebook of window row-1 into window `row`
//   PIM_RET         fn KEY  lookups of tokens [a, a+b) of window `row`,
//                           summed over subvectors into the softmax buffer
//   PIM_SFM         fn 0 softmax over the first b scores; fn 1 the CC
//                   reciprocals for the current window's assignments
//   PIM_MV_BF       fn IDX  assignments of tokens [a, a+b) to index rows
//                   fn PROB probabilities of window `row`, tokens [0, b)
// The transfers the paper names PIM_MV_BA (bank to buffer die) happen as
// streams inside PIM_MAC_AB fn DC and PIM_RET; a separate PIM_MV_BA command
// is accepted and does nothing. The command names and their roles follow
// the paper; the field layout and this fused streaming are this design's.
//
// Interface: cmd is taken when cmd_valid && cmd_ready. cmd_ready is low
// while a command runs. Counters report bank activations (summed over
// banks), cluster assignments and scores produced, for monitoring.
module aqpim_pch
  import aqpim_pkg::*;
#(
  parameter int unsigned NB      = 32,
  parameter int unsigned WIN_TOK = 4096,
  parameter int unsigned N_WIN   = 2,
  parameter int unsigned T_ACT   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  pim_cmd_t    cmd,
  output logic        cmd_ready,
  output logic        rd_valid,
  output word_t       rd_data,
  output logic [31:0] act_total,
  output logic [31:0] n_assign,
  output logic [31:0] n_score
);
  localparam int unsigned ROWS = N_WIN * win_rows(WIN_TOK);
  localparam int unsigned RW   = $clog2(ROWS);

  pq_cfg_t cfg;

  // BankPE control
  logic              pe_start;
  pe_op_t            pe_op;
  logic [NB-1:0]     pe_done, pe_busy;
  logic [NB-1:0]     h_req, h_ack;
  logic              h_we, h_act;
  pim_tgt_e          h_tgt;
  logic [15:0]       h_row, h_col;
  word_t             h_wdata;
  word_t             h_rdata [NB];

  // BufferPE control
  logic              bf_start;
  logic [2:0]        bf_mode;
  logic [15:0]       bf_win, bf_tok0, bf_cnt;
  logic              bf_done, bf_busy;
  logic              w_we;
  logic [15:0]       w_addr, w_data;

  // streams
  logic [NB-1:0]     ba_valid, ba_last, bfs_ready;
  logic [15:0]       ba_tok [NB];
  logic [9:0]        ba_k   [NB];
  val_t              ba_val [NB];
  logic              ba_ready, bfs_valid;
  val_t              bfs_data [NB];

  logic [31:0]       act_cnt [NB];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          b_req, b_act_only, b_we, b_ind, b_ack;
    logic [RW-1:0] b_row;
    logic [COL_W-1:0] b_col, b_col_ind;
    word_t         b_wdata, b_rdata;

    bank_pe #(.WIN_TOK(WIN_TOK), .N_WIN(N_WIN), .ROWS(ROWS)) u_pe (
      .clk, .rst_n, .cfg,
      .op_start(pe_start), .op(pe_op), .op_done(pe_done[b]), .busy(pe_busy[b]),
      .h_req(h_req[b]), .h_we, .h_act, .h_tgt, .h_row, .h_col, .h_wdata,
      .h_ack(h_ack[b]), .h_rdata(h_rdata[b]),
      .b_req, .b_act_only, .b_we, .b_row, .b_col, .b_col_ind, .b_ind, .b_wdata,
      .b_ack, .b_rdata,
      .ba_valid(ba_valid[b]), .ba_tok(ba_tok[b]), .ba_k(ba_k[b]), .ba_last(ba_last[b]),
      .ba_val(ba_val[b]), .ba_ready,
      .bf_valid(bfs_valid), .bf_data(bfs_data[b]), .bf_ready(bfs_ready[b]));

    dram_bank #(.ROWS(ROWS), .T_ACT(T_ACT)) u_bank (
      .clk, .rst_n, .req(b_req), .act_only(b_act_only), .we(b_we), .row(b_row),
      .col_mc(b_col), .col_ind(b_col_ind), .ind(b_ind), .wdata(b_wdata),
      .ack(b_ack), .rdata(b_rdata), .act_count(act_cnt[b]));
  end

  buffer_pe #(.NB(NB), .WIN_TOK(WIN_TOK), .N_WIN(N_WIN)) u_buf (
    .clk, .rst_n, .cfg,
    .start(bf_start), .mode(bf_mode), .win(bf_win), .tok0(bf_tok0), .cnt(bf_cnt),
    .done(bf_done), .busy(bf_busy),
    .w_we, .w_addr, .w_data,
    .ba_valid, .ba_tok, .ba_k, .ba_last, .ba_val, .ba_ready,
    .bf_valid(bfs_valid), .bf_data(bfs_data), .bf_ready(bfs_ready),
    .n_assign, .n_score);

  always_comb begin
    act_total = '0;
    for (int b = 0; b < NB; b++) act_total = act_total + act_cnt[b];
  end

  // ---------------- command decoder ----------------
  typedef enum logic [1:0] {C_IDLE, C_HOST, C_RUN} cst_e;
  cst_e          cst;
  logic [NB-1:0] pend;       // BankPEs still working / host accesses pending
  logic          bpend;      // BufferPE still working
  logic          is_rd;
  logic [$clog2(NB)-1:0] rd_bank;

  assign cmd_ready = (cst == C_IDLE);

  // BufferPE modes (see buffer_pe)
  localparam logic [2:0] M_CA = 3'd1, M_RECIP = 3'd2, M_SUM = 3'd3, M_SFM = 3'd4,
                         M_BF_RCP = 3'd5, M_BF_IDX = 3'd6, M_BF_PROB = 3'd7;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cst <= C_IDLE; cfg <= '0; pend <= '0; bpend <= 1'b0; is_rd <= 1'b0; rd_bank <= '0;
      pe_start <= 1'b0; pe_op <= '0; h_req <= '0; h_we <= 1'b0; h_act <= 1'b0;
      h_tgt <= TGT_BANK; h_row <= '0; h_col <= '0; h_wdata <= '0;
      bf_start <= 1'b0; bf_mode <= '0; bf_win <= '0; bf_tok0 <= '0; bf_cnt <= '0;
      w_we <= 1'b0; w_addr <= '0; w_data <= '0;
      rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      pe_start <= 1'b0; bf_start <= 1'b0; h_req <= '0; w_we <= 1'b0; rd_valid <= 1'b0;
      unique case (cst)
        C_IDLE: if (cmd_valid) begin
          pe_op.fn <= cmd.fn; pe_op.kv <= cmd.kv; pe_op.win <= cmd.row;
          pe_op.tok0 <= cmd.a; pe_op.cnt <= cmd.b; pe_op.keep <= (cmd.c != 16'd0);
          bf_win <= cmd.row; bf_tok0 <= cmd.a; bf_cnt <= cmd.b;
          unique case (cmd.op)
            PIM_SET_CONFIG: begin
              cfg.n_tok <= cmd.a; cfg.n_cent <= cmd.b[9:0]; cfg.d_sub <= cmd.c[2:0];
            end
            PIM_WR, PIM_RD, PIM_ACT_AB: begin
              is_rd <= (cmd.op == PIM_RD); rd_bank <= cmd.bank[$clog2(NB)-1:0];
              if (cmd.op == PIM_WR && cmd.tgt == TGT_BUF) begin
                w_we <= 1'b1; w_addr <= cmd.a; w_data <= cmd.data;
              end else begin
                h_we <= (cmd.op == PIM_WR); h_act <= (cmd.op == PIM_ACT_AB);
                h_tgt <= (cmd.op == PIM_ACT_AB) ? TGT_BANK : cmd.tgt;
                h_row <= cmd.row; h_col <= cmd.a; h_wdata <= cmd.data;
                if (cmd.op == PIM_ACT_AB || (cmd.op == PIM_WR && cmd.bcast)) begin
                  h_req <= '1; pend <= '1;
                end else begin
                  h_req <= NB'(1) << cmd.bank[$clog2(NB)-1:0];
                  pend  <= NB'(1) << cmd.bank[$clog2(NB)-1:0];
                end
                cst <= C_HOST;
              end
            end
            PIM_MAC_AB: begin
              pe_start <= 1'b1; pend <= '1;
              if (cmd.fn == FN_DC) begin
                bf_start <= 1'b1; bf_mode <= M_CA; bpend <= 1'b1;
              end else if (cmd.fn == FN_CC) begin
                bf_start <= 1'b1; bf_mode <= M_BF_RCP; bpend <= 1'b1;
              end
              cst <= C_RUN;
            end
            PIM_RET: begin
              pe_start <= 1'b1; pend <= '1; pe_op.fn <= FN_KEY; pe_op.kv <= 1'b0;
              bf_start <= 1'b1; bf_mode <= M_SUM; bpend <= 1'b1;
              cst <= C_RUN;
            end
            PIM_SFM: begin
              bf_start <= 1'b1; bpend <= 1'b1;
              bf_mode <= (cmd.fn == pim_fn_e'(SFM_RECIP)) ? M_RECIP : M_SFM;
              cst <= C_RUN;
            end
            PIM_MV_BF: begin
              pe_start <= 1'b1; pend <= '1; bf_start <= 1'b1; bpend <= 1'b1;
              if (cmd.fn == FN_IDX) bf_mode <= M_BF_IDX;
              else begin
                bf_mode <= M_BF_PROB; pe_op.fn <= FN_PROB; pe_op.tok0 <= '0;
              end
              cst <= C_RUN;
            end
            default: ;   // PIM_NOP, PIM_MV_BA
          endcase
        end
        C_HOST: begin
          pend <= pend & ~h_ack;
          if (is_rd && h_ack[rd_bank]) begin
            rd_valid <= 1'b1; rd_data <= h_rdata[rd_bank];
          end
          if ((pend & ~h_ack) == '0) cst <= C_IDLE;
        end
        C_RUN: begin
          pend  <= pend & ~pe_done;
          if (bf_done) bpend <= 1'b0;
          if ((pend & ~pe_done) == '0 && (!bpend || bf_done)) cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // commands are only taken while idle
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && cmd_ready |-> !(|pe_busy) && !bf_busy);

endmodule
