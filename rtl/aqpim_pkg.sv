// aqpim_pkg: types, constants and the per-bank address map shared by the
// AQPIM pseudo-channel (aqpim_pch), its BankPEs, DRAM banks and the BufferPE.
//
// Number formats (this design's choice; the paper's PEs are FP16 MAC units):
//   word_t   16-bit two's complement Q8.8   keys, values, codebooks, query,
//                                           inner products, attention output
//   weight   16-bit unsigned Q8.8            importance weight w_n (Eq. 1)
//   prob     16-bit unsigned Q1.15           softmax probability (1.0 = 0x8000)
//   val_t    40-bit                          distances and cross-bank sums
//
// Per-bank row map. One bank holds one subvector of one head (Fig. 9). A
// window w (page-aware windowed clustering, Fig. 6) owns WIN_ROWS rows
// starting at w*WIN_ROWS. A row holds COLS = 512 16-bit words (1 KB). Data
// that is indexed by token n (tokens, indices, weights, probabilities) is
// stored dimension-major: dimension j of token n sits in row
// base + j*TOK_ROWS + n/COLS, column n%COLS. A codebook dimension j is one
// row: centroid k at column k. The inner-product table is one row, so that
// every lookup during attention hits a single open row.
package aqpim_pkg;

  localparam int unsigned COLS     = 512;   // 1 KB row of 16-bit words
  localparam int unsigned COL_W    = 9;
  localparam int unsigned WORD_W   = 16;
  localparam int unsigned VAL_W    = 40;
  localparam int unsigned FRAC     = 8;     // Q8.8
  localparam int unsigned GRF_WORDS = 8;    // entries of GRF_ODD and of GRF_EVEN
  localparam int unsigned DMAX     = 4;     // d/m = 128/32
  localparam int unsigned KMAX     = 512;   // centroids per codebook (one row)

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic [VAL_W-1:0]         val_t;

  // PIM command set (Sec. III-E). Encoding is this design's choice.
  typedef enum logic [3:0] {
    PIM_NOP        = 4'd0,
    PIM_SET_CONFIG = 4'd1,
    PIM_ACT_AB     = 4'd2,
    PIM_WR         = 4'd3,
    PIM_RD         = 4'd4,
    PIM_MAC_AB     = 4'd5,
    PIM_SFM        = 4'd6,
    PIM_RET        = 4'd7,
    PIM_MV_BA      = 4'd8,
    PIM_MV_BF      = 4'd9
  } pim_op_e;

  // Function field of PIM_MAC_AB / PIM_SFM / PIM_RET / PIM_MV_BF
  typedef enum logic [2:0] {
    FN_DC    = 3'd0,  // MAC_AB: distances to all centroids, streamed to CA
    FN_CC    = 3'd1,  // MAC_AB: weighted centroid update
    FN_ATNK  = 3'd2,  // MAC_AB: inner-product table q . codebook -> IP row
    FN_ATNV  = 3'd3,  // MAC_AB: sum_n p_n * Vcb[vidx_n] by intra-row lookups
    FN_COPY  = 3'd4,  // MAC_AB: copy codebook of window w-1 into window w
    FN_KEY   = 3'd5,  // RET: lookup IP[kidx_n], stream to BufferPE sum
    FN_IDX   = 3'd6,  // MV_BF: cluster assignments -> index rows
    FN_PROB  = 3'd7   // MV_BF: probabilities -> P rows
  } pim_fn_e;
  // PIM_SFM functions reuse the field: 0 = softmax, 1 = CC reciprocals
  localparam logic [2:0] SFM_SOFTMAX = 3'd0;
  localparam logic [2:0] SFM_RECIP   = 3'd1;

  // PIM_WR / PIM_RD targets
  typedef enum logic [1:0] {
    TGT_BANK = 2'd0,   // bank array, row/col
    TGT_GRF  = 2'd1,   // GRF_ODD entry col (query in, output out)
    TGT_BUF  = 2'd2    // BufferPE weight buffer entry col
  } pim_tgt_e;

  // One command as issued by the host memory controller.
  typedef struct packed {
    pim_op_e        op;
    pim_fn_e        fn;
    pim_tgt_e       tgt;
    logic           kv;       // 0 = key set, 1 = value set
    logic           bcast;    // WR to all banks
    logic [7:0]     bank;
    logic [15:0]    row;      // WR/RD/ACT row, or window number
    logic [15:0]    a;        // col for WR/RD; first token; N for SET_CONFIG
    logic [15:0]    b;        // token count; K for SET_CONFIG; ATNV keep flag
    logic [15:0]    c;        // D for SET_CONFIG
    logic [15:0]    data;
  } pim_cmd_t;

  // Configuration broadcast by PIM_SET_CONFIG
  typedef struct packed {
    logic [15:0] n_tok;   // tokens in the window being clustered
    logic [9:0]  n_cent;  // centroids K (multiple of GRF_WORDS, <= 512)
    logic [2:0]  d_sub;   // subvector length d/m (<= DMAX)
  } pq_cfg_t;

  // Work order from the decoder to every BankPE
  typedef struct packed {
    pim_fn_e     fn;
    logic        kv;
    logic [15:0] win;
    logic [15:0] tok0;
    logic [15:0] cnt;
    logic        keep;    // ATNV: accumulate onto the previous window's sum
  } pe_op_t;

  // ---------------- address map ----------------
  function automatic int unsigned tok_rows(int unsigned win_tok);
    return (win_tok + COLS - 1) / COLS;
  endfunction
  function automatic int unsigned kv_rows(int unsigned win_tok);
    return DMAX * tok_rows(win_tok) + DMAX + tok_rows(win_tok);
  endfunction
  function automatic int unsigned win_rows(int unsigned win_tok);
    return 2 * kv_rows(win_tok) + 2 * tok_rows(win_tok) + 1;
  endfunction
  // token data dimension j of token n
  function automatic int unsigned row_x(int unsigned win_tok, int unsigned win,
                                        int unsigned kv, int unsigned j, int unsigned n);
    return win * win_rows(win_tok) + kv * kv_rows(win_tok) + j * tok_rows(win_tok) + n / COLS;
  endfunction
  // codebook dimension j (centroid k at column k)
  function automatic int unsigned row_cb(int unsigned win_tok, int unsigned win,
                                         int unsigned kv, int unsigned j);
    return win * win_rows(win_tok) + kv * kv_rows(win_tok) + DMAX * tok_rows(win_tok) + j;
  endfunction
  // centroid index of token n
  function automatic int unsigned row_idx(int unsigned win_tok, int unsigned win,
                                          int unsigned kv, int unsigned n);
    return win * win_rows(win_tok) + kv * kv_rows(win_tok) + DMAX * tok_rows(win_tok) + DMAX
           + n / COLS;
  endfunction
  // importance weight of token n
  function automatic int unsigned row_w(int unsigned win_tok, int unsigned win, int unsigned n);
    return win * win_rows(win_tok) + 2 * kv_rows(win_tok) + n / COLS;
  endfunction
  // softmax probability of token n
  function automatic int unsigned row_p(int unsigned win_tok, int unsigned win, int unsigned n);
    return win * win_rows(win_tok) + 2 * kv_rows(win_tok) + tok_rows(win_tok) + n / COLS;
  endfunction
  // inner-product table (one row)
  function automatic int unsigned row_ip(int unsigned win_tok, int unsigned win);
    return win * win_rows(win_tok) + 2 * kv_rows(win_tok) + 2 * tok_rows(win_tok);
  endfunction

  // Saturate a wide signed value to a Q8.8 word
  function automatic word_t sat16(input logic signed [95:0] v);
    if (v > 96'sd32767)       return 16'sh7fff;
    else if (v < -96'sd32768) return 16'sh8000;
    else                      return word_t'(v[15:0]);
  endfunction

endpackage
