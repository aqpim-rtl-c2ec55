// dram_bank: one DRAM bank with its row buffer, column decoder and the
// intra-row indirection MUX of AQPIM.
//
// The cell array is ROWS rows of COLS 16-bit words (1 KB per row, as in the
// HBM row buffer the design relies on). An access names a row and a column.
// If the row is not the open one, the bank first activates it: after T_ACT
// cycles the row becomes the open row and the activation is counted in
// act_count. The column decoder then reads or writes one word of the open
// row. Writes go to the row buffer and the array at once (write-through),
// so the row buffer always equals the array's copy of the open row; it is
// therefore modelled by the open-row address alone, and a column access
// reads the array word {open row, column}. This keeps the model one memory
// of ROWS*COLS words with one read and one write port instead of an
// 8192-bit register.
//
// Intra-row indirection: the column address reaching the decoder comes
// through a 2:1 MUX. With ind = 0 it is col_mc, the column sent by the
// memory controller; with ind = 1 it is col_ind, a lookup index taken from
// the BankPE's GRF. Because a window's lookup table fits in one row, a run
// of indirect reads costs a single activation. The MUX, row buffer and
// column decoder follow the paper's figure of the mechanism; the write-
// through policy, the T_ACT latency and one word per access are this
// design's choices (a real HBM column access moves 32 bytes).
//
// Interface: a request is a one-cycle pulse on req (with act_only, we, row,
// col_mc, col_ind, ind, wdata). ack pulses when it is done; for a read,
// rdata is valid in that cycle. A request that hits the open row is acked
// in the next cycle; a miss takes T_ACT + 1 more cycles (T_ACT to activate,
// one for the column access). req must not be pulsed
// again before ack. act_only opens the row and does no column access.
module dram_bank
  import aqpim_pkg::*;
#(
  parameter int unsigned ROWS  = 210,
  parameter int unsigned T_ACT = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req,
  input  logic                    act_only,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic [COL_W-1:0]        col_mc,
  input  logic [COL_W-1:0]        col_ind,
  input  logic                    ind,
  input  word_t                   wdata,
  output logic                    ack,
  output word_t                   rdata,
  output logic [31:0]             act_count
);
  localparam int unsigned RW = $clog2(ROWS);

  logic [WORD_W-1:0]      mem [ROWS*COLS];
  logic                   open_q;
  logic [RW-1:0]          open_row;

  typedef enum logic [1:0] {S_IDLE, S_ACT, S_ACC} st_e;
  st_e st;
  logic [7:0] cnt;

  // latched request
  logic          l_act_only, l_we;
  logic [RW-1:0] l_row;
  logic [COL_W-1:0] l_col;
  word_t         l_wdata;

  // indirection MUX in front of the column decoder
  logic [COL_W-1:0] col_sel;
  assign col_sel = ind ? col_ind : col_mc;

  wire hit = open_q && (open_row == row);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      ack       <= 1'b0;
      open_q    <= 1'b0;
      open_row  <= '0;
      act_count <= '0;
      cnt       <= '0;
      rdata     <= '0;
      l_act_only <= 1'b0; l_we <= 1'b0; l_row <= '0; l_col <= '0; l_wdata <= '0;
    end else begin
      ack <= 1'b0;
      unique case (st)
        S_IDLE: if (req) begin
          l_act_only <= act_only; l_we <= we; l_row <= row; l_col <= col_sel; l_wdata <= wdata;
          if (hit) begin
            if (!act_only) begin
              if (we) mem[{row, col_sel}] <= wdata;
              else    rdata <= word_t'(mem[{row, col_sel}]);
            end
            ack <= 1'b1;
          end else begin
            st  <= S_ACT;
            cnt <= 8'(T_ACT);
          end
        end
        S_ACT: begin
          if (cnt <= 8'd1) begin
            open_q    <= 1'b1;
            open_row  <= l_row;
            act_count <= act_count + 32'd1;
            st        <= S_ACC;
          end else begin
            cnt <= cnt - 8'd1;
          end
        end
        S_ACC: begin
          if (!l_act_only) begin
            if (l_we) mem[{l_row, l_col}] <= l_wdata;
            else      rdata <= word_t'(mem[{l_row, l_col}]);
          end
          ack <= 1'b1;
          st  <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // a new request while one is in flight is a protocol error
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 req |-> (st == S_IDLE));
  a_row_range:  assert property (@(posedge clk) disable iff (!rst_n)
                                 req |-> (32'(row) < ROWS));

endmodule
