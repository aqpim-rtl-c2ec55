// tb_dram_bank: self-checking test of one DRAM bank with intra-row
// indirection.
//
// It writes a row through the memory-controller column path, reads it back,
// then reads it through the indirection path (column taken from col_ind
// while col_mc holds a wrong value), opens another row and comes back, and
// uses act_only. It checks every read value against a shadow array kept by
// the testbench, the activation counter, and the latency: one cycle from
// request to acknowledge on a row hit, T_ACT + 2 on a miss.
module tb_dram_bank;
  import aqpim_pkg::*;

  localparam int ROWS = 8, TA = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req = 0, act_only = 0, we = 0, ind = 0, ack;
  logic [$clog2(ROWS)-1:0] row = '0;
  logic [COL_W-1:0] col_mc = '0, col_ind = '0;
  word_t wdata = '0, rdata;
  logic [31:0] act_count;

  dram_bank #(.ROWS(ROWS), .T_ACT(TA)) dut (.*);

  int checks = 0, failures = 0;
  int shadow [ROWS][COLS];
  bit written [ROWS][COLS];

  // one access; returns read data and cycles until ack
  task automatic access(input bit a_only, input bit w, input int r, input int c,
                        input bit use_ind, input int data, output int rv, output int lat);
    @(negedge clk);
    req = 1; act_only = a_only; we = w; row = r[$clog2(ROWS)-1:0]; wdata = 16'(data);
    ind = use_ind;
    if (use_ind) begin col_ind = c[COL_W-1:0]; col_mc = COL_W'(c + 17); end
    else begin col_mc = c[COL_W-1:0]; col_ind = COL_W'(c + 5); end
    @(negedge clk);
    req = 0;
    lat = 1;
    while (!ack) begin @(negedge clk); lat++; end
    rv = int'(rdata);
    if (w && !a_only) begin shadow[r][c] = data & 16'hffff; written[r][c] = 1; end
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int rv, lat, col;

  initial begin
    void'($urandom(3));
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill row 2 with random words, first access misses
    for (int c = 0; c < 64; c++) begin
      access(0, 1, 2, c * 8, 0, int'($urandom_range(0, 65535)), rv, lat);
      if (c == 0) expect_eq("miss latency", lat, TA + 2);
      else if (c == 1) expect_eq("hit latency", lat, 1);
    end
    expect_eq("activations after first row", act_count, 1);
    // direct reads
    for (int c = 0; c < 64; c++) begin
      access(0, 0, 2, c * 8, 0, 0, rv, lat);
      expect_eq("direct read", rv & 16'hffff, shadow[2][c * 8]);
    end
    // indirect reads: lookups within the open row, no further activation
    for (int t = 0; t < 100; t++) begin
      col = int'($urandom_range(0, 63)) * 8;
      access(0, 0, 2, col, 1, 0, rv, lat);
      expect_eq("indirect read", rv & 16'hffff, shadow[2][col]);
      expect_eq("indirect latency", lat, 1);
    end
    expect_eq("activations after lookups", act_count, 1);
    // another row, then back
    access(0, 1, 5, 3, 0, 16'h1234, rv, lat);
    expect_eq("second row miss latency", lat, TA + 2);
    access(0, 0, 2, 8, 0, 0, rv, lat);
    expect_eq("row kept in array", rv & 16'hffff, shadow[2][8]);
    access(0, 0, 5, 3, 0, 0, rv, lat);
    expect_eq("second row read", rv & 16'hffff, 16'h1234);
    expect_eq("activations after row switches", act_count, 4);
    // act_only opens a row without column access
    access(1, 0, 6, 0, 0, 0, rv, lat);
    expect_eq("act_only latency", lat, TA + 2);
    access(0, 1, 6, 511, 0, 16'hbeef, rv, lat);
    expect_eq("write after ACT is a hit", lat, 1);
    access(0, 0, 6, 511, 1, 0, rv, lat);
    expect_eq("last column indirect", rv & 16'hffff, 16'hbeef);
    expect_eq("activations total", act_count, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
