// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// Used by the BufferPE for the DIV operations of AQPIM: the reciprocal of a
// cluster's weight sum (centroid calculation) and of the softmax
// denominator. start pulses with num and den; done pulses W+1 cycles later
// with quo = floor(num / den). den = 0 gives quo = all ones. The sequential
// shift-subtract structure is this design's choice; the paper only places a
// DIV unit in the BufferPE.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);
  logic [W-1:0]   d_q, n_q;
  logic [W:0]     rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]     trial;

  assign trial = {rem[W-1:0], n_q[W-1]} - {1'b0, d_q};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quo <= '0;
      d_q <= '0; n_q <= '0; rem <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; d_q <= den; n_q <= num; rem <= '0; quo <= '0;
        cnt <= ($clog2(W+1))'(W);
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], n_q[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        n_q <= {n_q[W-2:0], 1'b0};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
