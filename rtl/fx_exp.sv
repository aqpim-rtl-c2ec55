// fx_exp: fixed-point exponential for the softmax unit of the BufferPE.
//
// Input y is a signed Q8.8 value (40 bits) that must be <= 0, the score
// minus the running maximum. The output is e^y as an unsigned Q1.15 word
// (1.0 = 0x8000). It computes t = y * log2(e), splits t into an integer
// part I <= 0 and a fraction f in [0,1), approximates 2^f by
// 1 + a f + (1-a) f^2 with a = 0.6557 (error below 0.4 %), and shifts right
// by -I. Purely combinational. The paper gives the unit (EXP in the
// BufferPE) but not its number format or method; both are this design's.
module fx_exp
  import aqpim_pkg::*;
(
  input  val_t        y,
  output logic [15:0] e
);
  localparam logic [14:0] LOG2E_Q14 = 15'd23637;
  localparam logic [15:0] C1 = 16'd21486;   // a     in Q0.15
  localparam logic [15:0] C2 = 16'd11282;   // 1 - a in Q0.15

  logic signed [63:0] t;        // Q.22
  logic signed [63:0] ip;
  logic [14:0]        fr;       // Q0.15
  logic [31:0]        p1, p2;
  logic [16:0]        m;        // Q1.15 in [1,2)
  logic [63:0]        sh;

  always_comb begin
    t  = 64'($signed(y)) * $signed({49'd0, LOG2E_Q14});
    ip = t >>> 22;
    fr = t[21:7];
    p1 = (32'(fr) * 32'(C2)) >> 15;
    p2 = ((32'(C1) + p1) * 32'(fr)) >> 15;
    m  = 17'd32768 + 17'(p2);
    sh = 64'(-ip);
    if (ip > 0)          e = 16'hffff;           // not used: y <= 0
    else if (sh >= 64'd17) e = 16'd0;
    else                 e = 16'(m >> sh[4:0]);
  end
endmodule
