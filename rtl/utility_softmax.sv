// utility_softmax: the softmax-normalised utility score of Eq. 2,
//     U_i = exp(y_i) / sum_j exp(y_j),
// taken over the valid lines of one cache set (the lines that compete for eviction).
//
// exp(y) for y = y_hat/256 in [0, 1) is evaluated as the 4th-order Taylor polynomial
// 1 + y + y^2/2 + y^3/6 + y^4/24 in Q16 (error below 0.01). The sum S is inverted once,
// R = 2^32 / S, and U_i = exp(y_i) * R / 2^16, so U is Q1.16 and the valid U_i add up to
// about 1.0. Invalid lines get U = 0 and do not enter the sum. The normalisation set and the
// arithmetic are this design's choices; the source gives only the formula.
//
// Combinational.
module utility_softmax
  import acpc_pkg::*;
#(
  parameter int WAYS = 8
) (
  input  logic [WAYS-1:0]              valid,
  input  logic [WAYS-1:0][PROB_W-1:0]  y_hat,
  output logic [WAYS-1:0][Q_W-1:0]     u
);

  // exp(y8/256) * 65536
  function automatic logic [17:0] exp_q16(input logic [PROB_W-1:0] y8);
    logic [35:0] y, y2, y3, y4;
    y  = 36'(y8) << 8;
    y2 = (y * y)  >> 16;
    y3 = (y2 * y) >> 16;
    y4 = (y3 * y) >> 16;
    return 18'(36'd65536 + y + (y2 >> 1) + y3 / 36'd6 + y4 / 36'd24);
  endfunction

  logic [WAYS-1:0][17:0] e;
  logic [23:0]           s;
  logic [32:0]           r;

  always_comb begin
    s = '0;
    for (int i = 0; i < WAYS; i++) begin
      e[i] = exp_q16(y_hat[i]);
      if (valid[i]) s += 24'(e[i]);
    end
    r = (s == '0) ? '0 : (33'h1_0000_0000 / 33'(s));
    for (int i = 0; i < WAYS; i++) begin
      logic [50:0] p;
      p    = 51'(e[i]) * 51'(r);
      u[i] = valid[i] ? Q_W'(p >> 16) : '0;
    end
  end

endmodule
