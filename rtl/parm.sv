// parm: the Priority-Aware Replacement Module. Given the metadata of one cache set it
// computes every line's priority (Eq. 3)
//     P_i = alpha * U_i + (1 - alpha) * f_i
// and picks the victim for a miss: the line with the lowest P_i.
//
// U_i is the softmax utility of the stored reuse probabilities (utility_softmax). f_i is the
// line's saturating access counter normalised to [0, 1] by its maximum count, f = cnt/CNT_MAX.
// alpha comes from a configuration register (alpha = alpha_q/65536).
// Cache occupancy enters the choice this way: while the set has an invalid way, the lowest
// invalid way is filled and no line is evicted. Ties between equal priorities go to the lowest
// way number. The way to normalise f, the occupancy rule and the tie rule are this design's
// choices; the formula and the lowest-priority rule follow the source.
//
// Combinational.
module parm
  import acpc_pkg::*;
#(
  parameter int WAYS   = 8,
  parameter int FREQ_W = 4
) (
  input  logic [WAYS-1:0]              valid,
  input  logic [WAYS-1:0][PROB_W-1:0]  y_hat,
  input  logic [WAYS-1:0][FREQ_W-1:0]  freq,
  input  logic [15:0]                  alpha_q,
  output logic [WAYS-1:0][Q_W-1:0]     prio,
  output logic [$clog2(WAYS)-1:0]      victim,
  output logic                         victim_valid   // 1: victim holds a valid line (eviction)
);

  localparam int CNT_MAX = (1 << FREQ_W) - 1;

  logic [WAYS-1:0][Q_W-1:0] u;

  utility_softmax #(.WAYS(WAYS)) u_soft (.valid(valid), .y_hat(y_hat), .u(u));

  always_comb begin
    logic [Q_W-1:0] best;
    logic           found_free;
    for (int i = 0; i < WAYS; i++) begin
      logic [Q_W-1:0] f;
      logic [35:0]    acc;
      f   = Q_W'((32'(freq[i]) << QF) / 32'(CNT_MAX));
      acc = 36'(alpha_q) * 36'(u[i]) + (36'd65536 - 36'(alpha_q)) * 36'(f);
      prio[i] = Q_W'(acc >> QF);
    end
    victim       = '0;
    victim_valid = 1'b1;
    found_free   = 1'b0;
    best         = '1;
    for (int i = 0; i < WAYS; i++) begin
      if (!found_free) begin
        if (!valid[i]) begin
          found_free   = 1'b1;
          victim       = ($clog2(WAYS))'(i);
          victim_valid = 1'b0;
        end else if (i == 0 || prio[i] < best) begin
          best   = prio[i];
          victim = ($clog2(WAYS))'(i);
        end
      end
    end
  end

endmodule
