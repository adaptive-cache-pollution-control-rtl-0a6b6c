// sigmoid_pwl: the sigmoid of Eq. 1, turning the last layer's output into a reuse probability.
//
// Piecewise-linear approximation (PLAN segments), all slopes powers of two, for a = |z|:
//     a >= 5        : 1
//     2.375 <= a < 5: a/32 + 0.84375
//     1 <= a < 2.375: a/8  + 0.625
//     0 <= a < 1    : a/4  + 0.5
// and sigma(z) = 1 - sigma(|z|) for z < 0. The source only names the sigmoid; the
// approximation is this design's choice (maximum error about 0.02).
//
// Interface: z is a Q7.8 signed activation, y is y_hat*256 clamped to 0..255. Combinational.
module sigmoid_pwl
  import acpc_pkg::*;
(
  input  logic [ACT_W-1:0]  z,
  output logic [PROB_W-1:0] y
);

  logic [ACT_W:0] a;      // |z|, one bit wider for -32768
  logic [ACT_W:0] s;      // sigma(|z|) * 256, 128..256

  always_comb begin
    a = z[ACT_W-1] ? (ACT_W+1)'(-$signed({z[ACT_W-1], z})) : {1'b0, z};
    if (a >= 17'd1280)      s = 17'd256;
    else if (a >= 17'd608)  s = (a >> 5) + 17'd216;
    else if (a >= 17'd256)  s = (a >> 3) + 17'd160;
    else                    s = (a >> 2) + 17'd128;
    if (z[ACT_W-1]) s = 17'd256 - s;
    y = (s > 17'd255) ? 8'd255 : s[PROB_W-1:0];
  end

endmodule
