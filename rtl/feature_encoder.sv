// feature_encoder: builds the predictor's input vector x_t for one cache access.
//
// The source says each x_t encodes the access address, the instruction type and temporal
// locality. This design uses four features, each a Q7.8 value in [0, 1]:
//   x[0] address  : the line tag XOR-folded to 8 bits, divided by 256
//   x[1] type     : instruction type code (itype_e) / 4
//   x[2] prefetch : 1.0 for a prefetch request, 0 for a demand request
//   x[3] locality : for a hit, 1 - msb(reuse_dist)/16, where reuse_dist is the number of
//                   accesses since the line was last touched (log scale); 0 for a miss
// The folding, the log scale and the choice of four features are this design's own.
//
// Combinational.
module feature_encoder
  import acpc_pkg::*;
#(
  parameter int TAG_W = 32,
  parameter int RD_W  = 16
) (
  input  logic [TAG_W-1:0]           tag,
  input  itype_e                     itype,
  input  logic                       is_prefetch,
  input  logic                       hit,
  input  logic [RD_W-1:0]            reuse_dist,
  output logic [C_IN-1:0][ACT_W-1:0] x
);

  logic [7:0] fold;
  logic [4:0] msb;

  always_comb begin
    fold = '0;
    for (int i = 0; i < TAG_W; i++) fold[i % 8] ^= tag[i];
    msb = '0;
    for (int i = 0; i < RD_W; i++) if (reuse_dist[i]) msb = 5'(i);
    x[0] = ACT_W'(fold);
    x[1] = ACT_W'({itype, 6'b0});
    x[2] = is_prefetch ? ACT_W'(256) : '0;
    x[3] = hit ? ACT_W'(256 - 16 * int'(msb)) : '0;
  end

endmodule
