// hd_level_lut: quantises one feature and returns the hypervector of its quantisation level.
//
// The Q level hypervectors are hard-wired constants built as the paper's training algorithm
// prescribes: level 0 is a pseudo-random D_H-bit vector, and each next level flips
// P = floor(D_H/Q) bits of the previous level that have not been flipped yet, so nearby levels
// are similar and level i differs from level 0 in i*P bits. Here the flipped bits are taken in
// index order (level i flips bits 0 .. i*P-1 of level 0) rather than picked at random; with a
// pseudo-random level 0 this gives the same distances and a reproducible table.
//
// Quantisation (this design's choice): negative features map to level 0; otherwise the level
// is the feature's top log2(Q) magnitude bits, feat >> (DATA_W-1-log2 Q). Q must be a power of
// two not above 2^(DATA_W-1). Combinational.
module hd_level_lut
  import synergic_pkg::*;
#(
  parameter int          D_H    = 16,
  parameter int          Q      = 4,
  parameter int          DATA_W = 8,
  parameter int unsigned SEED   = 32'd2
) (
  input  logic signed [DATA_W-1:0] feat,
  output logic [D_H-1:0]           level_hv
);

  localparam int QW = (Q > 1) ? $clog2(Q) : 1;
  localparam int P  = D_H / Q;

  logic [D_H-1:0] levels [Q];
  logic [QW-1:0]  lvl;

  for (genvar i = 0; i < Q; i++) begin : g_level
    for (genvar b = 0; b < D_H; b++) begin : g_bit
      assign levels[i][b] = hv_bit(SEED, 0, b) ^ (b < i * P);
    end
  end

  assign lvl      = feat[DATA_W-1] ? '0 : QW'(feat >>> (DATA_W - 1 - $clog2(Q)));
  assign level_hv = levels[lvl];

endmodule
