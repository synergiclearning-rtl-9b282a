// hd_hamming: Hamming distance calculator of the similarity checker.
//
// For each of the C classes an unbinding unit XORs the encoded hypervector with the class's
// hard-wired centroid t_k, and a tree adder counts the ones of the result:
//   hdist[k] = popcount(enc ^ t_k),   0 <= hdist[k] <= D_H.
// The distances are registered (one cycle after enc). The centroids are constants generated by
// synergic_pkg::hv_bit(SEED, k, b); a trained design hard-wires its own class hypervectors.
module hd_hamming
  import synergic_pkg::*;
#(
  parameter int          C      = 26,
  parameter int          D_H    = 16,
  parameter int          DIST_W = $clog2(D_H + 1),
  parameter int unsigned SEED   = 32'd3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [D_H-1:0]    enc,
  output logic [DIST_W-1:0] hdist [C]
);

  logic [D_H-1:0]    cent [C];
  logic [DIST_W-1:0] hdist_d [C];

  for (genvar k = 0; k < C; k++) begin : g_cls
    for (genvar b = 0; b < D_H; b++) begin : g_bit
      assign cent[k][b] = hv_bit(SEED, k, b);
    end
  end

  always_comb begin
    for (int k = 0; k < C; k++) begin
      logic [D_H-1:0] x;
      x = enc ^ cent[k];
      hdist_d[k] = '0;
      for (int b = 0; b < D_H; b++) hdist_d[k] = hdist_d[k] + DIST_W'(x[b]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 0; k < C; k++) hdist[k] <= '0;
    else        for (int k = 0; k < C; k++) hdist[k] <= hdist_d[k];
  end

endmodule
