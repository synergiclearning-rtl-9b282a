// hd_processing_module: fully parallel, pipelined HD classifier (inference).
//
// Encoder: every one of the D_L features is quantised and mapped to its level hypervector
// (hd_level_lut, one per feature), bound to the feature's hard-wired seed (hd_binding_units),
// and all D_L bound vectors are bundled into one D_H-bit encoded hypervector by majority
// counters and comparators (hd_bundling).
// Similarity checker: Hamming distances to the C hard-wired class centroids (hd_hamming) and
// a tree of comparators picking the nearest class (hd_tree_comparator).
//
// Pipeline, one vector accepted per cycle (in_valid) and one class per cycle out:
//   stage 1 bound vectors, 2 majority counts, 3 encoded hypervector, 4 distances, 5 class.
// out_valid/cls/min_dist appear LATENCY = 5 cycles after in_valid/feat; enc is the encoded
// hypervector of the vector two cycles older than the one on cls. The component chain and the
// one-result-per-cycle pipelining are from the paper; where the registers sit is this design's.
// The bundling counts ('cnt') are not used past the comparators: only the encoded vector goes
// on, so lint reports 'cnt' as an unused signal. It stays as a named tap for debugging.
module hd_processing_module #(
  parameter int          D_L       = 617,
  parameter int          D_H       = 16,
  parameter int          Q         = 4,
  parameter int          C         = 26,
  parameter int          DATA_W    = 8,
  parameter int unsigned SEED_FEAT = 32'd1,
  parameter int unsigned SEED_LVL  = 32'd2,
  parameter int unsigned SEED_CENT = 32'd3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [DATA_W-1:0]      feat [D_L],
  output logic                          out_valid,
  output logic [$clog2(C)-1:0]          cls,
  output logic [$clog2(D_H+1)-1:0]      min_dist,
  output logic [D_H-1:0]                enc
);

  localparam int LATENCY = 5;
  localparam int DIST_W  = $clog2(D_H + 1);
  localparam int CNT_W   = $clog2(D_L + 1) + 1;

  logic [D_H-1:0] level_hv [D_L];
  logic [D_H-1:0] bound_d  [D_L];
  logic [D_H-1:0] bound_q  [D_L];
  logic signed [CNT_W-1:0] cnt [D_H];
  logic [DIST_W-1:0] hdist [C];
  logic [LATENCY-1:0] vpipe;

  for (genvar i = 0; i < D_L; i++) begin : g_lut
    hd_level_lut #(.D_H(D_H), .Q(Q), .DATA_W(DATA_W), .SEED(SEED_LVL)) u_lut (
      .feat(feat[i]), .level_hv(level_hv[i])
    );
  end

  hd_binding_units #(.D_L(D_L), .D_H(D_H), .SEED(SEED_FEAT)) u_bind (
    .level_hv(level_hv), .bound(bound_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D_L; i++) bound_q[i] <= '0;
      vpipe <= '0;
    end else begin
      for (int i = 0; i < D_L; i++) bound_q[i] <= bound_d[i];
      vpipe <= {vpipe[LATENCY-2:0], in_valid};
    end
  end

  hd_bundling #(.D_L(D_L), .D_H(D_H), .CNT_W(CNT_W)) u_bundle (
    .clk, .rst_n, .bound(bound_q), .cnt, .enc
  );

  hd_hamming #(.C(C), .D_H(D_H), .DIST_W(DIST_W), .SEED(SEED_CENT)) u_ham (
    .clk, .rst_n, .enc, .hdist
  );

  hd_tree_comparator #(.C(C), .DIST_W(DIST_W)) u_cmp (
    .clk, .rst_n, .hdist, .cls, .min_dist
  );

  assign out_valid = vpipe[LATENCY-1];

endmodule
