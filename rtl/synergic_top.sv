// synergic_top: end-to-end inference of the hybrid NN + HD classifier.
//
// The NN processing module runs the feature-extraction layers described by 'layers'; the
// activations of the last layer (D_MAX features) are collected, tile by tile, in the HD input
// register, and when the NN finishes the whole vector enters the HD processing module, which
// five cycles later reports the predicted class (cls, with done high for one cycle) and the
// Hamming distance of the winning centroid. The last layer's d_out must equal D_MAX.
//
// External memory is not part of the design: its traffic appears as the wb_* (weights),
// ib_* (network input), bn_* (batch-norm parameters) write ports and the ob_* read port of
// the final-layer activations. 'start' begins one inference; busy stays high until done.
// compute_cycles counts the array's stream + tree cycles (the quantity of the paper's
// per-layer cycle estimate) and reroute_count the tiles rerouted to the input buffer.
module synergic_top
  import synergic_pkg::*;
#(
  parameter int W_SYS      = 32,
  parameter int H_SYS      = 32,
  parameter int DATA_W     = 8,
  parameter int ACC_W      = 32,
  parameter int GAMMA_W    = 16,
  parameter int D_MAX      = 617,
  parameter int NUM_LAYERS = 2,
  parameter int D_H        = 16,
  parameter int Q          = 4,
  parameter int C          = 26,
  parameter int RF_DEPTH   = (D_MAX + W_SYS - 1) / W_SYS,
  parameter int IB_DEPTH   = ((D_MAX + W_SYS - 1) / W_SYS * W_SYS > (D_MAX + H_SYS - 1) / H_SYS * H_SYS)
                             ? (D_MAX + W_SYS - 1) / W_SYS * W_SYS : (D_MAX + H_SYS - 1) / H_SYS * H_SYS,
  parameter int WB_DEPTH   = NUM_LAYERS * ((D_MAX + H_SYS - 1) / H_SYS) * RF_DEPTH * W_SYS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start,
  input  layer_desc_t                            layers [NUM_LAYERS],
  output logic                                   busy,
  output logic                                   done,
  output logic [$clog2(C)-1:0]                   cls,
  output logic [$clog2(D_H+1)-1:0]               min_dist,
  input  logic                                   wb_we,
  input  logic [$clog2(WB_DEPTH)-1:0]            wb_waddr,
  input  logic [H_SYS*DATA_W-1:0]                wb_wdata,
  input  logic                                   ib_we,
  input  logic [$clog2(IB_DEPTH)-1:0]            ib_waddr,
  input  logic signed [DATA_W-1:0]               ib_wdata,
  input  logic                                   bn_we,
  input  logic [$clog2(NUM_LAYERS*IB_DEPTH)-1:0] bn_waddr,
  input  logic signed [GAMMA_W-1:0]              bn_gamma,
  input  logic signed [ACC_W-1:0]                bn_beta,
  input  logic [$clog2(IB_DEPTH)-1:0]            ob_raddr,
  output logic signed [DATA_W-1:0]               ob_rdata,
  output logic [D_H-1:0]                         enc,
  output logic [31:0]                            compute_cycles,
  output logic [31:0]                            reroute_count
);

  logic nn_busy, nn_done, feat_we, hd_busy;
  logic [$clog2(IB_DEPTH)-1:0] feat_base;
  logic [$clog2(H_SYS+1)-1:0]  feat_n;
  logic signed [DATA_W-1:0]    feat_data [H_SYS];
  logic signed [DATA_W-1:0]    hd_in [D_MAX];

  nn_processing_module #(
    .W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .ACC_W(ACC_W), .GAMMA_W(GAMMA_W),
    .D_MAX(D_MAX), .NUM_LAYERS(NUM_LAYERS), .RF_DEPTH(RF_DEPTH), .IB_DEPTH(IB_DEPTH),
    .WB_DEPTH(WB_DEPTH)
  ) u_nn (
    .clk, .rst_n, .start(start && !busy), .layers, .busy(nn_busy), .done(nn_done),
    .wb_we, .wb_waddr, .wb_wdata, .ib_we, .ib_waddr, .ib_wdata,
    .bn_we, .bn_waddr, .bn_gamma, .bn_beta, .ob_raddr, .ob_rdata,
    .feat_we, .feat_base, .feat_n, .feat_data, .compute_cycles, .reroute_count
  );

  // HD input register: the last layer's activations, written one tile per cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < D_MAX; n++) hd_in[n] <= '0;
    end else if (feat_we) begin
      for (int r = 0; r < H_SYS; r++) begin
        if (r < int'(feat_n) && int'(feat_base) + r < D_MAX)
          hd_in[int'(feat_base) + r] <= feat_data[r];
      end
    end
  end

  hd_processing_module #(.D_L(D_MAX), .D_H(D_H), .Q(Q), .C(C), .DATA_W(DATA_W)) u_hd (
    .clk, .rst_n, .in_valid(nn_done), .feat(hd_in),
    .out_valid(done), .cls, .min_dist, .enc
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       hd_busy <= 1'b0;
    else if (nn_done) hd_busy <= 1'b1;
    else if (done)    hd_busy <= 1'b0;
  end

  assign busy = nn_busy || hd_busy;

endmodule
