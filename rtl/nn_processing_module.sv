// nn_processing_module: executes the fully-connected feature-extraction layers.
//
// Structure (as in the paper's NN architecture): weight buffer -> H_SYS x W_SYS systolic array
// <- input buffer; one tree adder per array row; output buffer; one ALU per row; a static
// sequencer (nn_controller). A layer's output tile j (neurons j*H_SYS ..) is computed as
//   pre[n] = sum_i W[n][i] * x[i],   act[n] = ALU(pre[n], gamma[l][n], beta[l][n])
// and the activations are rerouted into the other input-buffer bank as the next layer's input.
// The last layer's activations also leave on feat_* (one tile per cycle, feat_we high) and stay
// readable in the output buffer through ob_raddr/ob_rdata.
//
// External-memory side (all synchronous writes):
//   wb_*  weight-buffer words. For layer l, tile j, chunk k, shift s the word at
//         layers[l].wbase + (j*K + k)*W_SYS + s carries, for row r, W[j*H_SYS+r][k*W_SYS+W_SYS-1-s]
//         (zero where the row or column is outside the layer), K = ceil(d_in/W_SYS).
//   ib_*  network input, element n of input-buffer bank 0.
//   bn_*  gamma/beta of neuron n of layer l at address l*IB_DEPTH + n.
// Timing: see nn_controller; one tile costs K*W_SYS + 2 load cycles, K stream cycles,
// log2 W_SYS tree cycles, 1 write and 1 ALU cycle.
module nn_processing_module
  import synergic_pkg::*;
#(
  parameter int W_SYS      = 32,
  parameter int H_SYS      = 32,
  parameter int DATA_W     = 8,
  parameter int ACC_W      = 32,
  parameter int GAMMA_W    = 16,
  parameter int D_MAX      = 617,
  parameter int NUM_LAYERS = 2,
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
  output logic                                   feat_we,
  output logic [$clog2(IB_DEPTH)-1:0]            feat_base,
  output logic [$clog2(H_SYS+1)-1:0]             feat_n,
  output logic signed [DATA_W-1:0]               feat_data [H_SYS],
  output logic [31:0]                            compute_cycles,
  output logic [31:0]                            reroute_count
);

  localparam int RFW = $clog2(RF_DEPTH);
  localparam int IAW = $clog2(IB_DEPTH);
  localparam int BAW = $clog2(NUM_LAYERS * IB_DEPTH);

  // controller outputs
  logic [$clog2(WB_DEPTH)-1:0] wb_raddr;
  logic w_shift, w_commit, mac_en, clr, ib_rd_bank, pre_we, alu_we, rr_bank, last_layer;
  logic [RFW-1:0] w_idx, rd_idx;
  logic [IAW-1:0] ib_chunk_idx, tile_base;
  logic [$clog2(IB_DEPTH+1)-1:0] ib_limit;
  logic [$clog2(H_SYS+1)-1:0] tile_n;
  logic [$clog2(NUM_LAYERS+1)-1:0] layer;
  alu_cfg_t alu_cfg;

  nn_controller #(
    .W_SYS(W_SYS), .H_SYS(H_SYS), .RF_DEPTH(RF_DEPTH), .NUM_LAYERS(NUM_LAYERS),
    .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .layers, .busy, .done,
    .wb_raddr, .w_shift, .w_commit, .w_idx, .mac_en, .clr, .rd_idx,
    .ib_rd_bank, .ib_chunk_idx, .ib_limit,
    .pre_we, .alu_we, .rr_bank, .tile_base, .tile_n, .layer, .last_layer, .alu_cfg,
    .compute_cycles
  );

  // weight buffer
  logic [H_SYS*DATA_W-1:0] wb_rdata;
  logic signed [DATA_W-1:0] w_row [H_SYS];

  weight_buffer #(.H_SYS(H_SYS), .DATA_W(DATA_W), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .wr_en(wb_we), .wr_addr(wb_waddr), .wr_data(wb_wdata),
    .rd_addr(wb_raddr), .rd_data(wb_rdata)
  );

  for (genvar r = 0; r < H_SYS; r++) begin : g_wrow
    assign w_row[r] = wb_rdata[r*DATA_W +: DATA_W];
  end

  // input buffer
  logic signed [DATA_W-1:0] x_col [W_SYS];
  logic signed [DATA_W-1:0] act   [H_SYS];

  input_buffer #(.W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .DEPTH(IB_DEPTH)) u_ib (
    .clk,
    .ext_we(ib_we), .ext_bank(1'b0), .ext_addr(ib_waddr), .ext_data(ib_wdata),
    .rr_we(alu_we && !last_layer), .rr_bank, .rr_base(tile_base), .rr_n(tile_n), .rr_data(act),
    .rd_bank(ib_rd_bank), .rd_chunk_idx(ib_chunk_idx), .rd_limit(ib_limit), .rd_chunk(x_col)
  );

  // systolic array
  logic signed [ACC_W-1:0] acc [H_SYS][W_SYS];

  systolic_array #(.W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .ACC_W(ACC_W), .RF_DEPTH(RF_DEPTH)) u_sa (
    .clk, .rst_n, .w_shift, .w_row, .w_commit, .w_idx, .mac_en, .clr, .rd_idx, .x_col, .acc
  );

  // tree adders, one per row
  logic signed [ACC_W-1:0] row_sum [H_SYS];

  for (genvar r = 0; r < H_SYS; r++) begin : g_tree
    tree_adder #(.N(W_SYS), .W(ACC_W)) u_tree (.clk, .rst_n, .in(acc[r]), .sum(row_sum[r]));
  end

  // output buffer
  logic signed [ACC_W-1:0] pre [H_SYS];

  output_buffer #(.H_SYS(H_SYS), .ACC_W(ACC_W), .DATA_W(DATA_W), .DEPTH(IB_DEPTH)) u_ob (
    .clk, .rst_n, .pre_we, .pre_in(row_sum), .pre_out(pre),
    .act_we(alu_we), .act_base(tile_base), .act_n(tile_n), .act_in(act),
    .rd_addr(ob_raddr), .rd_data(ob_rdata)
  );

  // batch-norm parameter memory and ALUs
  logic signed [GAMMA_W-1:0] gamma_mem [NUM_LAYERS*IB_DEPTH];
  logic signed [ACC_W-1:0]   beta_mem  [NUM_LAYERS*IB_DEPTH];

  always_ff @(posedge clk) begin
    if (bn_we) begin
      gamma_mem[bn_waddr] <= bn_gamma;
      beta_mem[bn_waddr]  <= bn_beta;
    end
  end

  for (genvar r = 0; r < H_SYS; r++) begin : g_alu
    logic [BAW-1:0] baddr;
    logic in_range;
    assign in_range = (int'(layer) * IB_DEPTH + int'(tile_base) + r) < NUM_LAYERS * IB_DEPTH;
    assign baddr    = in_range ? BAW'(int'(layer) * IB_DEPTH + int'(tile_base) + r) : '0;
    nn_alu #(.DATA_W(DATA_W), .ACC_W(ACC_W), .GAMMA_W(GAMMA_W)) u_alu (
      .pre(pre[r]), .gamma(gamma_mem[baddr]), .beta(beta_mem[baddr]), .cfg(alu_cfg), .act(act[r])
    );
  end

  assign feat_we   = alu_we && last_layer;
  assign feat_base = tile_base;
  assign feat_n    = tile_n;
  assign feat_data = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      reroute_count <= '0;
    else if (start && !busy)         reroute_count <= '0;
    else if (alu_we && !last_layer)  reroute_count <= reroute_count + 1;
  end

endmodule
