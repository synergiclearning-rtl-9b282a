// nn_processing_module_tb: end-to-end check of the NN processing module at small size
// (W_SYS=H_SYS=4, D_MAX=10, two layers 10 -> 10 -> 7, RF_DEPTH=3).
// Random int8 weights are laid out in the weight buffer in the controller's order, a random
// input goes to input bank 0 and random batch-norm parameters to the BN memory. After 'done'
// the final activations on the feat_* port and in the output buffer are compared with a
// reference forward pass computed here (matrix-vector product, BN, ReLU / PACT, saturation),
// compute_cycles with the paper's formula, and reroute_count with the number of layer-0 tiles.
// Three runs with fresh data.
module nn_processing_module_tb;
  import synergic_pkg::*;
  localparam int W_SYS = 4, H_SYS = 4, DATA_W = 8, ACC_W = 32, GAMMA_W = 16;
  localparam int D_MAX = 10, NUM_LAYERS = 2, RF_DEPTH = 3, IB_DEPTH = 12;
  localparam int WB_DEPTH = NUM_LAYERS * 3 * RF_DEPTH * W_SYS;
  localparam int DOUT [NUM_LAYERS] = '{10, 7};
  localparam int DIN  [NUM_LAYERS] = '{10, 10};

  logic clk = 0, rst_n = 0, start = 0;
  layer_desc_t layers [NUM_LAYERS];
  logic busy, done;
  logic wb_we = 0, ib_we = 0, bn_we = 0;
  logic [$clog2(WB_DEPTH)-1:0] wb_waddr = '0;
  logic [H_SYS*DATA_W-1:0] wb_wdata = '0;
  logic [3:0] ib_waddr = '0, ob_raddr = '0, feat_base;
  logic signed [DATA_W-1:0] ib_wdata = '0, ob_rdata;
  logic [4:0] bn_waddr = '0;
  logic signed [GAMMA_W-1:0] bn_gamma = '0;
  logic signed [ACC_W-1:0] bn_beta = '0;
  logic feat_we;
  logic [2:0] feat_n;
  logic signed [DATA_W-1:0] feat_data [H_SYS];
  logic [31:0] compute_cycles, reroute_count;
  int checks = 0, failures = 0;

  int wm [NUM_LAYERS][D_MAX][D_MAX];   // wm[l][out][in]
  int gm [NUM_LAYERS][D_MAX], bm [NUM_LAYERS][D_MAX];
  int xin [D_MAX], ref_out [D_MAX], got_feat [D_MAX];

  nn_processing_module #(.W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .ACC_W(ACC_W), .GAMMA_W(GAMMA_W),
    .D_MAX(D_MAX), .NUM_LAYERS(NUM_LAYERS), .RF_DEPTH(RF_DEPTH), .IB_DEPTH(IB_DEPTH), .WB_DEPTH(WB_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int alu_ref(longint p, int g, int b, alu_cfg_t c);
    longint y;
    y = c.bn_en ? (((p * g) >>> c.shift) + b) : (p >>> c.shift);
    if (c.act == ACT_RELU && y < 0) y = 0;
    if (c.act == ACT_PACT) begin
      if (y < 0) y = 0;
      if (y > c.pact_alpha) y = c.pact_alpha;
    end
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return int'(y);
  endfunction

  always @(posedge clk) if (feat_we)
    for (int r = 0; r < H_SYS; r++) if (r < feat_n) got_feat[feat_base + r] = feat_data[r];

  initial begin
    int base;
    layers[0] = '{d_in: 16'(DIN[0]), d_out: 16'(DOUT[0]), wbase: 24'd0,
                  alu: '{bn_en: 1'b1, act: ACT_RELU, shift: 5'd6, pact_alpha: 8'sd0}};
    layers[1] = '{d_in: 16'(DIN[1]), d_out: 16'(DOUT[1]), wbase: 24'(3 * 3 * W_SYS),
                  alu: '{bn_en: 1'b1, act: ACT_PACT, shift: 5'd6, pact_alpha: 8'sd90}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int x [D_MAX];
      for (int l = 0; l < NUM_LAYERS; l++) begin
        for (int o = 0; o < D_MAX; o++) begin
          for (int i = 0; i < D_MAX; i++) wm[l][o][i] = $urandom_range(255) - 128;
          gm[l][o] = $urandom_range(200) - 60;
          bm[l][o] = $urandom_range(80) - 40;
        end
      end
      for (int i = 0; i < D_MAX; i++) xin[i] = $urandom_range(255) - 128;
      // weight words: layer l, tile j, chunk k, shift s -> row r holds W[j*H+r][k*W+W-1-s]
      for (int l = 0; l < NUM_LAYERS; l++) begin
        int kk, tt;
        kk = (DIN[l] + W_SYS - 1) / W_SYS;
        tt = (DOUT[l] + H_SYS - 1) / H_SYS;
        for (int j = 0; j < tt; j++)
          for (int k = 0; k < kk; k++)
            for (int s = 0; s < W_SYS; s++) begin
              @(negedge clk);
              wb_we = 1;
              wb_waddr = $clog2(WB_DEPTH)'(int'(layers[l].wbase) + (j*kk + k)*W_SYS + s);
              for (int r = 0; r < H_SYS; r++) begin
                int o, i;
                o = j*H_SYS + r; i = k*W_SYS + W_SYS - 1 - s;
                wb_wdata[r*DATA_W +: DATA_W] = (o < DOUT[l] && i < DIN[l]) ? DATA_W'(wm[l][o][i]) : '0;
              end
            end
        for (int o = 0; o < DOUT[l]; o++) begin
          @(negedge clk);
          wb_we = 0; bn_we = 1; bn_waddr = 5'(l*IB_DEPTH + o); bn_gamma = GAMMA_W'(gm[l][o]); bn_beta = bm[l][o];
        end
        @(negedge clk); bn_we = 0;
      end
      for (int i = 0; i < D_MAX; i++) begin
        @(negedge clk);
        ib_we = 1; ib_waddr = 4'(i); ib_wdata = DATA_W'(xin[i]);
      end
      @(negedge clk); ib_we = 0;
      // reference forward pass
      for (int i = 0; i < D_MAX; i++) x[i] = xin[i];
      for (int l = 0; l < NUM_LAYERS; l++) begin
        int y [D_MAX];
        for (int o = 0; o < DOUT[l]; o++) begin
          longint p;
          p = 0;
          for (int i = 0; i < DIN[l]; i++) p += longint'(wm[l][o][i]) * x[i];
          y[o] = alu_ref(p, gm[l][o], bm[l][o], layers[l].alu);
        end
        for (int o = 0; o < D_MAX; o++) x[o] = (o < DOUT[l]) ? y[o] : 0;
      end
      for (int o = 0; o < D_MAX; o++) ref_out[o] = x[o];
      for (int o = 0; o < D_MAX; o++) got_feat[o] = 999;
      start = 1;
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      for (int o = 0; o < DOUT[1]; o++) begin
        check($sformatf("run %0d feat[%0d]", run, o), got_feat[o], ref_out[o]);
        ob_raddr = 4'(o); #1;
        check($sformatf("run %0d output buffer[%0d]", run, o), ob_rdata, ref_out[o]);
      end
      check("compute_cycles = paper formula", compute_cycles, (3 + 2) * 3 + (3 + 2) * 2);
      check("reroute_count", reroute_count, 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
