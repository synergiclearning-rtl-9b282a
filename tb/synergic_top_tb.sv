// synergic_top_tb: end-to-end test of the NN + HD inference chip at reduced size
// (W_SYS=H_SYS=4, D_MAX=10 features, two layers 10 -> 10 -> 10, D_H=16, Q=4, C=6).
// For each run it loads random weights (in the controller's word order), batch-norm parameters
// and an input vector through the external-memory ports, starts an inference and checks:
// the final-layer activations in the output buffer, the encoded hypervector and predicted class
// against a reference model written here (forward pass, BN, ReLU then PACT, saturation,
// quantisation, binding, majority bundling, Hamming distance, argmin); compute_cycles against
// the paper's per-layer estimate; the HD latency of 5 cycles after the NN finishes; and that a
// start pulse during a run is ignored. It counts how often each mechanism occurred (partial
// input chunk, partial output tile, rerouting, ReLU clamp, PACT clip, saturation, BN, tie in
// the majority count, each quantisation level) and counts a failure for any that never did.
module synergic_top_tb;
  import synergic_pkg::*;
  localparam int RUNS = 4;
  localparam int W_SYS = 4, H_SYS = 4, D_MAX = 10, NUM_LAYERS = 2, D_H = 16, Q = 4, C = 6;
  localparam int SHIFT0 = 5, SHIFT1 = 9, WMAX = 20;
  localparam int DATA_W = 8, ACC_W = 32, GAMMA_W = 16;
  localparam int KK = (D_MAX + W_SYS - 1) / W_SYS, TT = (D_MAX + H_SYS - 1) / H_SYS;
  localparam int IB_DEPTH = (KK * W_SYS > TT * H_SYS) ? KK * W_SYS : TT * H_SYS;
  localparam int WB_DEPTH = NUM_LAYERS * TT * KK * W_SYS;
  localparam int LOG2W = $clog2(W_SYS);

  logic clk = 0, rst_n = 0, start = 0;
  layer_desc_t layers [NUM_LAYERS];
  logic busy, done;
  logic [$clog2(C)-1:0] cls;
  logic [$clog2(D_H+1)-1:0] min_dist;
  logic wb_we = 0, ib_we = 0, bn_we = 0;
  logic [$clog2(WB_DEPTH)-1:0] wb_waddr = '0;
  logic [H_SYS*DATA_W-1:0] wb_wdata = '0;
  logic [$clog2(IB_DEPTH)-1:0] ib_waddr = '0, ob_raddr = '0;
  logic signed [DATA_W-1:0] ib_wdata = '0, ob_rdata;
  logic [$clog2(NUM_LAYERS*IB_DEPTH)-1:0] bn_waddr = '0;
  logic signed [GAMMA_W-1:0] bn_gamma = '0;
  logic signed [ACC_W-1:0] bn_beta = '0;
  logic [D_H-1:0] enc;
  logic [31:0] compute_cycles, reroute_count;

  int checks = 0, failures = 0;
  int n_partial_chunk = 0, n_partial_tile = 0, n_reroute = 0, n_relu = 0, n_pact = 0, n_sat = 0,
      n_bn = 0, n_tie = 0, n_ignored_start = 0;
  int n_level [Q];
  byte wm [NUM_LAYERS][D_MAX][D_MAX];
  int gm [NUM_LAYERS][D_MAX], bm [NUM_LAYERS][D_MAX];
  int x [D_MAX];

  synergic_top #(.W_SYS(W_SYS), .H_SYS(H_SYS), .D_MAX(D_MAX), .NUM_LAYERS(NUM_LAYERS),
                 .D_H(D_H), .Q(Q), .C(C)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int alu_ref(longint p, int g, int b, alu_cfg_t c);
    longint y;
    if (c.bn_en) begin
      y = ((p * g) >>> c.shift) + b;
      n_bn++;
    end else y = p >>> c.shift;
    if (c.act == ACT_RELU && y < 0) begin y = 0; n_relu++; end
    if (c.act == ACT_PACT) begin
      if (y < 0) y = 0;
      if (y > c.pact_alpha) begin y = c.pact_alpha; n_pact++; end
    end
    if (y > 127) begin y = 127; n_sat++; end
    if (y < -128) begin y = -128; n_sat++; end
    return int'(y);
  endfunction

  initial begin
    for (int q = 0; q < Q; q++) n_level[q] = 0;
    // layer 0: ReLU with batch norm; layer 1: PACT with batch norm (as in the paper's HAR net)
    layers[0] = '{d_in: 16'(D_MAX), d_out: 16'(D_MAX), wbase: 24'd0,
                  alu: '{bn_en: 1'b1, act: ACT_RELU, shift: 5'(SHIFT0), pact_alpha: 8'sd0}};
    layers[1] = '{d_in: 16'(D_MAX), d_out: 16'(D_MAX), wbase: 24'(TT * KK * W_SYS),
                  alu: '{bn_en: 1'b1, act: ACT_PACT, shift: 5'(SHIFT1), pact_alpha: 8'sd100}};
    if (D_MAX % W_SYS != 0) n_partial_chunk++;
    if (D_MAX % H_SYS != 0) n_partial_tile++;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      logic [D_H-1:0] e_enc;
      int e_cls, e_min, t_done, t_nn;
      // ---- data
      for (int l = 0; l < NUM_LAYERS; l++)
        for (int o = 0; o < D_MAX; o++) begin
          for (int i = 0; i < D_MAX; i++) wm[l][o][i] = byte'($urandom_range(2*WMAX) - WMAX);
          gm[l][o] = $urandom_range(24) + 1;
          bm[l][o] = $urandom_range(60) - 20;
        end
      for (int i = 0; i < D_MAX; i++) x[i] = $urandom_range(255) - 128;
      // ---- load through the external-memory ports
      for (int l = 0; l < NUM_LAYERS; l++) begin
        for (int j = 0; j < TT; j++)
          for (int k = 0; k < KK; k++)
            for (int s = 0; s < W_SYS; s++) begin
              @(negedge clk);
              wb_we = 1;
              wb_waddr = $clog2(WB_DEPTH)'(int'(layers[l].wbase) + (j*KK + k)*W_SYS + s);
              for (int r = 0; r < H_SYS; r++) begin
                int o, i;
                o = j*H_SYS + r; i = k*W_SYS + W_SYS - 1 - s;
                wb_wdata[r*DATA_W +: DATA_W] = (o < D_MAX && i < D_MAX) ? wm[l][o][i] : '0;
              end
            end
        for (int o = 0; o < D_MAX; o++) begin
          @(negedge clk);
          wb_we = 0; bn_we = 1; bn_waddr = $bits(bn_waddr)'(l*IB_DEPTH + o);
          bn_gamma = GAMMA_W'(gm[l][o]); bn_beta = bm[l][o];
        end
        @(negedge clk); bn_we = 0;
      end
      for (int i = 0; i < D_MAX; i++) begin
        @(negedge clk);
        ib_we = 1; ib_waddr = $bits(ib_waddr)'(i); ib_wdata = DATA_W'(x[i]);
      end
      @(negedge clk); ib_we = 0;
      // ---- reference model
      for (int l = 0; l < NUM_LAYERS; l++) begin
        int y [D_MAX];
        for (int o = 0; o < D_MAX; o++) begin
          longint p;
          p = 0;
          for (int i = 0; i < D_MAX; i++) p += longint'(wm[l][o][i]) * x[i];
          y[o] = alu_ref(p, gm[l][o], bm[l][o], layers[l].alu);
        end
        x = y;
      end
      for (int b = 0; b < D_H; b++) begin
        int cnt;
        cnt = 0;
        for (int i = 0; i < D_MAX; i++) begin
          int lvl;
          lvl = (x[i] < 0) ? 0 : x[i] / (128 / Q);
          if (b == 0) n_level[lvl]++;
          cnt += ((hv_bit(2, 0, b) ^ (b < lvl * (D_H / Q))) ^ hv_bit(1, i, b)) ? 1 : -1;
        end
        if (cnt == 0) n_tie++;
        e_enc[b] = cnt > 0;
      end
      e_cls = 0; e_min = D_H + 1;
      for (int k = 0; k < C; k++) begin
        int d;
        d = 0;
        for (int b = 0; b < D_H; b++) d += (e_enc[b] != hv_bit(3, k, b));
        if (d < e_min) begin e_min = d; e_cls = k; end
      end
      // ---- run
      start = 1;
      @(negedge clk);
      start = 0;
      t_nn = -1; t_done = -1;
      for (int t = 1; t < 10000000 && t_done < 0; t++) begin
        if (t == 20) begin
          start = 1;                     // must be ignored while busy
          n_ignored_start++;
        end else start = 0;
        if (dut.nn_done && t_nn < 0) t_nn = t;
        if (done) t_done = t;
        @(negedge clk);
      end
      start = 0;
      check("HD latency after NN done", t_done - t_nn, 5);
      check("class", cls, e_cls);
      check("min distance", min_dist, e_min);
      check("encoded hypervector", enc, e_enc);
      check("compute_cycles = paper formula", compute_cycles, NUM_LAYERS * (KK + LOG2W) * TT);
      check("reroute_count", reroute_count, TT);
      n_reroute += reroute_count;
      for (int o = 0; o < D_MAX; o++) begin
        ob_raddr = $bits(ob_raddr)'(o); #1;
        check($sformatf("final activation %0d", o), ob_rdata, x[o]);
      end
      @(negedge clk);
      check("idle after run", busy, 0);
      check("no second run from ignored start", dut.u_nn.busy, 0);
      $display("run %0d: class %0d distance %0d, %0d compute cycles, %0d cycles NN", run, cls, min_dist,
               compute_cycles, t_nn);
    end
    $display("mechanisms: partial_chunk=%0d partial_tile=%0d reroute=%0d relu_clamp=%0d pact_clip=%0d saturate=%0d bn=%0d tie=%0d ignored_start=%0d",
             n_partial_chunk, n_partial_tile, n_reroute, n_relu, n_pact, n_sat, n_bn, n_tie, n_ignored_start);
    for (int q = 0; q < Q; q++) $display("level %0d used %0d times", q, n_level[q]);
    check("partial chunk happened", n_partial_chunk > 0, 1);
    check("partial tile happened", n_partial_tile > 0, 1);
    check("reroute happened", n_reroute > 0, 1);
    check("ReLU clamp happened", n_relu > 0, 1);
    check("PACT clip happened", n_pact > 0, 1);
    check("saturation happened", n_sat > 0, 1);
    check("batch norm happened", n_bn > 0, 1);
    check("ignored start happened", n_ignored_start > 0, 1);
    for (int q = 0; q < Q; q++) check($sformatf("level %0d used", q), n_level[q] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
