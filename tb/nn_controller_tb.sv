// nn_controller_tb: self-checking test of the NN sequencer (W_SYS=H_SYS=4, two layers).
// Layer 0 is 10 -> 6 (3 chunks, 2 tiles, partial chunk and tile), layer 1 is 6 -> 5.
// A monitor replays the expected schedule: every weight-buffer address of each LOAD phase,
// the shift and commit pulses (commit index k after the 4th shift of chunk k), the STREAM
// cycles with their register index and clear, the tree wait, the write and ALU pulses with
// tile base / count / bank, and done. It checks compute_cycles against the paper's formula
// sum_l (ceil(d_in/W) + log2 W) * ceil(d_out/H) and the total run length.
module nn_controller_tb;
  import synergic_pkg::*;
  localparam int W_SYS = 4, H_SYS = 4, RF_DEPTH = 3, NUM_LAYERS = 2, WB_DEPTH = 128, IB_DEPTH = 12;
  localparam int LOG2W = 2;
  logic clk = 0, rst_n = 0, start = 0;
  layer_desc_t layers [NUM_LAYERS];
  logic busy, done, w_shift, w_commit, mac_en, clr, ib_rd_bank, pre_we, alu_we, rr_bank, last_layer;
  logic [6:0] wb_raddr;
  logic [1:0] w_idx, rd_idx;
  logic [3:0] ib_chunk_idx, tile_base, ib_limit;
  logic [2:0] tile_n;
  logic [1:0] layer;
  alu_cfg_t alu_cfg;
  logic [31:0] compute_cycles;
  int checks = 0, failures = 0;

  nn_controller #(.W_SYS(W_SYS), .H_SYS(H_SYS), .RF_DEPTH(RF_DEPTH), .NUM_LAYERS(NUM_LAYERS),
                  .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
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

  // one cycle's expected control values
  task automatic expect_cycle(string ph, bit e_shift, bit e_commit, int e_widx, bit e_mac, bit e_clr,
                              int e_rdidx, bit e_pre, bit e_alu);
    check({ph, " w_shift"}, w_shift, e_shift);
    check({ph, " w_commit"}, w_commit, e_commit);
    if (e_commit) check({ph, " w_idx"}, w_idx, e_widx);
    check({ph, " mac_en"}, mac_en, e_mac);
    if (e_mac) begin
      check({ph, " clr"}, clr, e_clr);
      check({ph, " rd_idx"}, rd_idx, e_rdidx);
      check({ph, " ib_chunk_idx"}, ib_chunk_idx, e_rdidx);
    end
    check({ph, " pre_we"}, pre_we, e_pre);
    check({ph, " alu_we"}, alu_we, e_alu);
    check({ph, " done"}, done, 0);
  endtask

  initial begin
    int exp_compute, cycles;
    layers[0] = '{d_in: 16'd10, d_out: 16'd6, wbase: 24'd0,
                  alu: '{bn_en: 1'b1, act: ACT_RELU, shift: 5'd3, pact_alpha: 8'sd0}};
    layers[1] = '{d_in: 16'd6, d_out: 16'd5, wbase: 24'd24,
                  alu: '{bn_en: 1'b0, act: ACT_PACT, shift: 5'd1, pact_alpha: 8'sd50}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle busy", busy, 0);
    start = 1;
    @(negedge clk);
    start = 0;
    exp_compute = 0;
    cycles = 1;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int kk, tt;
      kk = (int'(layers[l].d_in) + W_SYS - 1) / W_SYS;
      tt = (int'(layers[l].d_out) + H_SYS - 1) / H_SYS;
      exp_compute += (kk + LOG2W) * tt;
      for (int j = 0; j < tt; j++) begin
        // LOAD: kk*W reads; shift one cycle after each read; commit one cycle after the last shift
        for (int t = 0; t < kk*W_SYS + 2; t++) begin
          bit sh, cm;
          int ci;
          sh = (t >= 1 && t <= kk*W_SYS);
          cm = (t >= 2 && ((t - 2) % W_SYS) == W_SYS - 1);
          ci = (t - 2) / W_SYS;
          if (t < kk*W_SYS)
            check("wb_raddr", wb_raddr, int'(layers[l].wbase) + (j*kk + t/W_SYS)*W_SYS + t%W_SYS);
          check("busy", busy, 1);
          check("ib_rd_bank", ib_rd_bank, l % 2);
          expect_cycle("load", sh, cm, ci, 0, 0, 0, 0, 0);
          @(negedge clk); cycles++;
        end
        for (int k = 0; k < kk; k++) begin
          check("ib_limit", ib_limit, layers[l].d_in);
          expect_cycle("stream", 0, 0, 0, 1, k == 0, k, 0, 0);
          @(negedge clk); cycles++;
        end
        for (int t = 0; t < LOG2W; t++) begin
          expect_cycle("reduce", 0, 0, 0, 0, 0, 0, 0, 0);
          @(negedge clk); cycles++;
        end
        expect_cycle("write", 0, 0, 0, 0, 0, 0, 1, 0);
        @(negedge clk); cycles++;
        expect_cycle("alu", 0, 0, 0, 0, 0, 0, 0, 1);
        check("tile_base", tile_base, j * H_SYS);
        check("tile_n", tile_n, (int'(layers[l].d_out) - j*H_SYS >= H_SYS) ? H_SYS : int'(layers[l].d_out) - j*H_SYS);
        check("rr_bank", rr_bank, (l + 1) % 2);
        check("layer", layer, l);
        check("last_layer", last_layer, l == NUM_LAYERS - 1);
        check("alu_cfg", alu_cfg, layers[l].alu);
        @(negedge clk); cycles++;
      end
    end
    check("done", done, 1);
    check("compute_cycles = paper formula", compute_cycles, exp_compute);
    check("run length", cycles, 1 + 2*(3*4+2+3+2+2) + 2*(2*4+2+2+2+2));
    @(negedge clk);
    check("idle after done", busy, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
