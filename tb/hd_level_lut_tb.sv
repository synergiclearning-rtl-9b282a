// hd_level_lut_tb: self-checking test of the level lookup table (D_H=16, Q=4).
// For every 8-bit feature value it checks the quantised level (negative -> 0, else top two
// magnitude bits) by comparing the returned hypervector with the table rebuilt here, and it
// checks the level structure of the training algorithm: level i differs from level 0 in
// exactly i*floor(D_H/Q) bits and from level i-1 in floor(D_H/Q) bits.
module hd_level_lut_tb;
  import synergic_pkg::*;
  localparam int D_H = 16, Q = 4, DATA_W = 8, P = D_H / Q;
  localparam int unsigned SEED = 32'd2;
  logic signed [DATA_W-1:0] feat;
  logic [D_H-1:0] level_hv;
  logic [D_H-1:0] lv [Q];
  int checks = 0, failures = 0;

  hd_level_lut #(.D_H(D_H), .Q(Q), .DATA_W(DATA_W), .SEED(SEED)) dut (.*);

  initial begin
    #100000;
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

  initial begin
    // collect the four level vectors from representative features
    for (int i = 0; i < Q; i++) begin
      feat = DATA_W'(i * 32 + 5); #1;
      lv[i] = level_hv;
    end
    for (int b = 0; b < D_H; b++) check("level 0 seed bit", lv[0][b], hv_bit(SEED, 0, b));
    for (int i = 1; i < Q; i++) begin
      check($sformatf("dist(level %0d, level 0)", i), $countones(lv[i] ^ lv[0]), i * P);
      check($sformatf("dist(level %0d, level %0d)", i, i-1), $countones(lv[i] ^ lv[i-1]), P);
    end
    for (int v = -128; v < 128; v++) begin
      int e;
      e = (v < 0) ? 0 : v / 32;
      feat = DATA_W'(v); #1;
      check($sformatf("feature %0d level", v), level_hv, lv[e]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
