// hd_processing_module_tb: end-to-end check of the pipelined HD classifier
// (D_L=9, D_H=16, Q=4, C=6). A new random feature vector enters every cycle, with bubbles now
// and then. A reference model written here performs Algorithm-1 style encoding (quantise,
// bind with the feature seed, majority bundle) and nearest-centroid search; the test checks
// the encoded hypervector 3 cycles and the class / minimum distance / out_valid exactly 5
// cycles after each input, i.e. one result per cycle.
module hd_processing_module_tb;
  import synergic_pkg::*;
  localparam int D_L = 9, D_H = 16, Q = 4, C = 6, DATA_W = 8, NV = 200, LAT = 5;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DATA_W-1:0] feat [D_L];
  logic out_valid;
  logic [2:0] cls;
  logic [4:0] min_dist;
  logic [D_H-1:0] enc;
  logic [D_H-1:0] e_enc [NV];
  int e_cls [NV], e_min [NV];
  bit vin [NV + LAT + 1];
  int checks = 0, failures = 0, results = 0;

  hd_processing_module #(.D_L(D_L), .D_H(D_H), .Q(Q), .C(C), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
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

  // reference encoder and classifier
  task automatic reference(int t);
    logic [D_H-1:0] h;
    int best;
    int d [C];
    for (int b = 0; b < D_H; b++) begin
      int cnt;
      cnt = 0;
      for (int i = 0; i < D_L; i++) begin
        int lvl;
        bit lb;
        lvl = (feat[i] < 0) ? 0 : int'(feat[i]) / (128 / Q);
        lb  = hv_bit(1 + 1, 0, b) ^ (b < lvl * (D_H / Q));   // level table, seed 2
        cnt += (lb ^ hv_bit(1, i, b)) ? 1 : -1;                // feature seed 1
      end
      h[b] = cnt > 0;
    end
    e_enc[t] = h;
    best = 0;
    for (int k = 0; k < C; k++) begin
      d[k] = 0;
      for (int b = 0; b < D_H; b++) d[k] += (h[b] != hv_bit(3, k, b));   // centroid seed 3
      if (d[k] < d[best]) best = k;
    end
    e_cls[t] = best; e_min[t] = d[best];
  endtask

  initial begin
    for (int i = 0; i < D_L; i++) feat[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NV + LAT + 1; t++) begin
      if (t < NV) begin
        for (int i = 0; i < D_L; i++) feat[i] = DATA_W'($urandom);
        in_valid = (t % 13 != 7);
        vin[t] = in_valid;
        reference(t);
      end else begin
        in_valid = 0;
        vin[t] = 0;
      end
      @(negedge clk);
      // enc of input t-2 is visible now (3 edges after it was applied)
      if (t >= 2 && t - 2 < NV) check("enc", enc, e_enc[t-2]);
      if (t >= LAT - 1) begin
        check("out_valid", out_valid, vin[t-LAT+1]);
        if (out_valid && t - LAT + 1 < NV) begin
          results++;
          check("cls", cls, e_cls[t-LAT+1]);
          check("min_dist", min_dist, e_min[t-LAT+1]);
        end
      end
    end
    check("results", results, NV - (NV + 5) / 13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
