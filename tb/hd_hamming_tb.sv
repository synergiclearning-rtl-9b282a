// hd_hamming_tb: self-checking test of the Hamming distance calculator (C=5, D_H=16).
// Applies random encoded hypervectors plus each centroid itself and its complement, and
// checks every distance one cycle later against a bit count computed here with the
// centroids rebuilt from the seed generator.
module hd_hamming_tb;
  import synergic_pkg::*;
  localparam int C = 5, D_H = 16, DIST_W = 5;
  localparam int unsigned SEED = 32'd3;
  logic clk = 0, rst_n = 0;
  logic [D_H-1:0] enc = '0;
  logic [DIST_W-1:0] hdist [C];
  logic [D_H-1:0] cent [C];
  int checks = 0, failures = 0;

  hd_hamming #(.C(C), .D_H(D_H), .DIST_W(DIST_W), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < C; k++) for (int b = 0; b < D_H; b++) cent[k][b] = hv_bit(SEED, k, b);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100 + 2*C; t++) begin
      logic [D_H-1:0] q;
      if (t < C)            q = cent[t];
      else if (t < 2*C)     q = ~cent[t - C];
      else                  q = D_H'($urandom);
      enc = q;
      @(negedge clk);
      for (int k = 0; k < C; k++) begin
        int e;
        e = 0;
        for (int b = 0; b < D_H; b++) e += (q[b] != cent[k][b]);
        checks++;
        if (hdist[k] != e) begin
          failures++; $display("FAIL dist[%0d]: got %0d expected %0d", k, hdist[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
