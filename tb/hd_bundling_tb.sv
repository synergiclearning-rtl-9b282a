// hd_bundling_tb: self-checking test of majority counters and comparators.
// Two instances: D_L=7 (odd, no ties) and D_L=4 (ties possible), D_H=16. Random bound vectors
// are applied every cycle; one cycle later cnt[b] must equal (#set - #clear) of dimension b,
// and two cycles later enc[b] must be 1 exactly when that count was positive. Counter width is
// checked against ceil(log2(D_L+1)) + 1.
module hd_bundling_tb;
  localparam int D_H = 16, NV = 80;
  logic clk = 0, rst_n = 0;
  logic [D_H-1:0] b7 [7];
  logic [D_H-1:0] b4 [4];
  logic signed [3:0] c7 [D_H];
  logic signed [3:0] c4 [D_H];
  logic [D_H-1:0] e7, e4;
  int exp7 [NV][D_H], exp4 [NV][D_H];
  int checks = 0, failures = 0, ties = 0;

  hd_bundling #(.D_L(7), .D_H(D_H)) dut7 (.clk, .rst_n, .bound(b7), .cnt(c7), .enc(e7));
  hd_bundling #(.D_L(4), .D_H(D_H)) dut4 (.clk, .rst_n, .bound(b4), .cnt(c4), .enc(e4));

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

  initial begin
    check("counter width D_L=7", $bits(c7[0]), $clog2(7 + 1) + 1);
    check("counter width D_L=4", $bits(c4[0]), $clog2(4 + 1) + 1);
    for (int i = 0; i < 7; i++) b7[i] = '0;
    for (int i = 0; i < 4; i++) b4[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NV + 2; t++) begin
      if (t < NV) begin
        for (int i = 0; i < 7; i++) b7[i] = D_H'($urandom);
        for (int i = 0; i < 4; i++) b4[i] = D_H'($urandom);
        for (int b = 0; b < D_H; b++) begin
          exp7[t][b] = 0; exp4[t][b] = 0;
          for (int i = 0; i < 7; i++) exp7[t][b] += b7[i][b] ? 1 : -1;
          for (int i = 0; i < 4; i++) exp4[t][b] += b4[i][b] ? 1 : -1;
          if (exp4[t][b] == 0) ties++;
        end
      end
      @(negedge clk);
      if (t < NV)
        for (int b = 0; b < D_H; b++) begin
          check("cnt7", c7[b], exp7[t][b]);
          check("cnt4", c4[b], exp4[t][b]);
        end
      if (t >= 1 && t - 1 < NV)
        for (int b = 0; b < D_H; b++) begin
          check("enc7", e7[b], exp7[t-1][b] > 0);
          check("enc4", e4[b], exp4[t-1][b] > 0);
        end
    end
    check("ties exercised", ties > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
