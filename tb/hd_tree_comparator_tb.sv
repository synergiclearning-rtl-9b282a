// hd_tree_comparator_tb: self-checking test of the tree comparator (C=26 and C=5).
// Random distances, many with ties, and directed cases (minimum at the first, last and a
// padded-boundary position); one cycle later cls must be the lowest index holding the
// minimum distance and min_dist that distance.
module hd_tree_comparator_tb;
  localparam int DIST_W = 5;
  logic clk = 0, rst_n = 0;
  logic [DIST_W-1:0] d26 [26];
  logic [DIST_W-1:0] d5 [5];
  logic [4:0] cls26;
  logic [2:0] cls5;
  logic [DIST_W-1:0] m26, m5;
  int checks = 0, failures = 0;

  hd_tree_comparator #(.C(26), .DIST_W(DIST_W)) dut26 (.clk, .rst_n, .hdist(d26), .cls(cls26), .min_dist(m26));
  hd_tree_comparator #(.C(5),  .DIST_W(DIST_W)) dut5  (.clk, .rst_n, .hdist(d5),  .cls(cls5),  .min_dist(m5));

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
    for (int k = 0; k < 26; k++) d26[k] = '0;
    for (int k = 0; k < 5; k++) d5[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int e26, e5;
      for (int k = 0; k < 26; k++) d26[k] = DIST_W'($urandom_range((t % 2) ? 16 : 4, 1));
      for (int k = 0; k < 5; k++)  d5[k]  = DIST_W'($urandom_range((t % 2) ? 16 : 3, 1));
      if (t == 0) d26[0] = 0;
      if (t == 2) d26[25] = 0;
      if (t == 4) d26[16] = 0;
      if (t == 6) d5[4] = 0;
      e26 = 0; e5 = 0;
      for (int k = 1; k < 26; k++) if (d26[k] < d26[e26]) e26 = k;
      for (int k = 1; k < 5; k++)  if (d5[k]  < d5[e5])   e5 = k;
      @(negedge clk);
      check("cls26", cls26, e26); check("min26", m26, d26[e26]);
      check("cls5", cls5, e5);    check("min5", m5, d5[e5]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
