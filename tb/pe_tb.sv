// pe_tb: self-checking test of one processing element.
// Loads random signed weights into every register-file entry through the shift path, checks
// the pass-through to w_out, then runs multiply-accumulate sequences of 1..RF_DEPTH chunks
// with random inputs and compares the accumulator with a sum computed here.
module pe_tb;
  localparam int DATA_W = 8, ACC_W = 32, RF_DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic w_shift = 0, w_commit = 0, mac_en = 0, clr = 0;
  logic signed [DATA_W-1:0] w_in = '0, w_out, x_in = '0;
  logic [1:0] w_idx = '0, rd_idx = '0;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] wts [RF_DEPTH];

  pe #(.DATA_W(DATA_W), .ACC_W(ACC_W), .RF_DEPTH(RF_DEPTH)) dut (.*);

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

  initial begin
    longint exp;
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 50; trial++) begin
      // load
      for (int k = 0; k < RF_DEPTH; k++) begin
        wts[k] = DATA_W'($urandom);
        if (trial == 0 && k == 0) wts[k] = -128;
        @(negedge clk); w_in = wts[k]; w_shift = 1; w_commit = 0;
        @(negedge clk); w_shift = 0; w_commit = 1; w_idx = 2'(k);
        check("w_out pass-through", w_out, wts[k]);
      end
      @(negedge clk); w_commit = 0;
      // multiply-accumulate over n chunks
      n = 1 + (trial % RF_DEPTH);
      exp = 0;
      for (int k = 0; k < n; k++) begin
        logic signed [DATA_W-1:0] x;
        x = DATA_W'($urandom);
        if (trial == 0) x = -128;
        x_in = x; mac_en = 1; clr = (k == 0); rd_idx = 2'(k);
        exp += longint'(wts[k]) * longint'(x);
        @(negedge clk);
      end
      mac_en = 0; clr = 0;
      check("accumulator", acc, exp);
      // holding mac_en low keeps the sum
      @(negedge clk);
      check("accumulator hold", acc, exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
