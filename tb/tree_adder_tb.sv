// tree_adder_tb: self-checking test of the pipelined adder tree.
// Feeds a new random input vector every cycle to an 8-input tree (3 levels) and a 5-input
// tree (padded to 8) and checks that each sum appears exactly log2 N = 3 cycles later.
module tree_adder_tb;
  localparam int W = 32, LAT = 3, NV = 60;
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] in8 [8];
  logic signed [W-1:0] in5 [5];
  logic signed [W-1:0] sum8, sum5;
  longint exp8 [NV], exp5 [NV];
  int checks = 0, failures = 0;

  tree_adder #(.N(8), .W(W)) dut8 (.clk, .rst_n, .in(in8), .sum(sum8));
  tree_adder #(.N(5), .W(W)) dut5 (.clk, .rst_n, .in(in5), .sum(sum5));

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
    for (int i = 0; i < 8; i++) in8[i] = '0;
    for (int i = 0; i < 5; i++) in5[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NV + LAT; t++) begin
      if (t < NV) begin
        exp8[t] = 0; exp5[t] = 0;
        for (int i = 0; i < 8; i++) begin
          in8[i] = W'(int'($urandom) >>> 4);
          exp8[t] += longint'(in8[i]);
        end
        for (int i = 0; i < 5; i++) begin
          in5[i] = W'(int'($urandom) >>> 4);
          exp5[t] += longint'(in5[i]);
        end
      end
      @(negedge clk);
      // after t+1 edges the vector of cycle t+1-LAT is on the output
      if (t + 1 >= LAT && t + 1 - LAT < NV) begin
        check("sum8", sum8, longint'(W'(exp8[t+1-LAT])));
        check("sum5", sum5, longint'(W'(exp5[t+1-LAT])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
