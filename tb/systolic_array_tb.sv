// systolic_array_tb: self-checking test of a small systolic array (H_SYS=3, W_SYS=4).
// Loads a random 3 x (K*4) weight matrix through the row shift chains in the order the
// controller uses (the weight for column c of chunk k is fed at shift 3-c), streams K input
// chunks and checks every PE's partial sum and each row's total against a matrix-vector
// product computed here, for several K and matrices.
module systolic_array_tb;
  localparam int W_SYS = 4, H_SYS = 3, DATA_W = 8, ACC_W = 32, RF_DEPTH = 3;
  logic clk = 0, rst_n = 0;
  logic w_shift = 0, w_commit = 0, mac_en = 0, clr = 0;
  logic [1:0] w_idx = '0, rd_idx = '0;
  logic signed [DATA_W-1:0] w_row [H_SYS];
  logic signed [DATA_W-1:0] x_col [W_SYS];
  logic signed [ACC_W-1:0]  acc [H_SYS][W_SYS];
  int checks = 0, failures = 0;
  logic signed [DATA_W-1:0] wm [H_SYS][RF_DEPTH*W_SYS];
  logic signed [DATA_W-1:0] xv [RF_DEPTH*W_SYS];

  systolic_array #(.W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .ACC_W(ACC_W), .RF_DEPTH(RF_DEPTH)) dut (.*);

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
    for (int r = 0; r < H_SYS; r++) w_row[r] = '0;
    for (int c = 0; c < W_SYS; c++) x_col[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int kk;
      kk = 1 + trial % RF_DEPTH;
      for (int r = 0; r < H_SYS; r++)
        for (int i = 0; i < RF_DEPTH*W_SYS; i++) wm[r][i] = DATA_W'($urandom);
      for (int i = 0; i < RF_DEPTH*W_SYS; i++) xv[i] = DATA_W'($urandom);
      // load: per chunk W_SYS shifts, then commit
      for (int k = 0; k < kk; k++) begin
        for (int s = 0; s < W_SYS; s++) begin
          for (int r = 0; r < H_SYS; r++) w_row[r] = wm[r][k*W_SYS + W_SYS-1-s];
          w_shift = 1; w_commit = 0;
          @(negedge clk);
        end
        w_shift = 0; w_commit = 1; w_idx = 2'(k);
        @(negedge clk);
      end
      w_commit = 0;
      // stream
      for (int k = 0; k < kk; k++) begin
        for (int c = 0; c < W_SYS; c++) x_col[c] = xv[k*W_SYS + c];
        mac_en = 1; clr = (k == 0); rd_idx = 2'(k);
        @(negedge clk);
      end
      mac_en = 0; clr = 0;
      for (int r = 0; r < H_SYS; r++) begin
        longint row_exp, row_got;
        row_exp = 0; row_got = 0;
        for (int c = 0; c < W_SYS; c++) begin
          longint e;
          e = 0;
          for (int k = 0; k < kk; k++) e += longint'(wm[r][k*W_SYS+c]) * longint'(xv[k*W_SYS+c]);
          check($sformatf("pe(%0d,%0d)", r, c), acc[r][c], e);
          row_exp += e; row_got += acc[r][c];
        end
        check($sformatf("row %0d dot product", r), row_got, row_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
