// output_buffer_tb: self-checking test of the output buffer (H_SYS=4, DEPTH=10).
// Checks that the pre-activation row is captured only on pre_we, that activation writes store
// exactly act_n elements at act_base (including a partial last tile) and that every stored
// activation reads back.
module output_buffer_tb;
  localparam int H_SYS = 4, ACC_W = 32, DATA_W = 8, DEPTH = 10;
  logic clk = 0, rst_n = 0, pre_we = 0, act_we = 0;
  logic signed [ACC_W-1:0] pre_in [H_SYS];
  logic signed [ACC_W-1:0] pre_out [H_SYS];
  logic [3:0] act_base = '0, rd_addr = '0;
  logic [2:0] act_n = '0;
  logic signed [DATA_W-1:0] act_in [H_SYS];
  logic signed [DATA_W-1:0] rd_data;
  logic signed [DATA_W-1:0] model [DEPTH];
  logic signed [ACC_W-1:0] pmodel [H_SYS];
  int checks = 0, failures = 0;

  output_buffer #(.H_SYS(H_SYS), .ACC_W(ACC_W), .DATA_W(DATA_W), .DEPTH(DEPTH)) dut (.*);

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
    for (int r = 0; r < H_SYS; r++) begin pre_in[r] = '0; act_in[r] = '0; pmodel[r] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      pre_we = (t % 3 != 0);
      for (int r = 0; r < H_SYS; r++) begin
        pre_in[r] = $urandom;
        if (pre_we) pmodel[r] = pre_in[r];
      end
      @(negedge clk);
      for (int r = 0; r < H_SYS; r++) check("pre_out", pre_out[r], pmodel[r]);
    end
    pre_we = 0;
    for (int a = 0; a < DEPTH; a++) model[a] = 0;
    // fill with full writes, then overwrite with tiles of 4, 4, 2
    for (int base = 0; base < DEPTH; base += H_SYS) begin
      for (int pass = 0; pass < 2; pass++) begin
        int n;
        n = (pass == 0) ? H_SYS : ((DEPTH - base >= H_SYS) ? H_SYS : DEPTH - base);
        if (pass == 0 && base + H_SYS > DEPTH) n = DEPTH - base;
        act_we = 1; act_base = 4'(base); act_n = 3'(n);
        for (int r = 0; r < H_SYS; r++) begin
          act_in[r] = DATA_W'($urandom);
          if (r < n) model[base + r] = act_in[r];
        end
        @(negedge clk);
      end
    end
    // a write with act_n = 1 must touch one element only
    act_we = 1; act_base = 4'd4; act_n = 3'd1;
    for (int r = 0; r < H_SYS; r++) act_in[r] = DATA_W'(r + 100);
    model[4] = 100;
    @(negedge clk);
    act_we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = 4'(a); #1;
      check($sformatf("act[%0d]", a), rd_data, model[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
