// weight_buffer_tb: self-checking test of the weight buffer.
// Writes random words to every address, reads them back in a shuffled order and checks that
// each arrives exactly one cycle after its address, including a read of an address written in
// the same cycle (old data is returned).
module weight_buffer_tb;
  localparam int H_SYS = 4, DATA_W = 8, DEPTH = 64;
  logic clk = 0;
  logic wr_en = 0;
  logic [5:0] wr_addr = '0, rd_addr = '0;
  logic [H_SYS*DATA_W-1:0] wr_data = '0, rd_data;
  logic [H_SYS*DATA_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.H_SYS(H_SYS), .DATA_W(DATA_W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      model[a] = $urandom;
      wr_en = 1; wr_addr = 6'(a); wr_data = model[a];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3 * DEPTH; t++) begin
      int a;
      logic [H_SYS*DATA_W-1:0] exp;
      a = $urandom_range(DEPTH - 1);
      rd_addr = 6'(a);
      exp = model[a];
      // occasionally overwrite the address being read: the read returns the old word
      if (t % 7 == 3) begin
        wr_en = 1; wr_addr = 6'(a); wr_data = $urandom;
      end
      @(negedge clk);
      if (wr_en) model[a] = wr_data;
      wr_en = 0;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        $display("FAIL read %0d: got %h expected %h", a, rd_data, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
