// input_buffer_tb: self-checking test of the two-bank input buffer (W_SYS=4, H_SYS=3).
// Fills bank 0 element by element and bank 1 with rerouted writes of 1..3 elements, then
// reads every chunk of both banks with several limits and checks the data and the zero
// padding at and beyond the limit against a model kept here.
module input_buffer_tb;
  localparam int W_SYS = 4, H_SYS = 3, DATA_W = 8, DEPTH = 12;
  logic clk = 0;
  logic ext_we = 0, ext_bank = 0, rr_we = 0, rr_bank = 0, rd_bank = 0;
  logic [3:0] ext_addr = '0, rr_base = '0, rd_chunk_idx = '0;
  logic [3:0] rd_limit = '0;
  logic [1:0] rr_n = '0;
  logic signed [DATA_W-1:0] ext_data = '0;
  logic signed [DATA_W-1:0] rr_data [H_SYS];
  logic signed [DATA_W-1:0] rd_chunk [W_SYS];
  logic signed [DATA_W-1:0] model [2][DEPTH];
  int checks = 0, failures = 0;
  int nrr = 0;

  input_buffer #(.W_SYS(W_SYS), .H_SYS(H_SYS), .DATA_W(DATA_W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int b = 0; b < 2; b++)
      for (int lim = 1; lim <= DEPTH; lim += 3)
        for (int k = 0; k < DEPTH / W_SYS; k++) begin
          rd_bank = 1'(b); rd_chunk_idx = 4'(k); rd_limit = 4'(lim);
          #1;
          for (int c = 0; c < W_SYS; c++) begin
            logic signed [DATA_W-1:0] e;
            e = (k*W_SYS + c < lim) ? model[b][k*W_SYS + c] : '0;
            checks++;
            if (rd_chunk[c] !== e) begin
              failures++;
              $display("FAIL bank %0d lim %0d chunk %0d col %0d: got %0d expected %0d", b, lim, k, c, rd_chunk[c], e);
            end
          end
        end
  endtask

  initial begin
    for (int r = 0; r < H_SYS; r++) rr_data[r] = '0;
    // initialise both banks through the external port
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        model[b][a] = DATA_W'($urandom);
        ext_we = 1; ext_bank = 1'(b); ext_addr = 4'(a); ext_data = model[b][a];
      end
    @(negedge clk); ext_we = 0;
    read_all();
    // rerouted writes into bank 1 with partial counts, bank 0 untouched
    for (int base = 0; base < DEPTH; base += H_SYS) begin
      int n;
      n = 1 + (base / H_SYS) % H_SYS;
      @(negedge clk);
      rr_we = 1; rr_bank = 1; rr_base = 4'(base); rr_n = 2'(n);
      for (int r = 0; r < H_SYS; r++) begin
        rr_data[r] = DATA_W'($urandom);
        if (r < n) model[1][base + r] = rr_data[r];
      end
      nrr++;
    end
    @(negedge clk); rr_we = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
