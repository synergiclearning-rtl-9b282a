// output_buffer: holds what the tree adders and the ALUs produce for the current layer.
//
// The pre-activation row (one ACC_W value per array row) is written by the tree adders when
// pre_we is high and read back by the ALUs through pre_out. The ALUs' results are written back
// as activations, up to H_SYS of them per cycle at act_base .. act_base+act_n-1, and stay there
// for external memory to read one element at a time (rd_addr -> rd_data, combinational). The
// buffer's place between tree adders and ALUs is from the paper; keeping a single pre-activation
// row and a separate activation array is this design's choice.
module output_buffer #(
  parameter int H_SYS  = 32,
  parameter int ACC_W  = 32,
  parameter int DATA_W = 8,
  parameter int DEPTH  = 640
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        pre_we,
  input  logic signed [ACC_W-1:0]     pre_in  [H_SYS],
  output logic signed [ACC_W-1:0]     pre_out [H_SYS],
  input  logic                        act_we,
  input  logic [$clog2(DEPTH)-1:0]    act_base,
  input  logic [$clog2(H_SYS+1)-1:0]  act_n,
  input  logic signed [DATA_W-1:0]    act_in  [H_SYS],
  input  logic [$clog2(DEPTH)-1:0]    rd_addr,
  output logic signed [DATA_W-1:0]    rd_data
);

  localparam int AW = $clog2(DEPTH);

  logic signed [DATA_W-1:0] act [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < H_SYS; r++) pre_out[r] <= '0;
    end else if (pre_we) begin
      for (int r = 0; r < H_SYS; r++) pre_out[r] <= pre_in[r];
    end
  end

  always_ff @(posedge clk) begin
    if (act_we) begin
      for (int r = 0; r < H_SYS; r++) begin
        if (r < int'(act_n) && int'(act_base) + r < DEPTH)
          act[AW'(int'(act_base) + r)] <= act_in[r];
      end
    end
  end

  assign rd_data = act[rd_addr];

endmodule
