// pe: one processing element of the weight-stationary systolic array.
//
// A PE keeps the weights of its array position for one output tile in a small register file
// (one entry per w_sys-wide chunk of the layer input), multiplies the input value of its column
// by the entry selected for the current chunk and accumulates the products over the chunks.
// The accumulator is the PE's output towards the row's tree adder.
//
// Weight loading: weights travel along the row, one PE per cycle while w_shift is high
// (w_in -> internal pass register -> w_out). When a whole row of weights sits in the pass
// registers, w_commit copies each PE's pass register into register-file entry w_idx. A commit
// and the next shift may share a cycle: the commit stores the value before the shift.
//
// Compute: while mac_en is high, acc <= (clr ? 0 : acc) + rf[rd_idx] * x_in, one product per
// cycle, signed. The multiplier, adder and register file follow the PE drawing of the paper;
// word widths, the shift-and-commit loading and the clear input are this design's choices.
module pe #(
  parameter int DATA_W   = 8,
  parameter int ACC_W    = 32,
  parameter int RF_DEPTH = 20
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_shift,
  input  logic signed [DATA_W-1:0]    w_in,
  output logic signed [DATA_W-1:0]    w_out,
  input  logic                        w_commit,
  input  logic [$clog2(RF_DEPTH)-1:0] w_idx,
  input  logic                        mac_en,
  input  logic                        clr,
  input  logic [$clog2(RF_DEPTH)-1:0] rd_idx,
  input  logic signed [DATA_W-1:0]    x_in,
  output logic signed [ACC_W-1:0]     acc
);

  logic signed [DATA_W-1:0] rf [RF_DEPTH];
  logic signed [DATA_W-1:0] w_pass;
  logic signed [2*DATA_W-1:0] prod;

  assign w_out = w_pass;
  assign prod  = rf[rd_idx] * x_in;

  always_ff @(posedge clk) begin
    if (w_commit) rf[w_idx] <= w_pass;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_pass <= '0;
      acc    <= '0;
    end else begin
      if (w_shift) w_pass <= w_in;
      if (mac_en)  acc <= (clr ? ACC_W'(0) : acc) + ACC_W'(prod);
    end
  end

endmodule
