// systolic_array: H_SYS x W_SYS grid of processing elements (weight-stationary dataflow).
//
// Row r computes partial sums for output neuron r of the current output tile; column c handles
// element c of each W_SYS-wide chunk of the layer input. Weights enter each row at its left end
// (w_row[r], from the weight buffer) and shift one PE to the right per w_shift cycle, so after
// W_SYS shifts PE (r,c) holds the value fed at shift W_SYS-1-c; w_commit then stores the whole
// row into register-file entry w_idx of every PE. The input chunk x_col enters at the top and
// every PE of column c sees x_col[c] in the same cycle. acc[r][c] is the running sum of PE (r,c),
// summed per row by the tree adders outside this module.
//
// The grid, the left-to-right weight flow and the top-to-bottom input flow follow the paper's
// architecture drawing. Passing the input down a column without a register per PE is this
// design's choice: it keeps the per-layer cycle count at the paper's
// (ceil(d_in/W_SYS) + log2 W_SYS) x ceil(d_out/H_SYS), which has no term for a vertical skew.
module systolic_array #(
  parameter int W_SYS    = 32,
  parameter int H_SYS    = 32,
  parameter int DATA_W   = 8,
  parameter int ACC_W    = 32,
  parameter int RF_DEPTH = 20
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_shift,
  input  logic signed [DATA_W-1:0]    w_row [H_SYS],
  input  logic                        w_commit,
  input  logic [$clog2(RF_DEPTH)-1:0] w_idx,
  input  logic                        mac_en,
  input  logic                        clr,
  input  logic [$clog2(RF_DEPTH)-1:0] rd_idx,
  input  logic signed [DATA_W-1:0]    x_col [W_SYS],
  output logic signed [ACC_W-1:0]     acc   [H_SYS][W_SYS]
);

  // wchain[r][c] is the weight entering PE (r,c); wchain[r][W_SYS] leaves the row unused.
  logic signed [DATA_W-1:0] wchain [H_SYS][W_SYS+1];

  for (genvar r = 0; r < H_SYS; r++) begin : g_row
    assign wchain[r][0] = w_row[r];
    for (genvar c = 0; c < W_SYS; c++) begin : g_col
      pe #(.DATA_W(DATA_W), .ACC_W(ACC_W), .RF_DEPTH(RF_DEPTH)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .w_shift (w_shift),
        .w_in    (wchain[r][c]),
        .w_out   (wchain[r][c+1]),
        .w_commit(w_commit),
        .w_idx   (w_idx),
        .mac_en  (mac_en),
        .clr     (clr),
        .rd_idx  (rd_idx),
        .x_in    (x_col[c]),
        .acc     (acc[r][c])
      );
    end
  end

endmodule
