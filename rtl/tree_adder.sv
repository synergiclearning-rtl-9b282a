// tree_adder: pipelined binary adder tree that sums the N partial sums of one array row.
//
// Level l (1..log2 N) adds pairs of level l-1 and registers the result, so the sum of the
// inputs presented in cycle t appears on 'sum' after log2 N clock edges, and a new set of
// inputs can enter every cycle. The tree has no enable; the controller knows its depth. N
// that is not a power of two is padded with zeros. The tree-of-adders structure and its depth
// log2 N come from the paper; one register per level is this design's choice.
module tree_adder #(
  parameter int N = 32,
  parameter int W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] in  [N],
  output logic signed [W-1:0] sum
);

  localparam int L  = (N > 1) ? $clog2(N) : 0;
  localparam int NP = 1 << L;

  logic signed [W-1:0] lvl [L+1][NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    if (i < N) begin : g_real
      assign lvl[0][i] = in[i];
    end else begin : g_pad
      assign lvl[0][i] = '0;
    end
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    for (genvar i = 0; i < NP; i++) begin : g_node
      if (i < (NP >> l)) begin : g_add
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) lvl[l][i] <= '0;
          else        lvl[l][i] <= lvl[l-1][2*i] + lvl[l-1][2*i+1];
        end
      end else begin : g_unused
        assign lvl[l][i] = '0;
      end
    end
  end

  assign sum = lvl[L][0];

endmodule
