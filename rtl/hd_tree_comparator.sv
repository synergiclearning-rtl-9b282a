// hd_tree_comparator: finds the class whose centroid is nearest to the query.
//
// A binary tree of "<" comparators: each node passes on the (distance, index) pair of its
// smaller input; on equal distances the left input, which carries the lower class index, wins.
// log2 C levels of combinational comparators, with the result registered (one cycle after
// hdist). The tree of '<' comparators follows the paper; the tie rule is this design's choice.
module hd_tree_comparator #(
  parameter int C      = 26,
  parameter int DIST_W = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [DIST_W-1:0]        hdist [C],
  output logic [$clog2(C)-1:0]     cls,
  output logic [DIST_W-1:0]        min_dist
);

  localparam int L  = (C > 1) ? $clog2(C) : 0;
  localparam int NP = 1 << L;
  localparam int IW = (C > 1) ? $clog2(C) : 1;

  logic [DIST_W-1:0] v  [L+1][NP];
  logic [IW-1:0]     ix [L+1][NP];
  logic              ok [L+1][NP];   // node holds a real class

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      v[0][i]  = (i < C) ? hdist[i] : '1;
      ix[0][i] = IW'(i);
      ok[0][i] = (i < C);
    end
    for (int l = 1; l <= L; l++) begin
      for (int i = 0; i < NP; i++) begin
        if (i < (NP >> l)) begin
          if (!ok[l-1][2*i+1] || (ok[l-1][2*i] && !(v[l-1][2*i+1] < v[l-1][2*i]))) begin
            v[l][i] = v[l-1][2*i]; ix[l][i] = ix[l-1][2*i]; ok[l][i] = ok[l-1][2*i];
          end else begin
            v[l][i] = v[l-1][2*i+1]; ix[l][i] = ix[l-1][2*i+1]; ok[l][i] = 1'b1;
          end
        end else begin
          v[l][i] = '0; ix[l][i] = '0; ok[l][i] = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cls <= '0; min_dist <= '0;
    end else begin
      cls <= ix[L][0]; min_dist <= v[L][0];
    end
  end

endmodule
