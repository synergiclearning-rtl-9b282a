// hd_bundling: majority counters and comparators that bundle D_L bound hypervectors into one
// encoded binary hypervector.
//
// For every dimension b there is a majority counter of CNT_W = ceil(log2(D_L+1)) + 1 bits whose
// value is (#vectors with bit b set) - (#vectors with bit b clear), i.e. +1 per set bit and -1
// per clear bit, as the paper defines it. The comparator then sets enc[b] = (count > 0), so a
// dimension becomes 1 when most inputs have it set; a tie gives 0. The count is formed by a
// parallel sum (the module is fully parallel), not by stepping through the vectors.
//
// Pipelined: 'cnt' is registered one cycle after 'bound' and 'enc' one cycle after 'cnt'.
module hd_bundling #(
  parameter int D_L   = 617,
  parameter int D_H   = 16,
  parameter int CNT_W = $clog2(D_L + 1) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [D_H-1:0]          bound [D_L],
  output logic signed [CNT_W-1:0] cnt   [D_H],
  output logic [D_H-1:0]          enc
);

  logic signed [CNT_W-1:0] cnt_d [D_H];

  // One counter per dimension, each its own block.
  for (genvar b = 0; b < D_H; b++) begin : g_cnt
    always_comb begin
      logic [CNT_W-1:0] ones;
      ones = '0;
      for (int i = 0; i < D_L; i++) ones = ones + CNT_W'(bound[i][b]);
      cnt_d[b] = signed'(ones + ones) - signed'(CNT_W'(D_L));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < D_H; b++) cnt[b] <= '0;
      enc <= '0;
    end else begin
      for (int b = 0; b < D_H; b++) begin
        cnt[b] <= cnt_d[b];
        enc[b] <= (cnt[b] > 0);
      end
    end
  end

endmodule
