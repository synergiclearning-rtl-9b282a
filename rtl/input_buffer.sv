// input_buffer: holds the input vector of the layer being computed and hands the systolic
// array one W_SYS-wide chunk per cycle.
//
// Two banks work as a ping-pong pair: layer l reads bank l%2 while the activations it produces
// are rerouted into bank (l+1)%2, ready to be the next layer's input. Bank 0 is also written
// element by element from external memory (ext_*) with the network input. A rerouted write
// (rr_*) stores up to H_SYS elements at rr_base .. rr_base+rr_n-1 in one cycle.
//
// Read is combinational: rd_chunk[c] is element rd_chunk_idx*W_SYS + c of bank rd_bank, or zero
// where that index is at or beyond rd_limit (the layer's input size), so the last, partial
// chunk is zero-padded. That the output side is rerouted into the input buffer is from the
// paper; the two banks, the zero padding and the port shapes are this design's choices.
module input_buffer #(
  parameter int W_SYS  = 32,
  parameter int H_SYS  = 32,
  parameter int DATA_W = 8,
  parameter int DEPTH  = 640
) (
  input  logic                        clk,
  input  logic                        ext_we,
  input  logic                        ext_bank,
  input  logic [$clog2(DEPTH)-1:0]    ext_addr,
  input  logic signed [DATA_W-1:0]    ext_data,
  input  logic                        rr_we,
  input  logic                        rr_bank,
  input  logic [$clog2(DEPTH)-1:0]    rr_base,
  input  logic [$clog2(H_SYS+1)-1:0]  rr_n,
  input  logic signed [DATA_W-1:0]    rr_data [H_SYS],
  input  logic                        rd_bank,
  input  logic [$clog2(DEPTH)-1:0]    rd_chunk_idx,
  input  logic [$clog2(DEPTH+1)-1:0]  rd_limit,
  output logic signed [DATA_W-1:0]    rd_chunk [W_SYS]
);

  localparam int AW = $clog2(DEPTH);

  logic signed [DATA_W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (rr_we) begin
      for (int r = 0; r < H_SYS; r++) begin
        if (r < int'(rr_n) && int'(rr_base) + r < DEPTH)
          mem[rr_bank][AW'(int'(rr_base) + r)] <= rr_data[r];
      end
    end
    if (ext_we) mem[ext_bank][ext_addr] <= ext_data;
  end

  always_comb begin
    for (int c = 0; c < W_SYS; c++) begin
      int idx;
      idx = int'(rd_chunk_idx) * W_SYS + c;
      if (idx < int'(rd_limit) && idx < DEPTH) rd_chunk[c] = mem[rd_bank][AW'(idx)];
      else                                     rd_chunk[c] = '0;
    end
  end

endmodule
