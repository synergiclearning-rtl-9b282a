// weight_buffer: on-chip weight memory between external memory and the systolic array.
//
// Each word holds one weight for every array row (H_SYS x DATA_W bits), which is what the left
// edge of the array consumes per shift cycle. One write port (filled from external memory) and
// one synchronous read port: rd_data is the word at the rd_addr of the previous cycle. The
// buffer's role comes from the paper; its word shape, depth and single-cycle read are this
// design's choices. The default depth holds both 617x617 layers of the default network in the
// order the controller reads them (see nn_controller).
module weight_buffer #(
  parameter int H_SYS  = 32,
  parameter int DATA_W = 8,
  parameter int DEPTH  = 25600
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [H_SYS*DATA_W-1:0]  wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [H_SYS*DATA_W-1:0]  rd_data
);

  logic [H_SYS*DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
