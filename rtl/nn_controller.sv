// nn_controller: static sequencer of the NN processing module.
//
// For each layer l (descriptor layers[l]) with K = ceil(d_in/W_SYS) input chunks and
// T = ceil(d_out/H_SYS) output tiles, and for each tile j, it runs four phases:
//   LOAD    K*W_SYS weight-buffer reads, word wbase + (j*K + k)*W_SYS + s for chunk k and
//           shift s; each word enters the array one cycle after its read (w_shift) and after
//           the W_SYS-th shift of chunk k the row is committed to register entry k (w_commit).
//           Two more cycles drain the read and commit pipeline: K*W_SYS + 2 cycles.
//   STREAM  K cycles: chunk k of the input buffer meets register entry k in every PE, the PEs
//           accumulate (clr on k = 0).
//   REDUCE  log2 W_SYS cycles for the row tree adders.
//   WRITE   1 cycle: tree sums into the output buffer's pre-activation row.
//   ALU     1 cycle: ALUs write activations to the output buffer and reroute them into the
//           other input-buffer bank (alu_we, tile_base, tile_n).
// STREAM + REDUCE is what the paper's per-layer cycle estimate
// (ceil(d_in/W_SYS) + log2 W_SYS) x ceil(d_out/H_SYS) counts; compute_cycles accumulates
// exactly those cycles over a run. Layer l reads input bank l%2. 'done' pulses for one cycle
// after the ALU phase of the last tile of the last layer; 'start' is ignored while busy.
//
// The static schedule is the paper's idea (a compiler emits it); this particular phase order,
// the weight layout in the buffer and the descriptor format are this design's own.
module nn_controller
  import synergic_pkg::*;
#(
  parameter int W_SYS      = 32,
  parameter int H_SYS      = 32,
  parameter int RF_DEPTH   = 20,
  parameter int NUM_LAYERS = 2,
  parameter int WB_DEPTH   = 25600,
  parameter int IB_DEPTH   = 640
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  layer_desc_t                   layers [NUM_LAYERS],
  output logic                          busy,
  output logic                          done,
  // weight buffer / array weight loading
  output logic [$clog2(WB_DEPTH)-1:0]   wb_raddr,
  output logic                          w_shift,
  output logic                          w_commit,
  output logic [$clog2(RF_DEPTH)-1:0]   w_idx,
  // array compute
  output logic                          mac_en,
  output logic                          clr,
  output logic [$clog2(RF_DEPTH)-1:0]   rd_idx,
  // input buffer read
  output logic                          ib_rd_bank,
  output logic [$clog2(IB_DEPTH)-1:0]   ib_chunk_idx,
  output logic [$clog2(IB_DEPTH+1)-1:0] ib_limit,
  // output side
  output logic                          pre_we,
  output logic                          alu_we,
  output logic                          rr_bank,
  output logic [$clog2(IB_DEPTH)-1:0]   tile_base,
  output logic [$clog2(H_SYS+1)-1:0]    tile_n,
  output logic [$clog2(NUM_LAYERS+1)-1:0] layer,
  output logic                          last_layer,
  output alu_cfg_t                      alu_cfg,
  // statistics
  output logic [31:0]                   compute_cycles
);

  localparam int LOG2W = (W_SYS > 1) ? $clog2(W_SYS) : 0;
  localparam int RFW   = $clog2(RF_DEPTH);
  localparam int LW    = $clog2(NUM_LAYERS + 1);
  localparam int LIW   = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_DRAIN, S_STREAM, S_REDUCE, S_WRITE, S_ALU, S_DONE} state_e;

  state_e state;
  logic [LW-1:0]    l;
  logic [15:0]      j, k, s, cnt;
  logic [15:0]      kk, tt;   // chunks and tiles of the current layer
  layer_desc_t      cur;
  logic             iss_q, last_q, commit_q;
  logic [RFW-1:0]   k_q, cidx_q;

  assign cur = layers[LIW'(l)];
  assign kk  = 16'((int'(cur.d_in)  + W_SYS - 1) / W_SYS);
  assign tt  = 16'((int'(cur.d_out) + H_SYS - 1) / H_SYS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      l <= '0; j <= '0; k <= '0; s <= '0; cnt <= '0;
      iss_q <= 1'b0; last_q <= 1'b0; commit_q <= 1'b0; k_q <= '0; cidx_q <= '0;
      compute_cycles <= '0;
    end else begin
      // read -> shift -> commit pipeline of the weight loading
      iss_q    <= (state == S_LOAD);
      last_q   <= (state == S_LOAD) && (s == 16'(W_SYS - 1));
      k_q      <= RFW'(k);
      commit_q <= iss_q && last_q;
      cidx_q   <= k_q;

      unique case (state)
        S_IDLE: if (start) begin
          l <= '0; j <= '0; k <= '0; s <= '0;
          compute_cycles <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (s == 16'(W_SYS - 1)) begin
            s <= '0;
            if (k == kk - 1) begin
              k <= '0; cnt <= '0;
              state <= S_DRAIN;
            end else k <= k + 1;
          end else s <= s + 1;
        end
        S_DRAIN: begin
          if (cnt == 16'd1) begin
            cnt <= '0; k <= '0;
            state <= S_STREAM;
          end else cnt <= cnt + 1;
        end
        S_STREAM: begin
          compute_cycles <= compute_cycles + 1;
          if (k == kk - 1) begin
            k <= '0; cnt <= '0;
            state <= (LOG2W > 0) ? S_REDUCE : S_WRITE;
          end else k <= k + 1;
        end
        S_REDUCE: begin
          compute_cycles <= compute_cycles + 1;
          if (cnt == 16'(LOG2W - 1)) begin
            cnt <= '0;
            state <= S_WRITE;
          end else cnt <= cnt + 1;
        end
        S_WRITE: state <= S_ALU;
        S_ALU: begin
          if (j == tt - 1) begin
            j <= '0;
            if (int'(l) == NUM_LAYERS - 1) state <= S_DONE;
            else begin
              l <= l + 1;
              state <= S_LOAD;
            end
          end else begin
            j <= j + 1;
            state <= S_LOAD;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign done     = (state == S_DONE);
  assign wb_raddr = $clog2(WB_DEPTH)'(int'(cur.wbase) + (int'(j) * int'(kk) + int'(k)) * W_SYS + int'(s));
  assign w_shift  = iss_q;
  assign w_commit = commit_q;
  assign w_idx    = cidx_q;
  assign mac_en   = (state == S_STREAM);
  assign clr      = (state == S_STREAM) && (k == '0);
  assign rd_idx   = RFW'(k);
  assign ib_rd_bank   = l[0];
  assign ib_chunk_idx = $clog2(IB_DEPTH)'(k);
  assign ib_limit     = $clog2(IB_DEPTH+1)'(cur.d_in);
  assign pre_we   = (state == S_WRITE);
  assign alu_we   = (state == S_ALU);
  assign rr_bank  = ~l[0];
  assign tile_base = $clog2(IB_DEPTH)'(int'(j) * H_SYS);
  assign tile_n    = (int'(cur.d_out) - int'(j) * H_SYS >= H_SYS) ? $clog2(H_SYS+1)'(H_SYS)
                                                                   : $clog2(H_SYS+1)'(int'(cur.d_out) - int'(j) * H_SYS);
  assign layer      = l;
  assign last_layer = (int'(l) == NUM_LAYERS - 1);
  assign alu_cfg    = cur.alu;

  // The register file must hold every chunk of a layer's input.
  a_chunks_fit: assert property (@(posedge clk)
    (state == S_LOAD) |-> (int'(kk) <= RF_DEPTH && int'(kk) >= 1));
  a_tiles_fit: assert property (@(posedge clk)
    (state == S_ALU) |-> (int'(tile_base) + int'(tile_n) <= IB_DEPTH));

endmodule
