// synergic_pkg: types and constants shared by the NN and HD processing modules.
//
// The NN side is configured per layer by a layer descriptor (layer_desc_t): the layer's input
// and output sizes, where its weights start in the weight buffer, and what the ALUs do to the
// pre-activations (alu_cfg_t). The descriptor stands in for the instruction stream a compiler
// would emit; its format is this design's own.
//
// hv_bit() is the pseudo-random generator behind the hard-wired hypervectors of the HD side
// (feature seeds, the first level hypervector and the class centroids). It is a fixed integer
// hash of (salt, row, bit), evaluated at elaboration time, so every such table is a set of
// constants. The hash is this design's choice; trained values would replace it.
package synergic_pkg;

  localparam int DIM_W  = 16;  // width of a layer-size field
  localparam int WADDR_W = 24; // width of a weight-buffer base address

  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,  // identity
    ACT_RELU = 2'd1,  // max(0, y)
    ACT_PACT = 2'd2   // clip(y, 0, alpha)
  } act_e;

  typedef struct packed {
    logic              bn_en;      // apply batch normalisation scale/shift
    act_e              act;        // activation function
    logic [4:0]        shift;      // arithmetic right shift after the BN multiply
    logic signed [7:0] pact_alpha; // PACT clipping level (activation units)
  } alu_cfg_t;

  typedef struct packed {
    logic [DIM_W-1:0]   d_in;   // neurons feeding this layer
    logic [DIM_W-1:0]   d_out;  // neurons of this layer
    logic [WADDR_W-1:0] wbase;  // first weight-buffer word of this layer
    alu_cfg_t           alu;
  } layer_desc_t;

  // One pseudo-random bit for hypervector tables: bit b of row a of table 'salt'.
  function automatic bit hv_bit(int unsigned salt, int unsigned a, int unsigned b);
    int unsigned x;
    x = (salt * 32'h9E3779B1) ^ (a * 32'h85EBCA77) ^ (b * 32'hC2B2AE3D) ^ 32'h27D4EB2F;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A2D39;
    x = x ^ (x >> 15);
    return x[13];
  endfunction

endpackage
