// hd_binding_units: binds every feature to its value, D_L binding units in parallel.
//
// Binding of binary hypervectors is element-wise XOR: bound[i] = s_i ^ level_hv[i], where s_i
// is the hard-wired seed hypervector of feature i. The seeds are constants generated by
// synergic_pkg::hv_bit(SEED, i, b); a trained design would hard-wire its own. The XOR units
// and hard-wired feature vectors follow the paper; the seed generator is this design's.
// Combinational. Because the seeds are constants, each bound bit is a wire or an inverter of
// its level bit after synthesis.
module hd_binding_units
  import synergic_pkg::*;
#(
  parameter int          D_L  = 617,
  parameter int          D_H  = 16,
  parameter int unsigned SEED = 32'd1
) (
  input  logic [D_H-1:0] level_hv [D_L],
  output logic [D_H-1:0] bound    [D_L]
);

  for (genvar i = 0; i < D_L; i++) begin : g_feat
    logic [D_H-1:0] s;
    for (genvar b = 0; b < D_H; b++) begin : g_bit
      assign s[b] = hv_bit(SEED, i, b);
    end
    assign bound[i] = level_hv[i] ^ s;
  end

endmodule
