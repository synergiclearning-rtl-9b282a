// nn_alu: post-processing of one pre-activation (one ALU per array row).
//
// Combinational. Steps, in order:
//   1. batch normalisation, when cfg.bn_en:  y = ((pre * gamma) >>> cfg.shift) + beta
//      otherwise a plain requantising shift:  y = pre >>> cfg.shift
//   2. activation: ACT_NONE y; ACT_RELU max(0, y); ACT_PACT min(max(0, y), cfg.pact_alpha)
//   3. saturation to a signed DATA_W-bit activation.
// Batch normalisation and the ReLU / PACT activations are the operations the paper lists for
// the ALUs (PACT on the second feature-extraction layer); integer gamma/beta with a shift, and the
// saturation, are this design's choices. Pooling, also listed by the paper, is not implemented:
// the networks it evaluates are fully connected and it gives no pooling window.
module nn_alu
  import synergic_pkg::*;
#(
  parameter int DATA_W  = 8,
  parameter int ACC_W   = 32,
  parameter int GAMMA_W = 16
) (
  input  logic signed [ACC_W-1:0]   pre,
  input  logic signed [GAMMA_W-1:0] gamma,
  input  logic signed [ACC_W-1:0]   beta,
  input  alu_cfg_t                  cfg,
  output logic signed [DATA_W-1:0]  act
);

  localparam int PW = ACC_W + GAMMA_W;
  localparam logic signed [PW-1:0] MAXV = PW'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 << (DATA_W - 1));

  logic signed [PW-1:0] prod, y, a;

  always_comb begin
    if (cfg.bn_en) begin
      prod = PW'(pre) * PW'(gamma);
      y    = (prod >>> cfg.shift) + PW'(beta);
    end else begin
      prod = PW'(pre);
      y    = prod >>> cfg.shift;
    end
    unique case (cfg.act)
      ACT_RELU: a = (y < 0) ? '0 : y;
      ACT_PACT: a = (y < 0) ? '0 : ((y > PW'(cfg.pact_alpha)) ? PW'(cfg.pact_alpha) : y);
      default:  a = y;
    endcase
    if (a > MAXV)      act = DATA_W'(MAXV);
    else if (a < MINV) act = DATA_W'(MINV);
    else               act = DATA_W'(a);
  end

endmodule
