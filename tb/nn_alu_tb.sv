// nn_alu_tb: self-checking test of the ALU.
// Applies random pre-activations, batch-norm parameters, shifts and all activation modes
// and compares with a 64-bit reference computed here: BN or shift, then none / ReLU / PACT,
// then saturation to 8 bits. Directed cases cover saturation at both ends and the PACT clip.
module nn_alu_tb;
  import synergic_pkg::*;
  localparam int DATA_W = 8, ACC_W = 32, GAMMA_W = 16;
  logic signed [ACC_W-1:0]   pre;
  logic signed [GAMMA_W-1:0] gamma;
  logic signed [ACC_W-1:0]   beta;
  alu_cfg_t                  cfg;
  logic signed [DATA_W-1:0]  act;
  int checks = 0, failures = 0;

  nn_alu #(.DATA_W(DATA_W), .ACC_W(ACC_W), .GAMMA_W(GAMMA_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_alu(longint p, longint g, longint b, alu_cfg_t c);
    longint y;
    if (c.bn_en) y = ((p * g) >>> c.shift) + b;
    else         y = p >>> c.shift;
    if (c.act == ACT_RELU && y < 0) y = 0;
    if (c.act == ACT_PACT) begin
      if (y < 0) y = 0;
      if (y > longint'(c.pact_alpha)) y = c.pact_alpha;
    end
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return y;
  endfunction

  task automatic apply(longint p, longint g, longint b, alu_cfg_t c);
    longint e;
    pre = ACC_W'(p); gamma = GAMMA_W'(g); beta = ACC_W'(b); cfg = c;
    #1;
    e = ref_alu(longint'(pre), longint'(gamma), longint'(beta), c);
    checks++;
    if (longint'(act) != e) begin
      failures++;
      $display("FAIL pre=%0d g=%0d b=%0d bn=%0d act=%0d sh=%0d: got %0d expected %0d",
               pre, gamma, beta, c.bn_en, c.act, c.shift, act, e);
    end
  endtask

  initial begin
    alu_cfg_t c;
    // directed
    c = '{bn_en: 1'b0, act: ACT_NONE, shift: 5'd0, pact_alpha: 8'sd0};
    apply(1000, 0, 0, c);    // saturate high
    apply(-1000, 0, 0, c);   // saturate low
    apply(-5, 0, 0, c);
    c.act = ACT_RELU; apply(-5, 0, 0, c); apply(77, 0, 0, c);
    c.act = ACT_PACT; c.pact_alpha = 8'sd40; apply(77, 0, 0, c); apply(-3, 0, 0, c); apply(25, 0, 0, c);
    c = '{bn_en: 1'b1, act: ACT_NONE, shift: 5'd4, pact_alpha: 8'sd100};
    apply(300, -7, 12, c); apply(-300, 33, -5, c);
    // random
    for (int t = 0; t < 3000; t++) begin
      c.bn_en = 1'($urandom);
      c.act   = act_e'($urandom_range(2));
      c.shift = 5'($urandom_range(20));
      c.pact_alpha = 8'($urandom_range(127));
      apply(longint'(int'($urandom)) >>> $urandom_range(24), longint'(16'($urandom)) >>> 4,
            longint'(int'($urandom)) >>> $urandom_range(31), c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
