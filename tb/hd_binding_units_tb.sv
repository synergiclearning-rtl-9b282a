// hd_binding_units_tb: self-checking test of the binding units (D_L=7, D_H=16).
// Checks bound[i] = level_hv[i] XOR s_i for random level vectors, with s_i rebuilt here from
// the seed generator, and that binding twice with the same seed restores the value
// (unbinding).
module hd_binding_units_tb;
  import synergic_pkg::*;
  localparam int D_L = 7, D_H = 16;
  localparam int unsigned SEED = 32'd1;
  logic [D_H-1:0] level_hv [D_L];
  logic [D_H-1:0] bound [D_L];
  logic [D_H-1:0] bound2 [D_L];
  int checks = 0, failures = 0;

  hd_binding_units #(.D_L(D_L), .D_H(D_H), .SEED(SEED)) dut (.*);
  hd_binding_units #(.D_L(D_L), .D_H(D_H), .SEED(SEED)) dut2 (.level_hv(bound), .bound(bound2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < D_L; i++) level_hv[i] = D_H'($urandom);
      #1;
      for (int i = 0; i < D_L; i++) begin
        logic [D_H-1:0] s;
        for (int b = 0; b < D_H; b++) s[b] = hv_bit(SEED, i, b);
        checks += 2;
        if (bound[i] !== (level_hv[i] ^ s)) begin
          failures++; $display("FAIL bind %0d: %h vs %h", i, bound[i], level_hv[i] ^ s);
        end
        if (bound2[i] !== level_hv[i]) begin
          failures++; $display("FAIL unbind %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
