// tb_dense_bn: checks the shift-add dense layer against plain multiplication.
// Two instances (16->16 feature layer, 8->8 particle layer) get 300 random input
// vectors each; every output must equal bias + sum(weight * x) exactly.
module tb_dense_bn;
  import mixer_pkg::*;
  import mixer_ref_pkg::*;

  int checks = 0, failures = 0;

  act_t x0 [16];
  acc_t y0 [16];
  act_t x1 [8];
  acc_t y1 [8];

  dense_bn #(.IN(16), .OUT(16), .LAYER(L_M1A)) dut0 (.x(x0), .y(y0));
  dense_bn #(.IN(8),  .OUT(8),  .LAYER(L_M2))  dut1 (.x(x1), .y(y1));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t v0, v1, e0, e1;
    int nonzero;
    v0 = new[16];
    v1 = new[8];
    nonzero = 0;
    for (int o = 0; o < 16; o++) for (int i = 0; i < 16; i++) if (weight(L_M1A, o, i) != 0) nonzero++;
    if (nonzero == 0 || nonzero == 256) failures++;   // the layer must be sparse but not empty
    checks++;
    for (int t = 0; t < 300; t++) begin
      foreach (v0[i]) begin v0[i] = rand_act(); x0[i] = act_t'(v0[i]); end
      foreach (v1[i]) begin v1[i] = rand_act(); x1[i] = act_t'(v1[i]); end
      #1;
      e0 = ref_dense(L_M1A, v0, 16);
      e1 = ref_dense(L_M2, v1, 8);
      foreach (e0[o]) begin
        checks++;
        if (longint'(y0[o]) != e0[o]) begin
          failures++;
          if (failures < 5) $display("dut0 o=%0d got %0d exp %0d", o, y0[o], e0[o]);
        end
      end
      foreach (e1[o]) begin
        checks++;
        if (longint'(y1[o]) != e1[o]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
