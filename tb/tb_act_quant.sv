// tb_act_quant: checks the per-element quantizer against a real-valued model.
// One ReLU instance (hidden layer, 11 fraction bits in) and one signed instance
// (input layer, particle 40, 8 fraction bits in) get 500 random vectors; every
// output must match, and ReLU clamping, saturation and pruning must each occur.
module tb_act_quant;
  import mixer_pkg::*;
  import mixer_ref_pkg::*;

  int checks = 0, failures = 0;

  acc_t a0 [16], a1 [16];
  act_t q0 [16], q1 [16];

  act_quant #(.N(16), .LAYER(L_M1A), .ROW(3), .RELU(1'b1), .FRAC_IN(DENSE_FRAC)) dut0 (.a(a0), .q(q0));
  act_quant #(.N(16), .LAYER(L_IN), .ROW(40), .RELU(1'b0), .FRAC_IN(ACT_F), .NPART(64)) dut1 (.a(a1), .q(q1));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, e;
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 16; i++) begin
        a0[i] = acc_t'(rand_act() * 32);
        a1[i] = acc_t'(rand_act());
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        e = ref_quant(longint'(a0[i]), DENSE_FRAC, act_fmt(L_M1A, 3, i, 64), 1'b1);
        checks++;
        if (longint'(q0[i]) != e) begin
          failures++;
          if (failures < 5) $display("relu i=%0d a=%0d got %0d exp %0d", i, a0[i], q0[i], e);
        end
        e = ref_quant(longint'(a1[i]), ACT_F, act_fmt(L_IN, 40, i, 64), 1'b0);
        checks++;
        if (longint'(q1[i]) != e) begin
          failures++;
          if (failures < 5) $display("sgn i=%0d a=%0d got %0d exp %0d", i, a1[i], q1[i], e);
        end
      end
    end
    $display("mechanisms: relu=%0d sat=%0d pruned=%0d", n_relu, n_sat, n_pruned);
    checks += 3;
    if (n_relu == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_pruned == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
