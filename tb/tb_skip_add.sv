// tb_skip_add: self-checking test of skip_add. Residual add of two 8 x 16 tensors with saturation.
// Random jets enter back to back with random one-cycle gaps; each output is
// compared with the reference model in mixer_ref_pkg and must appear exactly
// LAT cycles after its input (one jet per cycle, fixed latency). The test also
// counts how often each mechanism fired and fails if one never did.
// A watchdog ends a hung run.
module tb_skip_add;
  import mixer_pkg::*;
  import mixer_ref_pkg::*;

  localparam int LAT    = 1;
  localparam int N_JETS = 60;
  localparam int NP = 8;
  localparam int NF = 16;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1, i_valid = 1'b0, o_valid;
  longint cycle = 0;
  act_t a [NP][NF];
  act_t b [NP][NF];
  act_t y [NP][NF];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  skip_add #(.NP(NP), .NF(NF)) dut (.clk, .rst, .i_valid, .a, .b, .o_valid, .y);

  typedef struct { vec_t exp; longint t_in; } item_t;
  item_t q [$];
  int n_out = 0, n_gaps = 0, n_b2b = 0;

  initial begin : watchdog
    repeat (N_JETS * 3 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: order, latency and every output value.
  always @(posedge clk) begin
    if (!rst && o_valid) begin
      item_t it;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("output with no jet in flight");
      end else begin
        it = q.pop_front();
        if (cycle - it.t_in != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - it.t_in, LAT);
        end
        for (int k = 0; k < NP*NF; k++) begin
          checks++;
          if (longint'(y[k / NF][k % NF]) != it.exp[k]) begin
            failures++;
            if (failures < 6) $display("jet %0d elem %0d got %0d exp %0d", n_out, k, y[k / NF][k % NF], it.exp[k]);
          end
        end
        n_out++;
      end
    end
  end

  initial begin
    vec_t v;
    item_t it;
    bit prev;
    v = new[2*NP*NF];
    prev = 1'b0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int j = 0; j < N_JETS; ) begin
      @(negedge clk);
      if ($urandom_range(4) == 0) begin
        i_valid = 1'b0;
        n_gaps++;
        prev = 1'b0;
      end else begin
        foreach (v[k]) v[k] = rand_act();
        for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) begin
          a[p][f] = act_t'(v[p*NF+f]);
          b[p][f] = act_t'(v[NP*NF+p*NF+f]);
        end
        i_valid = 1'b1;
        if (prev) n_b2b++;
        prev = 1'b1;
        it.exp = ref_skip(sub(v, 0, NP*NF), sub(v, NP*NF, NP*NF));
        it.t_in = cycle;
        q.push_back(it);
        j++;
      end
    end
    @(negedge clk) i_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out != N_JETS || q.size() != 0) begin
      failures++;
      $display("jets out %0d of %0d", n_out, N_JETS);
    end
    $display("gaps=%0d back_to_back=%0d relu=%0d sat=%0d pruned=%0d skip_sat=%0d",
             n_gaps, n_b2b, n_relu, n_sat, n_pruned, n_skip_sat);
    checks++;
    if (n_gaps == 0 || n_b2b == 0) failures++;
    checks++;
    if (n_skip_sat == 0) begin failures++; $display("n_skip_sat never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
