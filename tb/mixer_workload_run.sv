// mixer_workload_run: drives one mlp_mixer_top configuration (NP particles of NF
// features) with N_JETS random jets, one per cycle, and compares every class
// score and the latency with the reference model. Reports its counts on ports
// so that a parent testbench can run several configurations side by side.
module mixer_workload_run
  import mixer_pkg::*;
  import mixer_ref_pkg::*;
#(
  parameter int NP     = 16,
  parameter int NF     = 16,
  parameter int N_JETS = 20
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);

  localparam int NH = NH_DEF;
  localparam int NC = NC_DEF;

  act_t   x [NP][NF];
  act_t   y [NC];
  logic   i_valid, o_valid;
  longint cycle;
  vec_t   exp_q [$];
  longint t_q   [$];
  int     n_out;

  mlp_mixer_top #(.NP(NP), .NF(NF)) dut (.clk, .rst, .i_valid, .x, .o_valid, .scores(y));

  always @(posedge clk)
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;

  always @(posedge clk) begin
    if (!rst && o_valid) begin
      vec_t   e;
      longint t;
      checks++;
      if (exp_q.size() == 0) failures++;
      else begin
        e = exp_q.pop_front();
        t = t_q.pop_front();
        if (cycle - t != longint'(LATENCY)) failures++;
        for (int k = 0; k < NC; k++) begin
          checks++;
          if (longint'(y[k]) != e[k]) failures++;
        end
        n_out++;
      end
    end
  end

  initial begin
    vec_t v;
    checks   = 0;
    failures = 0;
    done     = 1'b0;
    n_out    = 0;
    i_valid  = 1'b0;
    v = new[NP*NF];
    @(negedge rst);
    for (int j = 0; j < N_JETS; j++) begin
      @(negedge clk);
      foreach (v[k]) v[k] = rand_act();
      for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) x[p][f] = act_t'(v[p*NF+f]);
      i_valid = 1'b1;
      exp_q.push_back(ref_model(v, NP, NF, NH, NC));
      t_q.push_back(cycle);
    end
    @(negedge clk) i_valid = 1'b0;
    repeat (LATENCY + 4) @(posedge clk);
    checks++;
    if (n_out != N_JETS) failures++;
    $display("workload NP=%0d NF=%0d: jets=%0d checks=%0d failures=%0d", NP, NF, n_out, checks, failures);
    done = 1'b1;
  end

endmodule
