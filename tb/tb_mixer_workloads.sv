// tb_mixer_workloads: runs the tagger in the other configurations evaluated for
// this architecture besides the default 64 x 16: 16 and 32 particles with all 16
// features, and 16 and 32 particles with only pT, eta and phi (3 features,
// where the head's first layer becomes 3 -> 16). Each configuration is a
// re-parameterised instance checked jet by jet against the reference model.
// The 128-particle configurations are left out: their simulation models take
// too long to build for a routine regression.
module tb_mixer_workloads;
  logic clk = 1'b0, rst = 1'b1;
  int   c [4], f [4];
  logic d [4];
  int   checks, failures;

  always #5 clk = ~clk;

  mixer_workload_run #(.NP(16),  .NF(16)) u_16x16  (.clk, .rst, .checks(c[0]), .failures(f[0]), .done(d[0]));
  mixer_workload_run #(.NP(32),  .NF(16)) u_32x16  (.clk, .rst, .checks(c[1]), .failures(f[1]), .done(d[1]));
  mixer_workload_run #(.NP(16),  .NF(3))  u_16x3   (.clk, .rst, .checks(c[2]), .failures(f[2]), .done(d[2]));
  mixer_workload_run #(.NP(32),  .NF(3))  u_32x3   (.clk, .rst, .checks(c[3]), .failures(f[3]), .done(d[3]));

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks   = 0;
    failures = 0;
    for (int i = 0; i < 4; i++) begin
      checks   += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
