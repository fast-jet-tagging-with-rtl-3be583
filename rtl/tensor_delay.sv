// tensor_delay: D-cycle delay line for an NP x NF activation tensor.
//
// Carries the quantized network input alongside MLP1 and MLP2 so that it meets
// the MLP2 output at the skip adder in the same cycle. Plain registers, no reset
// (only valid bits are reset in this design). D must be at least 1.
module tensor_delay
  import mixer_pkg::*;
#(
  parameter int NP = NP_DEF,
  parameter int NF = NF_DEF,
  parameter int D  = 3
) (
  input  logic clk,
  input  act_t x [NP][NF],
  output act_t y [NP][NF]
);

  act_t pipe [D][NP][NF];

  always_ff @(posedge clk) begin
    pipe[0] <= x;
    for (int s = 1; s < D; s++) pipe[s] <= pipe[s-1];
  end

  assign y = pipe[D-1];

endmodule
