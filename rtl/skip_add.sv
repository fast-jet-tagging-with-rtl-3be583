// skip_add: the single residual connection of the network.
//
// Adds the quantized network input (the skip leg, delayed to line up) to the
// output of the particle mixer MLP2, element by element, and saturates the sum to
// the 16-bit activation container. Saturation is this design's choice.
//
// Interface: a, b, y are NP x NF tensors of act_t; i_valid belongs to the b leg
// (the caller aligns a).
// Timing: one register stage, one jet per cycle.
module skip_add
  import mixer_pkg::*;
#(
  parameter int NP = NP_DEF,
  parameter int NF = NF_DEF
) (
  input  logic clk,
  input  logic rst,
  input  logic i_valid,
  input  act_t a [NP][NF],
  input  act_t b [NP][NF],
  output logic o_valid,
  output act_t y [NP][NF]
);

  localparam logic signed [ACT_W:0] MAXV = (ACT_W+1)'(2**(ACT_W-1) - 1);
  localparam logic signed [ACT_W:0] MINV = -(ACT_W+1)'(2**(ACT_W-1));

  for (genvar p = 0; p < NP; p++) begin : g_p
    for (genvar f = 0; f < NF; f++) begin : g_f
      logic signed [ACT_W:0] s;
      act_t                  sat;
      always_comb begin
        s = (ACT_W+1)'(a[p][f]) + (ACT_W+1)'(b[p][f]);
        if (s > MAXV)      sat = act_t'(MAXV);
        else if (s < MINV) sat = act_t'(MINV);
        else               sat = act_t'(s);
      end
      always_ff @(posedge clk) y[p][f] <= sat;
    end
  end

  always_ff @(posedge clk)
    if (rst) o_valid <= 1'b0;
    else     o_valid <= i_valid;

endmodule
