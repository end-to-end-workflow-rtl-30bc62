// batchnorm: inference-time batch normalisation of the hidden layer, with
// quantisation of the result to the hidden activation format.
//
// The trained gamma, beta, moving mean and moving variance of each neuron are
// folded offline into one scale S = gamma / sqrt(var + eps) and one shift
// T = beta - mean * S, expressed in fixed point. Each output is
//   y = sat_ACT_W( (x * S_q) >>> (BN_FRAC - ACT_FRAC) + T_q )
// where x is in integer ADC units, S_q has BN_FRAC fractional bits and y and
// T_q are signed Q5.10. The arithmetic shift rounds toward minus infinity.
// Saturation is the quantiser of the hidden activation; the published
// network has no other activation between this layer and the output layer.
//
// Timing: one register stage, in_valid in cycle c gives out_valid in c+1.
//
// From the published design: batch normalisation of the 4 hidden values
// (gamma, beta, moving_mean, moving_variance of size 4). This design's
// choices: the folding, the number formats and the placeholder defaults
// (S = 2^-20, which maps the full layer-1 range of about +-2^25 onto the
// +-32 activation range, and T = 0).
module batchnorm import nn_pkg::*; #(
  parameter int unsigned N = nn_pkg::N_HIDDEN,
  parameter logic [BN_SCALE_W*N-1:0] S = {N{BN_SCALE_W'(1 << (BN_FRAC - 20))}},
  parameter logic [ACT_W*N-1:0]      T = '0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [H_W-1:0]   x [N],
  output logic                    out_valid,
  output logic signed [ACT_W-1:0] y [N]
);
  always_ff @(posedge clk) begin
    for (int o = 0; o < N; o++) begin
      logic signed [63:0] t;
      t = (64'(x[o]) * 64'($signed(S[BN_SCALE_W*o +: BN_SCALE_W]))) >>> (BN_FRAC - ACT_FRAC);
      t = t + 64'($signed(T[ACT_W*o +: ACT_W]));
      y[o] <= ACT_W'(sat_signed(t, ACT_W));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
