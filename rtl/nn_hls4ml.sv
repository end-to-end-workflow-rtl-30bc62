// nn_hls4ml: the classifier network, an 800x4x1 multilayer perceptron with
// ternary weights, fully unrolled and pipelined.
//
//   x (800 x 14-bit unsigned) -> dense1_ternary (800x4, gain, bias; 5 stages)
//     -> batchnorm (4; 1 stage) -> dense2_ternary (4x1; 1 stage)
//     -> logit pair register (1 stage)
//
// A start pulse in cycle c, with the window on x, gives valid in cycle
// c + NN_LATENCY = c + 8 with the two logits of one prediction. The network
// has a single output neuron z; it is reported as the pair
// (logit_g, logit_e) = (-z, z), so that the stored pair follows the
// ground/excited logit convention and softmax over the pair equals the
// sigmoid of 2z. Words are signed Q.10 in 32 bits.
//
// From the published design: layer structure and sizes, ternary weights,
// full unrolling, eight cycles of inference latency, two stored logits per
// prediction. This design's choices: the split of the eight cycles over the
// layers, the (-z, z) pairing and all number formats.
module nn_hls4ml import nn_pkg::*; #(
  parameter int unsigned WINDOW = nn_pkg::WINDOW_SIZE,
  parameter int unsigned NH     = nn_pkg::N_HIDDEN,
  parameter logic [2*2*WINDOW*NH-1:0] W1 =
    (2*2*WINDOW*NH)'(nn_pkg::ternary_pattern(2*WINDOW*NH, 32'h1234_5678)),
  parameter logic [H_W*NH-1:0]        B1 = '0,
  parameter logic [BN_SCALE_W*NH-1:0] BN_S = {NH{BN_SCALE_W'(1 << (BN_FRAC - 20))}},
  parameter logic [ACT_W*NH-1:0]      BN_T = '0,
  parameter logic [2*NH-1:0]          W2 = (2*NH)'(nn_pkg::ternary_pattern(NH, 32'h0BAD_CAFE)),
  parameter logic [ACT_W-1:0]         B2 = '0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [ADC_W-1:0]          x [2*WINDOW],
  input  logic [SF_W-1:0]           scale,
  output logic                      valid,
  output logic signed [LOGIT_W-1:0] logit_g,
  output logic signed [LOGIT_W-1:0] logit_e
);
  logic                      v1, v2, v3;
  logic signed [H_W-1:0]     h1 [NH];
  logic signed [ACT_W-1:0]   h2 [NH];
  logic signed [LOGIT_W-1:0] z;

  dense1_ternary #(.N_IN(2*WINDOW), .N_OUT(NH), .W(W1), .B(B1)) u_dense1 (
    .clk, .rst_n, .in_valid(start), .x, .scale, .out_valid(v1), .y(h1));

  batchnorm #(.N(NH), .S(BN_S), .T(BN_T)) u_bn (
    .clk, .rst_n, .in_valid(v1), .x(h1), .out_valid(v2), .y(h2));

  dense2_ternary #(.N_IN(NH), .W(W2), .B(B2)) u_dense2 (
    .clk, .rst_n, .in_valid(v2), .h(h2), .out_valid(v3), .z);

  always_ff @(posedge clk) begin
    if (!rst_n) valid <= 1'b0;
    else        valid <= v3;
    logit_e <= z;
    logit_g <= -z;
  end
endmodule
