// dense1_ternary: the first, fully unrolled dense layer of the classifier.
//
// Each of N_OUT neurons forms sum_i w[o][i] * x[i] over N_IN unsigned ADC
// inputs with ternary weights w in {-1, 0, +1}, so no multiplier is needed:
// every input is added, subtracted or dropped. The weights are parameters,
// as in a fully unrolled high-level-synthesis network, so synthesis removes
// the zero terms. The sum is reduced by a pipelined adder tree of fan-in 8
// (800 -> 100 -> 13 -> 2 -> 1, four register stages), then multiplied by the
// runtime scaling_factor (unsigned Q8.8, applied here rather than on every
// input, which is the same for a linear layer) and offset by the bias in a
// fifth stage, saturating to H_W bits.
//
// Timing: in_valid with x/scale in cycle c gives out_valid with y in cycle
// c+5. One new input set may enter every cycle.
//
// From the published design: 800x4 kernel and 4 biases, ternary weights,
// 14-bit unsigned inputs, full unrolling. This design's choices: the tree
// fan-in and stage split, the gain format and where it is applied, the
// integer output format and the placeholder weights.
module dense1_ternary import nn_pkg::*; #(
  parameter int unsigned N_IN  = nn_pkg::N_INPUTS,
  parameter int unsigned N_OUT = nn_pkg::N_HIDDEN,
  // ternary kernel, element (o, i) at bits [2(o*N_IN+i) +: 2]
  parameter logic [2*N_IN*N_OUT-1:0] W = 
    (2*N_IN*N_OUT)'(nn_pkg::ternary_pattern(N_IN*N_OUT, 32'h1234_5678)),
  // bias per neuron, integer ADC units, element o at bits [H_W*o +: H_W]
  parameter logic [H_W*N_OUT-1:0] B = '0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [ADC_W-1:0]       x [N_IN],
  input  logic [SF_W-1:0]        scale,
  output logic                   out_valid,
  output logic signed [H_W-1:0]  y [N_OUT]
);
  localparam int unsigned FAN = 8;
  localparam int unsigned G1  = (N_IN + FAN - 1) / FAN;
  localparam int unsigned G2  = (G1 + FAN - 1) / FAN;
  localparam int unsigned G3  = (G2 + FAN - 1) / FAN;

  logic signed [ACC_W-1:0] s1 [N_OUT][G1];
  logic signed [ACC_W-1:0] s2 [N_OUT][G2];
  logic signed [ACC_W-1:0] s3 [N_OUT][G3];
  logic signed [ACC_W-1:0] s4 [N_OUT];
  logic [SF_W-1:0]         sc [4];          // scale travels with the data
  logic [4:0]              v;

  // Stage 1: ternary add/subtract over groups of FAN inputs.
  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) begin
      for (int g = 0; g < G1; g++) begin
        logic signed [ACC_W-1:0] acc;
        acc = '0;
        for (int k = 0; k < FAN; k++) begin
          if (g*FAN + k < N_IN) begin
            case (W[2*(o*N_IN + g*FAN + k) +: 2])
              2'b01:   acc = acc + ACC_W'(x[g*FAN + k]);
              2'b11:   acc = acc - ACC_W'(x[g*FAN + k]);
              default: acc = acc;
            endcase
          end
        end
        s1[o][g] <= acc;
      end
    end
  end

  // Stages 2 and 3: sum groups of FAN partial sums.
  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) begin
      for (int g = 0; g < G2; g++) begin
        logic signed [ACC_W-1:0] acc;
        acc = '0;
        for (int k = 0; k < FAN; k++)
          if (g*FAN + k < G1) acc = acc + s1[o][g*FAN + k];
        s2[o][g] <= acc;
      end
      for (int g = 0; g < G3; g++) begin
        logic signed [ACC_W-1:0] acc;
        acc = '0;
        for (int k = 0; k < FAN; k++)
          if (g*FAN + k < G2) acc = acc + s2[o][g*FAN + k];
        s3[o][g] <= acc;
      end
    end
  end

  // Stage 4: final sum.
  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = '0;
      for (int k = 0; k < G3; k++) acc = acc + s3[o][k];
      s4[o] <= acc;
    end
  end

  // Stage 5: runtime gain and bias, saturated to H_W bits.
  always_ff @(posedge clk) begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [63:0] t;
      t = (64'(s4[o]) * $signed({48'd0, sc[3]})) >>> SF_FRAC;
      t = t + 64'($signed(B[H_W*o +: H_W]));
      y[o] <= H_W'(sat_signed(t, H_W));
    end
  end

  // Valid and scale pipelines.
  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[3:0], in_valid};
    sc[0] <= scale;
    for (int k = 1; k < 4; k++) sc[k] <= sc[k-1];
  end
  assign out_valid = v[4];
endmodule
