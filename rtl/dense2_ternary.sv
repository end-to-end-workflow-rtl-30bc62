// dense2_ternary: the output layer of the classifier, a 4x1 dense layer with
// ternary weights, producing the logit z = sum_o w[o] * h[o] + b.
//
// The hidden activations h are signed Q5.10; so are the bias and the logit,
// which is sign-extended to the LOGIT_W-bit word stored in the buffer. The
// sigmoid that follows this layer during training is not applied: the
// hardware keeps logits, and the sigmoid is monotonic, so the decision
// (z > 0 means excited) is the same.
//
// Timing: one register stage, in_valid in cycle c gives out_valid in c+1.
//
// From the published design: 4x1 kernel, one bias, ternary weights. This
// design's choices: formats and placeholder weights.
module dense2_ternary import nn_pkg::*; #(
  parameter int unsigned     N_IN = nn_pkg::N_HIDDEN,
  parameter logic [2*N_IN-1:0] W  = (2*N_IN)'(nn_pkg::ternary_pattern(N_IN, 32'h0BAD_CAFE)),
  parameter logic [ACT_W-1:0] B   = '0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [ACT_W-1:0]   h [N_IN],
  output logic                      out_valid,
  output logic signed [LOGIT_W-1:0] z
);
  always_ff @(posedge clk) begin
    logic signed [LOGIT_W-1:0] acc;
    acc = LOGIT_W'($signed(B));
    for (int o = 0; o < N_IN; o++) begin
      case (W[2*o +: 2])
        2'b01:   acc = acc + LOGIT_W'(h[o]);
        2'b11:   acc = acc - LOGIT_W'(h[o]);
        default: acc = acc;
      endcase
    end
    z <= acc;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
