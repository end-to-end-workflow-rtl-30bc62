// tb_batchnorm: checks the folded batch normalisation and the saturation of
// the hidden activation against an integer reference, with random and
// extreme inputs, positive and negative scales, and the one-cycle latency.
module tb_batchnorm;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned N = 4;
  localparam logic [BN_SCALE_W*N-1:0] S = {18'sd16384, -18'sd3000, 18'sd131071, 18'sd77};
  localparam logic [ACT_W*N-1:0]      T = {16'sd0, 16'sd1000, -16'sd2048, 16'sd5};

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [H_W-1:0]   x [N];
  logic signed [ACT_W-1:0] y [N];
  int checks = 0, failures = 0, n_sat = 0;
  longint exp_y [N];
  logic   exp_v;

  batchnorm #(.N(N), .S(S), .T(T)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    exp_v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      in_valid = $urandom % 2;
      for (int o = 0; o < N; o++) begin
        case ($urandom % 4)
          0: x[o] = $signed($urandom);
          1: x[o] = $signed($urandom) >>> 8;
          2: x[o] = $signed($urandom) >>> 14;
          default: x[o] = $signed($urandom) >>> 20;
        endcase
        exp_y[o] = bn(longint'(x[o]), longint'($signed(S[BN_SCALE_W*o +: BN_SCALE_W])),
                      longint'($signed(T[ACT_W*o +: ACT_W])));
        if (exp_y[o] == 32767 || exp_y[o] == -32768) n_sat++;
      end
      exp_v = in_valid;
      @(negedge clk);
      checks++;
      if (out_valid !== exp_v) begin failures++; $display("valid %0b exp %0b", out_valid, exp_v); end
      for (int o = 0; o < N; o++) begin
        checks++;
        if (longint'(y[o]) != exp_y[o]) begin
          failures++; $display("n=%0d y[%0d]=%0d exp %0d (x=%0d)", n, o, y[o], exp_y[o], x[o]);
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
