// tb_dense2_ternary: checks the 4x1 ternary output layer with weights
// {+1, -1, 0, +1} and a negative bias against an integer reference, for
// random and extreme hidden values, and its one-cycle latency.
module tb_dense2_ternary;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned N = 4;
  // element o at [2o+1:2o]: o0=+1, o1=-1, o2=0, o3=+1
  localparam logic [2*N-1:0]   W = 8'b01_00_11_01;
  localparam logic [ACT_W-1:0] B = -16'sd300;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [ACT_W-1:0]   h [N];
  logic signed [LOGIT_W-1:0] z;
  int checks = 0, failures = 0;
  longint e;
  logic exp_v;

  dense2_ternary #(.N_IN(N), .W(W), .B(B)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      in_valid = $urandom % 2;
      e = -300;
      for (int o = 0; o < N; o++) begin
        h[o] = (n < 4) ? ((n % 2) ? 16'sh7FFF : -16'sh8000) : $signed(16'($urandom));
        e += longint'(tern(W[2*o +: 2])) * longint'(h[o]);
      end
      exp_v = in_valid;
      @(negedge clk);
      checks += 2;
      if (out_valid !== exp_v) begin failures++; $display("valid"); end
      if (longint'(z) != e) begin failures++; $display("z=%0d exp %0d", z, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
