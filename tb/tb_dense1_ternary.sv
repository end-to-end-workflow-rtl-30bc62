// tb_dense1_ternary: checks the 800x4 ternary layer at its full size against
// an integer reference, with random inputs every cycle, random valid gaps,
// random gains (including ones that saturate) and nonzero biases. Also checks
// the five-cycle latency.
module tb_dense1_ternary;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned NI = nn_pkg::N_INPUTS, NO = nn_pkg::N_HIDDEN;
  localparam logic [2*NI*NO-1:0] W = (2*NI*NO)'(nn_pkg::ternary_pattern(NI*NO, 32'h1234_5678));
  localparam logic [H_W*NO-1:0]  B = {32'sd7000, -32'sd123456, -32'sh7FFF_F000, 32'sh7FFF_F000};

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [ADC_W-1:0] x [NI];
  logic [SF_W-1:0] scale;
  logic signed [H_W-1:0] y [NO];
  int checks = 0, failures = 0, cyc = 0;
  int w_int [];
  longint exp_q [$];
  int     t_q [$];
  int     n_sat = 0;

  dense1_ternary #(.N_IN(NI), .N_OUT(NO), .W(W), .B(B)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check outputs between edges.
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected out_valid"); end
      else begin
        int t0;
        t0 = t_q.pop_front();
        checks++;
        if (cyc - t0 != 5) begin failures++; $display("latency %0d", cyc - t0); end
        for (int o = 0; o < NO; o++) begin
          longint e;
          e = exp_q.pop_front();
          checks++;
          if (longint'(y[o]) != e) begin
            failures++; $display("y[%0d]=%0d exp %0d", o, y[o], e);
          end
        end
      end
    end
  end

  initial begin
    w_int = new[NI*NO];
    for (int k = 0; k < NI*NO; k++) w_int[k] = tern(W[2*k +: 2]);
    scale = SF_ONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int unsigned xs [];
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      xs = new[NI];
      for (int i = 0; i < NI; i++) begin
        x[i]  = (n % 10 == 3) ? 14'h3FFF : ADC_W'($urandom);
        xs[i] = x[i];
      end
      scale = (n % 7 == 0) ? 16'hFFFF : (n % 5 == 0) ? 16'h0001 : SF_W'($urandom % 1024);
      if (in_valid) begin
        t_q.push_back(cyc);
        for (int o = 0; o < NO; o++) begin
          longint e;
          e = layer1(xs, w_int, o, NI, scale, longint'($signed(B[H_W*o +: H_W])));
          if (e == 2147483647 || e == -2147483648) n_sat++;
          exp_q.push_back(e);
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
