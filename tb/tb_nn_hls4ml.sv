// tb_nn_hls4ml: runs the whole network (dense, batch norm, dense, logit
// pair) at its full 800x4x1 size with random weights and parameters on
// random traces and gains, and compares (logit_g, logit_e) with the integer
// reference; checks that every result comes exactly 8 cycles after start and
// that back-to-back starts are all answered.
module tb_nn_hls4ml;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned WIN = nn_pkg::WINDOW_SIZE, NH = 4, NI = 2*WIN;
  localparam logic [2*NI*NH-1:0] W1 = (2*NI*NH)'(nn_pkg::ternary_pattern(NI*NH, 32'hCAFE_0001));
  localparam logic [H_W*NH-1:0]  B1 = {32'sd900000, -32'sd400000, 32'sd0, 32'sd123};
  localparam logic [BN_SCALE_W*NH-1:0] BN_S = {18'sd9000, -18'sd20000, 18'sd16384, 18'sd40000};
  localparam logic [ACT_W*NH-1:0] BN_T = {16'sd100, -16'sd3000, 16'sd0, 16'sd2047};
  localparam logic [2*NH-1:0]    W2 = 8'b01_11_01_11;
  localparam logic [ACT_W-1:0]   B2 = 16'sd77;

  logic clk = 0, rst_n = 0, start = 0, valid;
  logic [ADC_W-1:0] x [NI];
  logic [SF_W-1:0]  scale;
  logic signed [LOGIT_W-1:0] logit_g, logit_e;
  int checks = 0, failures = 0, cyc = 0;
  int w1i [];
  longint exp_q [$];
  int     t_q [$];

  nn_hls4ml #(.WINDOW(WIN), .NH(NH), .W1(W1), .B1(B1), .BN_S(BN_S), .BN_T(BN_T),
              .W2(W2), .B2(B2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && valid) begin
    longint e; int t0;
    checks += 3;
    if (exp_q.size() == 0) begin failures++; $display("extra result"); end
    else begin
      e = exp_q.pop_front(); t0 = t_q.pop_front();
      if (cyc - t0 != NN_LATENCY) begin failures++; $display("latency %0d", cyc - t0); end
      if (longint'(logit_e) != e)  begin failures++; $display("logit_e %0d exp %0d", logit_e, e); end
      if (longint'(logit_g) != -e) begin failures++; $display("logit_g %0d", logit_g); end
    end
  end

  initial begin
    w1i = new[NI*NH];
    for (int k = 0; k < NI*NH; k++) w1i[k] = tern(W1[2*k +: 2]);
    scale = SF_ONE;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int unsigned xs [];
      longint z, h2;
      @(negedge clk);
      start = (n < 5) || ($urandom % 3 == 0);
      xs = new[NI];
      for (int i = 0; i < NI; i++) begin
        // a trace-like pattern: a level that depends on the trace plus noise
        x[i] = ADC_W'(((n % 2) ? 12000 : 4000) + ($urandom % 4096));
        xs[i] = x[i];
      end
      scale = SF_W'(64 + $urandom % 512);
      if (start) begin
        z = 77;
        for (int o = 0; o < NH; o++) begin
          h2 = bn(layer1(xs, w1i, o, NI, scale, longint'($signed(B1[H_W*o +: H_W]))),
                  longint'($signed(BN_S[BN_SCALE_W*o +: BN_SCALE_W])),
                  longint'($signed(BN_T[ACT_W*o +: ACT_W])));
          z += longint'(tern(W2[2*o +: 2])) * h2;
        end
        exp_q.push_back(z);
        t_q.push_back(cyc);
      end
    end
    @(negedge clk) start = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
