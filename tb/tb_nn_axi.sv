// tb_nn_axi: end-to-end test of the classifier IP at a reduced window of 16
// samples (the network keeps its 4 hidden neurons; the weights are random).
// An AXI4-Lite master sets offset and gain; a stream source sends random I/Q
// words (random pad bits, optional gaps in valid) every cycle; the test
// triggers readouts and checks, for each, the exact two writes on the
// out port (cycle tL+9: logit_g at 8n, cycle tL+10: logit_e at 8n+4) against
// a reference computed from the beats the window should have taken. It also
// checks the prediction count over AXI, a trigger ignored while busy, a deep
// reset of an index range and a soft reset.
module tb_nn_axi;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned WIN = 16, NH = 4, NI = 2*WIN, DEPTH = 64;
  localparam logic [2*NI*NH-1:0] W1 = (2*NI*NH)'(nn_pkg::ternary_pattern(NI*NH, 32'h5EED_0042));
  localparam logic [H_W*NH-1:0]  B1 = {-32'sd5000, 32'sd20000, 32'sd0, -32'sd77};
  localparam logic [BN_SCALE_W*NH-1:0] BN_S = {18'sd100000, -18'sd70000, 18'sd50000, 18'sd131071};
  localparam logic [ACT_W*NH-1:0] BN_T = {16'sd10, -16'sd1000, 16'sd512, 16'sd0};
  localparam logic [2*NH-1:0]    W2 = 8'b11_01_01_11;
  localparam logic [ACT_W-1:0]   B2 = -16'sd20;

  logic clk = 0, rst_n = 0;
  axil_if #(.ADDR_W(6), .DATA_W(32)) cfg (.aclk(clk), .aresetn(rst_n));
  logic [31:0] in_TDATA = 0, out_addr, out_din, out_dout = 0;
  logic in_TVALID = 0, in_TREADY, trigger = 0, out_en, out_rst, trig_ignored;
  logic [3:0] out_we;
  int checks = 0, failures = 0, cyc = 0, n_ignored = 0;
  int gap_pct = 0;
  int w1i [];
  logic [31:0] dat_log [0:65535];
  bit          val_log [0:65535];
  typedef struct { int c; logic [31:0] a; logic [31:0] d; } wr_t;
  wr_t wr_q [$];

  nn_axi #(.WINDOW(WIN), .NH(NH), .DEPTH(DEPTH), .W1(W1), .B1(B1), .BN_S(BN_S),
           .BN_T(BN_T), .W2(W2), .B2(B2)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n), .config_if(cfg), .*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    in_TVALID = ($urandom % 100) >= gap_pct;
    in_TDATA  = $urandom;
    dat_log[cyc] = in_TDATA; val_log[cyc] = in_TVALID;
  end
  always @(negedge clk) if (rst_n) begin
    if (out_en) begin
      wr_t w;
      checks++;
      if (out_we != 4'hf) begin failures++; $display("out_we"); end
      w.c = cyc; w.a = out_addr; w.d = out_din;
      wr_q.push_back(w);
    end
    if (trig_ignored) n_ignored++;
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("%t %s", $time, m); end
  endtask

  task automatic axil_write(logic [5:0] a, logic [31:0] d);
    @(posedge clk); #2;
    cfg.awvalid = 1; cfg.awaddr = a; cfg.wvalid = 1; cfg.wdata = d; cfg.wstrb = 4'hf; cfg.bready = 0;
    do @(negedge clk); while (!(cfg.awready && cfg.wready));
    @(posedge clk); #2 cfg.awvalid = 0; cfg.wvalid = 0; cfg.bready = 1;
    do @(negedge clk); while (!cfg.bvalid);
    @(posedge clk); #2 cfg.bready = 0;
  endtask

  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    @(posedge clk); #2;
    cfg.arvalid = 1; cfg.araddr = a; cfg.rready = 1;
    do @(negedge clk); while (!cfg.arready);
    @(posedge clk); #2 cfg.arvalid = 0;
    do @(negedge clk); while (!cfg.rvalid);
    d = cfg.rdata;
    @(posedge clk); #2 cfg.rready = 0;
  endtask

  function automatic longint ref_logit(int unsigned xs[], int unsigned scale);
    longint z;
    z = -20;
    for (int o = 0; o < NH; o++)
      z += longint'(tern(W2[2*o +: 2])) *
           bn(layer1(xs, w1i, o, NI, scale, longint'($signed(B1[H_W*o +: H_W]))),
              longint'($signed(BN_S[BN_SCALE_W*o +: BN_SCALE_W])),
              longint'($signed(BN_T[ACT_W*o +: ACT_W])));
    return z;
  endfunction

  // Trigger one readout and check its two writes; n = expected entry.
  task automatic readout(int ofs, int gaps, int unsigned scale, int n, bit retrig);
    int t0, c, k, tl;
    int unsigned xs [];
    longint z;
    wr_t w;
    axil_write(REG_OFFSET, 32'(ofs));
    axil_write(REG_SCALE, 32'(scale));
    gap_pct = gaps;
    wr_q.delete();
    @(posedge clk); #2 trigger = 1; t0 = cyc;
    @(posedge clk); #2 trigger = 0;
    if (retrig) begin
      repeat (3) @(posedge clk);
      #2 trigger = 1;
      @(posedge clk); #2 trigger = 0;
    end
    repeat (ofs + 4 * WIN + 20) @(posedge clk);
    gap_pct = 0;
    // the beats the window should hold
    xs = new[NI];
    k = 0; tl = 0;
    for (c = t0 + ofs; k < WIN; c++) if (val_log[c]) begin
      xs[2*k] = dat_log[c][13:0]; xs[2*k+1] = dat_log[c][29:16];
      k++; tl = c;
    end
    z = ref_logit(xs, scale);
    check(wr_q.size() == 2, $sformatf("two writes per readout (%0d)", wr_q.size()));
    if (wr_q.size() == 2) begin
      w = wr_q.pop_front();
      check(w.c == tl + 9, $sformatf("logit_g at tL+9 (got tL+%0d)", w.c - tl));
      check(w.a == 32'(8 * n), "logit_g address");
      check(longint'($signed(w.d)) == -z, $sformatf("logit_g %0d exp %0d", $signed(w.d), -z));
      w = wr_q.pop_front();
      check(w.c == tl + 10, "logit_e at tL+10");
      check(w.a == 32'(8 * n + 4), "logit_e address");
      check(longint'($signed(w.d)) == z, "logit_e value");
    end
  endtask

  logic [31:0] d;
  initial begin
    cfg.awvalid = 0; cfg.wvalid = 0; cfg.bready = 0; cfg.arvalid = 0; cfg.rready = 0;
    cfg.awaddr = 0; cfg.wdata = 0; cfg.wstrb = 0; cfg.araddr = 0;
    w1i = new[NI*NH];
    for (int k = 0; k < NI*NH; k++) w1i[k] = tern(W1[2*k +: 2]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    readout(3, 0, 256, 0, 0);
    readout(0, 0, 256, 1, 0);
    readout(7, 30, 700, 2, 1);
    readout(1, 0, 64, 3, 0);
    axil_read(REG_PRED_COUNT, d); check(d == 4, "prediction count");
    check(n_ignored == 1, "retrigger ignored once");
    // deep reset of entries 1..2: four zero writes at 8..23
    axil_write(REG_INDEX_LO, 1);
    axil_write(REG_INDEX_HI, 2);
    wr_q.delete();
    axil_write(REG_CTRL, 32'h2);
    repeat (10) @(posedge clk);
    check(wr_q.size() == 4, "deep reset writes 4 words");
    for (int k = 0; k < 4 && wr_q.size() > 0; k++) begin
      wr_t w;
      w = wr_q.pop_front();
      check(w.a == 32'(8 + 4 * k) && w.d == 0, "deep reset zeroes range");
    end
    axil_read(REG_PRED_COUNT, d); check(d == 4, "count kept by deep reset");
    // soft reset: count back to 0, next prediction at entry 0, offset back to 0
    axil_write(REG_CTRL, 32'h1);
    axil_read(REG_PRED_COUNT, d); check(d == 0, "count cleared by soft reset");
    axil_read(REG_OFFSET, d);     check(d == 0, "offset cleared by soft reset");
    readout(2, 10, 300, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
