// tb_qick_nn_top: full-size, end-to-end test of the readout classifier with
// every parameter at its default (400-sample window, 800x4x1 network with the
// default weights, 128 KB buffer). It plays the roles of the processor (two
// AXI4-Lite masters), the timed processor (trigger) and the readout block
// (an I/Q stream that never waits, shaped like a readout trace: a level that
// depends on the simulated qubit state, plus noise).
//
// Checked for each readout: the logit pair read back from the buffer over
// AXI4-Lite equals the integer reference computed from the beats the window
// should have taken, and the first buffer write comes 9 cycles (the second 10)
// after the last beat. Mechanisms driven and counted, each must occur:
// readout offset of 0 and of 100 cycles, gaps in the stream's valid during a
// load, a trigger ignored while busy, a change of scaling factor, a deep
// reset of an index range, a soft reset, and wrap-around of the 16,384-entry
// buffer (which needs 16,385 readouts; those in between are checked for
// count and latency only).
module tb_qick_nn_top;
  import nn_pkg::*;
  import nn_ref_pkg::*;
  localparam int unsigned WIN = nn_pkg::WINDOW_SIZE, NI = 2 * WIN, NH = nn_pkg::N_HIDDEN;
  localparam logic [2*NI*NH-1:0] W1 = (2*NI*NH)'(nn_pkg::ternary_pattern(NI*NH, 32'h1234_5678));
  localparam logic [2*NH-1:0]    W2 = (2*NH)'(nn_pkg::ternary_pattern(NH, 32'h0BAD_CAFE));

  logic clk = 0, rst_n = 0, trigger = 0;
  logic [31:0] in_tdata = 0;
  logic in_tvalid = 0, in_tready, trig_ignored;
  logic        s_cfg_awvalid = 0, s_cfg_awready, s_cfg_wvalid = 0, s_cfg_wready;
  logic [5:0]  s_cfg_awaddr = 0, s_cfg_araddr = 0;
  logic [31:0] s_cfg_wdata = 0, s_cfg_rdata;
  logic [3:0]  s_cfg_wstrb = 4'hf;
  logic        s_cfg_bvalid, s_cfg_bready = 0, s_cfg_arvalid = 0, s_cfg_arready;
  logic        s_cfg_rvalid, s_cfg_rready = 0;
  logic [1:0]  s_cfg_bresp, s_cfg_rresp;
  logic        s_buf_awvalid = 0, s_buf_awready, s_buf_wvalid = 0, s_buf_wready;
  logic [16:0] s_buf_awaddr = 0, s_buf_araddr = 0;
  logic [31:0] s_buf_wdata = 0, s_buf_rdata;
  logic [3:0]  s_buf_wstrb = 4'hf;
  logic        s_buf_bvalid, s_buf_bready = 0, s_buf_arvalid = 0, s_buf_arready;
  logic        s_buf_rvalid, s_buf_rready = 0;
  logic [1:0]  s_buf_bresp, s_buf_rresp;

  qick_nn_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int gap_pct = 0, state_bit = 0;
  int w1i [];
  logic [31:0] dat_log [0:4095];       // indexed by cycle mod 4096
  bit          val_log [0:4095];
  int          last_we_cyc = -1000, first_we_cyc = -1000;
  bit          prev_en = 0;
  // mechanism counters
  int m_offset0 = 0, m_offset100 = 0, m_gap = 0, m_ignored = 0, m_scale = 0,
      m_deep = 0, m_soft = 0, m_wrap = 0;

  always #1.625 clk = ~clk;    // 3.25 ns clock period

  // Readout block: a new beat every cycle, never waits.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #0.5;
    in_tvalid = ($urandom % 100) >= gap_pct;
    in_tdata  = {2'b00, 14'(6000 + state_bit * 3000 + $urandom % 2048),
                 2'b00, 14'(8000 - state_bit * 2500 + $urandom % 2048)};
    dat_log[cyc % 4096] = in_tdata; val_log[cyc % 4096] = in_tvalid;
  end
  always @(negedge clk) begin
    if (trig_ignored) m_ignored++;
    if (dut.out_en && !prev_en) first_we_cyc = cyc;
    prev_en = dut.out_en;
  end

  initial begin
    #400ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("%t %s", $time, m); end
  endtask

  task automatic cfg_write(logic [5:0] a, logic [31:0] d);
    @(posedge clk); #1;
    s_cfg_awvalid = 1; s_cfg_awaddr = a; s_cfg_wvalid = 1; s_cfg_wdata = d;
    do @(negedge clk); while (!s_cfg_awready);
    @(posedge clk); #1 s_cfg_awvalid = 0; s_cfg_wvalid = 0; s_cfg_bready = 1;
    do @(negedge clk); while (!s_cfg_bvalid);
    @(posedge clk); #1 s_cfg_bready = 0;
  endtask
  task automatic cfg_read(logic [5:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    s_cfg_arvalid = 1; s_cfg_araddr = a; s_cfg_rready = 1;
    do @(negedge clk); while (!s_cfg_arready);
    @(posedge clk); #1 s_cfg_arvalid = 0;
    do @(negedge clk); while (!s_cfg_rvalid);
    d = s_cfg_rdata;
    @(posedge clk); #1 s_cfg_rready = 0;
  endtask
  task automatic buf_read(logic [16:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    s_buf_arvalid = 1; s_buf_araddr = a; s_buf_rready = 1;
    do @(negedge clk); while (!s_buf_arready);
    @(posedge clk); #1 s_buf_arvalid = 0;
    do @(negedge clk); while (!s_buf_rvalid);
    d = s_buf_rdata;
    @(posedge clk); #1 s_buf_rready = 0;
  endtask
  task automatic buf_write(logic [16:0] a, logic [31:0] d);
    @(posedge clk); #1;
    s_buf_awvalid = 1; s_buf_awaddr = a; s_buf_wvalid = 1; s_buf_wdata = d;
    do @(negedge clk); while (!s_buf_awready);
    @(posedge clk); #1 s_buf_awvalid = 0; s_buf_wvalid = 0; s_buf_bready = 1;
    do @(negedge clk); while (!s_buf_bvalid);
    @(posedge clk); #1 s_buf_bready = 0;
  endtask

  function automatic longint ref_logit(int unsigned xs[], int unsigned scale);
    longint z;
    z = 0;
    for (int o = 0; o < NH; o++)
      z += longint'(tern(W2[2*o +: 2])) *
           bn(layer1(xs, w1i, o, NI, scale, 0), longint'(1 << (BN_FRAC - 20)), 0);
    return z;
  endfunction

  // One readout. Returns the reference logit (when full) and checks timing.
  task automatic readout(int ofs, int gaps, int unsigned scale, bit full, bit retrig,
                         output longint z);
    int t0, c, k, tl;
    int unsigned xs [];
    state_bit = $urandom % 2;
    gap_pct = gaps;
    @(posedge clk); #1 trigger = 1; t0 = cyc;
    @(posedge clk); #1 trigger = 0;
    if (retrig) begin
      repeat (10) @(posedge clk);
      #1 trigger = 1;
      @(posedge clk); #1 trigger = 0;
    end
    wait (dut.out_en);
    @(negedge clk);
    @(negedge clk);
    gap_pct = 0;
    k = 0; tl = 0;
    xs = new[NI];
    for (c = t0 + ofs; k < WIN; c++) if (val_log[c % 4096]) begin
      xs[2*k] = dat_log[c % 4096][13:0]; xs[2*k+1] = dat_log[c % 4096][29:16];
      k++; tl = c;
      if (c > t0 + ofs && !val_log[c % 4096 == 0 ? 4095 : c % 4096 - 1]) m_gap += (gaps > 0);
    end
    check(first_we_cyc == tl + 9, $sformatf("store starts 9 cycles after the window (%0d)",
                                           first_we_cyc - tl));
    z = full ? ref_logit(xs, scale) : 0;
  endtask

  task automatic check_entry(int n, longint z);
    logic [31:0] g, e;
    buf_read(17'(8 * n), g);
    buf_read(17'(8 * n + 4), e);
    check(longint'($signed(e)) == z && longint'($signed(g)) == -z,
          $sformatf("entry %0d: (%0d, %0d) exp (%0d, %0d)", n, $signed(g), $signed(e), -z, z));
  endtask

  logic [31:0] d;
  longint z, zs [8];
  initial begin
    w1i = new[NI*NH];
    for (int k = 0; k < NI*NH; k++) w1i[k] = tern(W1[2*k +: 2]);
    repeat (4) @(negedge clk);
    rst_n = 1;
    cfg_read(REG_WINDOW, d); check(d == 400, "window size register");
    // readouts with the published settings: offset 100, 400-sample window
    cfg_write(REG_OFFSET, 100); m_offset100++;
    for (int n = 0; n < 3; n++) begin readout(100, 0, 256, 1, 0, zs[n]); end
    cfg_write(REG_OFFSET, 0); m_offset0++;
    readout(0, 0, 256, 1, 1, zs[3]);                     // retrigger ignored
    cfg_write(REG_SCALE, 32'h0000_0040); m_scale++;       // gain 0.25
    readout(0, 20, 64, 1, 0, zs[4]);                      // gaps in valid
    for (int n = 0; n < 5; n++) check_entry(n, zs[n]);
    cfg_read(REG_PRED_COUNT, d); check(d == 5, "prediction count 5");
    // deep reset of entries 1..3
    cfg_write(REG_INDEX_LO, 1);
    cfg_write(REG_INDEX_HI, 3);
    cfg_write(REG_CTRL, 2);
    repeat (20) @(posedge clk);
    m_deep++;
    check_entry(0, zs[0]);
    for (int n = 1; n <= 3; n++) check_entry(n, 0);
    check_entry(4, zs[4]);
    // soft reset: count to 0, configuration back to defaults
    cfg_write(REG_CTRL, 1); m_soft++;
    cfg_read(REG_PRED_COUNT, d); check(d == 0, "soft reset clears count");
    cfg_read(REG_SCALE, d);      check(d == 256, "soft reset restores gain");
    readout(0, 0, 256, 1, 0, zs[5]);
    check_entry(0, zs[5]);
    // fill the buffer and wrap: 16,384 more predictions, then one that
    // lands on entry 1 again
    buf_write(17'(8 * 2), 32'hDEAD_BEEF);
    for (int n = 1; n < PRED_DEPTH; n++) readout(0, 0, 256, 0, 0, z);
    cfg_read(REG_PRED_COUNT, d); check(d == PRED_DEPTH, "16384 predictions");
    readout(0, 0, 256, 1, 0, zs[6]);                      // prediction 16384 -> entry 0
    readout(0, 0, 256, 1, 0, zs[7]);                      // prediction 16385 -> entry 1
    check_entry(0, zs[6]);
    check_entry(1, zs[7]);
    buf_read(17'(8 * 2), d); check(d != 32'hDEAD_BEEF, "entry 2 overwritten in the first pass");
    cfg_read(REG_PRED_COUNT, d); check(d == PRED_DEPTH + 2, "count keeps counting past the buffer");
    m_wrap++;
    // every mechanism must have happened
    check(m_offset0 > 0, "offset 0 exercised");
    check(m_offset100 > 0, "offset 100 exercised");
    check(m_gap > 0, "valid gaps exercised");
    check(m_ignored > 0, "ignored trigger exercised");
    check(m_scale > 0, "scaling factor change exercised");
    check(m_deep > 0 && m_soft > 0 && m_wrap > 0, "deep reset, soft reset, wrap exercised");
    $display("mechanisms: offset0=%0d offset100=%0d gaps=%0d ignored=%0d scale=%0d deep=%0d soft=%0d wrap=%0d",
             m_offset0, m_offset100, m_gap, m_ignored, m_scale, m_deep, m_soft, m_wrap);
    $display("logit_e of the checked readouts: %0d %0d %0d %0d %0d %0d %0d %0d",
             zs[0], zs[1], zs[2], zs[3], zs[4], zs[5], zs[6], zs[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
