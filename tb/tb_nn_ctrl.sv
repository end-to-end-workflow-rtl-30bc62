// tb_nn_ctrl: checks the phase controller cycle by cycle against a timeline
// computed from the stimulus: for offsets 0, 1 and 5 and for a stream with
// random gaps in its valid, the beats written (cycles and indices), the
// in_tready window, the nn_start pulse one cycle after the last beat, 8
// Compute and 2 Store cycles, triggers ignored while busy, and the deep-reset
// handshake (clear_start, Clear phase, clear_done).
module tb_nn_ctrl;
  import nn_pkg::*;
  localparam int unsigned WIN = 6;

  logic clk = 0, rst_n = 0, trigger = 0, in_tvalid = 0, clear_req = 0, clear_done = 0;
  logic [15:0] readout_offset = '0;
  phase_t phase;
  logic in_tready, buf_we, nn_start, clear_start, trig_ignored;
  logic [$clog2(WIN)-1:0] buf_idx;
  int checks = 0, failures = 0, cyc = 0;

  // per-cycle log, filled at negedge
  bit     vseq   [0:4095];
  bit     we_log [0:4095];
  int     idx_log[0:4095];
  bit     rdy_log[0:4095];
  bit     st_log [0:4095];
  phase_t ph_log [0:4095];
  bit     ign_log[0:4095];

  nn_ctrl #(.WINDOW(WIN), .OFS_W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1 in_tvalid = vseq[cyc];
  end
  always @(negedge clk) begin
    we_log[cyc] = buf_we; idx_log[cyc] = buf_idx; rdy_log[cyc] = in_tready;
    st_log[cyc] = nn_start; ph_log[cyc] = phase; ign_log[cyc] = trig_ignored;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("cycle %0d: %s", cyc, msg); end
  endtask

  // One readout: trigger held for 3 cycles starting at cycle t0.
  task automatic readout(int ofs, int gap_pct, bit retrigger);
    int t0, n, last, c;
    for (int k = cyc + 1; k < cyc + 200; k++) vseq[k] = ($urandom % 100) >= gap_pct;
    @(posedge clk); #2;
    readout_offset = 16'(ofs);
    t0 = cyc;
    trigger = 1;
    repeat (3) @(posedge clk);
    #2 trigger = 0;
    if (retrigger) begin
      repeat (ofs + 2) @(posedge clk);
      #2 trigger = 1;
      @(posedge clk); #2 trigger = 0;
    end
    wait (phase == PH_COMPUTE);
    wait (phase == PH_CONFIG);
    @(negedge clk);
    // expected beats
    n = 0; last = -1;
    for (c = t0; c < t0 + ofs; c++) begin
      check(!we_log[c] && !rdy_log[c], "no load during offset");
    end
    for (c = t0 + ofs; n < WIN; c++) begin
      check(rdy_log[c], "in_tready during load");
      check(we_log[c] == vseq[c], "buf_we follows valid during load");
      if (vseq[c]) begin
        check(idx_log[c] == n, $sformatf("index %0d exp %0d", idx_log[c], n));
        n++; last = c;
      end
    end
    check(!rdy_log[last + 1] && !we_log[last + 1], "load ends after window");
    for (c = t0 + ofs; c <= last + 11; c++) check(st_log[c] == (c == last + 1), "nn_start one cycle after last beat");
    for (c = last + 1; c <= last + 8; c++)  check(ph_log[c] == PH_COMPUTE, "8 compute cycles");
    for (c = last + 9; c <= last + 10; c++) check(ph_log[c] == PH_STORE, "2 store cycles");
    check(ph_log[last + 11] == PH_CONFIG, "back to configure");
    if (retrigger) begin
      int ni = 0;
      for (c = t0 + 1; c <= last + 10; c++) ni += ign_log[c];
      check(ni == 1, "second trigger ignored");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    readout(5, 0, 0);
    readout(0, 0, 0);
    readout(1, 0, 1);
    readout(3, 40, 0);
    readout(0, 30, 1);
    // deep-reset handshake
    @(posedge clk); #2 clear_req = 1;
    @(negedge clk);
    check(clear_start == 1, "clear_start in configure");
    @(posedge clk); #2 clear_req = 0; trigger = 1;
    @(negedge clk);
    check(phase == PH_CLEAR, "clear phase");
    check(trig_ignored == 1, "trigger ignored during clear");
    check(clear_start == 0, "clear_start is a pulse");
    repeat (4) @(posedge clk);
    #2 clear_done = 1; trigger = 0;
    @(posedge clk); #2 clear_done = 0;
    @(negedge clk);
    check(phase == PH_CONFIG, "clear done");
    readout(2, 10, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
