// tb_iq_window_buffer: fills the full 400-entry window with random beats in
// random order and checks that every input appears at x[2k] (I) and
// x[2k+1] (Q), with the pad bits dropped, one cycle after its write.
module tb_iq_window_buffer;
  import nn_pkg::*;
  localparam int unsigned W = nn_pkg::WINDOW_SIZE;

  logic clk = 0, we = 0;
  logic [$clog2(W)-1:0] idx;
  iq_word_t wdata;
  logic [ADC_W-1:0] x [2*W];
  logic [31:0] ref_mem [W];
  int checks = 0, failures = 0;

  iq_window_buffer #(.WINDOW(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int k = 0; k < W; k++) begin
      checks += 2;
      if (x[2*k] !== ref_mem[k][13:0])   begin failures++; $display("I[%0d]", k); end
      if (x[2*k+1] !== ref_mem[k][29:16]) begin failures++; $display("Q[%0d]", k); end
    end
  endtask

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int k = 0; k < W; k++) begin
        int j;
        j = (pass == 1) ? (W - 1 - k) : k;
        @(negedge clk);
        we = 1; idx = j[$clog2(W)-1:0];
        wdata = iq_word_t'($urandom);        // pad bits random too
        ref_mem[j] = wdata;
        @(negedge clk);
        we = 0;
        checks += 2;
        if (x[2*j] !== wdata.i)   begin failures++; $display("write %0d I", j); end
        if (x[2*j+1] !== wdata.q) begin failures++; $display("write %0d Q", j); end
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
