// tb_pred_store: checks the store unit with a small buffer (8 entries) so
// that the pointer wraps: each nn_valid gives exactly two writes, logit_g to
// 8*entry in that cycle and logit_e to 8*entry+4 in the next, with
// out_en = 1 and out_we = 4'hf; the count advances once per prediction; a
// range clear zeroes both words of every entry in [lo, hi] and nothing else,
// then pulses clear_done; an empty range (lo > hi) finishes at once.
module tb_pred_store;
  import nn_pkg::*;
  localparam int unsigned D = 8, IW = 3;

  logic clk = 0, rst_n = 0, nn_valid = 0, clear_start = 0, clear_done;
  logic signed [31:0] logit_g, logit_e;
  logic [IW-1:0] index_lo = 0, index_hi = 0;
  logic [31:0] pred_count, out_addr, out_din;
  logic out_en, out_rst;
  logic [3:0] out_we;
  int checks = 0, failures = 0;
  logic [31:0] mem [2*D];     // model of the buffer, word granularity
  logic        wrote [2*D];

  pred_store #(.DEPTH(D), .BASE_ADDR(32'h0)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Capture every write into the model.
  always @(negedge clk) if (rst_n && out_en) begin
    checks += 2;
    if (out_we !== 4'hf) begin failures++; $display("out_we %h", out_we); end
    if (out_addr >= 32'(8*D) || out_addr[1:0] != 0) begin failures++; $display("addr %h", out_addr); end
    else begin mem[out_addr[31:2]] = out_din; wrote[out_addr[31:2]] = 1; end
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("%t %s", $time, m); end
  endtask

  task automatic predict(int n);
    @(posedge clk); #1;
    nn_valid = 1; logit_g = -(n + 1) * 1000; logit_e = (n + 1) * 1000;
    @(negedge clk);
    check(out_en && out_addr == 32'(8 * (n % D)) && out_din == 32'(-(n + 1) * 1000),
          $sformatf("logit_g write of prediction %0d", n));
    @(posedge clk); #1;
    nn_valid = 0; logit_g = 'x; logit_e = 0;
    @(negedge clk);
    check(out_en && out_addr == 32'(8 * (n % D) + 4) && out_din == 32'((n + 1) * 1000),
          $sformatf("logit_e write of prediction %0d", n));
    @(posedge clk); #1;
    @(negedge clk);
    check(!out_en, "exactly two writes");
    check(pred_count == 32'(n + 1), "count");
    check(out_rst == 0, "out_rst low");
  endtask

  initial begin
    logit_g = 0; logit_e = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(pred_count == 0 && !out_en, "idle after reset");
    for (int n = 0; n < 11; n++) predict(n);      // wraps after 8
    // clear entries 2..5
    for (int k = 0; k < 2*D; k++) wrote[k] = 0;
    @(posedge clk); #1 index_lo = 2; index_hi = 5; clear_start = 1;
    @(posedge clk); #1 clear_start = 0;
    wait (clear_done);
    @(negedge clk);
    for (int k = 0; k < 2*D; k++) begin
      bit in_rng;
      in_rng = (k / 2 >= 2) && (k / 2 <= 5);
      check(wrote[k] == in_rng, $sformatf("word %0d written=%0d", k, wrote[k]));
      if (in_rng) check(mem[k] == 0, "cleared to zero");
    end
    check(pred_count == 11, "clear leaves count");
    // empty range
    for (int k = 0; k < 2*D; k++) wrote[k] = 0;
    @(posedge clk); #1 index_lo = 6; index_hi = 1; clear_start = 1;
    @(negedge clk);
    @(posedge clk); #1 clear_start = 0;
    @(negedge clk);
    check(clear_done == 1, "empty range finishes at once");
    repeat (3) @(negedge clk);
    for (int k = 0; k < 2*D; k++) check(!wrote[k], "empty range writes nothing");
    // soft reset via rst_n
    @(posedge clk); #1 rst_n = 0;
    @(posedge clk); #1 rst_n = 1;
    @(negedge clk);
    check(pred_count == 0, "count reset");
    predict(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
