// tb_nn_config_regs: drives the register block as an AXI4-Lite master and
// checks reset values, read-back of every RW register, byte strobes, the
// read-only registers, the deep-reset request/acknowledge and the soft reset
// (registers back to reset values, a one-cycle soft_rst pulse). Masters keep
// valid up until ready, and the bus assertions watch the slave.
module tb_nn_config_regs;
  import nn_pkg::*;

  logic clk = 0, rst_n = 0;
  axil_if #(.ADDR_W(6), .DATA_W(32)) bus (.aclk(clk), .aresetn(rst_n));
  logic clear_start = 0;
  logic [31:0] pred_count = 32'd12345;
  phase_t phase = PH_LOAD;
  logic [15:0] readout_offset, scaling_factor;
  logic [13:0] index_lo, index_hi;
  logic soft_rst, clear_req;
  int checks = 0, failures = 0, soft_pulses = 0;

  nn_config_regs #(.WINDOW(400), .IW(14)) dut (.s(bus), .*);

  always #5 clk = ~clk;
  always @(posedge clk) if (soft_rst) soft_pulses++;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("%t %s", $time, m); end
  endtask

  task automatic axil_write(logic [5:0] a, logic [31:0] d, logic [3:0] strb = 4'hf);
    @(posedge clk); #1;
    bus.awvalid = 1; bus.awaddr = a; bus.wvalid = 1; bus.wdata = d; bus.wstrb = strb;
    bus.bready = 0;
    do @(negedge clk); while (!(bus.awready && bus.wready));
    @(posedge clk); #1 bus.awvalid = 0; bus.wvalid = 0;
    repeat ($urandom % 3) @(posedge clk);
    #1 bus.bready = 1;
    do @(negedge clk); while (!bus.bvalid);
    @(posedge clk); #1 bus.bready = 0;
  endtask

  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    bus.arvalid = 1; bus.araddr = a; bus.rready = 0;
    do @(negedge clk); while (!bus.arready);
    @(posedge clk); #1 bus.arvalid = 0;
    repeat ($urandom % 3) @(posedge clk);
    #1 bus.rready = 1;
    do @(negedge clk); while (!bus.rvalid);
    d = bus.rdata;
    @(posedge clk); #1 bus.rready = 0;
  endtask

  logic [31:0] d;
  initial begin
    bus.awvalid = 0; bus.wvalid = 0; bus.bready = 0; bus.arvalid = 0; bus.rready = 0;
    bus.awaddr = 0; bus.wdata = 0; bus.wstrb = 0; bus.araddr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    axil_read(REG_SCALE, d);  check(d == 32'h100, "scale resets to 1.0");
    axil_read(REG_OFFSET, d); check(d == 0, "offset resets to 0");
    axil_write(REG_OFFSET, 32'd100);
    axil_write(REG_SCALE, 32'h0000_0180);
    axil_write(REG_INDEX_LO, 32'd17);
    axil_write(REG_INDEX_HI, 32'hFFFF_3FFF);
    check(readout_offset == 100, "offset output");
    check(scaling_factor == 16'h0180, "scale output");
    check(index_lo == 17 && index_hi == 14'h3FFF, "index outputs");
    axil_read(REG_OFFSET, d);     check(d == 100, "offset read back");
    axil_read(REG_SCALE, d);      check(d == 32'h180, "scale read back");
    axil_read(REG_INDEX_HI, d);   check(d == 32'h3FFF, "index_hi width");
    axil_write(REG_OFFSET, 32'hAB00_0000 | 32'h0000_CD00, 4'b0010);
    axil_read(REG_OFFSET, d);     check(d == 32'hCD64, "byte strobe");
    axil_read(REG_PRED_COUNT, d); check(d == 12345, "prediction count");
    axil_read(REG_STATUS, d);     check(d == 32'(PH_LOAD), "status phase");
    axil_read(REG_WINDOW, d);     check(d == 400, "window size");
    axil_read(6'h3C, d);          check(d == 0, "unmapped reads zero");
    axil_write(REG_PRED_COUNT, 32'd1);
    axil_read(REG_PRED_COUNT, d); check(d == 12345, "count is read-only");
    // deep reset request
    axil_write(REG_CTRL, 32'h2);
    check(clear_req == 1, "clear requested");
    axil_read(REG_STATUS, d);     check(d[3] == 1, "clear pending in status");
    @(posedge clk); #1 clear_start = 1;
    @(posedge clk); #1 clear_start = 0;
    check(clear_req == 0, "clear acknowledged");
    check(soft_pulses == 0, "no soft reset yet");
    // soft reset
    axil_write(REG_CTRL, 32'h1);
    repeat (2) @(posedge clk);
    check(soft_pulses == 1, "one soft reset pulse");
    check(readout_offset == 0 && scaling_factor == 16'h100 && index_lo == 0 && index_hi == 0,
          "soft reset restores configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
