// tb_pred_bram: checks the dual-port prediction buffer (reduced to 256
// words): native-port writes with byte enables, write-first read data one
// cycle later, read without write, a_rst clearing the read register, AXI4-Lite
// reads of words written on the native port, AXI4-Lite writes with strobes
// seen on the native port, and random traffic against a reference array.
module tb_pred_bram;
  localparam int unsigned DW = 256;

  logic clk = 0, rst_n = 0;
  axil_if #(.ADDR_W(10), .DATA_W(32)) bus (.aclk(clk), .aresetn(rst_n));
  logic a_en = 0, a_rst = 0;
  logic [3:0] a_we = 0;
  logic [31:0] a_addr = 0, a_din = 0, a_dout;
  logic [31:0] ref_mem [DW];
  int checks = 0, failures = 0;

  pred_bram #(.DEPTH_WORDS(DW)) dut (.clk, .a_en, .a_we, .a_addr, .a_din, .a_dout, .a_rst, .s(bus));

  always #5 clk = ~clk;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("%t %s", $time, m); end
  endtask

  task automatic axil_write(logic [9:0] a, logic [31:0] d, logic [3:0] strb);
    @(posedge clk); #1;
    bus.awvalid = 1; bus.awaddr = a; bus.wvalid = 1; bus.wdata = d; bus.wstrb = strb; bus.bready = 0;
    do @(negedge clk); while (!(bus.awready && bus.wready));
    @(posedge clk); #1 bus.awvalid = 0; bus.wvalid = 0; bus.bready = 1;
    do @(negedge clk); while (!bus.bvalid);
    @(posedge clk); #1 bus.bready = 0;
  endtask

  task automatic axil_read(logic [9:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    bus.arvalid = 1; bus.araddr = a; bus.rready = 1;
    do @(negedge clk); while (!bus.arready);
    @(posedge clk); #1 bus.arvalid = 0;
    do @(negedge clk); while (!bus.rvalid);
    d = bus.rdata;
    @(posedge clk); #1 bus.rready = 0;
  endtask

  // native port access: one cycle, data checked the cycle after
  task automatic a_access(int w, logic [3:0] we, logic [31:0] d);
    logic [31:0] e;
    @(posedge clk); #1;
    a_en = 1; a_we = we; a_addr = 32'(4 * w); a_din = d;
    for (int b = 0; b < 4; b++) if (we[b]) ref_mem[w][8*b +: 8] = d[8*b +: 8];
    e = ref_mem[w];
    @(posedge clk); #1 a_en = 0; a_we = 0;
    @(negedge clk);
    check(a_dout == e, $sformatf("native word %0d dout %h exp %h", w, a_dout, e));
  endtask

  logic [31:0] d;
  initial begin
    bus.awvalid = 0; bus.wvalid = 0; bus.bready = 0; bus.arvalid = 0; bus.rready = 0;
    bus.awaddr = 0; bus.wdata = 0; bus.wstrb = 0; bus.araddr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < DW; w++) a_access(w, 4'hf, $urandom);       // initialise
    a_access(3, 4'b0101, 32'hAABBCCDD);                               // byte enables
    a_access(3, 4'b0000, 32'h0);                                      // read only
    @(posedge clk); #1 a_rst = 1;
    @(posedge clk); #1 a_rst = 0;
    @(negedge clk); check(a_dout == 0, "a_rst clears read data");
    for (int w = 0; w < DW; w += 17) begin
      axil_read(10'(4 * w), d);
      check(d == ref_mem[w], $sformatf("AXI read of word %0d", w));
    end
    axil_write(10'(4 * 9), 32'h11223344, 4'b1001);
    ref_mem[9][7:0] = 8'h44; ref_mem[9][31:24] = 8'h11;
    a_access(9, 4'h0, 0);
    for (int n = 0; n < 200; n++) begin
      int w;
      w = $urandom % DW;
      case ($urandom % 3)
        0: a_access(w, 4'($urandom), $urandom);
        1: begin
             logic [31:0] v; logic [3:0] s;
             v = $urandom; s = 4'($urandom);
             axil_write(10'(4 * w), v, s);
             for (int b = 0; b < 4; b++) if (s[b]) ref_mem[w][8*b +: 8] = v[8*b +: 8];
           end
        default: begin
             axil_read(10'(4 * w), d);
             check(d == ref_mem[w], "random AXI read");
           end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
