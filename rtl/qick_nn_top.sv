// qick_nn_top: the machine-learning readout path added to the readout
// firmware, as one unit: the classifier IP (nn_axi) and the 128 KB
// prediction buffer (pred_bram) it writes.
//
// The readout block's demodulated I/Q stream (in_tdata/in_tvalid, no
// back-pressure), the timed processor's trigger, and two AXI4-Lite slave
// ports for the processor (s_cfg_*: classifier registers, 6-bit address;
// s_buf_*: prediction buffer, 17-bit address) are the ports. Everything runs
// on one clock, clk, with the synchronous active-low reset rst_n.
//
// Use: write READOUT_OFFSET and SCALING_FACTOR, pulse trigger at the start of
// a readout, and after the window plus 10 cycles read the logit pair of
// prediction n at buffer byte addresses 8n and 8n+4, and PRED_COUNT from the
// registers. trig_ignored pulses for a trigger that came while busy.
//
// The pairing of the classifier with a 128 KB block-RAM buffer that the
// processor reads over AXI4-Lite follows the published design; the port
// names, the single clock and the two separate AXI4-Lite ports are this
// design's choices (the processor system and interconnect are outside).
module qick_nn_top import nn_pkg::*; (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trigger,
  input  logic [31:0] in_tdata,
  input  logic        in_tvalid,
  output logic        in_tready,
  output logic        trig_ignored,
  // AXI4-Lite: classifier configuration
  input  logic        s_cfg_awvalid,
  output logic        s_cfg_awready,
  input  logic [5:0]  s_cfg_awaddr,
  input  logic        s_cfg_wvalid,
  output logic        s_cfg_wready,
  input  logic [31:0] s_cfg_wdata,
  input  logic [3:0]  s_cfg_wstrb,
  output logic        s_cfg_bvalid,
  input  logic        s_cfg_bready,
  output logic [1:0]  s_cfg_bresp,
  input  logic        s_cfg_arvalid,
  output logic        s_cfg_arready,
  input  logic [5:0]  s_cfg_araddr,
  output logic        s_cfg_rvalid,
  input  logic        s_cfg_rready,
  output logic [31:0] s_cfg_rdata,
  output logic [1:0]  s_cfg_rresp,
  // AXI4-Lite: prediction buffer
  input  logic        s_buf_awvalid,
  output logic        s_buf_awready,
  input  logic [16:0] s_buf_awaddr,
  input  logic        s_buf_wvalid,
  output logic        s_buf_wready,
  input  logic [31:0] s_buf_wdata,
  input  logic [3:0]  s_buf_wstrb,
  output logic        s_buf_bvalid,
  input  logic        s_buf_bready,
  output logic [1:0]  s_buf_bresp,
  input  logic        s_buf_arvalid,
  output logic        s_buf_arready,
  input  logic [16:0] s_buf_araddr,
  output logic        s_buf_rvalid,
  input  logic        s_buf_rready,
  output logic [31:0] s_buf_rdata,
  output logic [1:0]  s_buf_rresp
);
  axil_if #(.ADDR_W(6),  .DATA_W(32)) cfg (.aclk(clk), .aresetn(rst_n));
  axil_if #(.ADDR_W(17), .DATA_W(32)) bus (.aclk(clk), .aresetn(rst_n));

  assign cfg.awvalid = s_cfg_awvalid;  assign s_cfg_awready = cfg.awready;
  assign cfg.awaddr  = s_cfg_awaddr;
  assign cfg.wvalid  = s_cfg_wvalid;   assign s_cfg_wready  = cfg.wready;
  assign cfg.wdata   = s_cfg_wdata;    assign cfg.wstrb     = s_cfg_wstrb;
  assign s_cfg_bvalid = cfg.bvalid;    assign cfg.bready    = s_cfg_bready;
  assign s_cfg_bresp  = cfg.bresp;
  assign cfg.arvalid = s_cfg_arvalid;  assign s_cfg_arready = cfg.arready;
  assign cfg.araddr  = s_cfg_araddr;
  assign s_cfg_rvalid = cfg.rvalid;    assign cfg.rready    = s_cfg_rready;
  assign s_cfg_rdata  = cfg.rdata;     assign s_cfg_rresp   = cfg.rresp;

  assign bus.awvalid = s_buf_awvalid;  assign s_buf_awready = bus.awready;
  assign bus.awaddr  = s_buf_awaddr;
  assign bus.wvalid  = s_buf_wvalid;   assign s_buf_wready  = bus.wready;
  assign bus.wdata   = s_buf_wdata;    assign bus.wstrb     = s_buf_wstrb;
  assign s_buf_bvalid = bus.bvalid;    assign bus.bready    = s_buf_bready;
  assign s_buf_bresp  = bus.bresp;
  assign bus.arvalid = s_buf_arvalid;  assign s_buf_arready = bus.arready;
  assign bus.araddr  = s_buf_araddr;
  assign s_buf_rvalid = bus.rvalid;    assign bus.rready    = s_buf_rready;
  assign s_buf_rdata  = bus.rdata;     assign s_buf_rresp   = bus.rresp;

  logic        out_en, out_rst;
  logic [3:0]  out_we;
  logic [31:0] out_addr, out_din, out_dout;

  nn_axi u_nn_axi (
    .ap_clk(clk), .ap_rst_n(rst_n), .config_if(cfg),
    .in_TDATA(in_tdata), .in_TVALID(in_tvalid), .in_TREADY(in_tready),
    .trigger, .out_en, .out_we, .out_addr, .out_din, .out_dout, .out_rst,
    .trig_ignored);

  pred_bram #(.DEPTH_WORDS(BUF_BYTES / 4)) u_bram (
    .clk, .a_en(out_en), .a_we(out_we), .a_addr(out_addr), .a_din(out_din),
    .a_dout(out_dout), .a_rst(out_rst), .s(bus));
endmodule
