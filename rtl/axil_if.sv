// axil_if: AXI4-Lite bundle (no protection or cache signals) used for the
// classifier's configuration port and the processor side of the prediction
// buffer. It carries the standard five channels; responses are always OKAY
// in this design. The assertions state the AXI rule that a valid, once
// raised, is held with stable payload until its ready is seen. AXI4-Lite as
// the protocol of both processor-facing ports follows the published design;
// the bundle itself is the standard one.
interface axil_if #(
  parameter int unsigned ADDR_W = 6,
  parameter int unsigned DATA_W = 32
) (
  input logic aclk,
  input logic aresetn
);
  logic                  awvalid, awready;
  logic [ADDR_W-1:0]     awaddr;
  logic                  wvalid, wready;
  logic [DATA_W-1:0]     wdata;
  logic [DATA_W/8-1:0]   wstrb;
  logic                  bvalid, bready;
  logic [1:0]            bresp;
  logic                  arvalid, arready;
  logic [ADDR_W-1:0]     araddr;
  logic                  rvalid, rready;
  logic [DATA_W-1:0]     rdata;
  logic [1:0]            rresp;

  modport master (
    output awvalid, awaddr, wvalid, wdata, wstrb, bready, arvalid, araddr, rready,
    input  awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp
  );
  modport slave (
    input  aclk, aresetn,
    input  awvalid, awaddr, wvalid, wdata, wstrb, bready, arvalid, araddr, rready,
    output awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp
  );

  // Handshake rules: valid stays up, payload stays put, until accepted.
  a_aw_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    awvalid && !awready |=> awvalid && $stable(awaddr));
  a_w_hold:  assert property (@(posedge aclk) disable iff (!aresetn)
    wvalid && !wready |=> wvalid && $stable(wdata));
  a_ar_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    arvalid && !arready |=> arvalid && $stable(araddr));
  a_b_hold:  assert property (@(posedge aclk) disable iff (!aresetn)
    bvalid && !bready |=> bvalid);
  a_r_hold:  assert property (@(posedge aclk) disable iff (!aresetn)
    rvalid && !rready |=> rvalid && $stable(rdata));
endinterface
