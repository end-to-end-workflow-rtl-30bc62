// axil_slave: turns an AXI4-Lite slave port into a simple register-access
// port. A write is taken when address and data are both valid (both are
// accepted in the same cycle); it appears as a one-cycle wr_en pulse with
// wr_addr/wr_data/wr_strb, and the OKAY response follows in the next cycle
// and is held until bready. A read address raises rd_en for one cycle; the
// user returns rd_data in the following cycle (one-cycle read latency, as a
// block RAM gives), and it is held on rdata until rready. One write and one
// read may be outstanding at a time. Reset is synchronous, active low.
// This adapter, its accept-both-together write policy and its fixed
// one-cycle read latency are this design's own choices.
module axil_slave #(
  parameter int unsigned ADDR_W = 6,
  parameter int unsigned DATA_W = 32
) (
  axil_if.slave               s,
  output logic                wr_en,
  output logic [ADDR_W-1:0]   wr_addr,
  output logic [DATA_W-1:0]   wr_data,
  output logic [DATA_W/8-1:0] wr_strb,
  output logic                rd_en,
  output logic [ADDR_W-1:0]   rd_addr,
  input  logic [DATA_W-1:0]   rd_data
);
  logic rd_pending;

  // Write channel: accept address and data together, when no response waits.
  assign s.awready = s.awvalid && s.wvalid && !s.bvalid;
  assign s.wready  = s.awready;
  assign wr_en     = s.awready;
  assign wr_addr   = s.awaddr;
  assign wr_data   = s.wdata;
  assign wr_strb   = s.wstrb;
  assign s.bresp   = 2'b00;

  always_ff @(posedge s.aclk) begin
    if (!s.aresetn)          s.bvalid <= 1'b0;
    else if (wr_en)          s.bvalid <= 1'b1;
    else if (s.bready)       s.bvalid <= 1'b0;
  end

  // Read channel: one read in flight; data is captured a cycle after rd_en.
  assign s.arready = !s.rvalid && !rd_pending;
  assign rd_en     = s.arvalid && s.arready;
  assign rd_addr   = s.araddr;
  assign s.rresp   = 2'b00;

  always_ff @(posedge s.aclk) begin
    if (!s.aresetn) begin
      rd_pending <= 1'b0;
      s.rvalid   <= 1'b0;
      s.rdata    <= '0;
    end else begin
      rd_pending <= rd_en;
      if (rd_pending) begin
        s.rvalid <= 1'b1;
        s.rdata  <= rd_data;
      end else if (s.rready) begin
        s.rvalid <= 1'b0;
      end
    end
  end
endmodule
