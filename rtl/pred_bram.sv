// pred_bram: the 128 KB prediction buffer in programmable-logic block RAM,
// shared between the classifier and the processor.
//
// Port A is the classifier's native block-RAM port: out_en, byte write
// enables out_we[3:0], a byte address (bits [16:2] select the 32-bit word),
// write data, and read data one cycle later; on a write the read data shows
// the new word (write-first), and a_rst clears the read register. Port B is
// an AXI4-Lite slave (17-bit byte address, 32-bit data, byte strobes) through
// which the processor reads predictions, or writes, at its own pace. When
// both ports write the same word in one cycle, port B's bytes win.
//
// From the published design: 128 KB of block RAM holding the predictions,
// written by the classifier through a simple memory port and read by the
// processor over AXI4-Lite. This design's choices: write-first behaviour,
// collision priority and the port-B address width.
module pred_bram #(
  parameter int unsigned DEPTH_WORDS = nn_pkg::BUF_BYTES / 4
) (
  input  logic        clk,
  input  logic        a_en,
  input  logic [3:0]  a_we,
  input  logic [31:0] a_addr,
  input  logic [31:0] a_din,
  output logic [31:0] a_dout,
  input  logic        a_rst,
  axil_if.slave       s
);
  localparam int unsigned AW = $clog2(DEPTH_WORDS);

  logic [31:0] mem [DEPTH_WORDS];
  logic        b_wr, b_rd;
  logic [AW+1:0] b_waddr, b_raddr;
  logic [31:0] b_wdata, b_rdata;
  logic [3:0]  b_strb;
  logic [AW-1:0] ai, bwi;

  axil_slave #(.ADDR_W(AW + 2), .DATA_W(32)) u_axil (
    .s, .wr_en(b_wr), .wr_addr(b_waddr), .wr_data(b_wdata), .wr_strb(b_strb),
    .rd_en(b_rd), .rd_addr(b_raddr), .rd_data(b_rdata));

  assign ai  = a_addr[AW+1:2];
  assign bwi = b_waddr[AW+1:2];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int b = 0; b < 4; b++)
        if (a_we[b]) mem[ai][8*b +: 8] <= a_din[8*b +: 8];
    end
    if (b_wr) begin
      for (int b = 0; b < 4; b++)
        if (b_strb[b]) mem[bwi][8*b +: 8] <= b_wdata[8*b +: 8];
    end
  end

  // Port A read register, write-first.
  always_ff @(posedge clk) begin
    if (a_rst) a_dout <= '0;
    else if (a_en) begin
      for (int b = 0; b < 4; b++)
        a_dout[8*b +: 8] <= a_we[b] ? a_din[8*b +: 8] : mem[ai][8*b +: 8];
    end
  end

  // Port B read, one cycle.
  always_ff @(posedge clk) begin
    if (b_rd) b_rdata <= mem[b_raddr[AW+1:2]];
  end
endmodule
