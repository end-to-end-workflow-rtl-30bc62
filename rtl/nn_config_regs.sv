// nn_config_regs: the classifier's memory-mapped configuration registers,
// reached over AXI4-Lite (32-bit data, 6-bit byte address).
//
//   0x00 CTRL           W   bit0: soft reset, bit1: deep reset (clear range)
//   0x04 READOUT_OFFSET RW  cycles from trigger edge to the first sample
//   0x08 SCALING_FACTOR RW  input gain, unsigned Q8.8 (reset value 1.0)
//   0x0C INDEX_LO       RW  first prediction entry to clear
//   0x10 INDEX_HI       RW  last prediction entry to clear
//   0x14 PRED_COUNT     R   predictions made since reset
//   0x18 STATUS         R   [2:0] phase, [3] clear pending
//   0x1C WINDOW_SIZE    R   samples per readout window
//
// Writing CTRL bit0 returns every configuration register to its reset value
// at once and pulses soft_rst in the next cycle, which clears the state of
// the rest of the IP (phase, prediction pointer and count). Writing CTRL
// bit1 raises clear_req, which stays up until the controller takes it
// (clear_start). Byte strobes are honoured. Reads return a cycle after the
// address is accepted.
//
// From the published design: an AXI4-Lite register port that sets the
// readout offset and scaling factor at runtime, a reset of configuration and
// state, a deep reset over an index range, and a readable prediction count.
// This design's choices: the map, field widths and reset values.
module nn_config_regs import nn_pkg::*; #(
  parameter int unsigned WINDOW = nn_pkg::WINDOW_SIZE,
  parameter int unsigned IW     = nn_pkg::PRED_IDX_W
) (
  axil_if.slave               s,
  input  logic                clear_start,
  input  logic [31:0]         pred_count,
  input  phase_t              phase,
  output logic [OFFSET_W-1:0] readout_offset,
  output logic [SF_W-1:0]     scaling_factor,
  output logic [IW-1:0]       index_lo,
  output logic [IW-1:0]       index_hi,
  output logic                soft_rst,
  output logic                clear_req
);
  logic        wr_en, rd_en;
  logic [5:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_q;
  logic [3:0]  wr_strb;

  axil_slave #(.ADDR_W(6), .DATA_W(32)) u_axil (
    .s, .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data(rd_q));

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] strb);
    for (int b = 0; b < 4; b++) if (strb[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  logic [31:0] ctrl_w;
  logic        do_soft;
  assign ctrl_w  = merge(32'h0, wr_data, wr_strb);
  assign do_soft = wr_en && wr_addr[5:2] == REG_CTRL[5:2] && ctrl_w[0];

  always_ff @(posedge s.aclk) begin
    if (!s.aresetn || do_soft) begin
      readout_offset <= '0;
      scaling_factor <= SF_ONE;
      index_lo       <= '0;
      index_hi       <= '0;
      clear_req      <= 1'b0;
    end else begin
      if (clear_start) clear_req <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr[5:2])
          REG_CTRL[5:2]:      if (ctrl_w[1]) clear_req <= 1'b1;
          REG_OFFSET[5:2]:    readout_offset <= OFFSET_W'(merge(32'(readout_offset), wr_data, wr_strb));
          REG_SCALE[5:2]:     scaling_factor <= SF_W'(merge(32'(scaling_factor), wr_data, wr_strb));
          REG_INDEX_LO[5:2]:  index_lo <= IW'(merge(32'(index_lo), wr_data, wr_strb));
          REG_INDEX_HI[5:2]:  index_hi <= IW'(merge(32'(index_hi), wr_data, wr_strb));
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge s.aclk) begin
    if (!s.aresetn) soft_rst <= 1'b0;
    else            soft_rst <= do_soft;
  end

  always_ff @(posedge s.aclk) begin
    if (rd_en) begin
      unique case (rd_addr[5:2])
        REG_OFFSET[5:2]:     rd_q <= 32'(readout_offset);
        REG_SCALE[5:2]:      rd_q <= 32'(scaling_factor);
        REG_INDEX_LO[5:2]:   rd_q <= 32'(index_lo);
        REG_INDEX_HI[5:2]:   rd_q <= 32'(index_hi);
        REG_PRED_COUNT[5:2]: rd_q <= pred_count;
        REG_STATUS[5:2]:     rd_q <= {28'd0, clear_req, phase};
        REG_WINDOW[5:2]:     rd_q <= 32'(WINDOW);
        default:             rd_q <= 32'h0;
      endcase
    end
  end
endmodule
