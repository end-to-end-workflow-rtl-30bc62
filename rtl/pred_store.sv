// pred_store: writes each prediction into the 128 KB prediction buffer and
// serves the deep-reset clear.
//
// Prediction n (n counted from the last reset) is stored at entry
// n mod PRED_DEPTH as two 32-bit words: logit_g at byte address 8*entry and
// logit_e at 8*entry + 4. The write takes two cycles: in the cycle nn_valid
// is high, out_en = 1, out_we = 4'hf, logit_g is written; in the next cycle
// logit_e is written to addr + 4, and the entry pointer and the 32-bit
// prediction count advance. The count can be read back as the number of
// predictions made since reset. out_rst is held low.
//
// A clear_start pulse zeroes entries index_lo .. index_hi (both words, one
// word per cycle) and then pulses clear_done; nothing is written when
// index_lo > index_hi. The controller never starts a clear while a
// prediction is pending, so the two never share the port.
//
// From the published design: 128 KB for 16,384 consecutive predictions,
// the out port signals and the two-cycle logit_g/logit_e write to addr and
// addr+4, and zeroing a selected range of indices. This design's choices:
// the word layout per entry, wrapping at the end of the buffer, and a
// hardware clear engine. Reset is synchronous and active low.
module pred_store import nn_pkg::*; #(
  parameter int unsigned DEPTH     = nn_pkg::PRED_DEPTH,
  parameter logic [31:0] BASE_ADDR = 32'h0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      nn_valid,
  input  logic signed [LOGIT_W-1:0] logit_g,
  input  logic signed [LOGIT_W-1:0] logit_e,
  input  logic                      clear_start,
  input  logic [$clog2(DEPTH)-1:0]  index_lo,
  input  logic [$clog2(DEPTH)-1:0]  index_hi,
  output logic                      clear_done,
  output logic [31:0]               pred_count,
  output logic                      out_en,
  output logic [3:0]                out_we,
  output logic [31:0]               out_addr,
  output logic [31:0]               out_din,
  output logic                      out_rst
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic                      second;
  logic signed [LOGIT_W-1:0] e_hold;
  logic [IW-1:0]             wp;
  logic                      clr_active, clr_half;
  logic [IW-1:0]             clr_idx;

  assign out_rst = 1'b0;

  always_comb begin
    out_en   = 1'b0;
    out_we   = 4'h0;
    out_addr = BASE_ADDR;
    out_din  = '0;
    if (nn_valid) begin
      out_en   = 1'b1;
      out_we   = 4'hf;
      out_addr = BASE_ADDR + {{(29-IW){1'b0}}, wp, 3'b000};
      out_din  = logit_g;
    end else if (second) begin
      out_en   = 1'b1;
      out_we   = 4'hf;
      out_addr = BASE_ADDR + {{(29-IW){1'b0}}, wp, 3'b100};
      out_din  = e_hold;
    end else if (clr_active) begin
      out_en   = 1'b1;
      out_we   = 4'hf;
      out_addr = BASE_ADDR + {{(29-IW){1'b0}}, clr_idx, clr_half, 2'b00};
      out_din  = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      second     <= 1'b0;
      e_hold     <= '0;
      wp         <= '0;
      pred_count <= '0;
      clr_active <= 1'b0;
      clr_half   <= 1'b0;
      clr_idx    <= '0;
      clear_done <= 1'b0;
    end else begin
      clear_done <= 1'b0;
      second     <= nn_valid;
      if (nn_valid) e_hold <= logit_e;
      if (second) begin
        wp         <= wp + 1'b1;          // wraps at DEPTH
        pred_count <= pred_count + 1'b1;
      end
      if (clear_start) begin
        clr_idx    <= index_lo;
        clr_half   <= 1'b0;
        clr_active <= (index_lo <= index_hi);
        clear_done <= (index_lo > index_hi);
      end else if (clr_active && !nn_valid && !second) begin
        clr_half <= !clr_half;
        if (clr_half) begin
          if (clr_idx == index_hi) begin
            clr_active <= 1'b0;
            clear_done <= 1'b1;
          end else begin
            clr_idx <= clr_idx + 1'b1;
          end
        end
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    nn_valid |-> !second);
endmodule
