// nn_axi: the neural-network classifier IP as seen by the rest of the
// readout firmware.
//
// Ports (named as the IP presents them):
//   config      AXI4-Lite slave, the registers of nn_config_regs
//   in_TDATA    32-bit I/Q beat from the readout block, in_TVALID its valid;
//               there is no back-pressure, so the IP takes every valid beat
//               it needs. in_TREADY is only an indicator: high while loading.
//   trigger     plain signal from the timed processor; its rising edge
//               starts one readout
//   out_*       native block-RAM port (out_en, out_we[3:0], byte out_addr,
//               out_din, out_dout, out_rst) to the prediction buffer
//   ap_clk, ap_rst_n  clock and synchronous active-low reset
//
// Inside: nn_config_regs holds the settings; nn_ctrl sequences the
// Configure / Load / Compute / Store phases; iq_window_buffer holds the
// window; nn_hls4ml is the network; pred_store writes the two logits and
// runs range clears. A soft reset from the registers resets the other four.
//
// Timing of one readout, with t0 the cycle the trigger is first seen high
// and W = window size: samples are taken in cycles t0+offset .. tL with
// tL = t0+offset+W-1 when in_TVALID stays high; logit_g is written in cycle
// tL+9 and logit_e in tL+10, 10 cycles after the window (8 for the network,
// 2 for the store). out_dout is not used.
module nn_axi import nn_pkg::*; #(
  parameter int unsigned WINDOW = nn_pkg::WINDOW_SIZE,
  parameter int unsigned NH     = nn_pkg::N_HIDDEN,
  parameter int unsigned DEPTH  = nn_pkg::PRED_DEPTH,
  parameter logic [2*2*WINDOW*NH-1:0] W1 =
    (2*2*WINDOW*NH)'(nn_pkg::ternary_pattern(2*WINDOW*NH, 32'h1234_5678)),
  parameter logic [H_W*NH-1:0]        B1 = '0,
  parameter logic [BN_SCALE_W*NH-1:0] BN_S = {NH{BN_SCALE_W'(1 << (BN_FRAC - 20))}},
  parameter logic [ACT_W*NH-1:0]      BN_T = '0,
  parameter logic [2*NH-1:0]          W2 = (2*NH)'(nn_pkg::ternary_pattern(NH, 32'h0BAD_CAFE)),
  parameter logic [ACT_W-1:0]         B2 = '0
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  axil_if.slave       config_if,
  input  logic [31:0] in_TDATA,
  input  logic        in_TVALID,
  output logic        in_TREADY,
  input  logic        trigger,
  output logic        out_en,
  output logic [3:0]  out_we,
  output logic [31:0] out_addr,
  output logic [31:0] out_din,
  input  logic [31:0] out_dout,
  output logic        out_rst,
  output logic        trig_ignored
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [OFFSET_W-1:0]        readout_offset;
  logic [SF_W-1:0]            scaling_factor;
  logic [IW-1:0]              index_lo, index_hi;
  logic                       soft_rst, clear_req, clear_start, clear_done;
  logic                       core_rst_n;
  phase_t                     phase;
  logic                       buf_we, nn_start, nn_valid;
  logic [$clog2(WINDOW)-1:0]  buf_idx;
  logic [ADC_W-1:0]           x [2*WINDOW];
  logic signed [LOGIT_W-1:0]  logit_g, logit_e;
  logic [31:0]                pred_count;

  assign core_rst_n = ap_rst_n && !soft_rst;

  nn_config_regs #(.WINDOW(WINDOW), .IW(IW)) u_regs (
    .s(config_if), .clear_start, .pred_count, .phase,
    .readout_offset, .scaling_factor, .index_lo, .index_hi, .soft_rst, .clear_req);

  nn_ctrl #(.WINDOW(WINDOW), .OFS_W(OFFSET_W)) u_ctrl (
    .clk(ap_clk), .rst_n(core_rst_n), .trigger, .in_tvalid(in_TVALID),
    .readout_offset, .clear_req, .clear_done, .phase, .in_tready(in_TREADY),
    .buf_we, .buf_idx, .nn_start, .clear_start, .trig_ignored);

  iq_window_buffer #(.WINDOW(WINDOW)) u_buf (
    .clk(ap_clk), .we(buf_we), .idx(buf_idx), .wdata(iq_word_t'(in_TDATA)), .x);

  nn_hls4ml #(.WINDOW(WINDOW), .NH(NH), .W1(W1), .B1(B1), .BN_S(BN_S),
              .BN_T(BN_T), .W2(W2), .B2(B2)) u_nn (
    .clk(ap_clk), .rst_n(core_rst_n), .start(nn_start), .x,
    .scale(scaling_factor), .valid(nn_valid), .logit_g, .logit_e);

  pred_store #(.DEPTH(DEPTH)) u_store (
    .clk(ap_clk), .rst_n(core_rst_n), .nn_valid, .logit_g, .logit_e,
    .clear_start, .index_lo, .index_hi, .clear_done, .pred_count,
    .out_en, .out_we, .out_addr, .out_din, .out_rst);

  // The result must arrive exactly when the controller enters Store.
  a_store_aligned: assert property (@(posedge ap_clk) disable iff (!core_rst_n)
    nn_valid |-> phase == PH_STORE);
endmodule
