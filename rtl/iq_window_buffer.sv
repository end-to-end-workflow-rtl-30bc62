// iq_window_buffer: the classifier's private local memory for one readout
// trace. During the load phase the controller writes stream beat k (one
// 32-bit word holding I_k and Q_k) into entry k; after the last beat the
// whole window is presented at once, unpacked into network input order
// x[2k] = I_k, x[2k+1] = Q_k, because the fully unrolled first layer reads
// every input in the same cycle. It is therefore built from registers, not
// a block RAM. The 14-bit samples are taken as unsigned integers and the pad
// bits are dropped.
//
// Timing: a write in cycle c is visible on x from cycle c+1.
//
// From the published design: the window is held in local memory before the
// network runs, 400 samples, two 14-bit values per 32-bit beat. This design's
// choices: register storage, the bit positions of I and Q, the input order.
module iq_window_buffer import nn_pkg::*; #(
  parameter int unsigned WINDOW = nn_pkg::WINDOW_SIZE
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(WINDOW)-1:0] idx,
  input  iq_word_t                  wdata,
  output logic [ADC_W-1:0]          x [2*WINDOW]
);
  iq_word_t mem [WINDOW];

  always_ff @(posedge clk) begin
    if (we) mem[idx] <= wdata;
  end

  always_comb begin
    for (int k = 0; k < WINDOW; k++) begin
      x[2*k]     = mem[k].i;
      x[2*k + 1] = mem[k].q;
    end
  end
endmodule
