// nn_pkg: sizes, number formats, types and the register map shared by the
// ternary-MLP qubit-state classifier.
//
// The network classifies one readout trace of WINDOW_SIZE = 400 I/Q samples
// (800 inputs of 14-bit unsigned ADC data) with an 800x4x1 multilayer
// perceptron: a ternary dense layer, batch normalisation, and a ternary 4x1
// output layer. The 400-sample window, 14-bit unsigned inputs, 4 hidden
// neurons, ternary weights, the 8-cycle inference latency, the 2-cycle store
// and the 16,384-entry (128 KB) prediction buffer come from the published
// design. The fixed-point formats of the internal values, the packing of the
// stream word, the register map and the placeholder weights are this
// implementation's choices.
package nn_pkg;

  // ---- sizes ---------------------------------------------------------------
  localparam int unsigned ADC_W         = 14;              // I or Q sample
  localparam int unsigned WINDOW_SIZE   = 400;             // samples per trace
  localparam int unsigned N_INPUTS      = 2 * WINDOW_SIZE; // 800 network inputs
  localparam int unsigned N_HIDDEN      = 4;               // hidden neurons
  localparam int unsigned NN_LATENCY    = 8;               // start -> logits
  localparam int unsigned STORE_LATENCY = 2;               // two BRAM writes
  localparam int unsigned PRED_DEPTH    = 16384;           // predictions kept
  localparam int unsigned BUF_BYTES     = 131072;          // 128 KB buffer
  localparam int unsigned PRED_IDX_W    = $clog2(PRED_DEPTH);

  // ---- number formats ------------------------------------------------------
  // Layer-1 sum: up to 800 * (2^14-1) in magnitude -> 25 bits + sign.
  localparam int unsigned ACC_W         = 26;
  // Runtime input gain: unsigned Q8.8, 1.0 = 256.
  localparam int unsigned SF_W          = 16;
  localparam int unsigned SF_FRAC       = 8;
  localparam logic [SF_W-1:0] SF_ONE    = 16'h0100;
  // Scaled and biased layer-1 output, integer ADC units.
  localparam int unsigned H_W           = 32;
  // Hidden activation after batch normalisation: signed Q5.10 (16 bits).
  localparam int unsigned ACT_W         = 16;
  localparam int unsigned ACT_FRAC      = 10;
  // Folded batch-norm scale: signed, BN_FRAC fractional bits.
  localparam int unsigned BN_SCALE_W    = 18;
  localparam int unsigned BN_FRAC       = 24;
  // Output logit word written to the buffer (Q.10, sign-extended).
  localparam int unsigned LOGIT_W       = 32;
  localparam int unsigned OFFSET_W      = 16;

  // ---- types ---------------------------------------------------------------
  // A ternary weight in two's complement: 2'b01 = +1, 2'b11 = -1, 2'b00 = 0.
  typedef logic signed [1:0] ternary_t;

  // One 32-bit stream beat: two 14-bit samples, each in a 16-bit half,
  // I in the low half, two zero pad bits above each sample.
  typedef struct packed {
    logic [1:0]       pad_q;
    logic [ADC_W-1:0] q;
    logic [1:0]       pad_i;
    logic [ADC_W-1:0] i;
  } iq_word_t;

  // Operating phases of the classifier.
  typedef enum logic [2:0] {
    PH_CONFIG  = 3'd0,   // idle, waiting for a trigger
    PH_OFFSET  = 3'd1,   // counting readout_offset
    PH_LOAD    = 3'd2,   // capturing window_size samples
    PH_COMPUTE = 3'd3,   // network pipeline running
    PH_STORE   = 3'd4,   // writing the two logits
    PH_CLEAR   = 3'd5    // deep reset: zeroing a range of predictions
  } phase_t;

  // ---- configuration register map (byte offsets) ---------------------------
  localparam logic [5:0] REG_CTRL        = 6'h00; // W: bit0 soft reset, bit1 deep reset
  localparam logic [5:0] REG_OFFSET      = 6'h04; // RW: readout_offset (cycles)
  localparam logic [5:0] REG_SCALE       = 6'h08; // RW: scaling_factor (Q8.8)
  localparam logic [5:0] REG_INDEX_LO    = 6'h0C; // RW: first index to clear
  localparam logic [5:0] REG_INDEX_HI    = 6'h10; // RW: last index to clear
  localparam logic [5:0] REG_PRED_COUNT  = 6'h14; // R : predictions made
  localparam logic [5:0] REG_STATUS      = 6'h18; // R : phase, clear pending
  localparam logic [5:0] REG_WINDOW      = 6'h1C; // R : window_size

  // ---- placeholder parameters ----------------------------------------------
  // The trained weights are not part of the hardware description; these
  // defaults are a fixed pseudo-random ternary pattern so that the RTL is
  // complete. Element k (k = out*n_in + in) sits at bits [2k+1:2k].
  localparam int unsigned W1_BITS = 2 * N_INPUTS * N_HIDDEN;

  function automatic logic [W1_BITS-1:0] ternary_pattern(int unsigned n, int unsigned seed);
    logic [W1_BITS-1:0] v;
    logic [31:0] h;
    v = '0;
    for (int unsigned k = 0; k < n && k < W1_BITS / 2; k++) begin
      h = (k + 32'd1) * 32'h9E37_79B1 ^ seed;
      h = h ^ (h >> 15);
      h = h * 32'h85EB_CA6B;
      h = h ^ (h >> 13);
      case (h % 3)
        0:       v[2*k +: 2] = 2'b00;
        1:       v[2*k +: 2] = 2'b01;
        default: v[2*k +: 2] = 2'b11;
      endcase
    end
    return v;
  endfunction

  // Saturate a wide signed value to W bits (W <= 63).
  function automatic logic signed [63:0] sat_signed(logic signed [63:0] x, int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

endpackage
