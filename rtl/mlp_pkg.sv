// mlp_pkg: sizes, number formats and controller states shared by the MLP
// accelerator.
//
// The network is a 62-30-10 perceptron. All operands (pixels, weights,
// biases, neuron outputs) are 8-bit sign-magnitude numbers: bit 7 is the
// sign (1 = negative) and bits 6:0 the magnitude. The MAC result is a 21-bit
// sign-magnitude number: bit 20 is the sign and bits 19:0 the magnitude.
// These widths, the layer sizes, the 10 shared neurons and the five
// controller states follow the paper; the concrete state encoding is this
// design's own.
package mlp_pkg;

  // Network shape (paper: 62 inputs, 30 hidden, 10 outputs, 10 neurons).
  localparam int unsigned N_IN      = 62;
  localparam int unsigned N_HID     = 30;
  localparam int unsigned N_OUT     = 10;
  localparam int unsigned N_NEURONS = 10;

  // Number formats (paper: 8-bit operands, 14-bit product magnitude,
  // 21-bit MAC result, 5-bit error control = 32 configurations).
  localparam int unsigned DATA_W = 8;
  localparam int unsigned MAG_W  = DATA_W - 1;   // 7
  localparam int unsigned PROD_W = 2 * MAG_W;    // 14
  localparam int unsigned ACC_W  = 21;
  localparam int unsigned ERR_W  = 5;

  // Largest value a neuron output may take after saturation.
  localparam logic [DATA_W-1:0] SAT_MAX = 8'b0111_1111;

  // Controller states. S0..S2 compute the three groups of ten hidden
  // neurons, S3 the output layer and the arg-max, S4 signals completion
  // (and is also where the machine waits after reset).
  typedef enum logic [2:0] {
    ST_HID0 = 3'd0,
    ST_HID1 = 3'd1,
    ST_HID2 = 3'd2,
    ST_OUT  = 3'd3,
    ST_DONE = 3'd4
  } state_e;

  // Source of the neuron input operand.
  typedef enum logic {
    SRC_MEMORY = 1'b0,   // pixel from the external image memory
    SRC_HIDDEN = 1'b1    // hidden-layer result register (H layer -> O layer)
  } in_src_e;

  // Sign-magnitude addition of two numbers with a W-bit magnitude. The
  // result is normalised so that a zero magnitude always carries sign 0.
  // The caller guarantees that the sum of magnitudes fits in W bits.
  function automatic logic [20:0] sm_add21(input logic [20:0] a, input logic [20:0] b);
    logic        sa, sb, s;
    logic [19:0] ma, mb, m;
    sa = a[20]; ma = a[19:0];
    sb = b[20]; mb = b[19:0];
    if (sa == sb) begin
      m = ma + mb; s = sa;
    end else if (ma >= mb) begin
      m = ma - mb; s = sa;
    end else begin
      m = mb - ma; s = sb;
    end
    if (m == '0) s = 1'b0;
    return {s, m};
  endfunction

endpackage
