// tf_pkg: types, sizes and arithmetic shared by the jet-tagging transformer.
//
// All activations, weights and biases are signed fixed-point numbers with 10
// integer bits (sign included) and 10 fractional bits, the precision the
// quantisation study selects as matching the floating-point model.  The model
// dimensions (15 tracks x 6 features, 2 heads of size 32, feed-forward 8/6,
// classifier 32/16/8/3, three encoder blocks, 9135 parameters) are those of
// the published model.
//
// Arithmetic rules (this design's own choice, the source names only the
// precision): products are kept at full width and summed exactly; a result
// is brought back to 10 fractional bits by an arithmetic right shift (round
// toward minus infinity, like the default fixed-point truncation mode) and then
// saturated to the 20-bit range.
//
// The parameter memory holds the 9135 numbers in the order a Keras model lists
// them: for every encoder the attention query kernel/bias, key kernel/bias,
// value kernel/bias, output kernel/bias, then the two feed-forward kernels and
// biases; after the three encoders the four classifier layers.  A kernel is
// stored row-major as [input][output].
package tf_pkg;

  parameter int DATA_W = 20;
  parameter int FRAC_W = 10;
  parameter int ACC_W  = 48;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Model dimensions
  parameter int SEQ_LEN   = 15;
  parameter int N_FEAT    = 6;
  parameter int N_HEADS   = 2;
  parameter int HEAD_DIM  = 32;
  parameter int PROJ_DIM  = N_HEADS * HEAD_DIM;   // 64
  parameter int FF1       = 8;
  parameter int FF2       = 6;
  parameter int N_ENC     = 3;
  parameter int FLAT      = SEQ_LEN * N_FEAT;     // 90
  parameter int D1        = 32;
  parameter int D2        = 16;
  parameter int D3        = 8;
  parameter int N_CLASS   = 3;

  // 1/sqrt(HEAD_DIM) in the data format: round(1024/sqrt(32)) = 181
  parameter int SCORE_SCALE = 181;

  // Softmax lookup tables
  parameter int EXP_W     = 18;   // exp table word, 16 fractional bits
  parameter int EXP_FRAC  = 16;
  parameter int TAB_BITS  = 10;   // 1024-entry tables
  parameter int TAB_FRAC  = 6;    // table index step = 1/64

  // Parameter memory layout
  parameter int MHA_PARAMS = 3 * (N_FEAT*PROJ_DIM + PROJ_DIM) + PROJ_DIM*N_FEAT + N_FEAT; // 1734
  parameter int ENC_PARAMS = MHA_PARAMS + N_FEAT*FF1 + FF1 + FF1*FF2 + FF2;              // 1844
  parameter int HEAD_PARAMS = FLAT*D1 + D1 + D1*D2 + D2 + D2*D3 + D3 + D3*N_CLASS + N_CLASS; // 3603
  parameter int N_PARAMS   = N_ENC*ENC_PARAMS + HEAD_PARAMS;                            // 9135
  parameter int WADDR_W    = $clog2(N_PARAMS);

  // Offsets inside one encoder's parameter slice
  parameter int OFF_WQ  = 0;
  parameter int OFF_BQ  = OFF_WQ + N_FEAT*PROJ_DIM;
  parameter int OFF_WK  = OFF_BQ + PROJ_DIM;
  parameter int OFF_BK  = OFF_WK + N_FEAT*PROJ_DIM;
  parameter int OFF_WV  = OFF_BK + PROJ_DIM;
  parameter int OFF_BV  = OFF_WV + N_FEAT*PROJ_DIM;
  parameter int OFF_WO  = OFF_BV + PROJ_DIM;
  parameter int OFF_BO  = OFF_WO + PROJ_DIM*N_FEAT;
  parameter int OFF_WF1 = OFF_BO + N_FEAT;
  parameter int OFF_BF1 = OFF_WF1 + N_FEAT*FF1;
  parameter int OFF_WF2 = OFF_BF1 + FF1;
  parameter int OFF_BF2 = OFF_WF2 + FF1*FF2;

  // Offsets inside the classifier's parameter slice
  parameter int OFF_W1 = 0;
  parameter int OFF_B1 = OFF_W1 + FLAT*D1;
  parameter int OFF_W2 = OFF_B1 + D1;
  parameter int OFF_B2 = OFF_W2 + D1*D2;
  parameter int OFF_W3 = OFF_B2 + D2;
  parameter int OFF_B3 = OFF_W3 + D2*D3;
  parameter int OFF_W4 = OFF_B3 + D3;
  parameter int OFF_B4 = OFF_W4 + D3*N_CLASS;

  // Saturate a wide value that already has FRAC_W fractional bits.
  function automatic data_t sat(input acc_t v);
    localparam acc_t MAXV = acc_t'((64'sd1 <<< (DATA_W-1)) - 1);
    localparam acc_t MINV = -acc_t'(64'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return data_t'(MAXV);
    else if (v < MINV) return data_t'(MINV);
    else               return data_t'(v);
  endfunction

  // Bring a sum of products (2*FRAC_W fractional bits) back to the data format.
  function automatic data_t requant(input acc_t v);
    return sat(v >>> FRAC_W);
  endfunction

  function automatic data_t relu(input data_t v);
    return (v < 0) ? data_t'(0) : v;
  endfunction

  function automatic data_t add_sat(input data_t a, input data_t b);
    return sat(acc_t'(a) + acc_t'(b));
  endfunction

endpackage
