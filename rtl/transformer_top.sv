// transformer_top: transformer jet-flavour tagger.
//
// A jet is presented as a sequence of SEQ_LEN = 15 tracks, each a row of
// N_FEAT = 6 fixed-point features (impact parameters and their significances,
// distance to the jet axis, momentum fraction), highest-significance track
// first, zero-padded when the jet has fewer tracks.  The rows pass through
// three encoder blocks (multi-head attention with 2 heads of size 32, residual
// adds, feed-forward 8/6), are flattened and classified by dense layers of 32,
// 16 and 8 units and a 3-unit softmax output giving the b, c and light-jet
// probabilities.  The model shape and the 20-bit (10 integer, 10 fractional)
// arithmetic follow the source; the streaming handshakes, parameter loading
// and pipeline registers are this design's own.
//
// Interface:
//   wload_*       writes the 9135 weights and biases (Keras order, tf_pkg) one
//                 word per clock; must be complete before the first jet.
//   in_valid/in_ready/in_row   one track per handshake, 15 per jet, no gaps
//                 required; rows of consecutive jets simply follow each other.
//   out_valid/out_ready/out_prob   one probability triple per jet.
// Each encoder holds one jet at a time (load 15 rows, then compute 15 rows), so
// without back-pressure consecutive jets are accepted every 2*15+2 = 32 cycles
// and a jet's result is presented 66 cycles after the cycle that takes its last
// track: per encoder 6 cycles to its first output row plus 14 more rows that
// the next stage must collect, 3 x 20, plus 6 cycles for the classifier.
// rst_n is synchronous and active low; it clears control state, not weights.
module transformer_top
  import tf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wload_en,
  input  logic [WADDR_W-1:0] wload_addr,
  input  data_t              wload_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t              in_row   [N_FEAT],
  output logic               out_valid,
  input  logic               out_ready,
  output data_t              out_prob [N_CLASS]
);

  data_t w [N_PARAMS];

  weight_mem #(.DEPTH(N_PARAMS)) u_wmem (
    .clk, .wr_en(wload_en), .wr_addr(wload_addr), .wr_data(wload_data), .q(w)
  );

  data_t enc_p  [N_ENC][ENC_PARAMS];
  data_t head_p [HEAD_PARAMS];

  always_comb begin
    for (int e = 0; e < N_ENC; e++)
      for (int i = 0; i < ENC_PARAMS; i++) enc_p[e][i] = w[e*ENC_PARAMS + i];
    for (int i = 0; i < HEAD_PARAMS; i++) head_p[i] = w[N_ENC*ENC_PARAMS + i];
  end

  // Row streams between the stages: index 0 is the input, N_ENC the last encoder.
  logic  s_valid [N_ENC+1];
  logic  s_ready [N_ENC+1];
  data_t s_row   [N_ENC+1][N_FEAT];

  assign s_valid[0] = in_valid;
  assign in_ready   = s_ready[0];
  assign s_row[0]   = in_row;

  for (genvar e = 0; e < N_ENC; e++) begin : g_enc
    encoder_block #(.SEQ(SEQ_LEN), .D_IN(N_FEAT), .NH(N_HEADS), .DK(HEAD_DIM), .F1(FF1)) u_enc (
      .clk, .rst_n,
      .in_valid(s_valid[e]), .in_ready(s_ready[e]), .in_row(s_row[e]),
      .out_valid(s_valid[e+1]), .out_ready(s_ready[e+1]), .out_row(s_row[e+1]),
      .p(enc_p[e])
    );
  end

  classifier_head #(.SEQ(SEQ_LEN), .D_IN(N_FEAT), .L1(D1), .L2(D2), .L3(D3), .NC(N_CLASS)) u_head (
    .clk, .rst_n,
    .in_valid(s_valid[N_ENC]), .in_ready(s_ready[N_ENC]), .in_row(s_row[N_ENC]),
    .out_valid, .out_ready, .out_prob,
    .p(head_p)
  );

endmodule
