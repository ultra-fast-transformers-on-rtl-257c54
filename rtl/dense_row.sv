// dense_row: one fully connected layer applied to one row (one track).
//
// y[o] = act( sum_i x[i] * w[i*N_OUT + o] + b[o] ) for every output o at once.
// Every product has its own multiplier, which is the fully parallel case
// (reuse factor 1) of the published design; the row is processed in a single
// combinational pass, so a caller that registers y sees a new row every clock.
// The kernel is flattened row-major as [input][output], the order in which a
// Keras layer stores it.  The sum is exact; the result is shifted back to 10
// fractional bits (toward minus infinity) and saturated.  RELU selects a
// rectified-linear activation; the source does not name the activations of the
// hidden layers, so ReLU on hidden layers is this design's choice.
//
// Interface: purely combinational, no clock.
module dense_row
  import tf_pkg::*;
#(
  parameter int N_IN  = 6,
  parameter int N_OUT = 8,
  parameter bit RELU  = 1'b0
) (
  input  data_t x [N_IN],
  input  data_t w [N_IN*N_OUT],
  input  data_t b [N_OUT],
  output data_t y [N_OUT]
);

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc_t acc;
      data_t r;
      acc = acc_t'(b[o]) <<< FRAC_W;
      for (int i = 0; i < N_IN; i++)
        acc += acc_t'(x[i]) * acc_t'(w[i*N_OUT + o]);
      r = requant(acc);
      y[o] = RELU ? relu(r) : r;
    end
  end

endmodule
