// attn_value: one row of attention probabilities times the value matrix.
//
// o[d] = sum_j p[j] * v[j][d], stage 3 of the attention pipeline.  The value
// rows are held in a fully accessible register outside this unit, so all SEQ
// x DK products of a row are formed at once and one output row is produced
// per clock.  The sum is truncated to 10 fractional bits and saturated.
//
// Interface: purely combinational.
module attn_value
  import tf_pkg::*;
#(
  parameter int SEQ = 15,
  parameter int DK  = 32
) (
  input  data_t p [SEQ],
  input  data_t v [SEQ][DK],
  output data_t o [DK]
);

  always_comb begin
    for (int d = 0; d < DK; d++) begin
      acc_t acc;
      acc = '0;
      for (int j = 0; j < SEQ; j++)
        acc += acc_t'(p[j]) * acc_t'(v[j][d]);
      o[d] = requant(acc);
    end
  end

endmodule
