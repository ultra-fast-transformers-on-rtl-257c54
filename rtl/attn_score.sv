// attn_score: attention scores of one query row against every key row.
//
// s[j] = ((q . k_j) / sqrt(d_k)) for j = 0..SEQ-1, the first matrix multiply and
// the scaling of stage 2 of the attention pipeline.  All key rows are held in
// a two-dimensional register outside this unit so that the SEQ dot products
// run in parallel, one query row per clock.  The dot product is brought back
// to 10 fractional bits, then multiplied by the constant 1/sqrt(d_k)
// (SCALE/1024) and brought back again, each step truncating and saturating.
//
// Interface: purely combinational.
module attn_score
  import tf_pkg::*;
#(
  parameter int SEQ   = 15,
  parameter int DK    = 32,
  parameter int SCALE = 181
) (
  input  data_t q [DK],
  input  data_t k [SEQ][DK],
  output data_t s [SEQ]
);

  always_comb begin
    for (int j = 0; j < SEQ; j++) begin
      acc_t  acc;
      data_t dot;
      acc = '0;
      for (int d = 0; d < DK; d++)
        acc += acc_t'(q[d]) * acc_t'(k[j][d]);
      dot  = requant(acc);
      s[j] = requant(acc_t'(dot) * acc_t'(SCALE));
    end
  end

endmodule
