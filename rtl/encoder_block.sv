// encoder_block: one transformer encoder block (no layer normalisation).
//
//   h = x + MHA(x)              (first residual add)
//   y = h + W2 * relu(W1*h + b1) + b2   (feed-forward 8 -> 6, second add)
// The block structure, the two heads of size 32, the feed-forward widths 8 and 6
// and the absence of layer normalisation follow the source.  The activations
// (ReLU after the first feed-forward layer, linear after the second) are this
// design's choice.  The skip path keeps a copy of every input row in a FIFO
// until the attention layer emits the matching output row; the adds, the
// feed-forward layers and the second add form one combinational row path
// ending in the output register.
//
// Parameters p[] hold this block's ENC_PARAMS numbers in the order of tf_pkg
// (query, key, value, output projections, then the two feed-forward layers).
// Interface: valid/ready row streams, one row per clock at most; this block's
// output register adds one cycle to the attention latency, so unstalled the
// first output row comes in the 6th cycle after the one taking the last row.  rst_n is
// synchronous, active low.
module encoder_block
  import tf_pkg::*;
#(
  parameter int SEQ   = 15,
  parameter int D_IN  = 6,
  parameter int NH    = 2,
  parameter int DK    = 32,
  parameter int F1    = 8,
  parameter int NPAR  = 3*(D_IN*NH*DK + NH*DK) + NH*DK*D_IN + D_IN + D_IN*F1 + F1 + F1*D_IN + D_IN
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_row  [D_IN],
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_row [D_IN],
  input  data_t p [NPAR]
);

  localparam int P    = NH * DK;
  localparam int O_WQ = 0;
  localparam int O_BQ = O_WQ + D_IN*P;
  localparam int O_WK = O_BQ + P;
  localparam int O_BK = O_WK + D_IN*P;
  localparam int O_WV = O_BK + P;
  localparam int O_BV = O_WV + D_IN*P;
  localparam int O_WO = O_BV + P;
  localparam int O_BO = O_WO + P*D_IN;
  localparam int O_W1 = O_BO + D_IN;
  localparam int O_B1 = O_W1 + D_IN*F1;
  localparam int O_W2 = O_B1 + F1;
  localparam int O_B2 = O_W2 + F1*D_IN;

  data_t wq [D_IN*P], wk [D_IN*P], wv [D_IN*P], wo [P*D_IN];
  data_t bq [P], bk [P], bv [P], bo [D_IN];
  data_t w1 [D_IN*F1], b1 [F1], w2 [F1*D_IN], b2 [D_IN];

  always_comb begin
    for (int i = 0; i < D_IN*P; i++) begin
      wq[i] = p[O_WQ + i];
      wk[i] = p[O_WK + i];
      wv[i] = p[O_WV + i];
      wo[i] = p[O_WO + i];
    end
    for (int i = 0; i < P; i++) begin
      bq[i] = p[O_BQ + i];
      bk[i] = p[O_BK + i];
      bv[i] = p[O_BV + i];
    end
    for (int i = 0; i < D_IN; i++) begin
      bo[i] = p[O_BO + i];
      b2[i] = p[O_B2 + i];
    end
    for (int i = 0; i < D_IN*F1; i++) begin
      w1[i] = p[O_W1 + i];
      w2[i] = p[O_W2 + i];
    end
    for (int i = 0; i < F1; i++) b1[i] = p[O_B1 + i];
  end

  // Attention
  logic  att_valid, att_ready;
  data_t att_row [D_IN];

  mha #(.SEQ(SEQ), .D_IN(D_IN), .NH(NH), .DK(DK)) u_mha (
    .clk, .rst_n, .in_valid, .in_ready, .in_row,
    .out_valid(att_valid), .out_ready(att_ready), .out_row(att_row),
    .wq, .bq, .wk, .bk, .wv, .bv, .wo, .bo
  );

  // Skip path
  logic [D_IN*DATA_W-1:0] skip_wr, skip_rd;
  logic skip_empty, skip_full;
  logic [$clog2(2*SEQ+1)-1:0] skip_count;
  logic att_fire;

  always_comb
    for (int i = 0; i < D_IN; i++) skip_wr[i*DATA_W +: DATA_W] = in_row[i];

  sync_fifo #(.WIDTH(D_IN*DATA_W), .DEPTH(2*SEQ)) u_skip (
    .clk, .rst_n, .push(in_valid && in_ready), .wr_data(skip_wr), .pop(att_fire),
    .rd_data(skip_rd), .empty(skip_empty), .full(skip_full), .count(skip_count)
  );

  assign att_ready = !out_valid || out_ready;
  assign att_fire  = att_valid && att_ready;

  // Residual adds and feed-forward
  data_t h1 [D_IN], f1 [F1], f2 [D_IN], y [D_IN];

  always_comb
    for (int i = 0; i < D_IN; i++)
      h1[i] = add_sat(att_row[i], data_t'(skip_rd[i*DATA_W +: DATA_W]));

  dense_row #(.N_IN(D_IN), .N_OUT(F1), .RELU(1'b1)) u_ff1 (.x(h1), .w(w1), .b(b1), .y(f1));
  dense_row #(.N_IN(F1), .N_OUT(D_IN), .RELU(1'b0)) u_ff2 (.x(f1), .w(w2), .b(b2), .y(f2));

  always_comb
    for (int i = 0; i < D_IN; i++) y[i] = add_sat(h1[i], f2[i]);

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (att_ready) out_valid <= att_valid;
  end

  always_ff @(posedge clk)
    if (att_fire) out_row <= y;

  a_skip_match: assert property (@(posedge clk) disable iff (!rst_n) att_fire |-> !skip_empty);
  a_skip_room:  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && in_ready) |-> !skip_full);

endmodule
