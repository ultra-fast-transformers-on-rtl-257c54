// classifier_head: flatten, three hidden dense layers and the softmax output.
//
// The SEQ rows of D_IN features leaving the last encoder are collected, row
// after row, into one flat vector of SEQ*D_IN values (row 0 first).  The vector
// then passes dense layers of D1, D2 and D3 units (ReLU) and an output layer of
// NC units followed by a softmax, giving the b / c / light probabilities.  Each
// layer is fully parallel and registered, so the five stages form a
// pipeline that can take a new jet every clock once its rows are collected.
// Layer widths follow the source; the ReLU activations are this design's choice.
//
// Parameters p[] hold the classifier's numbers in tf_pkg order (kernel then
// bias, layer by layer).  Interface: valid/ready row stream in, valid/ready
// probability vector out.  Without back-pressure the probabilities are
// presented in the 6th cycle after the one that takes the last row (flatten
// buffer, dense1, dense2, dense3, output layer and softmax registers).  rst_n is synchronous, active low.
module classifier_head
  import tf_pkg::*;
#(
  parameter int SEQ  = 15,
  parameter int D_IN = 6,
  parameter int L1   = 32,
  parameter int L2   = 16,
  parameter int L3   = 8,
  parameter int NC   = 3,
  parameter int NPAR = SEQ*D_IN*L1 + L1 + L1*L2 + L2 + L2*L3 + L3 + L3*NC + NC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_row [D_IN],
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_prob [NC],
  input  data_t p [NPAR]
);

  localparam int NF   = SEQ * D_IN;
  localparam int O_W1 = 0;
  localparam int O_B1 = O_W1 + NF*L1;
  localparam int O_W2 = O_B1 + L1;
  localparam int O_B2 = O_W2 + L1*L2;
  localparam int O_W3 = O_B2 + L2;
  localparam int O_B3 = O_W3 + L2*L3;
  localparam int O_W4 = O_B3 + L3;
  localparam int O_B4 = O_W4 + L3*NC;

  data_t w1 [NF*L1], b1 [L1], w2 [L1*L2], b2 [L2], w3 [L2*L3], b3 [L3], w4 [L3*NC], b4 [NC];
  always_comb begin
    for (int i = 0; i < NF*L1; i++) w1[i] = p[O_W1 + i];
    for (int i = 0; i < L1; i++)    b1[i] = p[O_B1 + i];
    for (int i = 0; i < L1*L2; i++) w2[i] = p[O_W2 + i];
    for (int i = 0; i < L2; i++)    b2[i] = p[O_B2 + i];
    for (int i = 0; i < L2*L3; i++) w3[i] = p[O_W3 + i];
    for (int i = 0; i < L3; i++)    b3[i] = p[O_B3 + i];
    for (int i = 0; i < L3*NC; i++) w4[i] = p[O_W4 + i];
    for (int i = 0; i < NC; i++)    b4[i] = p[O_B4 + i];
  end

  // Flatten buffer
  localparam int CW = $clog2(SEQ + 1);
  data_t         flat [NF];
  logic [CW-1:0] row_cnt;
  logic          flat_full;
  logic          adv;

  assign adv      = !out_valid || out_ready;
  assign in_ready = !flat_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_cnt   <= '0;
      flat_full <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        if (row_cnt == CW'(SEQ - 1)) begin
          row_cnt   <= '0;
          flat_full <= 1'b1;
        end else begin
          row_cnt <= row_cnt + 1'b1;
        end
      end else if (flat_full && adv) begin
        flat_full <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready)
      for (int i = 0; i < D_IN; i++) flat[int'(row_cnt)*D_IN + i] <= in_row[i];

  // Dense pipeline
  data_t y1_c [L1], y2_c [L2], y3_c [L3], y4_c [NC], sm_c [NC];
  data_t y1 [L1], y2 [L2], y3 [L3], y4 [NC];
  logic  v1, v2, v3, v4;

  dense_row #(.N_IN(NF), .N_OUT(L1), .RELU(1'b1)) u_d1 (.x(flat), .w(w1), .b(b1), .y(y1_c));
  dense_row #(.N_IN(L1), .N_OUT(L2), .RELU(1'b1)) u_d2 (.x(y1),   .w(w2), .b(b2), .y(y2_c));
  dense_row #(.N_IN(L2), .N_OUT(L3), .RELU(1'b1)) u_d3 (.x(y2),   .w(w3), .b(b3), .y(y3_c));
  dense_row #(.N_IN(L3), .N_OUT(NC), .RELU(1'b0)) u_d4 (.x(y3),   .w(w4), .b(b4), .y(y4_c));
  softmax_lut #(.N(NC)) u_sm (.x(y4), .y(sm_c));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v1, v2, v3, v4, out_valid} <= '0;
    end else if (adv) begin
      v1        <= flat_full;
      v2        <= v1;
      v3        <= v2;
      v4        <= v3;
      out_valid <= v4;
    end
  end

  always_ff @(posedge clk)
    if (adv) begin
      y1       <= y1_c;
      y2       <= y2_c;
      y3       <= y3_c;
      y4       <= y4_c;
      out_prob <= sm_c;
    end

endmodule
