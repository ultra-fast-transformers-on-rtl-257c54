// mha: multi-head self-attention over one sequence of SEQ rows.
//
// The layer follows the four pipeline stages of the source:
//   Stage 1  Each incoming row is projected to query, key and value vectors
//            for all heads at once (three dense_row units, D_IN -> NH*DK).
//            Query rows, which are read once, go into a FIFO; key rows go
//            into a 2-D register and value rows into a fully accessible
//            register, so that later stages can read every row in parallel.
//   Stage 2  Once all SEQ rows are in, one query row per clock is taken from
//            the FIFO; per head its scaled dot products with all key rows
//            (attn_score) are registered, then passed through the LUT
//            softmax (softmax_lut) and registered again.
//   Stage 3  The probability row of each head is multiplied with that head's
//            value rows (attn_value).  The value register is written row by
//            row and read column by column, which is the "matrix reshape".
//   Stage 4  The head outputs are concatenated (head 0 first) and projected
//            back to D_IN features by a dense_row; one row per clock.
// Control: state LOAD accepts SEQ rows (in_ready high); state COMPUTE issues
// the SEQ query rows into the stage 2-4 pipeline and returns to LOAD as soon as
// the last row has left stage 3, releasing the key/value registers for the
// next sequence.  A sequence therefore occupies the layer for about 2*SEQ
// clocks; load and compute of consecutive sequences do not overlap (this
// double-buffering question is left open by the source).
//
// Interface: valid/ready on both sides, rows of D_IN data_t.  The whole
// stage 2-4 pipeline advances only when the output register is empty or
// being read, so back-pressure stalls it without losing rows.  Without
// back-pressure the first output row is presented in the 5th cycle after the
// one that takes the last input row, and a new sequence can start every
// 2*SEQ+2 cycles.  Weights are inputs
// (kernels flattened [input][output], head h occupying outputs h*DK..h*DK+DK-1).
// rst_n is synchronous, active low.
module mha
  import tf_pkg::*;
#(
  parameter int SEQ   = 15,
  parameter int D_IN  = 6,
  parameter int NH    = 2,
  parameter int DK    = 32,
  parameter int SCALE = 181
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_row  [D_IN],
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_row [D_IN],
  input  data_t wq [D_IN*NH*DK],
  input  data_t bq [NH*DK],
  input  data_t wk [D_IN*NH*DK],
  input  data_t bk [NH*DK],
  input  data_t wv [D_IN*NH*DK],
  input  data_t bv [NH*DK],
  input  data_t wo [NH*DK*D_IN],
  input  data_t bo [D_IN]
);

  localparam int P  = NH * DK;
  localparam int CW = $clog2(SEQ + 1);

  typedef enum logic {LOAD, COMPUTE} state_t;
  state_t state;

  logic [CW-1:0] load_cnt, issue_cnt, done_cnt;

  // ---------------- Stage 1: projections ----------------
  data_t q_new [P], k_new [P], v_new [P];

  dense_row #(.N_IN(D_IN), .N_OUT(P)) u_q (.x(in_row), .w(wq), .b(bq), .y(q_new));
  dense_row #(.N_IN(D_IN), .N_OUT(P)) u_k (.x(in_row), .w(wk), .b(bk), .y(k_new));
  dense_row #(.N_IN(D_IN), .N_OUT(P)) u_v (.x(in_row), .w(wv), .b(bv), .y(v_new));

  data_t k_reg [SEQ][P];
  data_t v_reg [SEQ][P];

  logic             in_fire;
  logic [P*DATA_W-1:0] q_wr, q_rd;
  logic             q_pop, q_empty, q_full;
  logic [$clog2(SEQ+1)-1:0] q_count;

  assign in_ready = (state == LOAD);
  assign in_fire  = in_valid && in_ready;

  always_comb
    for (int i = 0; i < P; i++) q_wr[i*DATA_W +: DATA_W] = q_new[i];

  sync_fifo #(.WIDTH(P*DATA_W), .DEPTH(SEQ)) u_qfifo (
    .clk, .rst_n, .push(in_fire), .wr_data(q_wr), .pop(q_pop),
    .rd_data(q_rd), .empty(q_empty), .full(q_full), .count(q_count)
  );

  always_ff @(posedge clk)
    if (in_fire) begin
      k_reg[load_cnt] <= k_new;
      v_reg[load_cnt] <= v_new;
    end

  // ---------------- Stages 2-4 ----------------
  logic adv;
  assign adv = !out_valid || out_ready;

  logic  issue;
  assign issue = (state == COMPUTE) && (issue_cnt != CW'(SEQ)) && adv;
  assign q_pop = issue;

  data_t q_head [NH][DK];
  data_t k_head [NH][SEQ][DK];
  data_t v_head [NH][SEQ][DK];
  always_comb
    for (int h = 0; h < NH; h++)
      for (int d = 0; d < DK; d++) begin
        q_head[h][d] = q_rd[(h*DK + d)*DATA_W +: DATA_W];
        for (int j = 0; j < SEQ; j++) begin
          k_head[h][j][d] = k_reg[j][h*DK + d];
          v_head[h][j][d] = v_reg[j][h*DK + d];
        end
      end

  data_t score_c [NH][SEQ], prob_c [NH][SEQ], hout_c [NH][DK];
  data_t score_r [NH][SEQ], prob_r [NH][SEQ], hout_r [NH][DK];
  logic  s1_v, s2_v, s3_v;

  for (genvar h = 0; h < NH; h++) begin : g_head
    attn_score  #(.SEQ(SEQ), .DK(DK), .SCALE(SCALE)) u_score (
      .q(q_head[h]), .k(k_head[h]), .s(score_c[h]));
    softmax_lut #(.N(SEQ)) u_softmax (.x(score_r[h]), .y(prob_c[h]));
    attn_value  #(.SEQ(SEQ), .DK(DK)) u_value (
      .p(prob_r[h]), .v(v_head[h]), .o(hout_c[h]));
  end

  data_t concat [P];
  data_t proj_c [D_IN];
  always_comb
    for (int h = 0; h < NH; h++)
      for (int d = 0; d < DK; d++) concat[h*DK + d] = hout_r[h][d];

  dense_row #(.N_IN(P), .N_OUT(D_IN)) u_o (.x(concat), .w(wo), .b(bo), .y(proj_c));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      s3_v      <= 1'b0;
      out_valid <= 1'b0;
    end else if (adv) begin
      s1_v      <= issue;
      s2_v      <= s1_v;
      s3_v      <= s2_v;
      out_valid <= s3_v;
    end
  end

  always_ff @(posedge clk)
    if (adv) begin
      score_r <= score_c;
      prob_r  <= prob_c;
      hout_r  <= hout_c;
      out_row <= proj_c;
    end

  // ---------------- Control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= LOAD;
      load_cnt  <= '0;
      issue_cnt <= '0;
      done_cnt  <= '0;
    end else begin
      case (state)
        LOAD: if (in_fire) begin
          if (load_cnt == CW'(SEQ - 1)) begin
            load_cnt  <= '0;
            issue_cnt <= '0;
            done_cnt  <= '0;
            state     <= COMPUTE;
          end else begin
            load_cnt <= load_cnt + 1'b1;
          end
        end
        COMPUTE: begin
          if (issue) issue_cnt <= issue_cnt + 1'b1;
          if (adv && s2_v) begin
            if (done_cnt == CW'(SEQ - 1)) state <= LOAD;
            done_cnt <= done_cnt + 1'b1;
          end
        end
        default: state <= LOAD;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);
  a_q_avail: assert property (@(posedge clk) disable iff (!rst_n) issue |-> !q_empty);

endmodule
