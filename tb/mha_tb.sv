// mha_tb: multi-head attention at the model's size (15 rows, 6 features,
// 2 heads of 32) with random weights.  Jets are streamed in and every output
// row is compared with the reference.  Phase 1 keeps the input always valid
// and the output always ready and checks the timing: 15 accepted rows, the
// first output row in the 5th cycle after the one that takes the last input row, and a new jet accepted
// every 2*15+2 clocks.  Phase 2 adds random input gaps and output
// back-pressure and checks that nothing is lost or reordered.
module mha_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  localparam int SEQ = 15, DIN = 6, NH = 2, DK = 32, P = NH*DK;
  localparam int NJET = 6;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n = 1'b0;
  logic  in_valid, in_ready, out_valid, out_ready;
  data_t in_row [DIN], out_row [DIN];
  data_t wq [DIN*P], bq [P], wk [DIN*P], bk [P], wv [DIN*P], bv [P], wo [P*DIN], bo [DIN];

  mha #(.SEQ(SEQ), .D_IN(DIN), .NH(NH), .DK(DK)) dut (.*);

  vec_t prm;
  vec_t xs  [NJET];
  vec_t exp_y [NJET];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("cycle %0d: %s", cyc, what); end
  endtask

  // stimulus
  longint last_in_cyc [NJET], first_in_cyc [NJET], first_out_cyc [NJET];
  bit phase2 = 0;

  initial begin : drive
    int j, t;
    in_valid = 0;
    foreach (in_row[i]) in_row[i] = '0;
    wait (rst_n);
    for (j = 0; j < NJET; j++) begin
      phase2 = (j >= 3);
      for (t = 0; t < SEQ; t++) begin
        @(negedge clk);
        while (phase2 && $urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < DIN; i++) in_row[i] = data_t'(xs[j][t*DIN + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (t == 0)   first_in_cyc[j] = cyc;
        if (t == SEQ-1) last_in_cyc[j] = cyc;
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  initial begin : check
    int j, t, stalls;
    stalls = 0;
    out_ready = 1;
    prm = new[mha_params(DIN, NH, DK)];
    foreach (prm[i]) prm[i] = rnd(300);
    for (int i = 0; i < DIN*P; i++) begin
      wq[i] = data_t'(prm[i]);
      wk[i] = data_t'(prm[DIN*P + P + i]);
      wv[i] = data_t'(prm[2*(DIN*P + P) + i]);
      wo[i] = data_t'(prm[3*(DIN*P + P) + i]);
    end
    for (int i = 0; i < P; i++) begin
      bq[i] = data_t'(prm[DIN*P + i]);
      bk[i] = data_t'(prm[2*DIN*P + P + i]);
      bv[i] = data_t'(prm[3*DIN*P + 2*P + i]);
    end
    for (int i = 0; i < DIN; i++) bo[i] = data_t'(prm[4*DIN*P + 3*P + i]);
    for (j = 0; j < NJET; j++) begin
      xs[j] = new[SEQ*DIN];
      foreach (xs[j][i]) xs[j][i] = rnd(2048);
      exp_y[j] = r_mha(xs[j], SEQ, DIN, NH, DK, prm, 0);
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (j = 0; j < NJET; j++) begin
      for (t = 0; t < SEQ; t++) begin
        @(negedge clk);
        out_ready = (j >= 3) ? ($urandom_range(2) != 0) : 1'b1;
        while (!(out_valid && out_ready)) begin
          if (out_valid && !out_ready) stalls++;
          @(negedge clk);
          out_ready = (j >= 3) ? ($urandom_range(2) != 0) : 1'b1;
        end
        if (t == 0) first_out_cyc[j] = cyc;
        for (int i = 0; i < DIN; i++)
          chk(int'(out_row[i]) == exp_y[j][t*DIN + i],
              $sformatf("jet %0d row %0d f %0d: got %0d exp %0d", j, t, i, out_row[i], exp_y[j][t*DIN+i]));
      end
    end
    @(negedge clk);
    for (j = 0; j < 3; j++)
      chk(first_out_cyc[j] - last_in_cyc[j] == 5,
          $sformatf("latency jet %0d = %0d", j, first_out_cyc[j] - last_in_cyc[j]));
    for (j = 1; j < 3; j++)
      chk(first_in_cyc[j] - first_in_cyc[j-1] == 2*SEQ + 2,
          $sformatf("interval jet %0d = %0d", j, first_in_cyc[j] - first_in_cyc[j-1]));
    chk(stalls > 0, "no back-pressure stall happened");
    $display("output stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
