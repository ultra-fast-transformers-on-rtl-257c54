// classifier_head_tb: rows of random jets into the flatten buffer and the
// 32/16/8/3 + softmax pipeline with random weights; the probabilities are
// compared with the reference.  Checks that the result comes in the 6th cycle after the one taking the last row
// when unstalled, then runs with random input gaps and output back-pressure.
module classifier_head_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  localparam int SEQ = 15, DIN = 6, NC = 3;
  localparam int NPAR = 3603;
  localparam int NJET = 8;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n = 1'b0;
  logic  in_valid, in_ready, out_valid, out_ready;
  data_t in_row [DIN], out_prob [NC];
  data_t p [NPAR];

  classifier_head #(.SEQ(SEQ), .D_IN(DIN)) dut (.*);

  vec_t prm;
  vec_t xs [NJET];
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

  longint last_in_cyc [NJET], out_cyc [NJET];

  initial begin : drive
    int j, t;
    in_valid = 0;
    foreach (in_row[i]) in_row[i] = '0;
    wait (rst_n);
    for (j = 0; j < NJET; j++) begin
      for (t = 0; t < SEQ; t++) begin
        @(negedge clk);
        while (j >= 4 && $urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < DIN; i++) in_row[i] = data_t'(xs[j][t*DIN + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (t == SEQ-1) last_in_cyc[j] = cyc;
      end
      @(negedge clk);
      in_valid = 0;
      if (j < 4) repeat (10) @(negedge clk);
    end
  end

  initial begin : check
    int j, stalls, sum;
    stalls = 0;
    out_ready = 1;
    prm = new[NPAR];
    foreach (prm[i]) begin prm[i] = rnd(200); p[i] = data_t'(prm[i]); end
    for (j = 0; j < NJET; j++) begin
      xs[j] = new[SEQ*DIN];
      foreach (xs[j][i]) xs[j][i] = rnd(3000);
      exp_y[j] = r_head(xs[j], 32, 16, 8, NC, prm, 0);
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (j = 0; j < NJET; j++) begin
      @(negedge clk);
      out_ready = (j >= 4) ? ($urandom_range(2) != 0) : 1'b1;
      while (!(out_valid && out_ready)) begin
        if (out_valid && !out_ready) stalls++;
        @(negedge clk);
        out_ready = (j >= 4) ? ($urandom_range(2) != 0) : 1'b1;
      end
      out_cyc[j] = cyc;
      sum = 0;
      for (int i = 0; i < NC; i++) begin
        sum += int'(out_prob[i]);
        chk(int'(out_prob[i]) == exp_y[j][i],
            $sformatf("jet %0d class %0d: got %0d exp %0d", j, i, out_prob[i], exp_y[j][i]));
      end
      chk(sum > 1000 && sum < 1040, $sformatf("jet %0d probabilities sum to %0d", j, sum));
    end
    for (j = 0; j < 4; j++)
      chk(out_cyc[j] - last_in_cyc[j] == 6, $sformatf("latency jet %0d = %0d", j, out_cyc[j] - last_in_cyc[j]));
    chk(stalls > 0, "no back-pressure stall happened");
    $display("output stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
