// encoder_block_tb: one encoder block at the model's size with random
// weights.  Jets are streamed in, each output row is compared with the
// reference (attention, residual add, feed-forward 8/6 with ReLU, residual
// add).  The first three jets run without stalls and check that the first
// output row comes in the 6th cycle after the one that takes the last input
// row; the rest add random input gaps and output back-pressure.
module encoder_block_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  localparam int SEQ = 15, DIN = 6, NH = 2, DK = 32, F1 = 8;
  localparam int NPAR = 1844;
  localparam int NJET = 6;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n = 1'b0;
  logic  in_valid, in_ready, out_valid, out_ready;
  data_t in_row [DIN], out_row [DIN];
  data_t p [NPAR];

  encoder_block #(.SEQ(SEQ), .D_IN(DIN), .NH(NH), .DK(DK), .F1(F1)) dut (.*);

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

  longint last_in_cyc [NJET], first_out_cyc [NJET];

  initial begin : drive
    int j, t;
    bit gaps;
    in_valid = 0;
    foreach (in_row[i]) in_row[i] = '0;
    wait (rst_n);
    for (j = 0; j < NJET; j++) begin
      gaps = (j >= 3);
      for (t = 0; t < SEQ; t++) begin
        @(negedge clk);
        while (gaps && $urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < DIN; i++) in_row[i] = data_t'(xs[j][t*DIN + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
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
    if (enc_params(DIN, NH, DK, F1) != NPAR) $display("parameter count mismatch");
    prm = new[NPAR];
    foreach (prm[i]) begin prm[i] = rnd(300); p[i] = data_t'(prm[i]); end
    for (j = 0; j < NJET; j++) begin
      xs[j] = new[SEQ*DIN];
      foreach (xs[j][i]) xs[j][i] = rnd(2048);
      exp_y[j] = r_encoder(xs[j], SEQ, DIN, NH, DK, F1, prm, 0);
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
    for (j = 0; j < 3; j++)
      chk(first_out_cyc[j] - last_in_cyc[j] == 6,
          $sformatf("latency jet %0d = %0d", j, first_out_cyc[j] - last_in_cyc[j]));
    chk(stalls > 0, "no back-pressure stall happened");
    $display("output stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
