// transformer_top_tb: end-to-end test of the complete tagger at its full
// size (no parameter overrides).  A random set of 9135 weights is written
// through the load port, then random jets of 15 tracks x 6 features are
// streamed in and each probability triple is compared with the bit-accurate
// reference model.  The first jets are sent back to back with the output
// always ready, which makes later jets wait for the encoders (input stalls)
// and keeps several jets in flight in different encoders at once; the last
// jets add random input gaps and output back-pressure.  Each of these
// mechanisms is counted and must occur at least once.  For the unstalled first
// jet it also checks the latency from its last track to its result: each
// encoder presents its first row 6 cycles after its last input row and its
// last row 14 cycles later, which the next stage needs before it can start,
// so 3 x (6 + 14) + 6 cycles of the classifier = 66 cycles.  Back-to-back jets
// must be accepted every 2*15+2 = 32 cycles.
module transformer_top_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  localparam int NJET = 6;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n = 1'b0;
  logic               wload_en = 1'b0;
  logic [WADDR_W-1:0] wload_addr;
  data_t              wload_data;
  logic               in_valid, in_ready, out_valid, out_ready;
  data_t              in_row [N_FEAT], out_prob [N_CLASS];

  transformer_top dut (.*);

  vec_t prm;
  vec_t xs [NJET];
  vec_t exp_y [NJET];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  int in_stalls = 0, out_stalls = 0, overlap = 0, in_gaps = 0;
  int jets_in = 0, jets_out = 0;
  bit loaded = 0;

  always @(posedge clk) if (loaded) begin
    if (in_valid && !in_ready) in_stalls++;
    if (out_valid && !out_ready) out_stalls++;
    if (jets_in - jets_out >= 2) overlap++;
  end

  initial begin
    repeat (60000) @(posedge clk);
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
    in_valid = 0;
    foreach (in_row[i]) in_row[i] = '0;
    wait (loaded);
    for (int j = 0; j < NJET; j++) begin
      for (int t = 0; t < SEQ_LEN; t++) begin
        @(negedge clk);
        while (j >= 3 && $urandom_range(3) == 0) begin in_valid = 0; in_gaps++; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < N_FEAT; i++) in_row[i] = data_t'(xs[j][t*N_FEAT + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (t == SEQ_LEN-1) begin last_in_cyc[j] = cyc; jets_in++; end
      end
    end
    @(negedge clk);
    in_valid = 0;
  end

  initial begin : check
    int sum;
    out_ready = 1;
    prm = new[N_PARAMS];
    if (N_PARAMS != 9135) $display("unexpected parameter count %0d", N_PARAMS);
    foreach (prm[i]) prm[i] = rnd(250);
    for (int j = 0; j < NJET; j++) begin
      xs[j] = new[SEQ_LEN*N_FEAT];
      foreach (xs[j][i]) xs[j][i] = rnd(3000);
      exp_y[j] = r_model(xs[j], prm);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N_PARAMS; i++) begin
      @(negedge clk);
      wload_en = 1; wload_addr = WADDR_W'(i); wload_data = data_t'(prm[i]);
    end
    @(negedge clk);
    wload_en = 0;
    loaded = 1;
    for (int j = 0; j < NJET; j++) begin
      @(negedge clk);
      out_ready = (j >= 3) ? ($urandom_range(2) != 0) : 1'b1;
      while (!(out_valid && out_ready)) begin
        @(negedge clk);
        out_ready = (j >= 3) ? ($urandom_range(2) != 0) : 1'b1;
      end
      out_cyc[j] = cyc;
      jets_out++;
      sum = 0;
      for (int i = 0; i < N_CLASS; i++) begin
        sum += int'(out_prob[i]);
        chk(int'(out_prob[i]) == exp_y[j][i],
            $sformatf("jet %0d class %0d: got %0d exp %0d", j, i, out_prob[i], exp_y[j][i]));
      end
      chk(sum > 1000 && sum < 1040, $sformatf("jet %0d probabilities sum to %0d", j, sum));
      $display("jet %0d: p(b)=%0d p(c)=%0d p(light)=%0d (/1024), cycle %0d", j,
               out_prob[0], out_prob[1], out_prob[2], cyc);
    end
    chk(out_cyc[0] - last_in_cyc[0] == 66, $sformatf("latency jet 0 = %0d", out_cyc[0] - last_in_cyc[0]));
    chk(last_in_cyc[1] - last_in_cyc[0] == 32, $sformatf("jet interval = %0d", last_in_cyc[1] - last_in_cyc[0]));
    chk(last_in_cyc[2] - last_in_cyc[1] == 32, $sformatf("jet interval = %0d", last_in_cyc[2] - last_in_cyc[1]));
    chk(in_stalls > 0, "no input stall happened");
    chk(out_stalls > 0, "no output back-pressure happened");
    chk(overlap > 0, "never two jets in flight");
    chk(in_gaps > 0, "no input gap happened");
    $display("input stalls %0d, output stalls %0d, cycles with >=2 jets in flight %0d, input gaps %0d",
             in_stalls, out_stalls, overlap, in_gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
