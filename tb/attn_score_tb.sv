// attn_score_tb: random query rows and key matrices (15 x 32), compared with
// the reference dot product scaled by 181/1024 = 1/sqrt(32).
module attn_score_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  data_t q [32], k [15][32], s [15];
  attn_score #(.SEQ(15), .DK(32), .SCALE(181)) dut (.q, .k, .s);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t qv, kv;
    int lim;
    for (int it = 0; it < 200; it++) begin
      lim = (it % 8 == 0) ? 60000 : 3000;
      qv = new[32];
      foreach (qv[d]) begin qv[d] = rnd(lim); q[d] = data_t'(qv[d]); end
      for (int j = 0; j < 15; j++) for (int d = 0; d < 32; d++) k[j][d] = data_t'(rnd(lim));
      #1;
      for (int j = 0; j < 15; j++) begin
        kv = new[32];
        foreach (kv[d]) kv[d] = int'(k[j][d]);
        checks++;
        if (int'(s[j]) != r_score(qv, kv, 181)) begin
          failures++;
          if (failures < 10) $display("it=%0d j=%0d got %0d exp %0d", it, j, s[j], r_score(qv, kv, 181));
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
