// attn_value_tb: random probability rows (0..1.0) times random 15 x 32 value
// matrices, compared with a reference sum of products.
module attn_value_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  data_t p [15], v [15][32], o [32];
  attn_value #(.SEQ(15), .DK(32)) dut (.p, .v, .o);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      int lim;
      lim = (it % 8 == 0) ? 500000 : 4000;
      for (int j = 0; j < 15; j++) begin
        p[j] = data_t'($urandom_range(1024));
        for (int d = 0; d < 32; d++) v[j][d] = data_t'(rnd(lim));
      end
      #1;
      for (int d = 0; d < 32; d++) begin
        longint acc;
        acc = 0;
        for (int j = 0; j < 15; j++) acc += longint'(p[j]) * longint'(v[j][d]);
        checks++;
        if (int'(o[d]) != r_rq(acc)) begin
          failures++;
          if (failures < 10) $display("it=%0d d=%0d got %0d exp %0d", it, d, o[d], r_rq(acc));
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
