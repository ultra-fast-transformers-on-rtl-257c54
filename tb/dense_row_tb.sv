// dense_row_tb: random rows through two dense_row instances (6->8 with ReLU,
// 64->6 linear, the shapes of the feed-forward and attention output layers),
// compared with the integer reference model.  Includes cases large enough to
// saturate.
module dense_row_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  data_t xa [6],  wa [48],  ba [8],  ya [8];
  data_t xb [64], wb [384], bb [6],  yb [6];

  dense_row #(.N_IN(6),  .N_OUT(8), .RELU(1'b1)) dut_a (.x(xa), .w(wa), .b(ba), .y(ya));
  dense_row #(.N_IN(64), .N_OUT(6), .RELU(1'b0)) dut_b (.x(xb), .w(wb), .b(bb), .y(yb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t x, p, y;
    int lim;
    for (int it = 0; it < 300; it++) begin
      lim = (it % 10 == 0) ? 500000 : 2048;
      x = new[6]; p = new[56];
      foreach (x[i]) begin x[i] = rnd(lim); xa[i] = data_t'(x[i]); end
      foreach (p[i]) p[i] = rnd(lim/2);
      for (int i = 0; i < 48; i++) wa[i] = data_t'(p[i]);
      for (int i = 0; i < 8; i++)  ba[i] = data_t'(p[48+i]);
      #1;
      y = r_dense(x, p, 0, 8, 1);
      foreach (y[o]) begin
        checks++;
        if (int'(ya[o]) != y[o]) begin
          failures++;
          if (failures < 10) $display("A it=%0d o=%0d got %0d exp %0d", it, o, ya[o], y[o]);
        end
      end

      x = new[64]; p = new[390];
      foreach (x[i]) begin x[i] = rnd(lim); xb[i] = data_t'(x[i]); end
      foreach (p[i]) p[i] = rnd(lim/4);
      for (int i = 0; i < 384; i++) wb[i] = data_t'(p[i]);
      for (int i = 0; i < 6; i++)   bb[i] = data_t'(p[384+i]);
      #1;
      y = r_dense(x, p, 0, 6, 0);
      foreach (y[o]) begin
        checks++;
        if (int'(yb[o]) != y[o]) begin
          failures++;
          if (failures < 10) $display("B it=%0d o=%0d got %0d exp %0d", it, o, yb[o], y[o]);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
