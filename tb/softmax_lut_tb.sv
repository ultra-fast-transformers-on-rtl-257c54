// softmax_lut_tb: random vectors through the 15-input (attention) and
// 3-input (output layer) softmax, compared exactly with the reference, which
// evaluates exp and 1/x directly instead of through tables.  Also checks that
// the probabilities sum to 1 within the table resolution and covers inputs
// spread wide enough to clamp the exponential index.
module softmax_lut_tb;
  import tf_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  data_t xa [15], ya [15];
  data_t xb [3],  yb [3];
  softmax_lut #(.N(15)) dut_a (.x(xa), .y(ya));
  softmax_lut #(.N(3))  dut_b (.x(xb), .y(yb));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t x, y;
    int sum, lim;
    for (int it = 0; it < 400; it++) begin
      lim = (it % 4 == 0) ? 40000 : 3000;
      x = new[15];
      foreach (x[i]) begin x[i] = rnd(lim); xa[i] = data_t'(x[i]); end
      x = new[3];
      foreach (x[i]) begin x[i] = rnd(lim); xb[i] = data_t'(x[i]); end
      #1;
      x = new[15]; foreach (x[i]) x[i] = int'(xa[i]);
      y = r_softmax(x);
      sum = 0;
      foreach (y[i]) begin
        checks++; sum += int'(ya[i]);
        if (int'(ya[i]) != y[i]) begin
          failures++;
          if (failures < 10) $display("N15 it=%0d i=%0d got %0d exp %0d", it, i, ya[i], y[i]);
        end
      end
      checks++;
      if (sum < 1000 || sum > 1040) begin failures++; $display("N15 sum %0d", sum); end
      x = new[3]; foreach (x[i]) x[i] = int'(xb[i]);
      y = r_softmax(x);
      foreach (y[i]) begin
        checks++;
        if (int'(yb[i]) != y[i]) begin
          failures++;
          if (failures < 10) $display("N3 it=%0d i=%0d got %0d exp %0d", it, i, yb[i], y[i]);
        end
      end
      @(posedge clk);
    end
    // all-equal inputs: every output is 1/N
    foreach (xa[i]) xa[i] = 20'sd777;
    #1;
    foreach (ya[i]) begin
      checks++;
      if (ya[i] < 66 || ya[i] > 70) begin failures++; $display("uniform %0d", ya[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
