// tf_pkg_tb: checks the shared arithmetic helpers (saturation, requantisation
// with floor rounding, ReLU, saturating add) against integer expectations,
// including values at and beyond the 20-bit range, and checks that the
// parameter-memory layout adds up to the model's 9135 parameters.
module tf_pkg_tb;
  import tf_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  function automatic longint clamp(input longint v);
    return (v > 524287) ? 524287 : (v < -524288) ? -524288 : v;
  endfunction

  function automatic longint floordiv(input longint a, input longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q--;
    return q;
  endfunction

  initial begin
    longint a, b, v;
    chk(N_PARAMS == 9135, $sformatf("N_PARAMS = %0d", N_PARAMS));
    chk(ENC_PARAMS == 1844, $sformatf("ENC_PARAMS = %0d", ENC_PARAMS));
    chk(OFF_BF2 + FF2 == ENC_PARAMS, "encoder layout does not end at ENC_PARAMS");
    chk(OFF_B4 + N_CLASS == HEAD_PARAMS, "classifier layout does not end at HEAD_PARAMS");
    chk(sat(acc_t'(524287)) == 20'sd524287, "sat max");
    chk(sat(acc_t'(524288)) == 20'sd524287, "sat above max");
    chk(sat(acc_t'(-524288)) == -20'sd524288, "sat min");
    chk(sat(acc_t'(-524289)) == -20'sd524288, "sat below min");
    for (int it = 0; it < 5000; it++) begin
      a = longint'($urandom) - 64'sd2147483648;
      a = a * longint'($urandom_range(4096));
      v = clamp(floordiv(a, 1024));
      chk(longint'(requant(acc_t'(a))) == v, $sformatf("requant(%0d) = %0d, exp %0d", a, requant(acc_t'(a)), v));
      a = longint'($urandom_range(1048575)) - 524288;
      b = longint'($urandom_range(1048575)) - 524288;
      chk(longint'(add_sat(data_t'(a), data_t'(b))) == clamp(a + b), $sformatf("add_sat(%0d,%0d)", a, b));
      chk(longint'(relu(data_t'(a))) == ((a < 0) ? 0 : a), $sformatf("relu(%0d)", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
