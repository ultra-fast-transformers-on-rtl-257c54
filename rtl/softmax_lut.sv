// softmax_lut: softmax of an N-element vector using two lookup tables.
//
// As in the source, the exponential and the reciprocal are both read from
// tables instead of being computed.  The table sizes, index scaling and the
// subtraction of the maximum are this design's choices:
//   1. m = max_i x[i]; d[i] = m - x[i] >= 0 (keeps every exponent <= 0).
//   2. e[i] = EXP[min(1023, floor(d[i]*64))], EXP[k] = round(2^16 * exp(-k/64)),
//      18-bit unsigned with 16 fractional bits (EXP[0] = 1.0).
//   3. S = sum e[i];  r = INV[min(1023, floor(S*64))],
//      INV[j] = min(2^18-1, round(2^16 / ((j+0.5)/64))).
//   4. y[i] = floor(e[i] * r / 2^22), i.e. the probability with 10 fractional bits.
// Both tables have 1024 entries and are generated at elaboration from the
// formulas above.  Because e[max] = 1.0, S >= 1 and only INV[64..1023] are used.
// A probability never exceeds 1.0, so the upper bits of every y[i] are always
// zero; they are kept so that y has the common data_t format.
//
// Interface: purely combinational.
module softmax_lut
  import tf_pkg::*;
#(
  parameter int N = 15
) (
  input  data_t x [N],
  output data_t y [N]
);

  localparam int TSIZE = 1 << TAB_BITS;
  typedef logic [EXP_W-1:0] tab_t;

  function automatic tab_t exp_entry(input int k);
    real v;
    v = $exp(-real'(k) / real'(1 << TAB_FRAC)) * real'(1 << EXP_FRAC);
    return tab_t'($rtoi(v + 0.5));
  endfunction

  function automatic tab_t inv_entry(input int j);
    real v;
    v = real'(1 << EXP_FRAC) * real'(1 << TAB_FRAC) / (real'(j) + 0.5);
    if (v > real'((1 << EXP_W) - 1)) v = real'((1 << EXP_W) - 1);
    return tab_t'($rtoi(v + 0.5));
  endfunction

  tab_t exp_tab [TSIZE];
  tab_t inv_tab [TSIZE];

  for (genvar g = 0; g < TSIZE; g++) begin : g_tab
    localparam tab_t EV = exp_entry(g);
    localparam tab_t IV = inv_entry(g);
    assign exp_tab[g] = EV;
    assign inv_tab[g] = IV;
  end

  localparam int SUM_W = EXP_W + $clog2(N + 1);

  data_t            mx;
  tab_t             e   [N];
  logic [SUM_W-1:0] sum;
  tab_t             r;

  always_comb begin
    mx = x[0];
    for (int i = 1; i < N; i++)
      if (x[i] > mx) mx = x[i];

    sum = '0;
    for (int i = 0; i < N; i++) begin
      acc_t d;
      acc_t idx;
      d   = acc_t'(mx) - acc_t'(x[i]);
      idx = d >>> (FRAC_W - TAB_FRAC);
      if (idx > acc_t'(TSIZE) - 1) idx = acc_t'(TSIZE) - 1;
      e[i] = exp_tab[idx[TAB_BITS-1:0]];
      sum += SUM_W'(e[i]);
    end

    begin
      logic [SUM_W-1:0] sidx;
      sidx = sum >> (EXP_FRAC - TAB_FRAC);
      if (sidx > SUM_W'(TSIZE - 1)) sidx = SUM_W'(TSIZE - 1);
      r = inv_tab[sidx[TAB_BITS-1:0]];
    end

    for (int i = 0; i < N; i++) begin
      logic [2*EXP_W-1:0] prod;
      prod = (2*EXP_W)'(e[i]) * (2*EXP_W)'(r);
      y[i] = data_t'(prod >> (2*EXP_FRAC - FRAC_W));
    end
  end

endmodule
