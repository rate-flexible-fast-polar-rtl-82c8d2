// pe: one processing element of the successive-cancellation datapath.
//
// It evaluates, on sign-magnitude LLRs, either
//   F(a, b)    = sgn(a) sgn(b) min(|a|, |b|)     (min-sum left-child update)
//   G(a, b, c) = b + (1 - 2c) a                    (right-child update)
// where c is the partial-sum bit of the left child. Both functions are the
// paper's. G converts to two's complement, adds, and saturates the result
// to the largest magnitude the QLLR-bit format can hold (saturation is this
// design's choice; the paper does not state its overflow handling).
//
// Purely combinational: fsel selects G (1) or F (0). A zero magnitude keeps
// a positive sign so that it reads as hard decision 0.
module pe
  import rf_pkg::*;
(
  input  llr_t a,
  input  llr_t b,
  input  logic c,     // left-child partial sum, used by G
  input  logic fsel,  // 0: F, 1: G
  output llr_t y
);

  localparam int signed MAXV = (1 << MAGW) - 1;

  logic signed [MAGW+1:0] av, bv, sum;
  llr_t f_out, g_out;

  always_comb begin
    // F: min-sum
    f_out.m = (a.m < b.m) ? a.m : b.m;
    f_out.s = (a.s ^ b.s) && (f_out.m != '0);

    // G: b + (1 - 2c) a, saturated
    av  = a.s ? -$signed({2'b00, a.m}) : $signed({2'b00, a.m});
    bv  = b.s ? -$signed({2'b00, b.m}) : $signed({2'b00, b.m});
    sum = c ? (bv - av) : (bv + av);
    if (sum > (MAGW+2)'(MAXV))       sum = (MAGW+2)'(MAXV);
    else if (sum < -(MAGW+2)'(MAXV)) sum = -(MAGW+2)'(MAXV);
    g_out.s = sum[MAGW+1];
    g_out.m = sum[MAGW+1] ? MAGW'(-sum) : MAGW'(sum);

    y = fsel ? g_out : f_out;
  end

endmodule
