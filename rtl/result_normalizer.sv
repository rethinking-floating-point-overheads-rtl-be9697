// result_normalizer: turns a finished accumulator into the write-back word.
//
// FP mode: the accumulator stands for acc * 2^(exp-30). Its magnitude is normalized (leading
// one found), rounded to nearest-even to the 11 (FP16) or 24 (FP32) significant bits of the
// output format and packed as an IEEE word in the low bits of `result`; results below the
// normal range become subnormals, results above it become infinity. INT mode: the
// accumulator holds the integer result scaled by 2^int_shift with zero low bits, and the
// exact integer acc >>> int_shift is returned, sign-extended to ACC_W bits.
// The rounding mode and the handling of subnormal/overflow results are this design's
// choices. Combinational.
module result_normalizer
  import mp_pkg::*;
#(
  parameter int unsigned ACC_W = 41
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic signed [EXP_W-1:0] exp,
  input  logic                    int_mode,
  input  logic [5:0]              int_shift,
  input  logic                    fp32,
  output logic [ACC_W-1:0]        result
);
  logic             sgn, rnd, sticky, up;
  logic [ACC_W-1:0] mag;
  logic [ACC_W+1:0] q;
  int               p, m, bias, emax_b, lsb_e, r, biased;

  always_comb begin
    result = '0;
    sgn    = acc[ACC_W-1];
    mag    = sgn ? ACC_W'(-acc) : ACC_W'(acc);
    m      = fp32 ? 23 : 10;
    bias   = fp32 ? 127 : 15;
    emax_b = fp32 ? 255 : 31;
    p      = -1;
    for (int b = 0; b < ACC_W; b++) if (mag[b]) p = b;
    lsb_e  = int'(exp) - int'(FRAC_BITS);
    // number of low magnitude bits that do not fit into the output significand
    r      = p - m;
    if ((1 - bias - m - lsb_e) > r) r = 1 - bias - m - lsb_e;
    q      = '0;
    rnd    = 1'b0;
    sticky = 1'b0;
    if (r <= 0) begin
      q = (ACC_W+2)'(mag) << (-r);
    end else if (r > ACC_W) begin
      sticky = |mag;
    end else begin
      q      = (ACC_W+2)'(mag >> r);
      rnd    = mag[r-1];
      for (int b = 0; b < ACC_W; b++) if (b < r - 1 && mag[b]) sticky = 1'b1;
    end
    up = rnd && (sticky || q[0]);
    q  = q + (ACC_W+2)'(up);
    lsb_e = lsb_e + r;
    if (q[m+1]) begin
      q     = q >> 1;
      lsb_e = lsb_e + 1;
    end
    biased = q[m] ? (lsb_e + m + bias) : 0;

    if (int_mode) begin
      result = ACC_W'(acc >>> int_shift);
    end else if (biased >= emax_b) begin
      result = fp32 ? ACC_W'({sgn, 8'hff, 23'd0}) : ACC_W'({sgn, 5'h1f, 10'd0});
    end else if (fp32) begin
      result = ACC_W'({sgn, 8'(biased), q[22:0]});
    end else begin
      result = ACC_W'({sgn, 5'(biased), q[9:0]});
    end
  end

endmodule
