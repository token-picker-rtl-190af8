// exp_unit: fixed-point exponential used by the Partial Exp Calculator and the
// Probability Generator of every PE lane (two per lane).
//
// y = e^x, with x a signed 24-bit score (8 fractional bits, natural-log
// units) and y an unsigned 32-bit value with 16 fractional bits. The unit
// rewrites e^x as 2^(x*log2 e): the product is split into an integer part n
// and a fraction f; 2^f comes from a 16-segment piecewise-linear table of
// 2^(i/16) (entry i = round(2^(i/16) * 2^15)), and the result is shifted by n.
// Results of 2^16 and above saturate to all ones; results below 2^-16 become 0.
// Purely combinational. The paper gives only the widths (24-bit scores,
// 32-bit fixed-point EXP unit); the algorithm and the formats are this
// design's choice.
module exp_unit
  import topick_pkg::*;
(
  input  score_t x,
  output exp_t   y
);
  // x has SFRAC = 8 fractional bits, LOG2E 15, so t has 23 = SFRAC + 15
  localparam int          TFRAC     = SFRAC + 15;
  localparam logic [16:0] LOG2E_Q15 = 17'd47274;  // round(log2(e) * 2^15)
  localparam logic [16:0] POW2_TAB [17] = '{
    17'd32768, 17'd34219, 17'd35734, 17'd37316, 17'd38968, 17'd40693,
    17'd42495, 17'd44376, 17'd46341, 17'd48393, 17'd50535, 17'd52773,
    17'd55109, 17'd57549, 17'd60097, 17'd62757, 17'd65536};

  logic signed [41:0] t;        // x*log2e, 23 fractional bits
  logic signed [18:0] n;        // integer part (floor)
  logic        [22:0] f;        // fractional part
  logic        [3:0]  seg;
  logic        [18:0] r;
  logic        [16:0] base, slope;
  logic        [35:0] interp;
  logic        [16:0] mant;     // 2^f, 15 fractional bits, in [1,2)
  logic signed [19:0] sh;       // left shift = n + 1 (Q1.15 -> Q16.16)
  logic        [32:0] wide;

  always_comb begin
    t      = 42'(x) * $signed({1'b0, LOG2E_Q15});
    n      = t[41:TFRAC];
    f      = t[TFRAC-1:0];
    seg    = f[22:19];
    r      = f[18:0];
    base   = POW2_TAB[5'(seg)];
    slope  = POW2_TAB[5'(seg) + 5'd1] - POW2_TAB[5'(seg)];
    interp = 36'(slope) * 36'(r);
    mant   = base + 17'(interp >> 19);
    sh     = 20'(n) + 20'sd1;
    wide   = {16'd0, mant} << sh[4:0];
    if (sh > 20'sd16 || (sh >= 0 && wide[32]))
      y = '1;
    else if (sh >= 0)
      y = wide[EXP_W-1:0];
    else if (sh > -20'sd17)
      y = EXP_W'(mant >> (-sh));
    else
      y = '0;
  end
endmodule
