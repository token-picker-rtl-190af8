// ln_unit: natural logarithm of the softmax denominator, the "ln(F)" box of
// the Denominator Aggregation Module.
//
// f is an unsigned 48-bit value with 16 fractional bits; y = ln(f) as a
// signed 24-bit score (8 fractional bits), so that it can be compared
// directly with partial scores. log2(f) is the position of the leading one
// (minus 16) plus log2(1+m) of the normalised mantissa m, taken from a
// 16-segment piecewise-linear table (entry i = round(log2(1+i/16) * 2^15));
// the sum is multiplied by ln 2. f = 0 gives the most negative score, so an
// empty denominator never prunes. Combinational. The paper names the
// function only; the method and formats are this design's choice.
module ln_unit
  import topick_pkg::*;
(
  input  logic [DEN_W-1:0] f,
  output score_t           y
);
  localparam logic [15:0] LOG2_TAB [17] = '{
    16'd0,     16'd2866,  16'd5568,  16'd8124,  16'd10549, 16'd12855,
    16'd15055, 16'd17156, 16'd19168, 16'd21098, 16'd22952, 16'd24736,
    16'd26455, 16'd28114, 16'd29717, 16'd31267, 16'd32768};
  localparam logic [16:0] LN2_Q16 = 17'd45426;  // round(ln(2) * 2^16)

  logic [5:0]         msb;
  logic [19:0]        norm;       // 20 bits below the leading one
  logic [3:0]         seg;
  logic [15:0]        r;
  logic [15:0]        base, slope;
  logic [31:0]        interp;
  logic [15:0]        lfrac;      // log2(1+m), 15 fractional bits
  logic signed [23:0] log2v;      // 15 fractional bits
  logic signed [41:0] lnv;        // 31 fractional bits

  always_comb begin
    msb = '0;
    for (int i = 0; i < DEN_W; i++)
      if (f[i]) msb = 6'(i);
    norm   = 20'((f << (6'(DEN_W - 1) - msb)) >> (DEN_W - 21));
    seg    = norm[19:16];
    r      = norm[15:0];
    base   = LOG2_TAB[5'(seg)];
    slope  = LOG2_TAB[5'(seg) + 5'd1] - LOG2_TAB[5'(seg)];
    interp = 32'(slope) * 32'(r);
    lfrac  = base + 16'(interp >> 16);
    log2v  = ($signed({18'd0, msb}) - 24'sd16) * 24'sd32768 + $signed({8'd0, lfrac});
    lnv    = 42'(log2v) * $signed({1'b0, LN2_Q16});
    if (f == '0)
      y = {1'b1, {(SCORE_W-1){1'b0}}};
    else
      y = score_t'(lnv >>> 23);
  end
endmodule
