// recip_unit: fixed-point reciprocal through a floating-point detour, as the
// paper proposes for the D_i^-1 of MMinvGen (fixed-point division is slow).
//
// How it works (combinational): the magnitude of the Q16.16 input is
// normalised by a leading-one search into a mantissa m in [1, 2) (Q2.30)
// and an exponent p (bit position of the leading one); 1/m is found with the
// linear seed 24/17 - 8/17 m followed by three Newton-Raphson steps
// y <- y (2 - m y), which is accurate to the last Q2.30 bit; the result is
// shifted back by the exponent, 1/x = (1/m) 2^(16-p), rounded to Q16.16 and
// given the input's sign. Inputs whose reciprocal does not fit saturate,
// and zero returns the largest positive value.
// The conversion and iteration scheme is this design's choice: the paper
// cites a floating-point reciprocal method without giving its insides.
module recip_unit
  import rbd_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  typedef logic signed [63:0] w_t;
  
  localparam w_t TWO30 = w_t'(64'sd2 <<< 30);
  localparam w_t C24   = w_t'((64'sd24 <<< 30) / 17);
  localparam w_t C8    = w_t'((64'sd8 <<< 30) / 17);

  always_comb begin
    logic [31:0] mag;
    int          p;
    w_t          m, r, e;
    logic [63:0] res;
    logic        neg;
    neg = x[FW-1];
    mag = neg ? 32'(-x) : 32'(x);
    p = 0;
    for (int b = 0; b < 32; b++) if (mag[b]) p = b;
    // mantissa in Q2.30
    if (p >= 30) m = w_t'({32'b0, mag} >> (p - 30));
    else         m = w_t'({32'b0, mag} << (30 - p));
    r = C24 - ((C8 * m) >>> 30);
    for (int it = 0; it < 3; it++) begin
      e = TWO30 - ((m * r) >>> 30);
      r = (r * e) >>> 30;
    end
    // 1/x in Q16.16 = r(Q2.30) * 2^(16 - p) * 2^16 / 2^30 = r * 2^(2 - p)
    if (p <= 2) res = 64'(r) << (2 - p);
    else        res = (64'(r) + (64'd1 << (p - 3))) >> (p - 2);
    if (mag == 0 || res > 64'h7FFF_FFFF) res = 64'h7FFF_FFFF;
    y = neg ? -fx_t'(res[31:0]) : fx_t'(res[31:0]);
  end
endmodule
