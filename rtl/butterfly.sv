// butterfly: radix-2 decimation-in-time butterfly unit.
//
// Computes t = W*b (complex multiply, twiddle in 1.14 format, rounded), then
// x = a + t and y = a - t. In the forward transform (inverse = 0) both outputs
// are halved with rounding, so that a size-k FFT carries an overall 1/k and
// cannot overflow; in the inverse transform (inverse = 1) the twiddle is
// conjugated and no scaling is applied. Results saturate to 16 bits.
// The cascade of multiplications then additions follows the paper's
// butterfly computation unit; its Fig. 12(b) names the parts Mult1, Mult2
// and Add, with an optional register Mult1/Mult2 between the first two.
// Here Mult1 forms the four real partial products of b*W, and Mult2 combines
// them into the complex product and rounds it.
// INTRA = 0 (default): purely combinational, which is the inter-level-only
//   pipelining the paper selects for its 200 MHz prototype (clk is unused).
// INTRA = 1: intra-level pipelining; the Mult1/Mult2 register holds the
//   partial products, a and the direction, so x and y appear one clock after
//   a, b, w and inverse are presented, and a new set may enter every clock.
// Rounding, scaling and saturation are this design's choices.
module butterfly
  import circnn_pkg::*;
#(
  parameter int INTRA = 0     // 1: register between Mult1 and Mult2
) (
  input  logic  clk,
  input  cplx_t a,
  input  cplx_t b,
  input  tw_t   w,
  input  logic  inverse,
  output cplx_t x,
  output cplx_t y
);
  localparam logic signed [47:0] HALF_TW = 48'sd1 <<< (TW_FRAC - 1);

  // Mult1: partial products (twiddle conjugated for the inverse)
  typedef struct packed {
    logic signed [31:0] rr, ii, ri, ir;   // b.re*w.re, b.im*w.im, b.re*w.im, b.im*w.re
    cplx_t              a;
    logic               inverse;
  } m1_t;

  m1_t m1, m2;
  logic signed [TW_W-1:0] wim;

  always_comb begin
    wim        = inverse ? -w.im : w.im;
    m1.rr      = 32'(b.re) * 32'(w.re);
    m1.ii      = 32'(b.im) * 32'(wim);
    m1.ri      = 32'(b.re) * 32'(wim);
    m1.ir      = 32'(b.im) * 32'(w.re);
    m1.a       = a;
    m1.inverse = inverse;
  end

  if (INTRA != 0) begin : g_intra
    always_ff @(posedge clk) m2 <= m1;
  end else begin : g_comb
    assign m2 = m1;
  end

  // Mult2 and Add
  logic signed [47:0] tr, ti, xr, xi, yr, yi;
  always_comb begin
    tr = (48'(m2.rr) - 48'(m2.ii) + HALF_TW) >>> TW_FRAC;
    ti = (48'(m2.ri) + 48'(m2.ir) + HALF_TW) >>> TW_FRAC;
    xr = 48'(m2.a.re) + tr;
    xi = 48'(m2.a.im) + ti;
    yr = 48'(m2.a.re) - tr;
    yi = 48'(m2.a.im) - ti;
    if (!m2.inverse) begin
      xr = (xr + 48'sd1) >>> 1;
      xi = (xi + 48'sd1) >>> 1;
      yr = (yr + 48'sd1) >>> 1;
      yi = (yi + 48'sd1) >>> 1;
    end
    x.re = sat16(xr);
    x.im = sat16(xi);
    y.re = sat16(yr);
    y.im = sat16(yi);
  end

endmodule
