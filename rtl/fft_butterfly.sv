// fft_butterfly: one radix-2 butterfly and its exact inverse, combinational.
//
// Forward (inv = 0), decimation-in-time with 1/2 scaling per stage:
//     t = b * w,   x = (a + t) / 2,   y = (a - t) / 2
// Reverse (inv = 1), the same butterfly run backwards:
//     x = A + B,   y = (A - B) * conj(w)
// Feeding the forward outputs into the reverse form gives a and b back, up to the
// rounding of the forward step; this is how the FFT engine runs its network with
// reversed flow to obtain the inverse transform.
//
// Products keep the full width and are rounded half up after dropping TW_W-1
// fraction bits; halving rounds half to even, because a bias there would add up
// over the stages and return, multiplied by N, as an offset on one output sample. Every output is saturated to DATA_W
// bits and 'sat' is raised when any of the four parts was clamped. The forward form
// cannot leave the range except by rounding at full scale; the reverse form can when
// fed data that no forward pass produced.
//
// The butterfly structure is this implementation's choice: the architecture asks
// only for an FFT whose inverse is the same block with reversed flow.
module fft_butterfly
  import tr_pkg::*;
(
  input  logic     inv,
  input  cplx_t    a,
  input  cplx_t    b,
  input  twiddle_t w,
  output cplx_t    x,
  output cplx_t    y,
  output logic     sat
);
  localparam int XW = DATA_W + 3;         // width of sums and rounded products
  localparam int PW = XW + TW_W;          // width of a full product
  localparam logic signed [PW-1:0] RND = PW'(1) <<< (TW_W - 2);

  typedef logic signed [XW-1:0] wide_t;
  typedef logic signed [PW-1:0] prod_t;

  // (pr + j pi) = (ur + j ui) * (w.re + j s*w.im), s = +1 forward, -1 reverse
  function automatic wide_t rnd_prod(prod_t p);
    return wide_t'((p + RND) >>> (TW_W - 1));
  endfunction

  // v/2 rounded half to even, so that repeated halving adds no bias.
  function automatic wide_t half_even(wide_t v);
    logic up;
    up = v[0] & v[1];
    return (v >>> 1) + wide_t'({{(XW-1){1'b0}}, up});
  endfunction

  wide_t ur, ui;              // multiplicand
  wide_t wr, wi;              // twiddle, conjugated in reverse mode
  wide_t pr, pi;              // rounded product
  wide_t sr, si, dr, di;      // forward sum and difference
  logic  o0, o1, o2, o3;

  always_comb begin
    wr = wide_t'(w.re);
    wi = inv ? -wide_t'(w.im) : wide_t'(w.im);
    if (!inv) begin
      ur = wide_t'(b.re);
      ui = wide_t'(b.im);
    end else begin
      ur = wide_t'(a.re) - wide_t'(b.re);
      ui = wide_t'(a.im) - wide_t'(b.im);
    end
    pr = rnd_prod(prod_t'(ur) * prod_t'(wr) - prod_t'(ui) * prod_t'(wi));
    pi = rnd_prod(prod_t'(ur) * prod_t'(wi) + prod_t'(ui) * prod_t'(wr));

    sr = wide_t'(a.re) + pr;
    si = wide_t'(a.im) + pi;
    dr = wide_t'(a.re) - pr;
    di = wide_t'(a.im) - pi;

    if (!inv) begin
      x.re = sat_sample(half_even(sr), o0);
      x.im = sat_sample(half_even(si), o1);
      y.re = sat_sample(half_even(dr), o2);
      y.im = sat_sample(half_even(di), o3);
    end else begin
      x.re = sat_sample(wide_t'(a.re) + wide_t'(b.re), o0);
      x.im = sat_sample(wide_t'(a.im) + wide_t'(b.im), o1);
      y.re = sat_sample(pr, o2);
      y.im = sat_sample(pi, o3);
    end
    sat = o0 | o1 | o2 | o3;
  end
endmodule
