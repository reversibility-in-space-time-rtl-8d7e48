// phase_conjugator: the phase-inversion step of the time-reversal chain.
//
// Conjugating a spectrum reverses the signal in time, and conjugation only changes
// the sign of the phase: with bins held as (re, im), the real half passes unchanged
// and the imaginary half is negated. Two ways to negate are offered:
//
//   ONES_COMPLEMENT = 0  subtraction from zero (two's-complement negation). The one
//                        value without a positive counterpart, -2^(DATA_W-1), is
//                        saturated to 2^(DATA_W-1)-1 and 'ovf' is raised.
//   ONES_COMPLEMENT = 1  bitwise complement, -im - 1. A bijection on DATA_W bits,
//                        so it never overflows, at the cost of a one-LSB offset.
//
// Combinational, no clock. Negation by either method follows the architecture; the
// rectangular (re, im) format and the saturation are this implementation's choices.
module phase_conjugator
  import tr_pkg::*;
#(
  parameter bit ONES_COMPLEMENT = 1'b0
) (
  input  cplx_t din,
  output cplx_t dout,
  output logic  ovf
);
  always_comb begin
    dout.re = din.re;
    ovf     = 1'b0;
    if (ONES_COMPLEMENT) begin
      dout.im = ~din.im;
    end else if (din.im == SAMPLE_MIN) begin
      dout.im = SAMPLE_MAX;
      ovf     = 1'b1;
    end else begin
      dout.im = -din.im;
    end
  end
endmodule
