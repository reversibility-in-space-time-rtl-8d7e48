// tr_pkg: types and constants shared by the time-reversal signal chain.
//
// Samples and spectral bins are complex numbers of two DATA_W-bit two's-complement
// parts. Twiddle factors are TW_W-bit fixed point with TW_W-1 fraction bits (Q1.15
// by default). The twiddle table exp(-j*2*pi*k/N), k = 0..N/2-1, is computed at
// elaboration by tw_table(); +1.0 is not representable and is stored as 2^(TW_W-1)-1.
// bitrev() gives the bit-reversed address used when a frame is loaded into and
// unloaded from the in-place FFT memory.
//
// Widths are not given by the architecture this chain follows; 16/16 bits is this
// implementation's choice.
package tr_pkg;

  localparam int DATA_W = 16;
  localparam int TW_W   = 16;

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [TW_W-1:0]   twf_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  typedef struct packed {
    twf_t re;
    twf_t im;
  } twiddle_t;

  // Steps of the folded chain, in the order a frame goes through them.
  typedef enum logic [2:0] {
    PH_RX   = 3'd0,  // converter as ADC, frame being received
    PH_FFT  = 3'd1,  // forward FFT pass
    PH_CONJ = 3'd2,  // phase inversion pass over the spectrum
    PH_IFFT = 3'd3,  // reversed-flow FFT pass
    PH_TX   = 3'd4   // converter as DAC, frame being sent
  } phase_t;

  localparam sample_t SAMPLE_MAX = sample_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam sample_t SAMPLE_MIN = sample_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Reverse the low 'bits' bits of idx.
  function automatic int unsigned bitrev(int unsigned idx, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < bits; b++)
      r = (r << 1) | ((idx >> b) & 1);
    return r;
  endfunction

  // Round a real to the nearest integer (half away from zero).
  function automatic int round_real(real v);
    return $rtoi(v + ((v >= 0.0) ? 0.5 : -0.5));
  endfunction

  // Clamp a wide signed value to the DATA_W range; ovf tells whether it was clamped.
  function automatic sample_t sat_sample(logic signed [DATA_W+2:0] v, output logic ovf);
    if (v > (DATA_W+3)'(SAMPLE_MAX)) begin
      ovf = 1'b1;
      return SAMPLE_MAX;
    end else if (v < (DATA_W+3)'(SAMPLE_MIN)) begin
      ovf = 1'b1;
      return SAMPLE_MIN;
    end
    ovf = 1'b0;
    return sample_t'(v);
  endfunction

endpackage
