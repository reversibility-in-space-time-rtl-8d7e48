// tr_processor: folded time-reversal chain for an acoustic time-reversal mirror.
//
// A frame of N samples received from the transducer through the converter is sent
// back time-reversed. The chain is transform, conjugate, inverse transform; because
// the inverse transform is the forward transform run backwards, the chain is folded
// at the conjugation step and one FFT engine does both transforms, just as one
// converter and one transducer both receive and transmit. A frame goes through five
// steps (output 'phase'):
//
//   PH_RX    conv_dir = 0. N samples are taken from adc_data (valid/ready) and stored
//            as (x, 0) at bit-reversed addresses of the engine's memory.
//   PH_FFT   forward pass of fft_engine: memory holds X = DFT(x)/N.
//   PH_CONJ  one bin per clock is read, conjugated by phase_conjugator, written back.
//   PH_IFFT  reversed-flow pass of the same engine: memory holds N*IDFT(conj(X)),
//            bit-reversed, which for real x is x[(N-n) mod N].
//   PH_TX    conv_dir = 1. The real parts are sent on dac_data (valid/ready) in
//            natural order; frame_done pulses with the last one, then PH_RX again.
//
// Timing per frame, with no handshake stalls: N cycles in, N/2*log2(N)+2 cycles per
// FFT pass (launch, N/2*log2(N) butterflies, done), N conjugation cycles and N cycles
// out. 'overflow' is set when the engine or the conjugation saturated while the
// frame was processed and is cleared when the next frame starts.
//
// The output is a circular reversal of the frame (y[0] = x[0], y[n] = x[N-n]),
// which is what the transform-conjugate-inverse chain computes on a block. Frame
// size, sample width, handshakes and the sequencing are this implementation's
// choices; the chain itself and its folding follow the architecture.
module tr_processor
  import tr_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    conv_dir,
  input  logic    adc_valid,
  output logic    adc_ready,
  input  sample_t adc_data,
  output logic    dac_valid,
  input  logic    dac_ready,
  output sample_t dac_data,
  output phase_t  phase,
  output logic    frame_done,
  output logic    overflow
);
  localparam int unsigned AW = $clog2(N);

  phase_t        ph;
  logic [AW-1:0] cnt;
  logic          eng_start, eng_inv, eng_busy, eng_done, eng_sat;
  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  cplx_t         wr_data, rd_data, conj_data;
  logic          conj_ovf;
  logic          started;     // engine pass of the current step has been launched

  fft_engine #(.N(N)) u_engine (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (eng_start),
    .inv     (eng_inv),
    .busy    (eng_busy),
    .done    (eng_done),
    .sat     (eng_sat),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  phase_conjugator u_conj (
    .din  (rd_data),
    .dout (conj_data),
    .ovf  (conj_ovf)
  );

  wire last = (cnt == {AW{1'b1}});
  wire [AW-1:0] cnt_rev = AW'(bitrev(32'(cnt), AW));

  always_comb begin
    adc_ready = (ph == PH_RX);
    dac_valid = (ph == PH_TX);
    conv_dir  = (ph == PH_TX);
    eng_start = ((ph == PH_FFT) || (ph == PH_IFFT)) && !started;
    eng_inv   = (ph == PH_IFFT);
    wr_en     = 1'b0;
    wr_addr   = cnt;
    wr_data   = '0;
    rd_addr   = cnt;
    unique case (ph)
      PH_RX: begin
        wr_en   = adc_valid;
        wr_addr = cnt_rev;
        wr_data = '{re: adc_data, im: '0};
      end
      PH_CONJ: begin
        wr_en   = 1'b1;
        wr_data = conj_data;
      end
      PH_TX:   rd_addr = cnt_rev;
      default: ;
    endcase
    dac_data = rd_data.re;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph         <= PH_RX;
      cnt        <= '0;
      started    <= 1'b0;
      frame_done <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (ph)
        PH_RX: if (adc_valid) begin
          if (cnt == '0) overflow <= 1'b0;
          cnt <= cnt + 1'b1;
          if (last) ph <= PH_FFT;
        end
        PH_FFT, PH_IFFT: begin
          if (!started) started <= 1'b1;
          if (eng_done) begin
            started <= 1'b0;
            if (eng_sat) overflow <= 1'b1;
            ph <= (ph == PH_FFT) ? PH_CONJ : PH_TX;
          end
        end
        PH_CONJ: begin
          if (conj_ovf) overflow <= 1'b1;
          cnt <= cnt + 1'b1;
          if (last) ph <= PH_IFFT;
        end
        PH_TX: if (dac_ready) begin
          cnt <= cnt + 1'b1;
          if (last) begin
            ph         <= PH_RX;
            frame_done <= 1'b1;
          end
        end
        default: ph <= PH_RX;
      endcase
    end
  end

  assign phase = ph;

  // The engine is launched once per pass and must be idle when launched.
  always_ff @(posedge clk) begin
    if (eng_start)
      a_start_idle : assert (!eng_busy)
        else $error("tr_processor: engine started while busy");
  end

  // Output handshake: an offered sample stays offered, unchanged, until taken.
  logic    dac_hold_q;
  sample_t dac_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_hold_q <= 1'b0;
      dac_data_q <= '0;
    end else begin
      dac_hold_q <= dac_valid && !dac_ready;
      dac_data_q <= dac_data;
    end
  end
  always_ff @(posedge clk) begin
    if (dac_hold_q)
      a_dac_stable : assert (dac_valid && dac_data == dac_data_q)
        else $error("tr_processor: output sample withdrawn or changed before it was taken");
  end
endmodule
