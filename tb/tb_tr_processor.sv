// tb_tr_processor: end-to-end test of the folded time-reversal chain at its
// default size.
//
// Frames of real samples are fed to the converter-side input with random gaps, and
// the returned frames are taken with random back-pressure. Each returned frame must
// be the circular time reversal y[n] = x[(N-n) mod N] within TOL LSB (rounding of
// the forward pass, amplified by the N-fold gain of the reversed-flow pass). Frames:
// random, an impulse (focusing test: the echo of a delayed pulse comes back advanced
// by the same delay), a tone, a chirp-like sweep, and a full-scale random frame that
// drives the reverse pass into saturation.
//
// The length of each processing step is checked: N/2*log2(N)+2 cycles for either
// FFT pass, N for the conjugation pass. Every mechanism must occur at least once:
// receive, forward pass, conjugation, reversed-flow pass, transmit, converter
// direction switches, input gaps, output stalls and saturation.
module tb_tr_processor;
  import tr_pkg::*;
  localparam int unsigned N      = 256;
  localparam int unsigned L      = $clog2(N);
  localparam int          TOL    = 64;   // 4 LSB times sqrt(N)
  localparam int          FRAMES = 5;
  localparam real         PI     = 3.14159265358979323846;

  logic    clk = 0, rst_n = 0;
  logic    conv_dir, adc_valid, adc_ready, dac_valid, dac_ready, frame_done, overflow;
  sample_t adc_data, dac_data;
  phase_t  phase;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tr_processor dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [FRAMES][N];
  int y [FRAMES][N];
  int n_rx, n_fft, n_conj, n_ifft, n_tx, n_dir, n_gap, n_stall, n_ovf;
  int in_frame, in_idx, out_frame, out_idx;

  // Test frames.
  initial begin
    for (int n = 0; n < int'(N); n++) begin
      x[0][n] = int'($urandom_range(30000)) - 15000;
      x[1][n] = (n == 7) ? 25000 : 0;
      x[2][n] = round_real(12000.0 * $sin(2.0 * PI * 9 * n / N));
      x[3][n] = round_real(15000.0 * $cos(PI * n * n / (2.0 * N)));
      x[4][n] = ($urandom_range(1) == 1) ? 32767 : -32768;
    end
  end

  // Converter side: random gaps on input, random back-pressure on output.
  always_ff @(negedge clk) begin
    if (!rst_n) begin
      adc_valid <= 1'b0;
      adc_data  <= '0;
      dac_ready <= 1'b0;
    end else begin
      logic v;
      v = (in_frame < FRAMES) && ($urandom_range(9) != 0);
      adc_valid <= v;
      adc_data  <= v ? sample_t'(x[in_frame][in_idx]) : '0;
      dac_ready <= ($urandom_range(7) != 0);
    end
  end

  // Scoreboard and mechanism counters.
  phase_t prev_phase;
  logic   prev_dir;
  int     ph_cycles;
  initial begin
    in_frame = 0; in_idx = 0; out_frame = 0; out_idx = 0;
    n_rx = 0; n_fft = 0; n_conj = 0; n_ifft = 0; n_tx = 0; n_dir = 0; n_gap = 0; n_stall = 0;
    n_ovf = 0; ph_cycles = 0; prev_phase = PH_RX; prev_dir = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (adc_ready && adc_valid) begin
      in_idx++;
      if (in_idx == int'(N)) begin in_idx = 0; in_frame++; n_rx++; end
    end
    if (adc_ready && !adc_valid && in_frame < FRAMES) n_gap++;
    if (dac_valid && !dac_ready) n_stall++;
    if (dac_valid && dac_ready) begin
      y[out_frame][out_idx] = int'(dac_data);
      out_idx++;
      if (out_idx == int'(N)) begin out_idx = 0; out_frame++; end
    end
    if (conv_dir != prev_dir) n_dir++;
    prev_dir = conv_dir;
    ph_cycles++;
    if (phase != prev_phase) begin
      int expect_len;
      expect_len = -1;
      case (prev_phase)
        PH_FFT:  begin n_fft++;  expect_len = int'(N / 2 * L) + 2; end
        PH_IFFT: begin n_ifft++; expect_len = int'(N / 2 * L) + 2; end
        PH_CONJ: begin n_conj++; expect_len = int'(N); end
        PH_TX:   n_tx++;
        default: ;
      endcase
      if (prev_phase == PH_IFFT && overflow) n_ovf++;
      if (expect_len >= 0) begin
        checks++;
        if (ph_cycles != expect_len) begin
          failures++;
          $display("step %s lasted %0d cycles, expected %0d", prev_phase.name(), ph_cycles, expect_len);
        end
      end
      ph_cycles = 0;
    end
    prev_phase = phase;
  end

  task automatic need(string what, int count);
    checks++;
    $display("%-22s %0d", what, count);
    if (count == 0) begin failures++; $display("  never happened"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (out_frame == FRAMES);
    repeat (2) @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      int maxerr;
      maxerr = 0;
      for (int n = 0; n < int'(N); n++) begin
        int e;
        e = y[f][n] - x[f][(int'(N) - n) % int'(N)];
        if (e < 0) e = -e;
        if (e > maxerr) maxerr = e;
        checks++;
        if (e > TOL) begin
          failures++;
          if (failures < 10) $display("frame %0d sample %0d: got %0d expected %0d", f, n, y[f][n],
                                      x[f][(int'(N) - n) % int'(N)]);
        end
      end
      $display("frame %0d: max error %0d LSB", f, maxerr);
    end
    // The impulse comes back as an impulse at the mirrored position.
    checks++;
    if (y[1][N - 7] < 25000 - TOL) begin failures++; $display("impulse not refocused"); end
    need("frames received", n_rx);
    need("forward FFT passes", n_fft);
    need("conjugation passes", n_conj);
    need("reversed-flow passes", n_ifft);
    need("frames sent", n_tx);
    need("direction switches", n_dir);
    need("input gaps", n_gap);
    need("output stalls", n_stall);
    need("saturated frames", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
