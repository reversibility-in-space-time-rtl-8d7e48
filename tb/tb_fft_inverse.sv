// tb_fft_inverse: reversed-flow pass of fft_engine (the inverse transform).
//
// For random complex frames x the spectrum X = DFT(x)/N is computed here in floating
// point, rounded, and loaded in natural order. The reverse pass must return x, read
// at bit-reversed addresses, within TOL LSB: the rounding of the loaded spectrum
// (half an LSB per part) grows by up to sqrt(2) per stage through the N-fold gain
// of the pass. It must take N/2*log2(N) cycles. A last frame of full-scale bins,
// whose inverse is N times too large for the word, must raise 'sat' and clamp.
module tb_fft_inverse;
  import tr_pkg::*;
  localparam int unsigned N   = 256;
  localparam int unsigned L   = $clog2(N);
  localparam int          TOL = 48;
  localparam real         PI  = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, start = 0, inv = 0, busy, done, sat, wr_en = 0;
  logic [L-1:0] wr_addr = '0, rd_addr = '0;
  cplx_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fft_engine #(.N(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xr [N], xi [N], sr [N], si [N];

  task automatic load_and_run();
    int cycles;
    for (int k = 0; k < int'(N); k++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = L'(k); wr_data = '{re: sample_t'(sr[k]), im: sample_t'(si[k])};
    end
    @(negedge clk); wr_en = 0; start = 1; inv = 1;
    @(negedge clk); start = 0; inv = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != int'(N / 2 * L) + 1) begin
      failures++; $display("pass took %0d cycles, expected %0d", cycles - 1, N / 2 * L);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      int maxerr;
      maxerr = 0;
      for (int n = 0; n < int'(N); n++) begin
        xr[n] = int'($urandom_range(30000)) - 15000; xi[n] = int'($urandom_range(30000)) - 15000;
      end
      for (int k = 0; k < int'(N); k++) begin
        real er, ei;
        er = 0; ei = 0;
        for (int n = 0; n < int'(N); n++) begin
          real a;
          a = -2.0 * PI * real'((k * n) % N) / N;
          er += xr[n] * $cos(a) - xi[n] * $sin(a);
          ei += xr[n] * $sin(a) + xi[n] * $cos(a);
        end
        sr[k] = round_real(er / N); si[k] = round_real(ei / N);
      end
      load_and_run();
      checks++;
      if (sat) begin failures++; $display("frame %0d: unexpected saturation", f); end
      for (int n = 0; n < int'(N); n++) begin
        int dr, di;
        rd_addr = L'(bitrev(n, L)); #1;
        dr = int'(rd_data.re) - xr[n]; di = int'(rd_data.im) - xi[n];
        if (dr < 0) dr = -dr;
        if (di < 0) di = -di;
        if (dr > maxerr) maxerr = dr;
        if (di > maxerr) maxerr = di;
        checks++;
        if (dr > TOL || di > TOL) begin
          failures++;
          if (failures < 10) $display("frame %0d sample %0d: got (%0d,%0d) expected (%0d,%0d)", f, n,
                                      rd_data.re, rd_data.im, xr[n], xi[n]);
        end
      end
      $display("frame %0d: max error %0d LSB", f, maxerr);
    end
    // Full-scale flat spectrum: x[0] = N * 32767 cannot be represented.
    for (int k = 0; k < int'(N); k++) begin sr[k] = 32767; si[k] = 0; end
    load_and_run();
    checks++;
    if (!sat) begin failures++; $display("saturation not flagged"); end
    rd_addr = '0; #1;
    checks++;
    if (rd_data.re != SAMPLE_MAX) begin failures++; $display("x[0] = %0d, not clamped", rd_data.re); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
