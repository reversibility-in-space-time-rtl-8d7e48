// tb_fft_engine: forward pass of fft_engine against a direct DFT.
//
// Several frames (random, impulse, single tone, DC) are loaded at bit-reversed
// addresses, a forward pass is run, and each bin is compared with DFT(x)/N computed
// here in floating point; a bin may differ by at most TOL = log2(N) LSB per part
// (one LSB of rounding per stage, mostly from storing +1.0 as 32767/32768). The pass
// must take exactly N/2*log2(N) cycles from start to done.
module tb_fft_engine;
  import tr_pkg::*;
  localparam int unsigned N   = 256;
  localparam int unsigned L   = $clog2(N);
  localparam int          TOL = L;    // up to one LSB of rounding per stage
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

  int xr [N], xi [N];

  task automatic run_frame(string name);
    int cycles, maxerr;
    real er, ei;
    for (int n = 0; n < int'(N); n++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = L'(bitrev(n, L)); wr_data = '{re: sample_t'(xr[n]), im: sample_t'(xi[n])};
    end
    @(negedge clk); wr_en = 0; start = 1; inv = 0;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != int'(N / 2 * L) + 1) begin
      failures++; $display("%s: pass took %0d cycles, expected %0d", name, cycles - 1, N / 2 * L);
    end
    checks++;
    if (sat) begin failures++; $display("%s: unexpected saturation", name); end
    maxerr = 0;
    for (int k = 0; k < int'(N); k++) begin
      int dr, di;
      er = 0; ei = 0;
      for (int n = 0; n < int'(N); n++) begin
        real a = -2.0 * PI * real'((k * n) % N) / N;
        er += xr[n] * $cos(a) - xi[n] * $sin(a);
        ei += xr[n] * $sin(a) + xi[n] * $cos(a);
      end
      er /= N; ei /= N;
      rd_addr = L'(k); #1;
      dr = int'(rd_data.re) - round_real(er);
      di = int'(rd_data.im) - round_real(ei);
      if (dr < 0) dr = -dr;
      if (di < 0) di = -di;
      if (dr > maxerr) maxerr = dr;
      if (di > maxerr) maxerr = di;
      checks++;
      if (dr > TOL || di > TOL) begin
        failures++;
        if (failures < 10) $display("%s bin %0d: got (%0d,%0d) expected (%.1f,%.1f)", name, k,
                                    rd_data.re, rd_data.im, er, ei);
      end
    end
    $display("%s: max error %0d LSB", name, maxerr);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < int'(N); n++) begin
      xr[n] = int'($urandom_range(32000)) - 16000; xi[n] = int'($urandom_range(32000)) - 16000;
    end
    run_frame("random");
    for (int n = 0; n < int'(N); n++) begin xr[n] = (n == 3) ? 30000 : 0; xi[n] = 0; end
    run_frame("impulse");
    for (int n = 0; n < int'(N); n++) begin
      xr[n] = round_real(20000.0 * $cos(2.0 * PI * 5 * n / N)); xi[n] = 0;
    end
    run_frame("tone");
    for (int n = 0; n < int'(N); n++) begin xr[n] = 32767; xi[n] = -32768; end
    run_frame("dc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
