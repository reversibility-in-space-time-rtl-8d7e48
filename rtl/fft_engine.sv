// fft_engine: in-place radix-2 FFT on an N-word frame memory, usable in both
// directions.
//
// The frame memory holds N complex words. While the engine is idle the caller writes
// it through wr_* and reads it through rd_* (combinational read). A pulse on 'start'
// runs one pass of log2(N) stages with one butterfly per clock, N/2*log2(N) cycles,
// after which 'done' pulses for one cycle.
//
//   inv = 0  forward pass. Decimation-in-time, stages 0..L-1, each butterfly scaled
//            by 1/2. Input must be stored in bit-reversed order; the result
//            DFT(x)/N is left in natural order.
//   inv = 1  the same network with reversed flow. Stages run L-1..0 and each
//            butterfly is replaced by its inverse, so the pass undoes a forward pass:
//            input in natural order, result N*IDFT(X) left in bit-reversed order.
//
// So a single engine serves as both the FFT and the inverse FFT of the signal chain,
// the inverse being the forward block run backwards. The 1/N of the forward pass and
// the N of the reverse pass cancel, so FFT followed by reverse pass has unit gain.
// 'sat' reports whether any butterfly saturated during the last pass.
//
// Stage s of the forward pass pairs words i0 and i0 + 2^s, i0 = g*2^(s+1) + p, with
// twiddle exp(-j*2*pi*k/N), k = p*2^(L-1-s). The frame size, widths, memory
// organisation and scaling are this implementation's choices.
module fft_engine
  import tr_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 inv,
  output logic                 busy,
  output logic                 done,
  output logic                 sat,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  cplx_t                wr_data,
  input  logic [$clog2(N)-1:0] rd_addr,
  output cplx_t                rd_data
);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned AW = L;
  localparam int unsigned SW = (L > 1) ? $clog2(L) : 1;

  typedef logic [2*TW_W-1:0] tw_tab_t [N/2];   // {re, im} per entry

  function automatic tw_tab_t make_twiddles();
    tw_tab_t t;
    for (int k = 0; k < int'(N/2); k++) begin
      real ang, c, s, scale;
      scale = 2.0 ** (TW_W - 1) - 1.0;
      ang   = 2.0 * 3.14159265358979323846 * k / N;
      c     = $cos(ang) * scale;
      s     = -$sin(ang) * scale;
      t[k] = {twf_t'(round_real(c)), twf_t'(round_real(s))};
    end
    return t;
  endfunction

  localparam tw_tab_t TWIDDLE = make_twiddles();

  cplx_t mem [N];

  logic          running, dir;
  logic [SW-1:0] stage;
  logic [AW-2:0] bfly;          // butterfly index within the stage, 0..N/2-1

  // Butterfly addressing for the current stage and index.
  logic [AW-1:0] i0, i1, half, pos;
  logic [AW-2:0] tw_idx;
  cplx_t         bx, by;
  logic          bsat;

  always_comb begin
    half   = AW'(1) << stage;
    pos    = AW'(bfly) & (half - AW'(1));
    i0     = ((AW'(bfly) >> stage) << (stage + 1)) | pos;
    i1     = i0 | half;
    tw_idx = (AW-1)'(pos << (SW'(L - 1) - stage));
  end

  fft_butterfly u_bfly (
    .inv (dir),
    .a   (mem[i0]),
    .b   (mem[i1]),
    .w   (twiddle_t'(TWIDDLE[tw_idx])),
    .x   (bx),
    .y   (by),
    .sat (bsat)
  );

  wire last_bfly  = (bfly == {(AW-1){1'b1}});
  wire last_stage = dir ? (stage == '0) : (stage == SW'(L - 1));

  // Control: stage/butterfly counters and status.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      dir     <= 1'b0;
      stage   <= '0;
      bfly    <= '0;
      done    <= 1'b0;
      sat     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          dir     <= inv;
          stage   <= inv ? SW'(L - 1) : '0;
          bfly    <= '0;
          sat     <= 1'b0;
        end
      end else begin
        if (bsat) sat <= 1'b1;
        bfly <= bfly + 1'b1;
        if (last_bfly) begin
          if (last_stage) begin
            running <= 1'b0;
            done    <= 1'b1;
          end else begin
            stage <= dir ? stage - 1'b1 : stage + 1'b1;
          end
        end
      end
    end
  end

  // Frame memory: two writes per clock while running, one external write when idle.
  always_ff @(posedge clk) begin
    if (running) begin
      mem[i0] <= bx;
      mem[i1] <= by;
    end else if (wr_en) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign rd_data = mem[rd_addr];
  assign busy    = running;

  // The memory port is only for the idle engine.
  always_ff @(posedge clk) begin
    if (running)
      a_no_write_while_busy : assert (!wr_en)
        else $error("fft_engine: memory written while a pass is running");
  end

  if (N < 4 || (1 << L) != N) begin : g_bad_size
    $error("fft_engine: N must be a power of two, at least 4");
  end
endmodule
