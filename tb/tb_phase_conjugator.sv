// tb_phase_conjugator: both negation methods of phase_conjugator.
//
// Two instances, subtraction from zero and ones' complement, get the corner values
// and random bins. The real part must pass unchanged; the imaginary part must be
// -im (saturated to +32767 for -32768, with ovf) or ~im = -im-1 (never ovf).
module tb_phase_conjugator;
  import tr_pkg::*;
  cplx_t din, d2c, d1c;
  logic  o2c, o1c;
  int checks = 0, failures = 0;

  phase_conjugator #(.ONES_COMPLEMENT(1'b0)) u_twos (.din(din), .dout(d2c), .ovf(o2c));
  phase_conjugator #(.ONES_COMPLEMENT(1'b1)) u_ones (.din(din), .dout(d1c), .ovf(o1c));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int re, int im);
    int exp2, exp1;
    logic eo;
    din = '{re: sample_t'(re), im: sample_t'(im)};
    #1;
    eo   = (im == -32768);
    exp2 = eo ? 32767 : -im;
    exp1 = -im - 1;
    checks++;
    if (int'(d2c.re) != re || int'(d2c.im) != exp2 || o2c != eo) begin
      failures++;
      $display("subtract: in (%0d,%0d) got (%0d,%0d) ovf %0b", re, im, d2c.re, d2c.im, o2c);
    end
    checks++;
    if (int'(d1c.re) != re || int'(d1c.im) != exp1 || o1c) begin
      failures++;
      $display("complement: in (%0d,%0d) got (%0d,%0d) ovf %0b", re, im, d1c.re, d1c.im, o1c);
    end
  endtask

  initial begin
    check(0, 0);
    check(1, 1);
    check(-5, -32768);
    check(32767, 32767);
    check(-32768, -1);
    check(123, -32767);
    for (int i = 0; i < 2000; i++)
      check(int'($urandom_range(65535)) - 32768, int'($urandom_range(65535)) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
