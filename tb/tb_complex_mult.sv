// tb_complex_mult: checks the complex multiplier bit-exactly against
// re = ar*br - ai*bi, im = ar*bi + ai*br evaluated with the simulator's
// binary64 reals, on random operands of mixed magnitude and sign.
module tb_complex_mult;
  import fft_pkg::*;
  cplx_t a, b, p;
  int checks = 0, failures = 0;

  complex_mult dut (.a(a), .b(b), .p(p));

  function automatic real rnd();
    real r;
    int  e;
    r = ($urandom % 2000001) / 1000000.0 - 1.0;
    e = int'($urandom % 21) - 10;     // scale by 2^-10 .. 2^10
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return r;
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      real ar, ai, br, bi, er, ei;
      ar = rnd(); ai = rnd(); br = rnd(); bi = rnd();
      a = '{re: $realtobits(ar), im: $realtobits(ai)};
      b = '{re: $realtobits(br), im: $realtobits(bi)};
      #1;
      er = ar * br - ai * bi;
      ei = ar * bi + ai * br;
      checks++;
      if (p.re !== $realtobits(er) || p.im !== $realtobits(ei)) begin
        failures++;
        if (failures < 5) $display("(%g,%g)*(%g,%g) = (%g,%g), expected (%g,%g)", ar, ai, br, bi,
                                   $bitstoreal(p.re), $bitstoreal(p.im), er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
