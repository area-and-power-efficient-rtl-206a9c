// tb_fp64_addsub: self-checking test of the binary64 adder/subtractor.
// The expected value of every case comes from the simulator's own IEEE-754
// double arithmetic (real type), which is independent of the RTL.  Covers
// random normal operands over a wide exponent range, cancellation, operands
// far apart, subnormal results, signed zeros, infinities and NaN.
module tb_fp64_addsub;
  import fft_pkg::*;

  fp64_t a, b, z;
  logic  sub;
  int    checks = 0, failures = 0;

  fp64_addsub dut (.a(a), .b(b), .sub(sub), .z(z));

  function automatic fp64_t rnd_fp(int unsigned emin, int unsigned emax);
    fp64_t r;
    r[63]    = 1'($urandom);
    r[62:52] = 11'(emin + ($urandom % (emax - emin + 1)));
    r[51:0]  = {20'($urandom), $urandom};
    return r;
  endfunction

  function automatic logic is_nan(fp64_t x);
    return (x[62:52] == 11'h7FF) && (x[51:0] != 0);
  endfunction

  task automatic check(fp64_t x, fp64_t y, logic s);
    real   r;
    fp64_t exp_v;
    a = x; b = y; sub = s;
    #1;
    r = s ? ($bitstoreal(x) - $bitstoreal(y)) : ($bitstoreal(x) + $bitstoreal(y));
    exp_v = $realtobits(r);
    checks++;
    if (is_nan(exp_v) ? !is_nan(z) : (z !== exp_v)) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %h %s %h: got %h expected %h", x, s ? "-" : "+", y, z, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random, close exponents (cancellation and carries)
    for (int i = 0; i < 4000; i++) begin
      fp64_t x;
      x = rnd_fp(1000, 1050);
      check(x, rnd_fp(int'(x[62:52]) - 2, int'(x[62:52]) + 2), 1'($urandom));
    end
    // random, wide exponent range (alignment shifts beyond 56)
    for (int i = 0; i < 4000; i++) check(rnd_fp(900, 1150), rnd_fp(900, 1150), 1'($urandom));
    // near-equal values: massive cancellation
    for (int i = 0; i < 1000; i++) begin
      fp64_t x, y;
      x = rnd_fp(1020, 1030);
      y = x; y[5:0] = 6'($urandom);
      check(x, y, 1'b1);
    end
    // subnormal operands and results
    for (int i = 0; i < 2000; i++) check(rnd_fp(0, 2), rnd_fp(0, 2), 1'($urandom));
    // overflow
    for (int i = 0; i < 200; i++) check(rnd_fp(2045, 2046), rnd_fp(2045, 2046), 1'b0);
    // specials
    check(64'h0000_0000_0000_0000, 64'h8000_0000_0000_0000, 1'b0);
    check(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, 1'b0);
    check(64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 1'b1);
    check(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 1'b0);
    check(64'h7FF0_0000_0000_0000, 64'h7FF0_0000_0000_0000, 1'b1);
    check(64'h7FF8_0000_0000_0001, 64'h3FF0_0000_0000_0000, 1'b0);
    check(64'h3FF0_0000_0000_0000, 64'h3CA0_0000_0000_0000, 1'b0); // tie to even
    check(64'h3FF0_0000_0000_0001, 64'h3CA0_0000_0000_0000, 1'b0); // tie, round up
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
