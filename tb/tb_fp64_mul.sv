// tb_fp64_mul: self-checking test of the binary64 multiplier.  Expected
// values come from the simulator's IEEE-754 real multiplication.  Covers
// random normal operands, products that overflow, products that underflow
// into the subnormal range, subnormal operands, zeros, infinities and NaN.
module tb_fp64_mul;
  import fft_pkg::*;

  fp64_t a, b, z;
  int    checks = 0, failures = 0;

  fp64_mul dut (.a(a), .b(b), .z(z));

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

  task automatic check(fp64_t x, fp64_t y);
    fp64_t exp_v;
    a = x; b = y;
    #1;
    exp_v = $realtobits($bitstoreal(x) * $bitstoreal(y));
    checks++;
    if (is_nan(exp_v) ? !is_nan(z) : (z !== exp_v)) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h: got %h expected %h", x, y, z, exp_v);
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
    for (int i = 0; i < 6000; i++) check(rnd_fp(900, 1150), rnd_fp(900, 1150));
    for (int i = 0; i < 1000; i++) check(rnd_fp(1500, 2046), rnd_fp(1000, 1600));   // overflow
    for (int i = 0; i < 2000; i++) check(rnd_fp(1, 500), rnd_fp(400, 560));         // underflow
    for (int i = 0; i < 1000; i++) check(rnd_fp(0, 0), rnd_fp(1000, 1100));         // subnormal in
    check(64'h0000_0000_0000_0000, 64'hBFF0_0000_0000_0000);
    check(64'h7FF0_0000_0000_0000, 64'h0000_0000_0000_0000);
    check(64'h7FF0_0000_0000_0000, 64'hC000_0000_0000_0000);
    check(64'h7FF8_0000_0000_0000, 64'h3FF0_0000_0000_0000);
    check(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
