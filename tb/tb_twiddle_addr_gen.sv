// tb_twiddle_addr_gen: checks the twiddle address generator.  The index
// into the uncompressed per-PE table is rebuilt from the outputs
// (j = addr for addr < 2, else 2(addr-1) + odd) and turned into FALCON's
// factor gm[k] with the ROM layout k = 2^(t+2) + pe*2^t + gray(j - 2^t)
// (checked against the ROM contents by tb_twiddle_memory).
//  * n = 32: PE0's factor angles, in units of pi/32, are 8 (stage 0),
//    4 (stage 1), 2 2 18 18 (stage 2) and 1 17 25 9 (stage 3), as in the
//    twiddle ROM figure.
//  * every size and stage: the factors of the two PEs over all steps cover
//    the 2^sg factors gm[2^(sg+1) + i], i < 2^sg, of the stage equally often
//    (n/4 / 2^sg times each).
//  * minus is set exactly when the odd factor equals the stored even
//    neighbour times -i (evaluated with $cos/$sin).
module tb_twiddle_addr_gen;
  import fft_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic [LOGN_W-1:0]    logn, sg;
  logic [ADDR_W-1:0]    p;
  logic [TW_ADDR_W-1:0] addr;
  logic                 odd, minus;
  int checks = 0, failures = 0;

  twiddle_addr_gen dut (.logn, .sg, .p, .addr, .odd, .minus);

  function automatic int rev(int x, int s);
    int r = 0;
    for (int i = 0; i < s; i++) if (((x >> i) & 1) != 0) r |= 1 << (s - 1 - i);
    return r;
  endfunction

  function automatic int ilog2(int x);
    int s = 0;
    while ((x >> (s + 1)) != 0) s++;
    return s;
  endfunction

  function automatic int gm_index(int pe, int j);
    int t;
    if (j == 0) return 2;
    t = ilog2(j);
    return (1 << (t + 2)) + pe * (1 << t) + ((j - (1 << t)) ^ ((j - (1 << t)) >> 1));
  endfunction

  // angle of gm[k] in units of pi/2^(s+1)
  function automatic int gm_num(int k);
    int s;
    s = ilog2(k);
    return 2 * rev(k - (1 << s), s) + 1;
  endfunction

  function automatic real gm_angle(int k);
    return PI * real'(gm_num(k)) / real'(1 << (ilog2(k) + 1));
  endfunction

  function automatic int j_now();
    return (addr < 2) ? int'(addr) : 2 * (int'(addr) - 1) + int'(odd);
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    static int fig [4][4] = '{'{8, 8, 8, 8}, '{4, 4, 4, 4}, '{2, 2, 18, 18}, '{1, 17, 25, 9}};
    logn = 5;
    for (int st = 0; st < 4; st++)
      for (int pp = 0; pp < 4; pp++) begin
        int k, num32;
        sg = LOGN_W'(st); p = ADDR_W'(pp);
        #1;
        k = gm_index(0, j_now());
        num32 = gm_num(k) * 32 / (1 << (ilog2(k) + 1));
        checks++;
        if (num32 != fig[st][pp]) begin
          failures++;
          $display("n=32 stage %0d step %0d: angle %0d*pi/32, expected %0d*pi/32", st, pp, num32, fig[st][pp]);
        end
      end
    for (int lg = 2; lg <= LOGN_MAX; lg++) begin
      int steps, npe;
      steps = (lg >= 3) ? 1 << (lg - 3) : 1;
      npe   = (lg >= 3) ? N_PE : 1;
      for (int st = 0; st < lg - 1; st++) begin
        int cnt [512];
        foreach (cnt[i]) cnt[i] = 0;
        logn = LOGN_W'(lg); sg = LOGN_W'(st);
        for (int pp = 0; pp < steps; pp++) begin
          p = ADDR_W'(pp);
          #1;
          for (int pe = 0; pe < npe; pe++) begin
            int k;
            k = gm_index(pe, j_now()) - (1 << (st + 1));
            if (k >= 0 && k < (1 << st)) cnt[k]++;
            else begin
              failures++;
              $display("logn %0d stage %0d step %0d PE%0d: factor gm[%0d] not of this stage",
                       lg, st, pp, pe, k + (1 << (st + 1)));
            end
            if (odd) begin
              real ao, ae, d;
              ao = gm_angle(gm_index(pe, j_now()));
              ae = gm_angle(gm_index(pe, j_now() - 1));
              d  = ao - ae;   // +pi/2: times i, -pi/2: times -i
              checks++;
              if (minus != (d < 0.0)) begin
                failures++;
                $display("logn %0d stage %0d step %0d PE%0d: minus %b, angle step %g", lg, st, pp, pe, minus, d);
              end
            end
          end
        end
        for (int i = 0; i < (1 << st); i++) begin
          checks++;
          if (cnt[i] != steps * npe / (1 << st)) begin
            failures++;
            $display("logn %0d stage %0d: factor gm[%0d] used %0d times", lg, st, i + (1 << (st + 1)), cnt[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
