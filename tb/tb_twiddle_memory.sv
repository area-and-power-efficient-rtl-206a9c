// tb_twiddle_memory: checks the contents of both twiddle ROMs and the
// expansion logic of the twiddle memory (swap of real and imaginary part,
// sign flips).
//
// Reference, computed here with $cos/$sin and independent of the ROM
// generator: FALCON's factor table is gm[k] = exp(i*pi*(2*rev_s(k-2^s)+1)/2^(s+1))
// with s = floor(log2 k) and rev_s the s-bit reversal.  PE pe needs, at
// uncompressed index j, gm[2] for j = 0 and otherwise
//   gm[2^(t+2) + pe*2^t + gray(j - 2^t)],   t = floor(log2 j),
// gray(r) = r ^ (r >> 1).  ROM word 0 holds j = 0, word 1 holds j = 1 and
// word a >= 2 holds the even index j = 2(a-1); the odd index 2(a-1)+1 must be
// the stored word times +i or -i.
//
// Checks: every stored word against the reference (2 ulp tolerance), one
// read-cycle latency, read data held over a clock edge with en low, for every odd index
// that exactly one of the two expansions (swap+neg_re = *i,
// swap+neg_im = *(-i)) gives the reference, that the memory applies it
// bit-exactly, and that neg_im alone conjugates.
module tb_twiddle_memory;
  import fft_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic                 clk = 0, en, swap, neg_re, neg_im;
  logic [TW_ADDR_W-1:0] addr;
  cplx_t                w [N_PE];
  int checks = 0, failures = 0;

  twiddle_memory dut (.clk, .en, .addr, .swap, .neg_re, .neg_im, .w);
  always #5 clk = ~clk;

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

  function automatic void gm(int k, output real re, output real im);
    int  s;
    real ang;
    s   = ilog2(k);
    ang = PI * real'(2 * rev(k - (1 << s), s) + 1) / real'(1 << (s + 1));
    re  = $cos(ang); im = $sin(ang);
  endfunction

  function automatic bit near(fp64_t got, real exp_v);
    return ($bitstoreal(got) - exp_v) <= 4.5e-16 && (exp_v - $bitstoreal(got)) <= 4.5e-16;
  endfunction

  task automatic read(input int a, input bit sw, input bit nr, input bit ni);
    @(negedge clk);
    en = 1; addr = TW_ADDR_W'(a); swap = sw; neg_re = nr; neg_im = ni;
    @(negedge clk);
    en = 0; addr = ~addr;   // output must not follow addr while en is low
    @(negedge clk);
  endtask

  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0; addr = '0; swap = 0; neg_re = 0; neg_im = 0;
    for (int a = 0; a < TW_DEPTH; a++) begin
      int j;
      j = (a < 2) ? a : 2 * (a - 1);
      // stored value
      read(a, 0, 0, 0);
      for (int pe = 0; pe < N_PE; pe++) begin
        real er, ei;
        gm(gm_index(pe, j), er, ei);
        checks++;
        if (!near(w[pe].re, er) || !near(w[pe].im, ei)) begin
          failures++;
          if (failures < 8) $display("ROM%0d[%0d] (j=%0d) = (%.17g,%.17g), expected (%.17g,%.17g)",
                                     pe, a, j, $bitstoreal(w[pe].re), $bitstoreal(w[pe].im), er, ei);
        end
      end
      // conjugate, then the odd neighbour
      begin
        cplx_t st [N_PE];
        st = w;
        read(a, 0, 0, 1);
        for (int pe = 0; pe < N_PE; pe++) begin
          checks++;
          if (w[pe].re !== st[pe].re || w[pe].im !== {~st[pe].im[63], st[pe].im[62:0]}) failures++;
        end
        if (a >= 2) begin
          for (int pe = 0; pe < N_PE; pe++) begin
            real er, ei, sr, si;
            bit  plus_i, minus_i;
            gm(gm_index(pe, j + 1), er, ei);
            sr = $bitstoreal(st[pe].re); si = $bitstoreal(st[pe].im);
            plus_i  = near($realtobits(-si), er) && near($realtobits(sr), ei);
            minus_i = near($realtobits(si), er) && near($realtobits(-sr), ei);
            checks++;
            if (plus_i == minus_i) begin
              failures++;
              $display("ROM%0d[%0d]: odd index %0d is not the stored word times +-i", pe, a, j + 1);
            end else begin
              read(a, 1, plus_i, minus_i);
              checks++;
              if (w[pe].re !== {st[pe].im[63] ^ plus_i, st[pe].im[62:0]} ||
                  w[pe].im !== {st[pe].re[63] ^ minus_i, st[pe].re[62:0]}) begin
                failures++;
                $display("ROM%0d[%0d]: expansion wrong", pe, a);
              end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
