// tb_poly_mul: workload test - multiplication in Z[x]/(x^n + 1), the way
// FALCON uses the transform, for every n = 2 .. 1024 with the processor at
// its default size.
//
// For random integer polynomials a and b (coefficients in -4096 .. 4095) it
// loads a, runs the forward transform and reads the n/2 results back;
// does the same for b; multiplies the two result sets word by word (they
// share the schedule's memory order, so no reordering is needed); writes the
// products back, runs the inverse transform, reads the natural-order words
// c_k and divides by n/2 (the processor leaves the inverse unscaled).  The
// real parts give coefficients 0 .. n/2-1, the imaginary parts n/2 .. n-1.
// They are rounded to integers and compared with the exact negacyclic
// product sum a_i b_j x^(i+j), x^n = -1, computed here with integers.  The
// test is independent of the FFT's internal ordering and twiddle table: only
// the ring product has to come out right.  The busy cycles of every
// transform are checked against 2*(log2 n - 1)*max(n/8, 1).
module tb_poly_mul;
  import fft_pkg::*;

  logic              clk = 0;
  logic              rst;
  logic              start;
  op_e               fft_ifft;
  logic [LOGN_W-1:0] logn;
  logic              busy, done;
  logic              host_en, host_we;
  logic [BANK_W-1:0] host_bank;
  logic [ADDR_W-1:0] host_addr;
  cplx_t             host_wdata, host_rdata;

  int checks = 0, failures = 0;

  fft_processor dut (
    .clk, .rst, .start, .fft_ifft, .logn, .busy, .done,
    .host_en, .host_we, .host_bank, .host_addr, .host_wdata, .host_rdata
  );

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  pa [1024], pb [1024];
  longint pc [1024];
  real fa_re [N_BANK][BANK_DEPTH], fa_im [N_BANK][BANK_DEPTH];

  // natural position of word k
  function automatic void word_pos(int lg, int k, output int bank, output int addr);
    if (lg <= 2) begin bank = 2 * k; addr = 0; end
    else begin bank = k >> (lg - 3); addr = k & ((1 << (lg - 3)) - 1); end
  endfunction

  task automatic host_write(int bank, int addr, cplx_t d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_bank = BANK_W'(bank); host_addr = ADDR_W'(addr);
    host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int bank, int addr, output cplx_t d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_bank = BANK_W'(bank); host_addr = ADDR_W'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic run(op_e op, int lg);
    int cycles, expect_c;
    @(negedge clk);
    fft_ifft = op; logn = LOGN_W'(lg); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      if (busy) cycles++;
      @(negedge clk);
    end
    expect_c = (lg >= 2) ? 2 * (lg - 1) * ((lg >= 3) ? (1 << (lg - 3)) : 1) : 0;
    checks++;
    if (cycles != expect_c) begin
      failures++;
      $display("logn %0d %s: %0d cycles, expected %0d", lg, op.name(), cycles, expect_c);
    end
  endtask

  task automatic load(int lg, ref int p [1024]);
    int hn;
    hn = 1 << (lg - 1);
    for (int k = 0; k < hn; k++) begin
      int b, a;
      word_pos(lg, k, b, a);
      host_write(b, a, '{re: $realtobits(real'(p[k])), im: $realtobits(real'(p[k + hn]))});
    end
  endtask

  // bank words in use for size 2^lg (after a transform, at any order)
  function automatic bit used(int lg, int b, int a);
    if (lg == 1) return b == 0 && a == 0;
    if (lg == 2) return (b == 0 || b == 2) && a == 0;
    return a < (1 << (lg - 3));
  endfunction

  initial begin
    rst = 1; start = 0; fft_ifft = OP_FFT; logn = '0;
    host_en = 0; host_we = 0; host_bank = '0; host_addr = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int lg = 1; lg <= LOGN_MAX; lg++) begin
      int n, hn;
      n = 1 << lg; hn = n / 2;
      for (int k = 0; k < n; k++) begin
        pa[k] = int'($urandom % 8192) - 4096;
        pb[k] = int'($urandom % 8192) - 4096;
      end
      for (int k = 0; k < n; k++) pc[k] = 0;
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++)
          if (i + j < n) pc[i + j] += longint'(pa[i]) * pb[j];
          else           pc[i + j - n] -= longint'(pa[i]) * pb[j];
      // transform a, keep it
      load(lg, pa);
      run(OP_FFT, lg);
      for (int b = 0; b < N_BANK; b++)
        for (int a = 0; a < BANK_DEPTH; a++)
          if (used(lg, b, a)) begin
            cplx_t d;
            host_read(b, a, d);
            fa_re[b][a] = $bitstoreal(d.re); fa_im[b][a] = $bitstoreal(d.im);
          end
      // transform b, multiply in place
      load(lg, pb);
      run(OP_FFT, lg);
      for (int b = 0; b < N_BANK; b++)
        for (int a = 0; a < BANK_DEPTH; a++)
          if (used(lg, b, a)) begin
            cplx_t d;
            real br, bi;
            host_read(b, a, d);
            br = $bitstoreal(d.re); bi = $bitstoreal(d.im);
            host_write(b, a, '{re: $realtobits(fa_re[b][a] * br - fa_im[b][a] * bi),
                               im: $realtobits(fa_re[b][a] * bi + fa_im[b][a] * br)});
          end
      run(OP_IFFT, lg);
      for (int k = 0; k < hn; k++) begin
        int b, a;
        cplx_t d;
        real cr, ci;
        longint rr, ri;
        word_pos(lg, k, b, a);
        host_read(b, a, d);
        cr = $bitstoreal(d.re) / real'(hn);
        ci = $bitstoreal(d.im) / real'(hn);
        rr = longint'(cr);   // rounds to nearest
        ri = longint'(ci);
        checks += 2;
        if (rr != pc[k] || (cr - real'(rr)) > 0.01 || (real'(rr) - cr) > 0.01) begin
          failures++;
          if (failures < 10) $display("n=%0d coef %0d: %f, expected %0d", n, k, cr, pc[k]);
        end
        if (ri != pc[k + hn] || (ci - real'(ri)) > 0.01 || (real'(ri) - ci) > 0.01) begin
          failures++;
          if (failures < 10) $display("n=%0d coef %0d: %f, expected %0d", n, k + hn, ci, pc[k + hn]);
        end
      end
      $display("n = %0d: product checked", n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
