// tb_fft_processor: end-to-end test of the FFT/IFFT processor at its
// default (full) size.
//
// For every size n = 2^logn, logn = 1 .. 10, it loads random real
// coefficients a_0..a_{n-1} as the complex words a_k + i*a_{k+n/2} through
// the host port, runs the forward transform, reads all banks back and
// checks:
//   - the cycle count (busy cycles) against 2*(logn-1)*max(n/8,1), which
//     gives the paper's 4, 12, 32, 80, 192, 448, 1024, 2304 cycles;
//   - that the memory holds exactly the n/2 FFT values of a reference
//     FALCON-order FFT computed here with real arithmetic (each word
//     matched to one reference value, within a relative tolerance; the
//     match is independent of where the schedule puts each value);
// then runs the inverse transform on the memory as left by the FFT and
// checks that every word is back in its natural place and equals
// (n/2) * (a_k + i*a_{k+n/2}).
// It also counts how often each mechanism of the design was used (input
// exchange, output exchange, bank exchange, derived twiddle +i and -i,
// IFFT conjugation, single-PE n = 4 mode, n = 2 pass-through) and fails if
// one never happened.
module tb_fft_processor;
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
  int cnt_rs = 0, cnt_ws = 0, cnt_bank_x = 0, cnt_tw_plus = 0, cnt_tw_minus = 0;
  int cnt_ifft = 0, cnt_fft = 0, cnt_single_pe = 0, cnt_passthru = 0;

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

  // mechanism counters, sampled in write cycles
  always @(posedge clk) begin
    if (dut.u_ctrl.state == 2'd2) begin
      if (dut.rs)        cnt_rs++;
      if (dut.ws)        cnt_ws++;
      if (dut.bank_x)    cnt_bank_x++;
      if (dut.tw_swap && dut.tw_neg_re)  cnt_tw_plus++;
      if (dut.tw_swap && !dut.tw_neg_re) cnt_tw_minus++;
      if (dut.op == OP_IFFT) cnt_ifft++; else cnt_fft++;
      if (dut.mem_cs == 4'b0101) cnt_single_pe++;
    end
  end

  // ---------------- reference model (FALCON fft.c order) ----------------
  real ar [512], ai [512];     // working arrays, word k = ar[k] + i*ai[k]

  function automatic void gm(int j, output real c, output real s);
    int sh, r, x;
    real th;
    sh = $clog2(j + 1) - 1;
    x  = j - (1 << sh);
    r  = 0;
    for (int b = 0; b < sh; b++) r = (r << 1) | ((x >> b) & 1);
    th = 3.14159265358979323846 * (2.0 * r + 1.0) / real'(1 << (sh + 1));
    c = $cos(th);
    s = $sin(th);
  endfunction

  task automatic ref_fft(int lg);
    int hn, t, m, ht, hm;
    real sr, si, yr, yi, xr, xi;
    hn = 1 << (lg - 1); t = hn; m = 2;
    for (int u = 1; u < lg; u++) begin
      ht = t >> 1; hm = m >> 1;
      for (int i1 = 0; i1 < hm; i1++) begin
        gm(m + i1, sr, si);
        for (int j = i1 * t; j < i1 * t + ht; j++) begin
          xr = ar[j]; xi = ai[j];
          yr = ar[j + ht] * sr - ai[j + ht] * si;
          yi = ar[j + ht] * si + ai[j + ht] * sr;
          ar[j] = xr + yr; ai[j] = xi + yi;
          ar[j + ht] = xr - yr; ai[j + ht] = xi - yi;
        end
      end
      t = ht; m = m << 1;
    end
  endtask

  // ---------------- host access ----------------
  function automatic void word_pos(int lg, int k, output int bank, output int addr);
    int s;
    if (lg <= 2) begin
      bank = 2 * k; addr = 0;
    end else begin
      s = 1 << (lg - 3);
      bank = k / s; addr = k % s;
    end
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

  task automatic run(op_e op, int lg, output int cycles);
    @(negedge clk);
    fft_ifft = op; logn = LOGN_W'(lg); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      if (busy) cycles++;
      @(negedge clk);
    end
  endtask

  function automatic logic close(real got, real want, real scale);
    real d;
    d = got - want;
    if (d < 0) d = -d;
    return d <= 1e-12 * scale;
  endfunction

  // ---------------- test ----------------
  real in_r [512], in_i [512];
  int  used [512];

  initial begin
    rst = 1; start = 0; host_en = 0; host_we = 0; host_bank = '0; host_addr = '0;
    host_wdata = '0; fft_ifft = OP_FFT; logn = '0;
    repeat (3) @(negedge clk);
    rst = 0;

    for (int lg = 1; lg <= 10; lg++) begin
      int hn, nw, cyc, exp_cyc, bank, addr, best, bad;
      real scale, bd, d, vr, vi;
      cplx_t w;
      hn = 1 << (lg - 1);
      nw = (lg >= 3) ? (1 << (lg - 3)) : 1;
      // random coefficients in [-1, 1)
      scale = 0.0;
      for (int k = 0; k < hn; k++) begin
        in_r[k] = ($urandom % 2000001) / 1000000.0 - 1.0;
        in_i[k] = ($urandom % 2000001) / 1000000.0 - 1.0;
        ar[k] = in_r[k]; ai[k] = in_i[k];
        word_pos(lg, k, bank, addr);
        host_write(bank, addr, '{re: $realtobits(in_r[k]), im: $realtobits(in_i[k])});
      end
      ref_fft(lg);
      for (int k = 0; k < hn; k++) begin
        if (ar[k] > scale) scale = ar[k]; if (-ar[k] > scale) scale = -ar[k];
        if (ai[k] > scale) scale = ai[k]; if (-ai[k] > scale) scale = -ai[k];
      end

      // forward transform
      run(OP_FFT, lg, cyc);
      exp_cyc = (lg >= 2) ? 2 * (lg - 1) * nw : 0;
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("n=%0d FFT cycles %0d, expected %0d", 1 << lg, cyc, exp_cyc);
      end
      if (lg == 1) cnt_passthru++;

      // every word must match one reference output
      for (int k = 0; k < hn; k++) used[k] = 0;
      bad = 0;
      for (int b = 0; b < N_BANK; b++) begin
        for (int a = 0; a < nw; a++) begin
          if (lg <= 2 && (b % 2) == 1) continue;
          if (lg == 1 && b != 0) continue;
          host_read(b, a, w);
          vr = $bitstoreal(w.re); vi = $bitstoreal(w.im);
          best = -1; bd = 1e300;
          for (int k = 0; k < hn; k++) begin
            d = (vr - ar[k]) * (vr - ar[k]) + (vi - ai[k]) * (vi - ai[k]);
            if (d < bd) begin bd = d; best = k; end
          end
          checks++;
          if (!(close(vr, ar[best], scale) && close(vi, ai[best], scale)) || used[best] != 0) begin
            failures++; bad++;
            if (bad < 4) $display("n=%0d FFT word bank %0d addr %0d = (%g,%g) has no reference match",
                                  1 << lg, b, a, vr, vi);
          end
          used[best] = 1;
        end
      end

      // inverse transform of what the FFT left in memory
      run(OP_IFFT, lg, cyc);
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("n=%0d IFFT cycles %0d, expected %0d", 1 << lg, cyc, exp_cyc);
      end
      bad = 0;
      for (int k = 0; k < hn; k++) begin
        word_pos(lg, k, bank, addr);
        host_read(bank, addr, w);
        vr = $bitstoreal(w.re); vi = $bitstoreal(w.im);
        checks++;
        if (!(close(vr, hn * in_r[k], hn * 2.0) && close(vi, hn * in_i[k], hn * 2.0))) begin
          failures++; bad++;
          if (bad < 4) $display("n=%0d IFFT word %0d = (%g,%g), expected (%g,%g)", 1 << lg, k,
                                vr, vi, hn * in_r[k], hn * in_i[k]);
        end
      end
      $display("n=%0d done: FFT/IFFT %0d cycles each", 1 << lg, exp_cyc);
    end

    // every mechanism must have been exercised
    checks++; if (cnt_rs == 0)        begin failures++; $display("no input exchange"); end
    checks++; if (cnt_ws == 0)        begin failures++; $display("no output exchange"); end
    checks++; if (cnt_bank_x == 0)    begin failures++; $display("no bank exchange"); end
    checks++; if (cnt_tw_plus == 0)   begin failures++; $display("no +i twiddle"); end
    checks++; if (cnt_tw_minus == 0)  begin failures++; $display("no -i twiddle"); end
    checks++; if (cnt_fft == 0)       begin failures++; $display("no FFT step"); end
    checks++; if (cnt_ifft == 0)      begin failures++; $display("no IFFT step"); end
    checks++; if (cnt_single_pe == 0) begin failures++; $display("no single-PE step"); end
    checks++; if (cnt_passthru == 0)  begin failures++; $display("no n=2 pass-through"); end
    $display("mechanisms: input-exchange %0d output-exchange %0d bank-exchange %0d tw(+i) %0d tw(-i) %0d fft %0d ifft %0d single-PE %0d n=2 %0d",
             cnt_rs, cnt_ws, cnt_bank_x, cnt_tw_plus, cnt_tw_minus, cnt_fft, cnt_ifft,
             cnt_single_pe, cnt_passthru);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
