// tb_control_unit: checks the control unit by tracking which coefficient
// sits in which memory word.  The testbench models the four banks and the
// fixed bank-to-PE wiring of the processor (PE0 <- banks 0/1, PE1 <- banks
// 2/3; with the stage-0 bank exchange PE0 <- 0/2, PE1 <- 1/3; Addr0 on banks
// 0 and 2, Addr1 on banks 1 and 3) and moves labels instead of numbers.
// For every size n = 2 .. 1024, an FFT followed by an IFFT:
//  * every butterfly must pair the words (j, j + ht) of FALCON's transform,
//    ht = n/4 / 2^sg, each pair exactly once per stage, stages in forward
//    order for FFT and reverse order for IFFT;
//  * the PE's twiddle must be gm[2^(sg+1) + j / (2 ht)] (ROM word to factor
//    mapping as checked by tb_twiddle_memory), an odd factor must be
//    expanded (swap) and the IFFT must conjugate;
//  * addresses and selects must be the same in the read and the write cycle
//    of a step, write enables only in the write cycle, ROM enable only in
//    the read cycle;
//  * after the IFFT every word must be back at its natural place;
//  * for n = 32 the memory contents after every stage, forward and inverse,
//    must equal the columns of the paper's 32-point data-flow figure;
//  * busy must last 2 (log2 n - 1) max(n/8, 1) cycles (the cycle counts of
//    the paper's table), then done stays high until the next start; a start
//    while busy is ignored.
module tb_control_unit;
  import fft_pkg::*;
  logic                 clk = 0, rst, start;
  op_e                  op_in, op;
  logic [LOGN_W-1:0]    logn_in;
  logic                 busy, done, bank_x, rs, ws, tw_en, tw_swap, tw_neg_re, tw_neg_im;
  logic [ADDR_W-1:0]    addr0, addr1;
  logic [N_BANK-1:0]    cs, we;
  logic [TW_ADDR_W-1:0] tw_addr;
  int checks = 0, failures = 0;

  control_unit dut (.clk, .rst, .start, .op_in, .logn_in, .busy, .done, .op,
                    .addr0, .addr1, .cs, .we, .bank_x, .rs, .ws, .tw_en, .tw_addr,
                    .tw_swap, .tw_neg_re, .tw_neg_im);
  always #5 clk = ~clk;

  int lab [N_BANK][BANK_DEPTH];

  // The three layouts that appear in the 32-point data-flow figure (banks
  // MEM0..MEM3, 4 words each): natural order, after forward stage 1, after
  // forward stages 2 and 3.  The inverse passes through them backwards.
  const int fig5 [3][N_BANK][4] = '{
    '{'{0, 1, 2, 3},  '{4, 5, 6, 7},  '{8, 9, 10, 11},  '{12, 13, 14, 15}},
    '{'{0, 1, 6, 7},  '{4, 5, 2, 3},  '{8, 9, 14, 15},  '{12, 13, 10, 11}},
    '{'{0, 3, 6, 5},  '{4, 7, 2, 1},  '{8, 11, 14, 13}, '{12, 15, 10, 9}}};
  const int fig5_fft  [4] = '{0, 1, 2, 2};   // layout after forward stage 0, 1, 2, 3
  const int fig5_ifft [4] = '{2, 1, 0, 0};   // after the 1st, 2nd, 3rd, 4th inverse stage

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

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, msg);
    end
  endtask

  // natural layout: word k in bank k / (n/8), address k % (n/8)
  function automatic void place(int lg, int k, output int b, output int a);
    if (lg == 1) begin b = 0; a = 0; end
    else if (lg == 2) begin b = 2 * k; a = 0; end
    else begin b = k >> (lg - 3); a = k & ((1 << (lg - 3)) - 1); end
  endfunction

  task automatic run(input int lg, input op_e o);
    int hn, nst, steps, exp_cycles, cycles, step, stage, sg;
    bit used [512];
    int rd [N_BANK];
    logic [ADDR_W-1:0] ra0, ra1;
    logic [N_BANK-1:0] rcs;
    logic [TW_ADDR_W-1:0] rtw;
    hn    = (1 << lg) / 2;
    nst   = lg - 1;
    steps = (lg >= 3) ? 1 << (lg - 3) : 1;
    exp_cycles = (lg >= 2) ? 2 * nst * steps : 0;
    @(negedge clk);
    start = 1; op_in = o; logn_in = LOGN_W'(lg);
    @(negedge clk);
    start = 0;
    cycles = 0; step = 0; stage = 0;
    foreach (used[i]) used[i] = 0;
    while (busy) begin
      int a0 [N_PE], b0 [N_PE], u [N_PE], v [N_PE], wa [N_PE], wb [N_PE], wr [N_BANK];
      int ht, npe;
      // read cycle
      cycles++;
      check(tw_en && cs != 0 && we == 0, "read cycle without ROM enable / with write");
      for (int b = 0; b < N_BANK; b++) rd[b] = lab[b][b[0] ? addr1 : addr0];
      ra0 = addr0; ra1 = addr1; rcs = cs; rtw = tw_addr;
      if (cycles == 3) begin start = 1; op_in = OP_FFT; logn_in = 4'd3; end  // must be ignored
      @(negedge clk);
      start = 0;
      // write cycle
      cycles++;
      check(busy && !tw_en && we == cs && cs == rcs && addr0 == ra0 && addr1 == ra1,
            "write cycle differs from its read cycle");
      sg  = (o == OP_FFT) ? stage : nst - 1 - stage;
      ht  = hn >> (sg + 1);
      npe = (lg == 2) ? 1 : N_PE;
      a0[0] = rd[0]; b0[0] = bank_x ? rd[2] : rd[1];
      a0[1] = bank_x ? rd[1] : rd[2]; b0[1] = rd[3];
      for (int pe = 0; pe < npe; pe++) begin
        int j, k, want;
        u[pe] = rs ? b0[pe] : a0[pe];
        v[pe] = rs ? a0[pe] : b0[pe];
        check(v[pe] == u[pe] + ht && (u[pe] % (2 * ht)) < ht && !used[u[pe]],
              $sformatf("logn %0d %s stage %0d step %0d PE%0d: pair (%0d,%0d), ht %0d",
                        lg, o.name(), sg, step, pe, u[pe], v[pe], ht));
        used[u[pe]] = 1;
        j = (rtw < 2) ? int'(rtw) : 2 * (int'(rtw) - 1) + int'(tw_swap);
        k = gm_index(pe, j);
        want = (1 << (sg + 1)) + u[pe] / (2 * ht);
        check(k == want, $sformatf("logn %0d %s stage %0d step %0d PE%0d: twiddle gm[%0d], expected gm[%0d]",
                                   lg, o.name(), sg, step, pe, k, want));
        check(tw_swap || (!tw_neg_re && tw_neg_im == (o == OP_IFFT)), "even twiddle modified");
        check(!tw_swap || (tw_neg_re != (tw_neg_im ^ (o == OP_IFFT))), "odd twiddle not times +-i");
        wa[pe] = ws ? v[pe] : u[pe];
        wb[pe] = ws ? u[pe] : v[pe];
      end
      wr[0] = wa[0]; wr[3] = wb[1];
      wr[1] = bank_x ? wa[1] : wb[0];
      wr[2] = bank_x ? wb[0] : wa[1];
      for (int b = 0; b < N_BANK; b++) if (we[b]) lab[b][b[0] ? addr1 : addr0] = wr[b];
      step++;
      if (step == steps) begin
        step = 0; stage++;
        check(lg < 2 || 2 * steps * npe == hn || lg == 2, "stage does not cover all words");
        if (lg == 5) begin
          // memory columns of the 32-point data-flow figure after each stage
          int col;
          col = (o == OP_FFT) ? fig5_fft[stage - 1] : fig5_ifft[stage - 1];
          for (int b = 0; b < N_BANK; b++)
            for (int a = 0; a < 4; a++)
              check(lab[b][a] == fig5[col][b][a],
                    $sformatf("n=32 %s after stage %0d: bank %0d word %0d holds %0d, figure shows %0d",
                              o.name(), stage - 1, b, a, lab[b][a], fig5[col][b][a]));
        end
        foreach (used[i]) used[i] = 0;
      end
      @(negedge clk);
    end
    check(cycles == exp_cycles, $sformatf("logn %0d %s: %0d busy cycles, expected %0d", lg, o.name(), cycles, exp_cycles));
    check(stage == ((lg >= 2) ? nst : 0), "wrong number of stages");
    check(done, "done not raised");
    repeat (3) @(negedge clk);
    check(done && !busy, "done not held");
  endtask

  initial begin
    #100000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; start = 0; op_in = OP_FFT; logn_in = '0;
    foreach (lab[b, a]) lab[b][a] = -1;
    repeat (2) @(negedge clk);
    rst = 0;
    check(!busy && !done, "not idle after reset");
    for (int lg = 1; lg <= LOGN_MAX; lg++) begin
      int hn;
      hn = (1 << lg) / 2;
      foreach (lab[b, a]) lab[b][a] = -1;
      for (int k = 0; k < hn; k++) begin
        int b, a;
        place(lg, k, b, a);
        lab[b][a] = k;
      end
      run(lg, OP_FFT);
      run(lg, OP_IFFT);
      for (int k = 0; k < hn; k++) begin
        int b, a;
        place(lg, k, b, a);
        check(lab[b][a] == k, $sformatf("logn %0d: word %0d not restored (found %0d)", lg, k, lab[b][a]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
