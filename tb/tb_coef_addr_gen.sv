// tb_coef_addr_gen: checks the coefficient address generator.
//  * n = 32 (the worked example of the data-flow figure, 4 steps per stage):
//    Addr0 = Addr1 = p in stages 0 and 1, Addr1 = p ^ 2 in stage 2 and
//    Addr1 = p ^ 3 in stage 3.
//  * every size n = 4 .. 1024 and stage: Addr0 is the step counter, Addr1
//    stays inside the n/8 words used per bank, p -> Addr1 is a permutation
//    of the steps (each word of banks 1 and 3 is read and written once per
//    stage) and an involution (the pairing is symmetric, so the same rule
//    serves FFT and IFFT).
// The data movement produced with these addresses is checked end to end in
// tb_control_unit and tb_fft_processor.
module tb_coef_addr_gen;
  import fft_pkg::*;
  logic [LOGN_W-1:0] logn, sg;
  logic [ADDR_W-1:0] p, addr0, addr1;
  int checks = 0, failures = 0;

  coef_addr_gen dut (.logn, .sg, .p, .addr0, .addr1);

  task automatic addr1_of(input int lg, input int st, input int pp, output int a1);
    logn = LOGN_W'(lg); sg = LOGN_W'(st); p = ADDR_W'(pp);
    #1;
    a1 = int'(addr1);
  endtask

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    static int fig_xor [4] = '{0, 0, 2, 3};
    for (int st = 0; st < 4; st++)
      for (int pp = 0; pp < 4; pp++) begin
        int a1;
        addr1_of(5, st, pp, a1);
        checks++;
        if (a1 != (pp ^ fig_xor[st]) || addr0 != ADDR_W'(pp)) begin
          failures++;
          $display("n=32 stage %0d step %0d: addr0 %0d addr1 %0d", st, pp, addr0, a1);
        end
      end
    for (int lg = 2; lg <= LOGN_MAX; lg++) begin
      int steps;
      steps = (lg >= 3) ? 1 << (lg - 3) : 1;
      for (int st = 0; st < lg - 1; st++) begin
        bit seen [BANK_DEPTH];
        foreach (seen[i]) seen[i] = 0;
        for (int pp = 0; pp < steps; pp++) begin
          int a1, back;
          bit a0_ok;
          addr1_of(lg, st, pp, a1);
          a0_ok = (addr0 == ADDR_W'(pp));
          addr1_of(lg, st, a1, back);
          checks++;
          if (!a0_ok || a1 >= steps || seen[a1] || back != pp) begin
            failures++;
            $display("logn %0d stage %0d step %0d: addr0 %0d addr1 %0d", lg, st, pp, addr0, a1);
          end
          if (a1 < steps) seen[a1] = 1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
