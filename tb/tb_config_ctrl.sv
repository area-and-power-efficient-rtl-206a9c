// tb_config_ctrl: checks the configuration controller.
//  * n = 32, the worked example of the data-flow figure: input exchange (rs)
//    and output exchange (ws) per stage and step, FFT and IFFT:
//      FFT  stage 1: ws = 0 0 1 1; stage 2: rs = 0 0 1 1, ws = 0 1 1 0;
//           stage 3: rs = ws = 0 1 0 1
//      IFFT stage 1: rs = 0 0 1 1; stage 2: rs = 0 1 1 0, ws = 0 0 1 1;
//           stage 3: rs = ws = 0 1 0 1
//    (all other values 0).
//  * all sizes: bank exchange only in stage 0, chip selects in read and
//    write cycles, write enables only in write cycles, banks 1 and 3 idle
//    for n = 4, nothing selected when inactive.
//  * twiddle expansion for every (op, odd, minus): an even factor is used
//    as stored (conjugated for IFFT), an odd one is the stored word times +i
//    (swap, negate the new real part) or -i (swap, negate the new imaginary
//    part), conjugated again for IFFT.
module tb_config_ctrl;
  import fft_pkg::*;
  op_e               op;
  logic [LOGN_W-1:0] logn, sg;
  logic [ADDR_W-1:0] p;
  logic              active, wr_phase, tw_odd, tw_minus;
  logic              bank_x, rs, ws, tw_swap, tw_neg_re, tw_neg_im;
  logic [N_BANK-1:0] cs, we;
  int checks = 0, failures = 0;

  config_ctrl dut (.op, .logn, .sg, .p, .active, .wr_phase, .tw_odd, .tw_minus,
                   .bank_x, .rs, .ws, .tw_swap, .tw_neg_re, .tw_neg_im, .cs, .we);

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    //                                 stage 0      stage 1      stage 2      stage 3
    static bit fft_rs  [4][4] = '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,1,1}, '{0,1,0,1}};
    static bit fft_ws  [4][4] = '{'{0,0,0,0}, '{0,0,1,1}, '{0,1,1,0}, '{0,1,0,1}};
    static bit ifft_rs [4][4] = '{'{0,0,0,0}, '{0,0,1,1}, '{0,1,1,0}, '{0,1,0,1}};
    static bit ifft_ws [4][4] = '{'{0,0,0,0}, '{0,0,0,0}, '{0,0,1,1}, '{0,1,0,1}};
    active = 1; wr_phase = 0; tw_odd = 0; tw_minus = 0;
    logn = 5;
    for (int o = 0; o < 2; o++)
      for (int st = 0; st < 4; st++)
        for (int pp = 0; pp < 4; pp++) begin
          bit ers, ews;
          op = (o != 0) ? OP_IFFT : OP_FFT; sg = LOGN_W'(st); p = ADDR_W'(pp);
          #1;
          ers = (o != 0) ? ifft_rs[st][pp] : fft_rs[st][pp];
          ews = (o != 0) ? ifft_ws[st][pp] : fft_ws[st][pp];
          checks++;
          if (rs !== ers || ws !== ews) begin
            failures++;
            $display("n=32 %s stage %0d step %0d: rs %b ws %b, expected %b %b", op.name(), st, pp, rs, ws, ers, ews);
          end
        end
    for (int lg = 2; lg <= LOGN_MAX; lg++)
      for (int st = 0; st < lg - 1; st++)
        for (int k = 0; k < 8; k++) begin
          logic [N_BANK-1:0] ecs;
          logn = LOGN_W'(lg); sg = LOGN_W'(st); p = ADDR_W'($urandom);
          op = k[0] ? OP_IFFT : OP_FFT; active = k[1]; wr_phase = k[2];
          #1;
          ecs = !active ? 4'b0000 : (lg == 2) ? 4'b0101 : 4'b1111;
          checks++;
          if (bank_x !== (st == 0) || cs !== ecs || we !== (wr_phase ? ecs : 4'b0000)) begin
            failures++;
            $display("logn %0d stage %0d active %b wr %b: bank_x %b cs %b we %b", lg, st, active, wr_phase, bank_x, cs, we);
          end
        end
    for (int k = 0; k < 8; k++) begin
      bit ifft, e_sw, e_nr, e_ni;
      ifft = k[0]; tw_odd = k[1]; tw_minus = k[2];
      op = ifft ? OP_IFFT : OP_FFT;
      #1;
      e_sw = tw_odd;
      e_nr = tw_odd && !tw_minus;                 // (re, im) * i  = (-im, re)
      e_ni = (tw_odd && tw_minus) ^ ifft;         // (re, im) * -i = (im, -re); conj for IFFT
      checks++;
      if (tw_swap !== e_sw || tw_neg_re !== e_nr || tw_neg_im !== e_ni) begin
        failures++;
        $display("op %s odd %b minus %b: swap %b neg_re %b neg_im %b", op.name(), tw_odd, tw_minus,
                 tw_swap, tw_neg_re, tw_neg_im);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
