// tb_pe_array: checks the PE array with its input and output exchanges for
// all four combinations of the exchange controls and both operations, with
// a different twiddle per PE.  Expected values: butterfly equations on
// binary64 reals, operands and results exchanged as the controls say.
module tb_pe_array;
  import fft_pkg::*;
  op_e   op;
  logic  rs, ws;
  cplx_t a_rd [N_PE], b_rd [N_PE], w [N_PE], a_wr [N_PE], b_wr [N_PE];
  int checks = 0, failures = 0;

  pe_array dut (.op(op), .rs(rs), .ws(ws), .a_rd(a_rd), .b_rd(b_rd), .w(w),
                .a_wr(a_wr), .b_wr(b_wr));

  function automatic real rnd();
    return ($urandom % 2000001) / 1000000.0 - 1.0;
  endfunction

  function automatic cplx_t mk(real r, real i);
    return '{re: $realtobits(r), im: $realtobits(i)};
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 800; it++) begin
      real ar [N_PE], ai [N_PE], br [N_PE], bi [N_PE], wr [N_PE], wi [N_PE];
      op = ((it % 2) != 0) ? OP_IFFT : OP_FFT;
      rs = 1'(it >> 1); ws = 1'(it >> 2);
      for (int i = 0; i < N_PE; i++) begin
        ar[i] = rnd(); ai[i] = rnd(); br[i] = rnd(); bi[i] = rnd(); wr[i] = rnd(); wi[i] = rnd();
        a_rd[i] = mk(ar[i], ai[i]); b_rd[i] = mk(br[i], bi[i]); w[i] = mk(wr[i], wi[i]);
      end
      #1;
      for (int i = 0; i < N_PE; i++) begin
        real ur, ui, vr, vi, pr, pi, xr, xi, yr, yi, dr, di;
        cplx_t ex, ey;
        if (rs) begin ur = br[i]; ui = bi[i]; vr = ar[i]; vi = ai[i]; end
        else    begin ur = ar[i]; ui = ai[i]; vr = br[i]; vi = bi[i]; end
        if (op == OP_FFT) begin
          pr = vr * wr[i] - vi * wi[i]; pi = vr * wi[i] + vi * wr[i];
          xr = ur + pr; xi = ui + pi; yr = ur - pr; yi = ui - pi;
        end else begin
          xr = ur + vr; xi = ui + vi; dr = ur - vr; di = ui - vi;
          yr = dr * wr[i] - di * wi[i]; yi = dr * wi[i] + di * wr[i];
        end
        ex = mk(xr, xi); ey = mk(yr, yi);
        checks++;
        if ((ws ? a_wr[i] !== ey : a_wr[i] !== ex) || (ws ? b_wr[i] !== ex : b_wr[i] !== ey)) begin
          failures++;
          if (failures < 5) $display("PE%0d op %s rs %b ws %b mismatch", i, op.name(), rs, ws);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
