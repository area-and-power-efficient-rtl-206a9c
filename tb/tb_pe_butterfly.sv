// tb_pe_butterfly: checks both configurations of the reconfigurable PE
// bit-exactly against the butterfly equations evaluated with binary64 reals:
//   FFT  (CT): x = u + v*w, y = u - v*w
//   IFFT (GS): x = u + v,   y = (u - v)*w
// with complex products rounded term by term (re = ar*br - ai*bi, ...).
module tb_pe_butterfly;
  import fft_pkg::*;
  op_e   op;
  cplx_t u, v, w, x, y;
  int checks = 0, failures = 0;

  pe_butterfly dut (.op(op), .u(u), .v(v), .w(w), .x(x), .y(y));

  function automatic real rnd();
    return ($urandom % 2000001) / 1000000.0 - 1.0;
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      real ur, ui, vr, vi, wr, wi, pr, pi, dr, di, xr, xi, yr, yi;
      ur = rnd(); ui = rnd(); vr = rnd(); vi = rnd();
      wr = rnd(); wi = rnd();
      op = ((i % 2) != 0) ? OP_IFFT : OP_FFT;
      u = '{re: $realtobits(ur), im: $realtobits(ui)};
      v = '{re: $realtobits(vr), im: $realtobits(vi)};
      w = '{re: $realtobits(wr), im: $realtobits(wi)};
      #1;
      if (op == OP_FFT) begin
        pr = vr * wr - vi * wi; pi = vr * wi + vi * wr;
        xr = ur + pr; xi = ui + pi; yr = ur - pr; yi = ui - pi;
      end else begin
        xr = ur + vr; xi = ui + vi;
        dr = ur - vr; di = ui - vi;
        yr = dr * wr - di * wi; yi = dr * wi + di * wr;
      end
      checks++;
      if (x.re !== $realtobits(xr) || x.im !== $realtobits(xi) ||
          y.re !== $realtobits(yr) || y.im !== $realtobits(yi)) begin
        failures++;
        if (failures < 5) $display("op %s: x=(%g,%g) y=(%g,%g), expected x=(%g,%g) y=(%g,%g)",
          op.name(), $bitstoreal(x.re), $bitstoreal(x.im), $bitstoreal(y.re), $bitstoreal(y.im),
          xr, xi, yr, yi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
