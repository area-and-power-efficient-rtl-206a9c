// tb_exchange: checks pass (ctrl = 0) and cross (ctrl = 1) of the 2x2
// exchange for random complex words and for the 64-bit instance used on
// the twiddle path.
module tb_exchange;
  import fft_pkg::*;
  logic  ctrl;
  cplx_t in0, in1, out0, out1;
  fp64_t s0, s1, t0, t1;
  int checks = 0, failures = 0;

  exchange #(.T(cplx_t)) dut (.ctrl(ctrl), .in0(in0), .in1(in1), .out0(out0), .out1(out1));
  exchange #(.T(fp64_t)) dut64 (.ctrl(ctrl), .in0(s0), .in1(s1), .out0(t0), .out1(t1));

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      in0 = {$urandom, $urandom, $urandom, $urandom};
      in1 = {$urandom, $urandom, $urandom, $urandom};
      s0 = {$urandom, $urandom}; s1 = {$urandom, $urandom};
      ctrl = 1'(i);
      #1;
      checks++;
      if (ctrl ? (out0 !== in1 || out1 !== in0) : (out0 !== in0 || out1 !== in1)) failures++;
      checks++;
      if (ctrl ? (t0 !== s1 || t1 !== s0) : (t0 !== s0 || t1 !== s1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
