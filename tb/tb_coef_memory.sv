// tb_coef_memory: checks the four-bank coefficient memory: all banks
// written in the same cycles at different addresses, read back in parallel,
// real and imaginary halves kept apart, and banks independent (a write to
// one bank leaves the others alone).
module tb_coef_memory;
  import fft_pkg::*;
  logic              clk = 0;
  logic [N_BANK-1:0] cs, we;
  logic [ADDR_W-1:0] addr  [N_BANK];
  cplx_t             wdata [N_BANK], rdata [N_BANK];
  cplx_t             model [N_BANK][BANK_DEPTH];
  int checks = 0, failures = 0;

  coef_memory dut (.clk, .cs, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cs = '0; we = '0;
    for (int b = 0; b < N_BANK; b++) begin addr[b] = '0; wdata[b] = '0; end
    // fill: bank b gets its words in a different order
    for (int a = 0; a < BANK_DEPTH; a++) begin
      @(negedge clk);
      cs = '1; we = '1;
      for (int b = 0; b < N_BANK; b++) begin
        addr[b]  = ADDR_W'((a * (2 * b + 1)) % BANK_DEPTH);
        wdata[b] = {$urandom, $urandom, $urandom, $urandom};
        model[b][addr[b]] = wdata[b];
      end
    end
    // single-bank writes
    for (int i = 0; i < 50; i++) begin
      int b;
      b = $urandom % N_BANK;
      @(negedge clk);
      cs = '0; we = '0; cs[b] = 1; we[b] = 1;
      addr[b] = ADDR_W'($urandom); wdata[b] = {$urandom, $urandom, $urandom, $urandom};
      model[b][addr[b]] = wdata[b];
    end
    // parallel reads
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      cs = '1; we = '0;
      for (int b = 0; b < N_BANK; b++) addr[b] = ADDR_W'($urandom);
      @(negedge clk);
      for (int b = 0; b < N_BANK; b++) begin
        checks++;
        if (rdata[b] !== model[b][addr[b]]) begin
          failures++;
          if (failures < 5) $display("bank %0d addr %0d: %h expected %h", b, addr[b], rdata[b], model[b][addr[b]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
