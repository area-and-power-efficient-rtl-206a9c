// tb_sram_sp: checks the single-port SRAM: every word written then read
// back (one-cycle read latency), read data held during a write and while
// deselected, and no write when cs is low.
module tb_sram_sp;
  logic        clk = 0, cs, we;
  logic [6:0]  addr;
  logic [63:0] wdata, rdata;
  logic [63:0] model [128];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(128), .WIDTH(64)) dut (.clk, .cs, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cs = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); cs = 1; we = 1; addr = 7'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); cs = 0; we = 1; addr = 7'd5; wdata = ~model[5];   // deselected: no write
    for (int i = 0; i < 300; i++) begin
      int a;
      logic [63:0] held;
      a = $urandom % 128;
      @(negedge clk); cs = 1; we = 0; addr = 7'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("addr %0d read %h expected %h", a, rdata, model[a]); end
      held = rdata;
      // a write to another word must not change the read output
      cs = 1; we = 1; addr = 7'($urandom); wdata = {$urandom, $urandom}; model[addr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("read data changed during a write"); end
      cs = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
