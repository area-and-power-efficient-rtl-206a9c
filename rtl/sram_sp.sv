// sram_sp: single-port synchronous SRAM, one read/write port.
//
// Model of one coefficient memory macro (the paper's chip uses eight
// compiled single-port 128 x 64-bit SRAM macros, one per real or imaginary
// half of a bank).  Written as a plain array so that it simulates and
// synthesises anywhere; a foundry macro with the same port list replaces it
// in an ASIC flow.
//
// Timing: with cs = 1 and we = 0 the word at addr appears on rdata after the
// clock edge and stays there until the next read (the output is held during
// a write, "no change" mode).  With cs = 1 and we = 1, wdata is written at
// the clock edge.  One access per cycle.  Contents are not reset.
module sram_sp #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     cs,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cs) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
