// sram_sp -- single-port synchronous SRAM, one read or write per cycle.
//
// Stands for the on-chip SRAM macros of a PE. Written as a plain array so that it
// simulates and synthesizes to a memory cell; a real chip would use a compiled macro.
// Timing: a read issued in one cycle returns its word on `rdata` in the next cycle.
// A write takes priority over a read in the same cycle. Contents are not reset.
module sram_sp #(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned WIDTH  = 16,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end
endmodule
