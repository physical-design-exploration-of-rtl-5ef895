// spm_bank: one SRAM bank of the tile scratchpad.
//
// A single-port, synchronous memory of DEPTH rows of WIDTH bits. A read
// (en=1, we=0) returns the addressed row on rdata in the next cycle; a write
// (en=1, we=1) stores wdata at the clock edge, and rdata then keeps its
// previous value. rdata holds its value while the bank is idle.
//
// The bank size (512 bits x 64 rows) is the architecture's. On silicon this is
// an SRAM macro; here it is a register array so that it simulates and maps to a
// memory cell in synthesis. The one-cycle read latency is this design's choice.
module spm_bank #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
