// spm: the tile's ultra-wide L1 scratchpad.
//
// NUM_BANKS banks sit side by side and share one set of control signals: the
// same enable, write enable and row address are broadcast to all of them, so a
// whole row of every bank is read or written at once. Together they form one
// memory of DEPTH lines of LINE_W = NUM_BANKS*BANK_W bits. Bank k holds line
// bits [k*BANK_W +: BANK_W]. Reads return the line one cycle after the request.
//
// The shared-control, broadcast-address organisation and the bank size follow
// the architecture; the bank order along the line is this design's choice.
module spm #(
  parameter int unsigned NUM_BANKS = dsip_pkg::DEF_NUM_BANKS,
  parameter int unsigned BANK_W    = dsip_pkg::DEF_BANK_W,
  parameter int unsigned DEPTH     = dsip_pkg::DEF_SPM_DEPTH,
  localparam int unsigned LINE_W   = NUM_BANKS * BANK_W,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [LINE_W-1:0] wdata,
  output logic [LINE_W-1:0] rdata
);

  for (genvar k = 0; k < NUM_BANKS; k++) begin : g_bank
    spm_bank #(.WIDTH(BANK_W), .DEPTH(DEPTH)) u_bank (
      .clk  (clk),
      .en   (en),
      .we   (we),
      .addr (addr),
      .wdata(wdata[k*BANK_W +: BANK_W]),
      .rdata(rdata[k*BANK_W +: BANK_W])
    );
  end

endmodule
