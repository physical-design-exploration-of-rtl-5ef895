// tile_shuffler: the tile's one-word left shifter for line rearrangement.
//
// The shuffler lies on the line path between the SPM and the VWRs and is also
// used to move a line from one VWR to another. With shift=0 a line passes
// unchanged; with shift=1 every DW-bit word moves one position to the left,
// towards the most significant end of the line (word i goes to word i+1). The
// top word falls off and word 0 becomes zero. Because each VFU only sees its
// own slice, this is how data is moved into a neighbouring VFU's slice.
// Purely combinational.
//
// The one-word left shift is the architecture's; the direction convention and
// the zero fill are this design's choices.
module tile_shuffler #(
  parameter int unsigned DW    = dsip_pkg::DEF_DW,
  parameter int unsigned WORDS = dsip_pkg::DEF_SLICES * dsip_pkg::DEF_WPS,
  localparam int unsigned LINE_W = WORDS * DW
) (
  input  logic              shift,
  input  logic [LINE_W-1:0] din,
  output logic [LINE_W-1:0] dout
);

  assign dout = shift ? {din[LINE_W-DW-1:0], {DW{1'b0}}} : din;

endmodule
