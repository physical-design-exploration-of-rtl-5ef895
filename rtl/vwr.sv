// vwr: one very wide register (VWR).
//
// A VWR is a single line of LINE_W = SLICES*WPS*DW bits, one entry deep. It has
// one storage port seen through two interfaces of different width:
//   * the wide interface moves a whole line to or from the SPM (through the tile
//     shuffler): line_we/line_wdata, and line_rdata which always shows the line;
//   * the narrow interface gives the VFU of each slice its own words: slice s owns
//     words s*WPS .. s*WPS+WPS-1, i.e. line bits [(s*WPS+w)*DW +: DW]. A VFU reads
//     them straight from line_rdata and writes one of them with word_we[s],
//     word_idx[s] and word_wdata[s]. A VFU cannot reach words of other slices.
// Writes take effect at the clock edge. Because the storage has a single port, a
// wide write and a narrow write in the same cycle are illegal (asserted).
//
// The organisation (line-wide, one deep, sliced per VFU, asymmetric interfaces)
// follows the architecture. The architecture builds the cells from latches; this
// RTL uses edge-triggered flip-flops so that it holds no latches. The storage is
// not reset: it is always written before it is read.
module vwr #(
  parameter int unsigned DW     = dsip_pkg::DEF_DW,
  parameter int unsigned SLICES = dsip_pkg::DEF_SLICES,
  parameter int unsigned WPS    = dsip_pkg::DEF_WPS,
  localparam int unsigned LINE_W = SLICES * WPS * DW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // wide interface
  input  logic                      line_we,
  input  logic [LINE_W-1:0]         line_wdata,
  output logic [LINE_W-1:0]         line_rdata,
  // narrow interface, one per slice
  input  logic [SLICES-1:0]         word_we,
  input  logic [dsip_pkg::WSEL_W-1:0] word_idx   [SLICES],
  input  logic [DW-1:0]             word_wdata [SLICES]
);

  logic [LINE_W-1:0] line_q;

  always_ff @(posedge clk) begin
    if (line_we) begin
      line_q <= line_wdata;
    end else begin
      for (int s = 0; s < SLICES; s++) begin
        for (int w = 0; w < WPS; w++) begin
          if (word_we[s] && (int'(word_idx[s]) == w))
            line_q[(s*WPS+w)*DW +: DW] <= word_wdata[s];
        end
      end
    end
  end

  assign line_rdata = line_q;

  // single storage port: never a wide and a narrow write together
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(line_we && (|word_we)))
        else $error("vwr: wide and narrow write in the same cycle");
      for (int s = 0; s < SLICES; s++)
        assert (!word_we[s] || (int'(word_idx[s]) < WPS))
          else $error("vwr: word index %0d outside slice %0d", word_idx[s], s);
    end
  end

endmodule
