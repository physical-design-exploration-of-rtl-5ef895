// softsimd_alu: subword-parallel add, subtract and arithmetic right shift.
//
// One DW-bit word holds 3, 4, 6, 8, 12 or 16 equal lanes, chosen per operation
// by `mode` (Soft-SIMD: the lane width is a run-time choice, not a hardware one).
//   ALU_ADD: y = a + b per lane      ALU_SUB: y = a - b per lane
//   ALU_SRA: y = a >>> shamt per lane (sign of each lane replicated)
// Results wrap modulo 2^lane-width. Add and subtract share a single word-wide
// carry chain: the lane MSBs are masked out of the sum so that no carry crosses
// a lane boundary, and each lane's MSB is then rebuilt as a ^ b ^ carry-in:
//   y = ((a & ~H) + (b' & ~H) + cin) ^ ((a ^ b') & H)
// with H the lane-MSB mask, b' = ~b and cin = the lane-LSB mask for subtraction.
// The shifter is one lane-wise shifter per mode, selected by `mode`.
// Purely combinational. Mode codes 6 and 7 act as 16 lanes.
//
// The operation set (vector add/subtract and right shift) and the run-time lane
// width follow the architecture; the lane counts are those drawn for the
// Soft-SIMD word, and the carry-masking scheme is this design's choice.
module softsimd_alu
  import dsip_pkg::*;
#(
  parameter int unsigned DW = dsip_pkg::DEF_DW
) (
  input  sw_mode_e           mode,
  input  alu_op_e            op,
  input  logic [DW-1:0]      a,
  input  logic [DW-1:0]      b,
  input  logic [SHAMT_W-1:0] shamt,
  output logic [DW-1:0]      y
);

  logic [DW-1:0] msb_m [NUM_SW_MODES];
  logic [DW-1:0] lsb_m [NUM_SW_MODES];
  logic [DW-1:0] sra_m [NUM_SW_MODES];

  for (genvar m = 0; m < NUM_SW_MODES; m++) begin : g_mode
    localparam int unsigned LW = DW / lanes_of(m);
    for (genvar i = 0; i < DW; i++) begin : g_bit
      assign msb_m[m][i] = ((i % LW) == LW - 1);
      assign lsb_m[m][i] = ((i % LW) == 0);
    end
    for (genvar l = 0; l < DW / LW; l++) begin : g_lane
      assign sra_m[m][l*LW +: LW] = LW'($signed(a[l*LW +: LW]) >>> shamt);
    end
  end

  logic [2:0]    midx;
  logic [DW-1:0] h, cin, bb, sum;

  always_comb begin
    midx = (int'(mode) < NUM_SW_MODES) ? mode : 3'(NUM_SW_MODES - 1);
    h    = msb_m[midx];
    bb   = (op == ALU_SUB) ? ~b : b;
    cin  = (op == ALU_SUB) ? lsb_m[midx] : '0;
    sum  = ((a & ~h) + (bb & ~h) + cin) ^ ((a ^ bb) & h);
    y    = (op == ALU_SRA) ? sra_m[midx] : sum;
  end

endmodule
