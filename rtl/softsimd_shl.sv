// softsimd_shl: lane-wise logical left shift, used by the VFU multiplier.
//
// Shifts each lane of a DW-bit word left by `k` bits, filling with zeros and
// dropping the bits that leave the lane. The lane count is chosen by `mode` as in
// softsimd_alu (3, 4, 6, 8, 12 or 16 lanes; codes 6 and 7 act as 16). The VFU
// adds or subtracts the result into its accumulator once per non-zero CSD digit
// of the scalar. Purely combinational; a helper of this design.
module softsimd_shl
  import dsip_pkg::*;
#(
  parameter int unsigned DW  = dsip_pkg::DEF_DW,
  parameter int unsigned KW  = $clog2(dsip_pkg::DEF_SCALAR_W)
) (
  input  sw_mode_e      mode,
  input  logic [DW-1:0] a,
  input  logic [KW-1:0] k,
  output logic [DW-1:0] y
);

  logic [DW-1:0] shl_m [NUM_SW_MODES];

  for (genvar m = 0; m < NUM_SW_MODES; m++) begin : g_mode
    localparam int unsigned LW = DW / lanes_of(m);
    for (genvar l = 0; l < DW / LW; l++) begin : g_lane
      assign shl_m[m][l*LW +: LW] = a[l*LW +: LW] << k;
    end
  end

  assign y = shl_m[(int'(mode) < NUM_SW_MODES) ? int'(mode) : NUM_SW_MODES - 1];

endmodule
