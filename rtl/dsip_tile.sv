// dsip_tile: one tile of the wire-friendly domain-specific processor.
//
// Data flows vertically through four layers, every one as wide as an SPM line:
//
//   spm (NUM_BANKS x BANK_W bits, SPM_DEPTH lines)  <-> NoC port
//        |  line
//   tile_shuffler (pass, or shift left by one word)
//        |  line
//   NUM_VWR x vwr (one line each, cut into SLICES slices of WPS words)
//        |  one slice of every VWR per VFU, point to point
//   SLICES x vfu (Soft-SIMD, DW bits, one local register each)
//
// There are no crossbars: bit j of an SPM line lines up with bit j of every VWR
// and with the VFU that owns that slice, so all connections are short and direct.
//
// Control comes from an external control plane through two command ports, both
// sampled at the rising clock edge:
//  * a line transfer (xfer_op), accepted when xfer_ready is high:
//      XF_SPM_TO_VWR  SPM line xfer_addr -> shuffler -> VWR xfer_dst_vwr. The SPM
//                     read takes one cycle, so the VWR is written at the end of
//                     the following cycle. Back-to-back SPM_TO_VWR is allowed.
//      XF_VWR_TO_SPM  VWR xfer_src_vwr -> shuffler -> SPM line xfer_addr (1 cycle)
//      XF_VWR_TO_VWR  VWR xfer_src_vwr -> shuffler -> VWR xfer_dst_vwr (1 cycle)
//    xfer_shift=1 makes the shuffler move the line one word to the left.
//    xfer_ready is low (the command must be held) when (a) the NoC port uses the
//    single SPM port in the same cycle and the command needs the SPM, or (b) the
//    shuffler is busy writing back the line of the previous cycle's SPM read and
//    the command needs the shuffler for a VWR line.
//  * a VFU instruction (vfu_instr), broadcast to every VFU; see vfu. While
//    vfu_busy is high (multiply in progress) only VFU_NOP may be issued.
// vfu_r shows each VFU's local register. Resets are synchronous (rst_n low).
// The NoC port (noc_*) reads or writes whole SPM lines and always has priority;
// read data appears on noc_rdata with noc_rvalid one cycle later.
// The control plane must not let a VWR line write (a transfer landing in VWR v)
// coincide with a VFU_ST into the same VWR (asserted in vwr).
//
// Structure, widths and default sizes follow the architecture's main
// configuration. The command encoding, the SPM port sharing with the NoC and the
// stall rules are this design's: the control plane is outside the tile.
module dsip_tile
  import dsip_pkg::*;
#(
  parameter int unsigned DW           = DEF_DW,
  parameter int unsigned NUM_BANKS    = DEF_NUM_BANKS,
  parameter int unsigned BANK_W       = DEF_BANK_W,
  parameter int unsigned SPM_DEPTH    = DEF_SPM_DEPTH,
  parameter int unsigned NUM_VWR      = DEF_NUM_VWR,
  parameter int unsigned SLICES       = DEF_SLICES,
  parameter int unsigned WPS          = DEF_WPS,
  parameter bit          HAS_SHUFFLER = 1'b1,
  localparam int unsigned LINE_W      = NUM_BANKS * BANK_W,
  localparam int unsigned AW          = $clog2(SPM_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // line transfers
  input  xfer_op_e            xfer_op,
  input  logic [VSEL_W-1:0]   xfer_src_vwr,
  input  logic [VSEL_W-1:0]   xfer_dst_vwr,
  input  logic [AW-1:0]       xfer_addr,
  input  logic                xfer_shift,
  output logic                xfer_ready,
  // NoC side of the SPM
  input  logic                noc_req,
  input  logic                noc_we,
  input  logic [AW-1:0]       noc_addr,
  input  logic [LINE_W-1:0]   noc_wdata,
  output logic [LINE_W-1:0]   noc_rdata,
  output logic                noc_rvalid,
  // VFU instruction broadcast
  input  vfu_instr_t          vfu_instr,
  output logic                vfu_busy,
  // local register of every VFU, for observation
  output logic [DW-1:0]       vfu_r [SLICES]
);

  if (LINE_W != SLICES * WPS * DW) begin : g_bad_size
    $error("dsip_tile: SPM line (%0d bits) must equal SLICES*WPS*DW", LINE_W);
  end

  // ---------------- transfer control ----------------
  logic needs_spm, needs_shuf_line, accept;
  logic pend_q, pend_shift_q;
  logic [VSEL_W-1:0] pend_vwr_q;

  assign needs_spm       = (xfer_op == XF_SPM_TO_VWR) || (xfer_op == XF_VWR_TO_SPM);
  assign needs_shuf_line = (xfer_op == XF_VWR_TO_SPM) || (xfer_op == XF_VWR_TO_VWR);
  assign xfer_ready      = !(noc_req && needs_spm) && !(pend_q && needs_shuf_line);
  assign accept          = (xfer_op != XF_NONE) && xfer_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_q       <= 1'b0;
      pend_vwr_q   <= '0;
      pend_shift_q <= 1'b0;
      noc_rvalid   <= 1'b0;
    end else begin
      pend_q       <= accept && (xfer_op == XF_SPM_TO_VWR);
      pend_vwr_q   <= xfer_dst_vwr;
      pend_shift_q <= xfer_shift;
      noc_rvalid   <= noc_req && !noc_we;
    end
  end

  // ---------------- SPM ----------------
  logic              spm_en, spm_we;
  logic [AW-1:0]     spm_addr;
  logic [LINE_W-1:0] spm_wdata, spm_rdata, shuf_in, shuf_out;
  logic [LINE_W-1:0] vwr_line [NUM_VWR];

  always_comb begin
    spm_en    = 1'b0;
    spm_we    = 1'b0;
    spm_addr  = xfer_addr;
    spm_wdata = shuf_out;
    if (noc_req) begin
      spm_en    = 1'b1;
      spm_we    = noc_we;
      spm_addr  = noc_addr;
      spm_wdata = noc_wdata;
    end else if (accept && needs_spm) begin
      spm_en    = 1'b1;
      spm_we    = (xfer_op == XF_VWR_TO_SPM);
    end
  end

  spm #(.NUM_BANKS(NUM_BANKS), .BANK_W(BANK_W), .DEPTH(SPM_DEPTH)) u_spm (
    .clk(clk), .en(spm_en), .we(spm_we), .addr(spm_addr), .wdata(spm_wdata), .rdata(spm_rdata)
  );

  assign noc_rdata = spm_rdata;

  // ---------------- shuffler ----------------
  logic [LINE_W-1:0] src_line;
  always_comb begin
    src_line = '0;
    for (int v = 0; v < NUM_VWR; v++)
      if (int'(xfer_src_vwr) == v) src_line = vwr_line[v];
  end
  assign shuf_in = pend_q ? spm_rdata : src_line;

  if (HAS_SHUFFLER) begin : g_shuf
    tile_shuffler #(.DW(DW), .WORDS(SLICES * WPS)) u_shuf (
      .shift(pend_q ? pend_shift_q : xfer_shift), .din(shuf_in), .dout(shuf_out)
    );
  end else begin : g_direct
    // most wire-efficient variant: direct line connection, no rearrangement
    assign shuf_out = shuf_in;
  end

  // ---------------- VWRs and VFUs ----------------
  logic [SLICES-1:0]  vfu_wr_en, vfu_busy_v;
  logic [VSEL_W-1:0]  vfu_wr_vwr  [SLICES];
  logic [WSEL_W-1:0]  vfu_wr_word [SLICES];
  logic [DW-1:0]      vfu_wr_data [SLICES];
  logic [DW-1:0]      slice_rd    [SLICES][NUM_VWR][WPS];

  for (genvar v = 0; v < NUM_VWR; v++) begin : g_vwr
    logic              line_we;
    logic [SLICES-1:0] word_we;

    assign line_we = (pend_q && int'(pend_vwr_q) == v)
                  || (accept && xfer_op == XF_VWR_TO_VWR && int'(xfer_dst_vwr) == v);
    for (genvar s = 0; s < SLICES; s++) begin : g_we
      assign word_we[s] = vfu_wr_en[s] && int'(vfu_wr_vwr[s]) == v;
    end

    vwr #(.DW(DW), .SLICES(SLICES), .WPS(WPS)) u_vwr (
      .clk(clk), .rst_n(rst_n),
      .line_we(line_we), .line_wdata(shuf_out), .line_rdata(vwr_line[v]),
      .word_we(word_we), .word_idx(vfu_wr_word), .word_wdata(vfu_wr_data)
    );
  end

  for (genvar s = 0; s < SLICES; s++) begin : g_vfu
    for (genvar v = 0; v < NUM_VWR; v++) begin : g_v
      for (genvar w = 0; w < WPS; w++) begin : g_w
        assign slice_rd[s][v][w] = vwr_line[v][(s*WPS+w)*DW +: DW];
      end
    end

    vfu #(.DW(DW), .NUM_VWR(NUM_VWR), .WPS(WPS)) u_vfu (
      .clk(clk), .rst_n(rst_n), .instr(vfu_instr), .busy(vfu_busy_v[s]),
      .slice_rdata(slice_rd[s]),
      .wr_en(vfu_wr_en[s]), .wr_vwr(vfu_wr_vwr[s]), .wr_word(vfu_wr_word[s]),
      .wr_data(vfu_wr_data[s]), .r_out(vfu_r[s])
    );
  end

  assign vfu_busy = |vfu_busy_v;

endmodule
