// tile_exerciser: control-plane and NoC model that takes one dsip_tile through a
// complete operation and checks it against a reference model.
//
// Connected to a tile of the same parameters, it
//   1. fills SPM lines from the NoC port,
//   2. moves lines SPM -> VWR (plain and shifted by one word), VWR -> VWR and
//      VWR -> SPM, and checks through a VFU load that an SPM line lands in its
//      VWR at the second clock edge after the command, not the first,
//   3. runs a Soft-SIMD program on all VFUs in every lane mode (load, add,
//      subtract, shift, CSD multiply, store, with random words of each slice),
//      checking every VFU register after each instruction and the multiply
//      cycle count,
//   4. writes VWRs back to the SPM and reads the lines out over the NoC.
// It provokes both stalls of the transfer port (NoC priority on the SPM port;
// shuffler busy with an SPM read) and counts every mechanism; one that never
// happened is a failure. `done` rises when it has finished; `checks` and
// `failures` then hold its totals.
module tile_exerciser
  import dsip_pkg::*;
  import softsimd_ref_pkg::*;
#(
  parameter int unsigned DW           = DEF_DW,
  parameter int unsigned NUM_BANKS    = DEF_NUM_BANKS,
  parameter int unsigned BANK_W       = DEF_BANK_W,
  parameter int unsigned SPM_DEPTH    = DEF_SPM_DEPTH,
  parameter int unsigned NUM_VWR      = DEF_NUM_VWR,
  parameter int unsigned SLICES       = DEF_SLICES,
  parameter int unsigned WPS          = DEF_WPS,
  parameter bit          HAS_SHUFFLER = 1'b1,
  parameter string       NAME         = "tile",
  localparam int unsigned LW          = NUM_BANKS * BANK_W,
  localparam int unsigned AW          = $clog2(SPM_DEPTH)
) (
  input  logic              clk,
  output logic              rst_n,
  output xfer_op_e          xfer_op,
  output logic [VSEL_W-1:0] xfer_src_vwr,
  output logic [VSEL_W-1:0] xfer_dst_vwr,
  output logic [AW-1:0]     xfer_addr,
  output logic              xfer_shift,
  input  logic              xfer_ready,
  output logic              noc_req,
  output logic              noc_we,
  output logic [AW-1:0]     noc_addr,
  output logic [LW-1:0]     noc_wdata,
  input  logic [LW-1:0]     noc_rdata,
  input  logic              noc_rvalid,
  output vfu_instr_t        vfu_instr,
  input  logic              vfu_busy,
  input  logic [DW-1:0]     vfu_r [SLICES],
  output logic              done,
  output int                checks,
  output int                failures
);

  localparam int NV = NUM_VWR, S = SLICES, NW = SLICES * WPS;

  logic [LW-1:0] spm_m [SPM_DEPTH];
  logic [LW-1:0] vwr_m [NV];
  logic [DW-1:0] r_m [S];
  int n_stall_noc = 0, n_stall_shuf = 0, n_shift = 0, n_mul_multi = 0, n_v2v = 0, n_v2s = 0,
      n_s2v = 0, n_noc_rd = 0;
  int mode_used [6];

  function automatic logic [LW-1:0] rnd_line();
    logic [LW-1:0] v;
    for (int i = 0; i < (LW + 31) / 32; i++)
      for (int j = 0; j < 32; j++) if (i*32 + j < LW) v[i*32+j] = 1'($urandom_range(0, 1));
    return v;
  endfunction

  function automatic logic [LW-1:0] shuf(logic [LW-1:0] l, logic sh);
    logic [LW-1:0] o;
    if (!sh || !HAS_SHUFFLER) return l;
    o = '0;
    for (int w = 1; w < NW; w++) o[w*DW +: DW] = l[(w-1)*DW +: DW];
    return o;
  endfunction

  function automatic logic [DW-1:0] word_of(logic [LW-1:0] l, int s, int w);
    return l[(s*WPS+w)*DW +: DW];
  endfunction

  task automatic fail(string s);
    failures++;
    $display("FAIL [%s] %s", NAME, s);
  endtask

  task automatic idle();
    xfer_op = XF_NONE; noc_req = 0; noc_we = 0; vfu_instr = '0;
  endtask

  task automatic noc_write(int a, logic [LW-1:0] d);
    noc_req = 1; noc_we = 1; noc_addr = AW'(a); noc_wdata = d;
    @(negedge clk); idle();
    spm_m[a] = d;
  endtask

  task automatic noc_read_check(int a);
    noc_req = 1; noc_we = 0; noc_addr = AW'(a);
    @(negedge clk); idle();
    checks++;
    if (!noc_rvalid || noc_rdata !== spm_m[a]) fail($sformatf("NoC read line %0d", a));
    n_noc_rd++;
  endtask

  // issue one transfer, holding it while xfer_ready is low
  task automatic xfer(xfer_op_e op, int src, int dst, int a, logic sh);
    xfer_op = op; xfer_src_vwr = VSEL_W'(src); xfer_dst_vwr = VSEL_W'(dst);
    xfer_addr = AW'(a); xfer_shift = sh;
    #1;
    while (!xfer_ready) begin
      if (noc_req) n_stall_noc++; else n_stall_shuf++;
      @(negedge clk);
      noc_req = 0;
      #1;
    end
    @(negedge clk);
    xfer_op = XF_NONE;
    if (sh && HAS_SHUFFLER) n_shift++;
    case (op)
      XF_SPM_TO_VWR: begin vwr_m[dst] = shuf(spm_m[a], sh); n_s2v++; end
      XF_VWR_TO_SPM: begin spm_m[a] = shuf(vwr_m[src], sh); n_v2s++; end
      XF_VWR_TO_VWR: begin vwr_m[dst] = shuf(vwr_m[src], sh); n_v2v++; end
      default: ;
    endcase
  endtask

  // broadcast one VFU instruction and wait until it has completed
  task automatic vfu_op(vfu_op_e op, int m, src_e as, int av, src_e bs, int bv, int dv,
                        int sh, int sc);
    int cycles, expc, aw, bw, dw_;
    logic [DW-1:0] a, b;
    aw = $urandom_range(0, WPS-1); bw = $urandom_range(0, WPS-1); dw_ = $urandom_range(0, WPS-1);
    vfu_instr = '{op: op, mode: sw_mode_e'(m), a_src: as, a_vwr: VSEL_W'(av), a_word: WSEL_W'(aw),
                  b_src: bs, b_vwr: VSEL_W'(bv), b_word: WSEL_W'(bw), dst_vwr: VSEL_W'(dv),
                  dst_word: WSEL_W'(dw_), shamt: SHAMT_W'(sh), scalar: DEF_SCALAR_W'(sc)};
    @(negedge clk);
    vfu_instr = '0;
    cycles = 1;
    while (vfu_busy) begin @(negedge clk); cycles++; end
    mode_used[m]++;
    for (int s = 0; s < S; s++) begin
      a = (as == SRC_REG) ? r_m[s] : word_of(vwr_m[av], s, aw);
      b = (bs == SRC_REG) ? r_m[s] : word_of(vwr_m[bv], s, bw);
      case (op)
        VFU_LD:  r_m[s] = a;
        VFU_ADD: r_m[s] = DW'(ref_op(DW, m, R_ADD, word_t'(a), word_t'(b), 0, 0));
        VFU_SUB: r_m[s] = DW'(ref_op(DW, m, R_SUB, word_t'(a), word_t'(b), 0, 0));
        VFU_SRA: r_m[s] = DW'(ref_op(DW, m, R_SRA, word_t'(a), word_t'(b), sh, 0));
        VFU_MUL: r_m[s] = DW'(ref_op(DW, m, R_MUL, word_t'(a), word_t'(b), 0, longint'(sc)));
        VFU_ST:  vwr_m[dv][(s*WPS+dw_)*DW +: DW] = r_m[s];
        default: ;
      endcase
      checks++;
      if (vfu_r[s] !== r_m[s]) fail($sformatf("VFU %0d register after %s mode %0d", s, op.name(), m));
    end
    expc = (op == VFU_MUL && csd_weight(longint'(sc)) > 1) ? csd_weight(longint'(sc)) : 1;
    checks++;
    if (cycles != expc) fail($sformatf("%s took %0d cycles, expected %0d", op.name(), cycles, expc));
    if (op == VFU_MUL && cycles > 1) n_mul_multi++;
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; rst_n = 0;
    idle();
    xfer_src_vwr = '0; xfer_dst_vwr = '0; xfer_addr = '0; xfer_shift = 0;
    noc_addr = '0; noc_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++;
    if (vfu_busy || !xfer_ready) fail("state after reset");

    // 1. fill SPM lines 0..15 over the NoC
    for (int a = 0; a < 16; a++) noc_write(a, rnd_line());

    // 2. line transfers. An SPM line lands in its VWR at the second edge: a load
    //    issued right after the first edge still sees the old VWR contents.
    xfer(XF_SPM_TO_VWR, 0, 0, 15, 0);                     // VWR 0 = line 15
    @(negedge clk);
    vfu_op(VFU_LD, 0, SRC_VWR, 0, SRC_REG, 0, 0, 0, 0);   // R = line 15 words
    xfer_op = XF_SPM_TO_VWR; xfer_dst_vwr = 0; xfer_addr = 0; xfer_shift = 0;
    @(negedge clk); idle();
    vfu_instr = '0;
    vfu_instr.op = VFU_LD;
    @(negedge clk); idle();
    for (int s = 0; s < S; s++) begin
      checks++;
      if (vfu_r[s] !== word_of(vwr_m[0], s, 0)) fail("VWR written too early");
    end
    vwr_m[0] = spm_m[0]; n_s2v++;
    vfu_op(VFU_LD, 0, SRC_VWR, 0, SRC_REG, 0, 0, 0, 0);   // now sees the new line
    // fill every VWR; back-to-back SPM reads, some through the shifter
    for (int v = 0; v < NV; v++) xfer(XF_SPM_TO_VWR, 0, v, v + 1, v[0]);
    // VWR -> VWR straight after an SPM read: waits one cycle for the shuffler
    xfer(XF_SPM_TO_VWR, 0, 0, 7, 0);
    xfer(XF_VWR_TO_VWR, 0, 3 % NV, 0, 1);
    // NoC access in the same cycle as an SPM transfer: the NoC wins
    noc_req = 1; noc_we = 0; noc_addr = 5;
    xfer(XF_SPM_TO_VWR, 0, NV > 1 ? 1 : 0, 8, 0);
    @(negedge clk);

    // 3. Soft-SIMD programs on all VFUs in every lane mode
    for (int m = 0; m < 6; m++) begin
      vfu_op(VFU_LD,  m, SRC_VWR, 0, SRC_REG, 0, 0, 0, 0);
      vfu_op(VFU_ADD, m, SRC_REG, 0, SRC_VWR, 1 % NV, 0, 0, 0);
      vfu_op(VFU_SUB, m, SRC_VWR, 2 % NV, SRC_REG, 0, 0, 0, 0);
      vfu_op(VFU_SRA, m, SRC_REG, 0, SRC_REG, 0, 0, m + 1, 0);
      vfu_op(VFU_MUL, m, SRC_VWR, 3 % NV, SRC_REG, 0, 0, 0, 93 - 37 * m);  // 93 = 1011101b
      vfu_op(VFU_ADD, m, SRC_REG, 0, SRC_VWR, 4 % NV, 0, 0, 0);
      vfu_op(VFU_ST,  m, SRC_REG, 0, SRC_REG, 0, (m % 2 ? 5 : 4) % NV, 0, 0);
      vfu_op(VFU_MUL, m, SRC_VWR, 5 % NV, SRC_REG, 0, 0, 0, 0);    // zero scalar: one cycle
      vfu_op(VFU_MUL, m, SRC_VWR, 4 % NV, SRC_REG, 0, 0, 0, -128);
      vfu_op(VFU_ST,  m, SRC_REG, 0, SRC_REG, 0, 3 % NV, 0, 0);
    end

    // 4. write every VWR back (one shifted) and read the lines over the NoC
    for (int v = 0; v < NV; v++) xfer(XF_VWR_TO_SPM, v, 0, 20 + v, v == NV - 1);
    for (int a = 0; a < 20 + NV; a++) if (a < 16 || a >= 20) noc_read_check(a);

    // every mechanism must have happened
    foreach (mode_used[m]) begin checks++; if (mode_used[m] == 0) fail($sformatf("mode %0d unused", m)); end
    checks++; if (n_stall_noc == 0)  fail("no NoC-priority stall");
    checks++; if (n_stall_shuf == 0) fail("no shuffler stall");
    checks++; if (HAS_SHUFFLER && n_shift == 0) fail("no shifted transfer");
    checks++; if (n_mul_multi == 0)  fail("no multi-cycle multiply");
    checks++; if (n_v2v == 0 || n_v2s == 0 || n_s2v == 0 || n_noc_rd == 0) fail("transfer kind unused");
    $display("[%s] stalls: noc=%0d shuffler=%0d; shifted=%0d; multi-cycle mul=%0d; s2v=%0d v2s=%0d v2v=%0d noc_rd=%0d",
             NAME, n_stall_noc, n_stall_shuf, n_shift, n_mul_multi, n_s2v, n_v2s, n_v2v, n_noc_rd);
    done = 1;
  end
endmodule
