// tb_vfu: one VFU with two VWRs and two words per slice. The testbench plays the
// VWR slices (a small word array that VFU_ST writes into) and issues random
// instruction streams in all lane modes. After every instruction it compares the
// local register with a lane-by-lane integer model, checks store data and
// addresses, and checks that a multiply takes max(1, CSD weight of the scalar)
// cycles, with busy high for all but the last.
module tb_vfu;
  import dsip_pkg::*;
  import softsimd_ref_pkg::*;

  localparam int DW = 192, NV = 2, WPS = 2;
  logic clk = 0, rst_n = 0;
  vfu_instr_t instr;
  logic busy, wr_en;
  logic [VSEL_W-1:0] wr_vwr;
  logic [WSEL_W-1:0] wr_word;
  logic [DW-1:0] wr_data, r_out;
  logic [DW-1:0] slice_rdata [NV][WPS];
  logic [DW-1:0] r_model;
  int checks = 0, failures = 0, n_mul = 0, n_mul_multi = 0;

  vfu #(.DW(DW), .NUM_VWR(NV), .WPS(WPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] operand(src_e s, int v, int w);
    return (s == SRC_REG) ? r_model : slice_rdata[v][w];
  endfunction

  task automatic run_one();
    vfu_op_e op;
    int m, av, aw, bv, bw, sh, cycles, expect_cycles;
    logic [DW-1:0] a, b;
    logic signed [DEF_SCALAR_W-1:0] sc;
    src_e as, bs;
    op = vfu_op_e'($urandom_range(1, 6));
    m  = $urandom_range(0, 5);
    av = $urandom_range(0, NV-1); aw = $urandom_range(0, WPS-1);
    bv = $urandom_range(0, NV-1); bw = $urandom_range(0, WPS-1);
    as = src_e'($urandom_range(0, 1)); bs = src_e'($urandom_range(0, 1));
    sh = $urandom_range(0, 63);
    sc = DEF_SCALAR_W'($urandom());
    a = operand(as, av, aw); b = operand(bs, bv, bw);
    instr = '{op: op, mode: sw_mode_e'(m), a_src: as, a_vwr: VSEL_W'(av), a_word: WSEL_W'(aw),
              b_src: bs, b_vwr: VSEL_W'(bv), b_word: WSEL_W'(bw),
              dst_vwr: VSEL_W'(bv), dst_word: WSEL_W'(bw), shamt: SHAMT_W'(sh), scalar: sc};
    #1;
    if (op == VFU_ST) begin
      checks++;
      if (!wr_en || wr_data !== r_model || int'(wr_vwr) != bv || int'(wr_word) != bw) begin
        failures++; $display("FAIL store");
      end
    end
    @(negedge clk);
    instr.op = VFU_NOP;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    case (op)
      VFU_LD:  r_model = a;
      VFU_ADD: r_model = ref_op(DW, m, R_ADD, a, b, 0, 0);
      VFU_SUB: r_model = ref_op(DW, m, R_SUB, a, b, 0, 0);
      VFU_SRA: r_model = ref_op(DW, m, R_SRA, a, b, sh, 0);
      VFU_MUL: r_model = ref_op(DW, m, R_MUL, a, b, 0, longint'(sc));
      VFU_ST:  slice_rdata[bv][bw] = r_model;
      default: ;
    endcase
    expect_cycles = (op == VFU_MUL) ? ((csd_weight(longint'(sc)) > 0) ? csd_weight(longint'(sc)) : 1) : 1;
    if (op == VFU_MUL) begin n_mul++; if (expect_cycles > 1) n_mul_multi++; end
    checks++;
    if (r_out !== r_model || cycles != expect_cycles) begin
      failures++;
      $display("FAIL op=%s mode=%0d sc=%0d cycles=%0d/%0d\n r=%h\n e=%h", op.name(), m, sc,
               cycles, expect_cycles, r_out, r_model);
    end
  endtask

  initial begin
    instr = '0;
    for (int v = 0; v < NV; v++) for (int w = 0; w < WPS; w++) slice_rdata[v][w] = rand_word();
    r_model = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    checks++;
    if (r_out !== '0 || busy) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 1500; n++) run_one();
    checks++;
    if (n_mul_multi == 0) begin failures++; $display("FAIL no multi-cycle multiply"); end
    $display("multiplies %0d (multi-cycle %0d)", n_mul, n_mul_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
