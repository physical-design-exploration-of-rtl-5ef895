// vfu: Soft-SIMD vector functional unit of one VWR slice.
//
// Each VFU is wired point-to-point to its own slice of every VWR and to nothing
// else. It holds one word-wide local register R, the lowest level of the memory
// hierarchy, whose lanes are interpreted according to the instruction's subword
// mode. Reset is synchronous. All VFUs of a tile receive the same instruction from the control plane.
//
// Operands: A and B are either R (SRC_REG) or word a_word/b_word of this VFU's
// slice in VWR a_vwr/b_vwr (SRC_VWR); VWR words arrive as plain wires.
//   VFU_LD  R <= A                       1 cycle
//   VFU_ADD R <= A + B    per lane       1 cycle
//   VFU_SUB R <= A - B    per lane       1 cycle
//   VFU_SRA R <= A >>> shamt per lane    1 cycle
//   VFU_MUL R <= A * scalar per lane     max(1, number of non-zero CSD digits) cycles
//   VFU_ST  word dst_word of this slice in VWR dst_vwr <= R (wr_* outputs, written
//           at the same clock edge)
// Multiply: the scalar is recoded to CSD. In the issue cycle A is captured as the
// multiplicand and R becomes +-(A << k0) for the lowest non-zero digit k0; in each
// following cycle the next digit k adds or subtracts (multiplicand << k) into R,
// lane by lane, through the same carry chain as ADD/SUB. `busy` is high while
// digits remain; the control plane must issue VFU_NOP until it drops (asserted).
// Products wrap modulo the lane width. R is reset to zero.
//
// The register, the vector add/subtract and shift operations, the vector-by-
// scalar multiply with CSD shift-add, and the one-slice connection follow the
// architecture. The instruction encoding, operand selection, the one-digit-per-
// cycle multiplier and its internal multiplicand register are this design's.
module vfu
  import dsip_pkg::*;
#(
  parameter int unsigned DW      = dsip_pkg::DEF_DW,
  parameter int unsigned NUM_VWR = dsip_pkg::DEF_NUM_VWR,
  parameter int unsigned WPS     = dsip_pkg::DEF_WPS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  vfu_instr_t          instr,
  output logic                busy,
  // this VFU's slice of every VWR
  input  logic [DW-1:0]       slice_rdata [NUM_VWR][WPS],
  output logic                wr_en,
  output logic [VSEL_W-1:0]   wr_vwr,
  output logic [WSEL_W-1:0]   wr_word,
  output logic [DW-1:0]       wr_data,
  output logic [DW-1:0]       r_out
);

  localparam int unsigned SW = DEF_SCALAR_W;
  localparam int unsigned KW = $clog2(SW);

  logic [DW-1:0] r_q, mc_q;
  logic [SW-1:0] dpos_q, dneg_q;
  logic          busy_q;
  sw_mode_e      mode_q;

  // ---------------- operand fetch ----------------
  function automatic logic [DW-1:0] pick(input src_e src, input logic [VSEL_W-1:0] v,
                                         input logic [WSEL_W-1:0] w,
                                         input logic [DW-1:0] r,
                                         input logic [DW-1:0] sl [NUM_VWR][WPS]);
    logic [DW-1:0] res;
    res = '0;
    if (src == SRC_REG) res = r;
    else begin
      for (int i = 0; i < NUM_VWR; i++)
        for (int j = 0; j < WPS; j++)
          if (int'(v) == i && int'(w) == j) res = sl[i][j];
    end
    return res;
  endfunction

  logic [DW-1:0] opa, opb;
  assign opa = pick(instr.a_src, instr.a_vwr, instr.a_word, r_q, slice_rdata);
  assign opb = pick(instr.b_src, instr.b_vwr, instr.b_word, r_q, slice_rdata);

  // ---------------- CSD digits of the scalar ----------------
  logic [SW-1:0] ipos, ineg;
  csd_encoder #(.W(SW)) u_csd (.value(instr.scalar), .pos(ipos), .neg(ineg));

  // lowest remaining non-zero digit
  logic [SW-1:0] cpos, cneg, cdig;
  logic [KW-1:0] k;
  logic          k_valid;
  always_comb begin
    cpos    = busy_q ? dpos_q : ipos;
    cneg    = busy_q ? dneg_q : ineg;
    cdig    = cpos | cneg;
    k       = '0;
    k_valid = 1'b0;
    for (int i = SW - 1; i >= 0; i--)
      if (cdig[i]) begin
        k       = KW'(i);
        k_valid = 1'b1;
      end
  end

  // ---------------- shared datapath ----------------
  sw_mode_e      cur_mode;
  logic [DW-1:0] shl_in, shl_out, alu_a, alu_b, alu_y;
  alu_op_e       alu_op;
  logic          is_mul_issue;

  assign is_mul_issue = !busy_q && (instr.op == VFU_MUL);
  assign cur_mode     = busy_q ? mode_q : instr.mode;
  assign shl_in       = busy_q ? mc_q : opa;

  softsimd_shl #(.DW(DW), .KW(KW)) u_shl (.mode(cur_mode), .a(shl_in), .k(k), .y(shl_out));

  always_comb begin
    alu_a  = opa;
    alu_b  = opb;
    alu_op = ALU_ADD;
    if (busy_q || is_mul_issue) begin
      alu_a  = busy_q ? r_q : '0;
      alu_b  = shl_out;
      alu_op = cneg[k] ? ALU_SUB : ALU_ADD;
    end else begin
      case (instr.op)
        VFU_SUB: alu_op = ALU_SUB;
        VFU_SRA: alu_op = ALU_SRA;
        default: alu_op = ALU_ADD;
      endcase
    end
  end

  softsimd_alu #(.DW(DW)) u_alu (
    .mode(cur_mode), .op(alu_op), .a(alu_a), .b(alu_b), .shamt(instr.shamt), .y(alu_y)
  );

  // ---------------- state ----------------
  logic [SW-1:0] clr;
  always_comb begin
    clr = '0;
    clr[k] = k_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_q    <= '0;
      busy_q <= 1'b0;
      dpos_q <= '0;
      dneg_q <= '0;
      mc_q   <= '0;
      mode_q <= SW_L3;
    end else if (busy_q) begin
      if (k_valid) r_q <= alu_y;
      dpos_q <= dpos_q & ~clr;
      dneg_q <= dneg_q & ~clr;
      busy_q <= |((dpos_q | dneg_q) & ~clr);
    end else begin
      case (instr.op)
        VFU_LD:                   r_q <= opa;
        VFU_ADD, VFU_SUB, VFU_SRA: r_q <= alu_y;
        VFU_MUL: begin
          r_q    <= k_valid ? alu_y : '0;
          mc_q   <= opa;
          mode_q <= instr.mode;
          dpos_q <= ipos & ~clr;
          dneg_q <= ineg & ~clr;
          busy_q <= |((ipos | ineg) & ~clr);
        end
        default: ;
      endcase
    end
  end

  assign busy    = busy_q;
  assign r_out   = r_q;
  assign wr_en   = !busy_q && (instr.op == VFU_ST);
  assign wr_vwr  = instr.dst_vwr;
  assign wr_word = instr.dst_word;
  assign wr_data = r_q;

  // the control plane waits for a multiply to finish
  always_ff @(posedge clk) begin
    if (rst_n && busy_q)
      assert (instr.op == VFU_NOP) else $error("vfu: instruction issued while busy");
  end

endmodule
