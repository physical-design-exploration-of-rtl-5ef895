// tb_softsimd_alu: random add, subtract and arithmetic-shift tests of the
// Soft-SIMD ALU in all six lane configurations, plus carry-boundary corner cases
// (all-ones + 1 must not carry into the next lane), against a lane-by-lane
// integer model.
module tb_softsimd_alu;
  import dsip_pkg::*;
  import softsimd_ref_pkg::*;

  localparam int DW = 192;
  sw_mode_e mode;
  alu_op_e  op;
  logic [DW-1:0] a, b, y;
  logic [SHAMT_W-1:0] shamt;
  int checks = 0, failures = 0;

  softsimd_alu #(.DW(DW)) dut (.mode(mode), .op(op), .a(a), .b(b), .shamt(shamt), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int m, int o, logic [DW-1:0] av, logic [DW-1:0] bv, int sh);
    logic [DW-1:0] exp;
    ref_op_e ro;
    ro = (o == 0) ? R_ADD : (o == 1) ? R_SUB : R_SRA;
    mode = sw_mode_e'(m); op = alu_op_e'(o); a = av; b = bv; shamt = SHAMT_W'(sh);
    #1;
    exp = ref_op(DW, m, ro, av, bv, sh, 0);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL mode=%0d op=%0d sh=%0d\n a=%h\n b=%h\n y=%h\n e=%h", m, o, sh, av, bv, y, exp);
    end
  endtask

  initial begin
    for (int m = 0; m < 6; m++) begin
      check(m, 0, '1, {{(DW-1){1'b0}}, 1'b1} | {DW/3{3'b001}}, 0);  // carries at lane tops
      check(m, 1, '0, {DW/3{3'b001}}, 0);                           // borrows at lane tops
      for (int o = 0; o < 3; o++)
        for (int n = 0; n < 200; n++)
          check(m, o, rand_word(), rand_word(), $urandom_range(0, 63));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
