// tb_csd_encoder: exhaustive check of the CSD recoder for every 8-bit scalar.
// For each value it rebuilds the number from the digit masks, checks that no
// digit is both +1 and -1, that no two adjacent digits are non-zero, and that
// the digit count matches an independent iterative CSD count.
module tb_csd_encoder;
  import softsimd_ref_pkg::*;

  localparam int W = 8;
  logic [W-1:0] value, pos, neg;
  int checks = 0, failures = 0;

  csd_encoder #(.W(W)) dut (.value(value), .pos(pos), .neg(neg));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -(1 << (W-1)); v < (1 << (W-1)); v++) begin
      int rebuilt;
      value = W'(v);
      #1;
      rebuilt = 0;
      for (int i = 0; i < W; i++) rebuilt += (int'(pos[i]) - int'(neg[i])) << i;
      checks++;
      if (rebuilt != v || (pos & neg) != 0 || ((pos | neg) & ((pos | neg) >> 1)) != 0
          || $countones(pos | neg) != csd_weight(v)) begin
        failures++;
        $display("FAIL value=%0d pos=%b neg=%b rebuilt=%0d", v, pos, neg, rebuilt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
