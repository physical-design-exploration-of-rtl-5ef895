// tb_tile_shuffler: pass and one-word left shift of random lines, checked word
// by word (word i of the output equals word i-1 of the input, word 0 is zero).
module tb_tile_shuffler;
  localparam int DW = 192, WORDS = 16, LW = DW * WORDS;
  logic shift;
  logic [LW-1:0] din, dout;
  int checks = 0, failures = 0;

  tile_shuffler #(.DW(DW), .WORDS(WORDS)) dut (.shift(shift), .din(din), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int i = 0; i < LW / 32; i++) din[i*32 +: 32] = $urandom();
      shift = n[0];
      #1;
      for (int w = 0; w < WORDS; w++) begin
        logic [DW-1:0] exp;
        exp = !shift ? din[w*DW +: DW] : (w == 0) ? '0 : din[(w-1)*DW +: DW];
        checks++;
        if (dout[w*DW +: DW] !== exp) begin
          failures++;
          $display("FAIL shift=%0d word %0d", shift, w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
