// tb_spm: the six-bank scratchpad as one 3072-bit line memory. Writes every line
// with random data, reads lines back in random order, and checks each bank's
// part of the line separately (one shared address reaches all banks).
module tb_spm;
  localparam int NB = 6, BW = 512, D = 64, LW = NB * BW;
  logic clk = 0;
  logic en, we;
  logic [5:0] addr;
  logic [LW-1:0] wdata, rdata;
  logic [LW-1:0] model [D];
  int checks = 0, failures = 0;

  spm #(.NUM_BANKS(NB), .BANK_W(BW), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < D; r++) begin
      for (int i = 0; i < LW / 32; i++) model[r][i*32 +: 32] = $urandom();
      en = 1; we = 1; addr = 6'(r); wdata = model[r];
      @(negedge clk);
    end
    for (int n = 0; n < 100; n++) begin
      int r;
      r = $urandom_range(0, D-1);
      en = 1; we = 0; addr = 6'(r);
      @(negedge clk);
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (rdata[k*BW +: BW] !== model[r][k*BW +: BW]) begin
          failures++; $display("FAIL row %0d bank %0d", r, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
