// tb_spm_bank: writes random rows to the full 512x64 bank, reads them back in
// random order and checks data and the one-cycle read latency, and that rdata
// holds while the bank is idle or writing.
module tb_spm_bank;
  localparam int W = 512, D = 64;
  logic clk = 0;
  logic en, we;
  logic [5:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  spm_bank #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    en = 0; we = 0; addr = 0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < D; r++) begin
      model[r] = rnd();
      en = 1; we = 1; addr = 6'(r); wdata = model[r];
      @(negedge clk);
    end
    for (int n = 0; n < 200; n++) begin
      int r;
      logic [W-1:0] held;
      r = $urandom_range(0, D-1);
      en = 1; we = 0; addr = 6'(r);
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin failures++; $display("FAIL read row %0d", r); end
      held = rdata;
      en = n[0]; we = 1; addr = 6'($urandom_range(0, D-1)); wdata = rnd();
      if (en) model[addr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL rdata not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
