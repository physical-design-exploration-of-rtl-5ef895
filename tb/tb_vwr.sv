// tb_vwr: wide line writes and narrow per-slice word writes of a VWR with two
// words per slice (so word selection inside a slice is exercised), checked
// against a line model: a narrow write changes only the addressed word of the
// addressed slice; idle cycles keep the line.
module tb_vwr;
  localparam int DW = 192, S = 8, WPS = 2, LW = DW * S * WPS;
  logic clk = 0, rst_n = 0;
  logic line_we;
  logic [LW-1:0] line_wdata, line_rdata, model;
  logic [S-1:0] word_we;
  logic [dsip_pkg::WSEL_W-1:0] word_idx [S];
  logic [DW-1:0] word_wdata [S];
  int checks = 0, failures = 0;

  vwr #(.DW(DW), .SLICES(S), .WPS(WPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    checks++;
    if (line_rdata !== model) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    line_we = 0; word_we = '0; line_wdata = '0;
    for (int s = 0; s < S; s++) begin word_idx[s] = '0; word_wdata[s] = '0; end
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      // wide write
      for (int i = 0; i < LW / 32; i++) line_wdata[i*32 +: 32] = $urandom();
      line_we = 1; model = line_wdata;
      @(negedge clk); line_we = 0;
      compare("wide write");
      // narrow writes on a random subset of slices
      for (int s = 0; s < S; s++) begin
        word_we[s]  = $urandom_range(0, 1);
        word_idx[s] = dsip_pkg::WSEL_W'($urandom_range(0, WPS-1));
        for (int i = 0; i < DW / 32; i++) word_wdata[s][i*32 +: 32] = $urandom();
        if (word_we[s]) model[(s*WPS+int'(word_idx[s]))*DW +: DW] = word_wdata[s];
      end
      @(negedge clk); word_we = '0;
      compare("narrow write");
      @(negedge clk);
      compare("hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
