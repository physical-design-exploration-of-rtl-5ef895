// tb_dsip_tile: end-to-end test of one tile at its default (full) size: six
// 512x64 SPM banks, six VWRs of sixteen 192-bit slices, sixteen VFUs and the
// shuffler. The tile is instantiated without parameter overrides and driven by
// tile_exerciser, which models the control plane and the NoC and checks every
// result against a reference model (see that module for the sequence).
module tb_dsip_tile;
  import dsip_pkg::*;

  localparam int LW = DEF_NUM_BANKS * DEF_BANK_W, AW = $clog2(DEF_SPM_DEPTH);

  logic clk = 0, rst_n;
  xfer_op_e xfer_op;
  logic [VSEL_W-1:0] xfer_src_vwr, xfer_dst_vwr;
  logic [AW-1:0] xfer_addr, noc_addr;
  logic xfer_shift, xfer_ready, noc_req, noc_we, noc_rvalid, vfu_busy;
  logic [LW-1:0] noc_wdata, noc_rdata;
  vfu_instr_t vfu_instr;
  logic [DEF_DW-1:0] vfu_r [DEF_SLICES];
  logic done;
  int checks, failures;

  always #5 clk = ~clk;

  dsip_tile dut (.*);
  tile_exerciser #(.NAME("E")) u_ex (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
