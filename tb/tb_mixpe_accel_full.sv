// tb_mixpe_accel_full: the accelerator at its default configuration (W4A8,
// 4 x 4 array, group size 128, 64 Ki-word global buffer) running an
// 8 x 8 x 512 job (four output tiles of four groups each) and a 4 x 12 x 128
// job back to back, checked end to end by tb_accel_driver.
module tb_mixpe_accel_full;
  import mixpe_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_n, ext_en, ext_we, start, busy, done, fin;
  logic [15:0] ext_addr;
  logic [31:0] ext_wdata, ext_rdata, stat_groups, stat_tiles;
  gemm_cfg_t   cfg;
  int          checks, failures;

  mixpe_accel dut (
    .clk, .rst_n, .ext_en, .ext_we, .ext_addr, .ext_wdata, .ext_rdata,
    .start, .cfg, .busy, .done, .stat_groups, .stat_tiles);

  tb_accel_driver #(.PREC(PREC_A8), .GROUP(128), .GB_DEPTH(65536),
                    .M0(8), .N0(8), .K0(512)) drv (
    .clk, .rst_n, .ext_en, .ext_we, .ext_addr, .ext_wdata, .ext_rdata,
    .start, .cfg, .busy, .done, .stat_groups, .stat_tiles,
    .finished(fin), .checks, .failures);

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
