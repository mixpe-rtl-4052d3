// tb_mixpe_accel: end-to-end test of the accelerator in both precision modes.
//
// One W4A8 and one W4A16 instance, each with a 4 x 4 array, a group size of 32
// (reduced from 128 to keep the simulation short) and a 4 Ki-word global
// buffer, run two jobs each through tb_accel_driver: an 8 x 8 x 96 job (four
// output tiles, three quantization groups per tile) and a 4 x 12 x 32 job
// started right after the first finishes. Every output is compared with the
// reference and the cycle count of each job with the sequencer's schedule.
module tb_mixpe_accel;
  import mixpe_pkg::*;

  localparam int unsigned G = 32, D = 4096;

  logic clk = 0;
  always #5 clk = ~clk;

  logic             rst8, rst16;
  logic             en8, we8, en16, we16, st8, st16, busy8, busy16, done8, done16;
  logic [11:0]      ad8, ad16;
  logic [31:0]      wd8, wd16, rd8, rd16, sg8, sg16, stt8, stt16;
  gemm_cfg_t        cfg8, cfg16;
  logic             fin8, fin16;
  int               c8, c16, f8, f16;

  mixpe_accel #(.PREC(PREC_A8), .GROUP(G), .GB_DEPTH(D)) dut8 (
    .clk, .rst_n(rst8), .ext_en(en8), .ext_we(we8), .ext_addr(ad8), .ext_wdata(wd8),
    .ext_rdata(rd8), .start(st8), .cfg(cfg8), .busy(busy8), .done(done8),
    .stat_groups(sg8), .stat_tiles(stt8));
  tb_accel_driver #(.PREC(PREC_A8), .GROUP(G), .GB_DEPTH(D), .M0(8), .N0(8), .K0(96)) drv8 (
    .clk, .rst_n(rst8), .ext_en(en8), .ext_we(we8), .ext_addr(ad8), .ext_wdata(wd8),
    .ext_rdata(rd8), .start(st8), .cfg(cfg8), .busy(busy8), .done(done8),
    .stat_groups(sg8), .stat_tiles(stt8), .finished(fin8), .checks(c8), .failures(f8));

  mixpe_accel #(.PREC(PREC_A16), .GROUP(G), .GB_DEPTH(D)) dut16 (
    .clk, .rst_n(rst16), .ext_en(en16), .ext_we(we16), .ext_addr(ad16), .ext_wdata(wd16),
    .ext_rdata(rd16), .start(st16), .cfg(cfg16), .busy(busy16), .done(done16),
    .stat_groups(sg16), .stat_tiles(stt16));
  tb_accel_driver #(.PREC(PREC_A16), .GROUP(G), .GB_DEPTH(D), .M0(8), .N0(8), .K0(96)) drv16 (
    .clk, .rst_n(rst16), .ext_en(en16), .ext_we(we16), .ext_addr(ad16), .ext_wdata(wd16),
    .ext_rdata(rd16), .start(st16), .cfg(cfg16), .busy(busy16), .done(done16),
    .stat_groups(sg16), .stat_tiles(stt16), .finished(fin16), .checks(c16), .failures(f16));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16, f8 + f16 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (fin8 && fin16);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16, f8 + f16);
    $finish;
  end
endmodule
