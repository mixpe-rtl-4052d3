// tb_workload_llm: linear-layer slices shaped like the LLM workloads the
// MixPE accelerator targets, at batch size 8 and group size 128.
//
//  * W4A8 instance at the default configuration: an OPT-6.7B projection
//    slice, 8 tokens x 8 output channels x k = 4096 (32 groups per tile).
//  * W4A16 instance (only PREC changed): a LLaMA-2-13B projection slice,
//    8 x 8 x k = 5120 (40 groups per tile).
//  * Two more default W4A8 instances for the ends of the batch-size range
//    (2 to 32) of the OPT-6.7B dequantization study: batch 2, zero-padded to
//    the array height of 4 rows, and batch 32 (8 row tiles), both 8 output
//    channels x k = 4096.
// The full layers (n = 4096 or 5120 output channels and more) are these
// slices repeated over further output channels; the simulation runs one
// slice of each. Every output is checked against the reference model in
// tb_accel_driver, together with the cycle count of each job.
module tb_workload_llm;
  import mixpe_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic             rst8, rst16;
  logic             en8, we8, en16, we16, st8, st16, busy8, busy16, done8, done16;
  logic [15:0]      ad8, ad16;
  logic [31:0]      wd8, wd16, rd8, rd16, sg8, sg16, stt8, stt16;
  gemm_cfg_t        cfg8, cfg16;
  logic             fin8, fin16;
  int               c8, c16, f8, f16;
  logic             rstb[2], enb[2], web[2], stb[2], busyb[2], doneb[2], finb[2];
  logic [15:0]      adb[2];
  logic [31:0]      wdb[2], rdb[2], sgb[2], sttb[2];
  gemm_cfg_t        cfgb[2];
  int               cb[2], fb[2];

  mixpe_accel dut8 (
    .clk, .rst_n(rst8), .ext_en(en8), .ext_we(we8), .ext_addr(ad8), .ext_wdata(wd8),
    .ext_rdata(rd8), .start(st8), .cfg(cfg8), .busy(busy8), .done(done8),
    .stat_groups(sg8), .stat_tiles(stt8));
  tb_accel_driver #(.PREC(PREC_A8), .M0(8), .N0(8), .K0(4096), .NJOBS(1)) drv8 (
    .clk, .rst_n(rst8), .ext_en(en8), .ext_we(we8), .ext_addr(ad8), .ext_wdata(wd8),
    .ext_rdata(rd8), .start(st8), .cfg(cfg8), .busy(busy8), .done(done8),
    .stat_groups(sg8), .stat_tiles(stt8), .finished(fin8), .checks(c8), .failures(f8));

  mixpe_accel #(.PREC(PREC_A16)) dut16 (
    .clk, .rst_n(rst16), .ext_en(en16), .ext_we(we16), .ext_addr(ad16), .ext_wdata(wd16),
    .ext_rdata(rd16), .start(st16), .cfg(cfg16), .busy(busy16), .done(done16),
    .stat_groups(sg16), .stat_tiles(stt16));
  tb_accel_driver #(.PREC(PREC_A16), .M0(8), .N0(8), .K0(5120), .NJOBS(1)) drv16 (
    .clk, .rst_n(rst16), .ext_en(en16), .ext_we(we16), .ext_addr(ad16), .ext_wdata(wd16),
    .ext_rdata(rd16), .start(st16), .cfg(cfg16), .busy(busy16), .done(done16),
    .stat_groups(sg16), .stat_tiles(stt16), .finished(fin16), .checks(c16), .failures(f16));

  for (genvar b = 0; b < 2; b++) begin : g_batch
    localparam int unsigned MB = (b == 0) ? 4 : 32;
    mixpe_accel dut (
      .clk, .rst_n(rstb[b]), .ext_en(enb[b]), .ext_we(web[b]), .ext_addr(adb[b]),
      .ext_wdata(wdb[b]), .ext_rdata(rdb[b]), .start(stb[b]), .cfg(cfgb[b]), .busy(busyb[b]),
      .done(doneb[b]), .stat_groups(sgb[b]), .stat_tiles(sttb[b]));
    tb_accel_driver #(.PREC(PREC_A8), .M0(MB), .N0(8), .K0(4096), .NJOBS(1)) drv (
      .clk, .rst_n(rstb[b]), .ext_en(enb[b]), .ext_we(web[b]), .ext_addr(adb[b]),
      .ext_wdata(wdb[b]), .ext_rdata(rdb[b]), .start(stb[b]), .cfg(cfgb[b]), .busy(busyb[b]),
      .done(doneb[b]), .stat_groups(sgb[b]), .stat_tiles(sttb[b]), .finished(finb[b]),
      .checks(cb[b]), .failures(fb[b]));
  end

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + cb[0] + cb[1], f8 + f16 + fb[0] + fb[1] + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (fin8 && fin16 && finb[0] && finb[1]);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + cb[0] + cb[1],
             f8 + f16 + fb[0] + fb[1]);
    $finish;
  end
endmodule
