// tb_accel_driver: test driver and checker for one mixpe_accel instance.
//
// For each of NJOBS jobs it generates random activations (INT8, or FP16 of
// moderate range), UINT4 weights and per-(channel, group) FP16 scales and
// UINT4 zero points, packs them into the global-buffer layout through the
// external port, starts the job, waits for done, reads every output back and
// compares it with a reference computed here from the quantization equations
// (integer or real arithmetic, rounded to FP32 at the points the hardware
// rounds). It also checks the busy-cycle count of each job against the
// sequencer's schedule, the tile and group counters, and counts how often the
// mechanisms of the design were exercised (multi-group accumulation, several
// tiles, zero-point correction, back-to-back jobs); one never seen is a failure.
// Job sizes: job 0 is M0 x N0 x K0, job 1 (if any) is ROWS x 3*COLS x GROUP.
module tb_accel_driver
  import mixpe_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter prec_e       PREC     = PREC_A8,
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned GROUP    = 128,
  parameter int unsigned GB_DEPTH = 65536,
  parameter int unsigned M0       = 8,
  parameter int unsigned N0       = 8,
  parameter int unsigned K0       = 256,
  parameter int unsigned NJOBS    = 2,
  localparam int unsigned GB_AW   = $clog2(GB_DEPTH)
) (
  input  logic             clk,
  output logic             rst_n,
  output logic             ext_en,
  output logic             ext_we,
  output logic [GB_AW-1:0] ext_addr,
  output logic [31:0]      ext_wdata,
  input  logic [31:0]      ext_rdata,
  output logic             start,
  output gemm_cfg_t        cfg,
  input  logic             busy,
  input  logic             done,
  input  logic [31:0]      stat_groups,
  input  logic [31:0]      stat_tiles,
  output logic             finished,
  output int               checks,
  output int               failures
);

  localparam int unsigned AW    = (PREC == PREC_A8) ? 8 : 16;
  localparam int unsigned EPW_X = 32 / AW;
  localparam int unsigned MM    = (M0 > ROWS) ? M0 : ROWS;
  localparam int unsigned MN    = (N0 > 3 * COLS) ? N0 : 3 * COLS;
  localparam int unsigned MK    = (K0 > GROUP) ? K0 : GROUP;
  localparam int unsigned MG    = MK / GROUP;

  logic [15:0] X [MM][MK];      // activations (INT8 in [7:0] or FP16)
  logic [3:0]  W [MN][MK];
  logic [15:0] S [MN][MG];
  logic [3:0]  Z [MN][MG];
  logic [31:0] Y [MM][MN];

  // mechanism counters
  int n_multi_group = 0, n_multi_tile = 0, n_zero_corr = 0, n_jobs_done = 0;
  int n_negative = 0;

  initial begin
    checks = 0; failures = 0; finished = 0;
    rst_n = 0; ext_en = 0; ext_we = 0; ext_addr = '0; ext_wdata = '0; start = 0; cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < NJOBS; job++) begin
      int M, N, K, NG;
      int xw, ww, qw;
      logic [31:0] g0, t0;
      int busy_cycles, exp_cycles;
      M = (job == 0) ? int'(M0) : int'(ROWS);
      N = (job == 0) ? int'(N0) : int'(3 * COLS);
      K = (job == 0) ? int'(K0) : int'(GROUP);
      NG = K / int'(GROUP);
      foreach (X[i, k]) X[i][k] = (PREC == PREC_A8) ? 16'($urandom % 256) : rand_fp16(8, 18);
      foreach (W[j, k]) W[j][k] = 4'($urandom);
      foreach (S[j, g]) S[j][g] = rand_fp16(8, 16);
      foreach (Z[j, g]) Z[j][g] = 4'($urandom);
      Z[0][0] = 4'd0;
      Z[N-1][NG-1] = 4'd15;

      xw = M * K / int'(EPW_X);
      ww = N * K / 8;
      qw = N * NG;
      cfg.m = 16'(M); cfg.n = 16'(N); cfg.k = 16'(K);
      cfg.x_base = 32'd0;
      cfg.w_base = 32'(xw);
      cfg.q_base = 32'(xw + ww);
      cfg.o_base = 32'(xw + ww + qw);
      if (xw + ww + qw + M * N > int'(GB_DEPTH)) $fatal(1, "job does not fit the global buffer");

      // load the global buffer through the external port
      for (int i = 0; i < M; i++)
        for (int w = 0; w < K / int'(EPW_X); w++) begin
          logic [31:0] word;
          for (int e = 0; e < int'(EPW_X); e++)
            word[e * AW +: AW] = X[i][w * int'(EPW_X) + e][AW-1:0];
          @(negedge clk);
          ext_en = 1; ext_we = 1; ext_addr = GB_AW'(cfg.x_base + 32'(i * K / int'(EPW_X) + w));
          ext_wdata = word;
        end
      for (int j = 0; j < N; j++)
        for (int w = 0; w < K / 8; w++) begin
          logic [31:0] word;
          for (int e = 0; e < 8; e++) word[e * 4 +: 4] = W[j][w * 8 + e];
          @(negedge clk);
          ext_en = 1; ext_we = 1; ext_addr = GB_AW'(cfg.w_base + 32'(j * K / 8 + w));
          ext_wdata = word;
        end
      for (int j = 0; j < N; j++)
        for (int g = 0; g < NG; g++) begin
          @(negedge clk);
          ext_en = 1; ext_we = 1; ext_addr = GB_AW'(cfg.q_base + 32'(j * NG + g));
          ext_wdata = {12'd0, Z[j][g], S[j][g]};
        end
      @(negedge clk);
      ext_en = 0; ext_we = 0;

      // reference
      for (int i = 0; i < M; i++)
        for (int j = 0; j < N; j++) begin
          logic [31:0] acc;
          acc = 0;
          for (int g = 0; g < NG; g++) begin
            logic [31:0] d, sc;
            real s, base;
            s = fp16_to_real(S[j][g]);
            base = (g == 0) ? 0.0 : fp32_to_real(acc);
            if (PREC == PREC_A8) begin
              longint ps, sx;
              ps = 0; sx = 0;
              for (int k = g * int'(GROUP); k < (g + 1) * int'(GROUP); k++) begin
                ps += longint'($signed(X[i][k][7:0])) * longint'(W[j][k]);
                sx += longint'($signed(X[i][k][7:0]));
              end
              d = rnd32(real'(ps - longint'(Z[j][g]) * sx));
            end else begin
              logic [31:0] ps, sx, zs;
              real zt [4];
              ps = 0; sx = 0;
              for (int k = g * int'(GROUP); k < (g + 1) * int'(GROUP); k++) begin
                ps = a16_mac(ps, X[i][k], W[j][k], k == g * int'(GROUP));
                sx = rnd32(((k == g * int'(GROUP)) ? 0.0 : fp32_to_real(sx)) + fp16_to_real(X[i][k]));
              end
              for (int b = 0; b < 4; b++) zt[b] = Z[j][g][b] ? fp32_to_real(sx) * real'(1 << b) : 0.0;
              zs = rnd32(fp32_to_real(rnd32(zt[0] + zt[1])) + fp32_to_real(rnd32(zt[2] + zt[3])));
              d  = rnd32(fp32_to_real(ps) - fp32_to_real(zs));
            end
            sc  = rnd32(fp32_to_real(d) * s);
            acc = rnd32(base + fp32_to_real(sc));
            if (Z[j][g] != 0) n_zero_corr++;
          end
          Y[i][j] = acc;
          if (acc[31]) n_negative++;
        end

      // run
      g0 = stat_groups; t0 = stat_tiles;
      start = 1;
      @(negedge clk);
      start = 0;
      busy_cycles = 0;
      while (!done) begin
        if (busy) busy_cycles++;
        @(negedge clk);
      end
      n_jobs_done++;
      exp_cycles = (M / int'(ROWS)) * (N / int'(COLS)) *
                   (NG * (int'(ROWS * GROUP / EPW_X) + int'(COLS * GROUP / 8) + int'(COLS)
                          + int'(GROUP + ROWS + COLS) + int'(ROWS * COLS)) + int'(ROWS * COLS));
      checks += 3;
      if (busy_cycles != exp_cycles) begin
        failures++;
        $display("FAIL job %0d: %0d busy cycles, schedule gives %0d", job, busy_cycles, exp_cycles);
      end
      if (stat_tiles - t0 != 32'((M / int'(ROWS)) * (N / int'(COLS)))) begin
        failures++;
        $display("FAIL job %0d: tile counter", job);
      end
      if (stat_groups - g0 != 32'((M / int'(ROWS)) * (N / int'(COLS)) * NG)) begin
        failures++;
        $display("FAIL job %0d: group counter", job);
      end
      if (NG > 1) n_multi_group++;
      if (M * N > int'(ROWS * COLS)) n_multi_tile++;

      // read back and compare
      for (int i = 0; i < M; i++)
        for (int j = 0; j < N; j++) begin
          @(negedge clk);
          ext_en = 1; ext_we = 0; ext_addr = GB_AW'(cfg.o_base + 32'(i * N + j));
          @(negedge clk);
          ext_en = 0;
          checks++;
          if (!fp32_same(ext_rdata, Y[i][j])) begin
            failures++;
            if (failures < 10)
              $display("FAIL job %0d Y[%0d][%0d] = %h, expected %h", job, i, j, ext_rdata, Y[i][j]);
          end
        end
      $display("job %0d: %0dx%0dx%0d, %0d groups/tile, %0d cycles", job, M, N, K, NG, busy_cycles);
    end

    checks += 4;
    if (n_multi_group == 0) begin failures++; $display("FAIL never accumulated over groups"); end
    if (n_multi_tile == 0)  begin failures++; $display("FAIL never ran several tiles"); end
    if (n_zero_corr == 0)   begin failures++; $display("FAIL never applied a zero point"); end
    if (NJOBS > 1 && n_jobs_done < 2) begin failures++; $display("FAIL no back-to-back jobs"); end
    $display("mechanisms: multi-group jobs %0d, multi-tile jobs %0d, zero-point corrections %0d, jobs %0d, negative outputs %0d",
             n_multi_group, n_multi_tile, n_zero_corr, n_jobs_done, n_negative);
    finished = 1;
  end

endmodule
