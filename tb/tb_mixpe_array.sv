// tb_mixpe_array: end-to-end test of the output-stationary MixPE arrays.
//
// Builds one W4A8 and one W4A16 array of 4 x 4 elements, feeds both with the
// systolic skew (row r gets element k at cycle k+r, column c at cycle k+c)
// for three random groups of GROUP elements separated by idle cycles, and
// compares every psum with the dot products computed independently (integer
// arithmetic for A8, real arithmetic rounded per MAC for A16). It also checks
// the latency: the last PE's result is in place GROUP+ROWS+COLS-1 clock edges
// after the first element is presented, and not one edge earlier.
module tb_mixpe_array;
  import mixpe_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 4, C = 4, G = 32;

  logic clk = 0, rst_n = 0;
  logic [7:0]  x8  [R];
  logic [15:0] x16 [R];
  logic        av [R], af [R];
  logic [3:0]  w  [C];
  logic [31:0] p8  [R][C];
  logic [31:0] p16 [R][C];

  logic signed [7:0] X8 [R][G];
  logic [15:0] X16 [R][G];
  logic [3:0]  W [C][G];

  int checks = 0, failures = 0;

  mixpe_array #(.PREC(PREC_A8),  .ROWS(R), .COLS(C)) dut8 (
    .clk, .rst_n, .act_in(x8), .act_valid(av), .act_first(af), .w_in(w), .psum(p8));
  mixpe_array #(.PREC(PREC_A16), .ROWS(R), .COLS(C)) dut16 (
    .clk, .rst_n, .act_in(x16), .act_valid(av), .act_first(af), .w_in(w), .psum(p16));

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(input int t);
    for (int r = 0; r < R; r++) begin
      int k;
      k = t - r;
      av[r]  = (k >= 0 && k < G);
      af[r]  = (k == 0);
      x8[r]  = av[r] ? X8[r][k] : 8'($urandom);
      x16[r] = av[r] ? X16[r][k] : 16'($urandom);
    end
    for (int c = 0; c < C; c++) begin
      int k;
      k = t - c;
      w[c] = (k >= 0 && k < G) ? W[c][k] : 4'($urandom);
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin av[r] = 0; af[r] = 0; x8[r] = 0; x16[r] = 0; end
    for (int c = 0; c < C; c++) w[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int grp = 0; grp < 3; grp++) begin
      logic signed [31:0] e8 [R][C];
      logic [31:0] e16 [R][C];
      for (int r = 0; r < R; r++)
        for (int k = 0; k < G; k++) begin
          X8[r][k]  = 8'($urandom);
          X16[r][k] = rand_fp16(5, 20);
        end
      for (int c = 0; c < C; c++)
        for (int k = 0; k < G; k++) W[c][k] = 4'($urandom);
      // a non-zero last product, so the latency check can see it arrive
      W[C-1][G-1] = 4'($urandom) | 4'd1;
      X8[R-1][G-1] = 8'sd77;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          e8[r][c] = 0;
          e16[r][c] = 0;
          for (int k = 0; k < G; k++) begin
            e8[r][c] += 32'(X8[r][k]) * 32'(W[c][k]);
            e16[r][c] = a16_mac(e16[r][c], X16[r][k], W[c][k], k == 0);
          end
        end
      // stream: cycles 0 .. G+R+C-1, check at the cycle before completion
      for (int t = 0; t < G + R + C; t++) begin
        @(negedge clk);
        drive(t);
        if (t == G + R + C - 2) begin
          checks++;
          if (p8[R-1][C-1] == e8[R-1][C-1]) begin
            failures++;
            $display("FAIL last psum ready one cycle early");
          end
        end
        if (t == G + R + C - 1) begin
          checks++;
          if (p8[R-1][C-1] != e8[R-1][C-1]) begin
            failures++;
            $display("FAIL last psum not ready on time");
          end
        end
      end
      @(negedge clk);
      for (int r = 0; r < R; r++) begin av[r] = 0; af[r] = 0; end
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks += 2;
          if (p8[r][c] != e8[r][c]) begin
            failures++;
            $display("FAIL A8 grp %0d psum[%0d][%0d]=%0d exp %0d", grp, r, c,
                     $signed(p8[r][c]), e8[r][c]);
          end
          if (!fp32_same(p16[r][c], e16[r][c])) begin
            failures++;
            $display("FAIL A16 grp %0d psum[%0d][%0d]=%h exp %h", grp, r, c, p16[r][c], e16[r][c]);
          end
        end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
