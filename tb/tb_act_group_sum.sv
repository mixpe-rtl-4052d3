// tb_act_group_sum: checks the per-row group activation sums in both modes.
// Random INT8 and FP16 activation streams with idle cycles and group starts
// go to a 4-row A8 unit and a 4-row A16 unit; an independent model (integer
// sum for A8, real sum rounded to FP32 after each addition for A16) predicts
// each row's sum after every clock edge.
module tb_act_group_sum;
  import mixpe_pkg::*;
  import tb_fp_pkg::*;
  localparam int R = 4;

  logic clk = 0, rst_n = 0;
  logic [7:0]  x8  [R];
  logic [15:0] x16 [R];
  logic        v [R], f [R];
  logic [31:0] s8 [R], s16 [R];
  logic signed [31:0] m8 [R];
  logic [31:0] m16 [R];
  int checks = 0, failures = 0;

  act_group_sum #(.PREC(PREC_A8),  .ROWS(R)) dut8  (.clk, .rst_n, .act_in(x8),  .act_valid(v), .act_first(f), .sum(s8));
  act_group_sum #(.PREC(PREC_A16), .ROWS(R)) dut16 (.clk, .rst_n, .act_in(x16), .act_valid(v), .act_first(f), .sum(s16));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) begin v[r] = 0; f[r] = 0; x8[r] = 0; x16[r] = 0; m8[r] = 0; m16[r] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) begin
        v[r] = ($urandom % 5) != 0;
        f[r] = v[r] && (n == 0 || ($urandom % 30) == 0);
        x8[r] = 8'($urandom);
        x16[r] = rand_fp16(0, 24);
        if (v[r]) begin
          m8[r]  = (f[r] ? 0 : m8[r]) + 32'($signed(x8[r]));
          m16[r] = rnd32((f[r] ? 0.0 : fp32_to_real(m16[r])) + fp16_to_real(x16[r]));
        end
      end
      @(posedge clk); #1;
      for (int r = 0; r < R; r++) begin
        checks += 2;
        if (s8[r] != m8[r]) begin
          failures++;
          if (failures < 10) $display("FAIL A8 row %0d got %0d exp %0d", r, $signed(s8[r]), m8[r]);
        end
        if (!fp32_same(s16[r], m16[r])) begin
          failures++;
          if (failures < 10) $display("FAIL A16 row %0d got %h exp %h", r, s16[r], m16[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
