// tb_lane_buffer: checks the banked edge buffer in both uses: INT8 lanes
// (activation buffer, 4 elements per word) and UINT4 lanes (weight buffer,
// 8 elements per word). Random words are written to every lane, then every
// lane reads a different, randomly chosen element each cycle; the element
// unpacked from a reference copy of the words must appear one cycle later.
module tb_lane_buffer;
  localparam int L = 4, E = 128;

  logic clk = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // activation-style instance: 8-bit elements
  logic        a_we;  logic [1:0] a_wl; logic [4:0] a_wa; logic [31:0] a_wd;
  logic        a_re [L]; logic [6:0] a_ri [L]; logic [7:0] a_rd [L];
  lane_buffer #(.LANES(L), .ELEMS(E), .EW(8), .WORD_W(32)) dut_a (
    .clk, .wr_en(a_we), .wr_lane(a_wl), .wr_addr(a_wa), .wr_data(a_wd),
    .rd_en(a_re), .rd_idx(a_ri), .rd_data(a_rd));

  // weight-style instance: 4-bit elements
  logic        w_we;  logic [1:0] w_wl; logic [3:0] w_wa; logic [31:0] w_wd;
  logic        w_re [L]; logic [6:0] w_ri [L]; logic [3:0] w_rd [L];
  lane_buffer #(.LANES(L), .ELEMS(E), .EW(4), .WORD_W(32)) dut_w (
    .clk, .wr_en(w_we), .wr_lane(w_wl), .wr_addr(w_wa), .wr_data(w_wd),
    .rd_en(w_re), .rd_idx(w_ri), .rd_data(w_rd));

  logic [31:0] ref_a [L][32];
  logic [31:0] ref_w [L][16];

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_we = 0; w_we = 0;
    for (int l = 0; l < L; l++) begin a_re[l] = 0; w_re[l] = 0; a_ri[l] = 0; w_ri[l] = 0; end
    for (int l = 0; l < L; l++)
      for (int i = 0; i < 32; i++) begin
        @(negedge clk);
        a_we = 1; a_wl = 2'(l); a_wa = 5'(i); a_wd = $urandom; ref_a[l][i] = a_wd;
        w_we = (i < 16); w_wl = 2'(l); w_wa = 4'(i); w_wd = $urandom;
        if (i < 16) ref_w[l][i] = w_wd;
      end
    @(negedge clk);
    a_we = 0; w_we = 0;
    for (int n = 0; n < 500; n++) begin
      int ia [L], iw [L];
      for (int l = 0; l < L; l++) begin
        ia[l] = int'($urandom % E); iw[l] = int'($urandom % E);
        a_re[l] = 1; a_ri[l] = 7'(ia[l]);
        w_re[l] = 1; w_ri[l] = 7'(iw[l]);
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        a_re[l] = 0; w_re[l] = 0;
        checks += 2;
        if (a_rd[l] != ref_a[l][ia[l] / 4][(ia[l] % 4) * 8 +: 8]) begin
          failures++;
          if (failures < 10) $display("FAIL act lane %0d idx %0d", l, ia[l]);
        end
        if (w_rd[l] != ref_w[l][iw[l] / 8][(iw[l] % 8) * 4 +: 4]) begin
          failures++;
          if (failures < 10) $display("FAIL wgt lane %0d idx %0d", l, iw[l]);
        end
      end
      // data holds while no read is enabled
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (a_rd[l] != ref_a[l][ia[l] / 4][(ia[l] % 4) * 8 +: 8]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
