// tb_global_buffer: checks the dual-port global buffer at a reduced depth:
// random reads and writes on both ports against a reference array, including
// data written on one port and read back on the other, and the one-cycle
// read latency (old data on a same-port read-during-write).
module tb_global_buffer;
  localparam int D = 1024;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [9:0] a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0] mem_ref [D];
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(D), .WORD_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ea, eb;
    logic chk_a, chk_b;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 10'(i); a_wdata = $urandom; mem_ref[i] = a_wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a_en = 1; a_we = $urandom % 2; a_addr = 10'($urandom); a_wdata = $urandom;
      b_en = 1; b_we = $urandom % 2; b_addr = 10'($urandom); b_wdata = $urandom;
      if (a_we && b_we && a_addr == b_addr) b_we = 0;
      ea = mem_ref[a_addr]; eb = mem_ref[b_addr];
      chk_a = 1; chk_b = 1;
      @(posedge clk);
      if (a_we) mem_ref[a_addr] = a_wdata;
      if (b_we) mem_ref[b_addr] = b_wdata;
      #1;
      checks += 2;
      if (a_rdata != ea) begin failures++; if (failures < 10) $display("FAIL port A addr %0d", a_addr); end
      if (b_rdata != eb) begin failures++; if (failures < 10) $display("FAIL port B addr %0d", b_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
