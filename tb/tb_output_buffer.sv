// tb_output_buffer: checks the output-tile register file: random writes with
// a reference copy, both combinational read ports compared against it, and
// reads of an entry in the cycle it is written returning the old value.
module tb_output_buffer;
  localparam int N = 16;
  logic clk = 0, we = 0;
  logic [3:0] waddr, ra, rb;
  logic [31:0] wdata, da, db;
  logic [31:0] mem_ref [N];
  int checks = 0, failures = 0;

  output_buffer #(.ENTRIES(N), .DW(32)) dut (
    .clk, .we, .waddr, .wdata, .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i); wdata = $urandom; mem_ref[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 4'($urandom); wdata = $urandom;
      ra = 4'($urandom); rb = waddr;
      #1;
      checks += 2;
      if (da != mem_ref[ra]) failures++;
      if (db != mem_ref[rb]) failures++;
      @(posedge clk);
      if (we) mem_ref[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
