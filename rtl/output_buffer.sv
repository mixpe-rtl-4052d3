// output_buffer: holds the output tile of the systolic array while it is being
// accumulated over quantization groups.
//
// One FP32 entry per processing element (ENTRIES = ROWS*COLS). The
// dequantization unit reads an entry (rd_a), adds the dequantized group result
// and writes it back (write port); once every group of the tile is done the
// controller drains the tile to the global buffer through the second read
// port (rd_b). The paper names an output buffer below the array; this
// register-file organisation with two asynchronous read ports and one write
// port is the design's own.
//
// Timing: writes land on the rising edge; reads are combinational.
module output_buffer #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned DW      = 32,
  localparam int unsigned AW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr_a,
  output logic [DW-1:0] rdata_a,
  input  logic [AW-1:0] raddr_b,
  output logic [DW-1:0] rdata_b
);

  logic [DW-1:0] mem [ENTRIES];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];

endmodule
