// global_buffer: the accelerator's on-chip global buffer.
//
// A dual-port memory of DEPTH words of WORD_W bits. Port A faces the outside
// (the path to off-chip memory, or a host loading tensors and reading
// results); port B is used by the accelerator's controller to fill the
// activation and weight buffers, fetch quantization parameters and write back
// output tiles. The paper shows a global buffer between memory and the array
// but gives no size or organisation: the 64 Ki x 32-bit (256 KiB) default and
// the two independent synchronous ports are this design's own choices.
//
// Timing: both ports are synchronous; a read returns data on the edge after
// the request (read-during-write on the same port returns the old word).
// Writes to one address from both ports in the same cycle are not allowed.
module global_buffer #(
  parameter int unsigned DEPTH  = 65536,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  // port A: external side
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  // port B: controller side
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [WORD_W-1:0] b_wdata,
  output logic [WORD_W-1:0] b_rdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  // one process for both ports so the array has a single writer
  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

  // both ports writing one word in the same cycle is a usage error
  assert property (@(posedge clk) !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("global_buffer: simultaneous writes to address %0d", a_addr);

endmodule
