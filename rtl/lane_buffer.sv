// lane_buffer: banked on-chip buffer feeding one edge of the systolic array.
//
// Used twice in the accelerator: as the activation buffer (one lane per array
// row, INT8 or FP16 elements) and as the weight buffer (one lane per array
// column, packed UINT4 elements). The paper names both buffers; their
// organisation is this design's own. Each lane is a separate bank holding
// ELEMS elements of EW bits (one quantization group), packed WORD_W/EW per word
// with element 0 in the least significant bits, exactly as the words arrive
// from the global buffer.
//
// Write port: one WORD_W word per cycle into (wr_lane, wr_addr).
// Read ports: every lane has its own element index, so the controller can
// apply the systolic skew (lane l reads element t - l at cycle t). The read is
// synchronous: rd_data[l] holds the element one cycle after rd_en[l].
module lane_buffer #(
  parameter int unsigned LANES  = 4,
  parameter int unsigned ELEMS  = 128,
  parameter int unsigned EW     = 8,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned EPW   = WORD_W / EW,
  localparam int unsigned DEPTH = ELEMS / EPW,
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned IW    = (ELEMS > 1) ? $clog2(ELEMS) : 1
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [LW-1:0]     wr_lane,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en   [LANES],
  input  logic [IW-1:0]     rd_idx  [LANES],
  output logic [EW-1:0]     rd_data [LANES]
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [WORD_W-1:0] mem [DEPTH];
    logic [WORD_W-1:0] word_q;
    logic [IW-1:0]     idx_q;
    logic [IW-1:0]     sub;               // element position inside the word

    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == LW'(l))
        mem[wr_addr] <= wr_data;
      if (rd_en[l]) begin
        word_q <= mem[AW'(rd_idx[l] / IW'(EPW))];
        idx_q  <= rd_idx[l];
      end
    end

    assign sub        = idx_q % IW'(EPW);
    assign rd_data[l] = word_q[int'(sub) * EW +: EW];
  end

endmodule
