// act_group_sum: per-row sum of the activations of one quantization group.
//
// Dequantizing after the group dot product needs, besides sum_j Q_wj*x_j, the
// plain activation sum sum_j x_j of the group (it is multiplied by the zero
// point). The paper leaves this O(1)-per-group term to "software or other
// specialized computation units"; this unit is the design's own way of
// providing it in hardware. It taps the activation stream at the left edge of
// the array, so it sees exactly the elements row r feeds into the PEs, with
// the same valid/first flags: a valid element flagged first restarts the sum.
//
// PREC_A8 : signed INT8 inputs, 32-bit integer sums.
// PREC_A16: FP16 inputs, widened exactly to FP32 and summed with an FP32 adder.
// Timing: sum[r] includes an element on the clock edge after it is presented.
module act_group_sum
  import mixpe_pkg::*;
#(
  parameter prec_e       PREC = PREC_A8,
  parameter int unsigned ROWS = 4,
  localparam int unsigned AW  = act_width(PREC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     act_in    [ROWS],
  input  logic              act_valid [ROWS],
  input  logic              act_first [ROWS],
  output logic [PSUM_W-1:0] sum       [ROWS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [PSUM_W-1:0] nxt;

    if (PREC == PREC_A8) begin : g_int
      assign nxt = (act_first[r] ? PSUM_W'(0) : sum[r])
                 + PSUM_W'(signed'(act_in[r]));
    end else begin : g_fp
      logic [31:0] wide, base;
      fp16_pow2_scale u_widen (.x(act_in[r]), .sh(2'd0), .y(wide));
      assign base = act_first[r] ? 32'd0 : sum[r];
      fp32_add u_add (.a(base), .b(wide), .y(nxt));
    end

    always_ff @(posedge clk) begin
      if (!rst_n)
        sum[r] <= '0;
      else if (act_valid[r])
        sum[r] <= nxt;
    end
  end

endmodule
