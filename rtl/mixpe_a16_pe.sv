// mixpe_a16_pe: the W4A16 mixed-precision processing element (MixPE-A16).
//
// Same topology as the W4A8 element, with the shifters replaced by
// power-of-two scalers that act on the exponent of the FP16 activation:
//   w*x = sum_{i=0..3} w[i] * (x * 2^i).
// Each weight bit gates one fp16_pow2_scale output (x * 2^i, exact in FP32);
// a two-level FP32 adder tree adds the four terms and the result is added to
// the FP32 partial-sum register. The shift&add topology follows the paper; the
// FP32 format of the terms, tree and psum is this design's own choice (the
// paper only says outputs keep a higher precision than the weights).
//
// Output-stationary dataflow, valid/first flags and timing are identical to
// mixpe_a8_pe: operands are registered on one edge, psum is updated on the
// next; a valid element flagged first restarts the accumulation.
module mixpe_a16_pe
  import mixpe_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [15:0]          act_in,        // FP16 activation from the left
  input  logic                 act_valid_in,
  input  logic                 act_first_in,
  input  logic [WBITS-1:0]     w_in,          // UINT4 weight from above
  output logic [15:0]          act_out,
  output logic                 act_valid_out,
  output logic                 act_first_out,
  output logic [WBITS-1:0]     w_out,
  output logic [PSUM_W-1:0]    psum           // FP32 stationary partial sum
);

  logic [15:0]      x_q;
  logic             v_q, f_q;
  logic [WBITS-1:0] w_q;
  logic [31:0]      scaled [4];
  logic [31:0]      term   [4];
  logic [31:0]      add01, add23, tree, acc_in, acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_q <= '0;
      v_q <= 1'b0;
      f_q <= 1'b0;
      w_q <= '0;
    end else begin
      x_q <= act_in;
      v_q <= act_valid_in;
      f_q <= act_first_in;
      w_q <= w_in;
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_scale
    fp16_pow2_scale u_scale (.x(x_q), .sh(2'(i)), .y(scaled[i]));
    assign term[i] = w_q[i] ? scaled[i] : 32'd0;
  end

  fp32_add u_add01 (.a(term[0]), .b(term[1]), .y(add01));
  fp32_add u_add23 (.a(term[2]), .b(term[3]), .y(add23));
  fp32_add u_tree  (.a(add01),   .b(add23),   .y(tree));

  assign acc_in = f_q ? 32'd0 : psum;
  fp32_add u_acc   (.a(acc_in),  .b(tree),    .y(acc));

  always_ff @(posedge clk) begin
    if (!rst_n)
      psum <= '0;
    else if (v_q)
      psum <= acc;
  end

  assign act_out       = x_q;
  assign act_valid_out = v_q;
  assign act_first_out = f_q;
  assign w_out         = w_q;

endmodule
