// mixpe_a8_pe: the W4A8 mixed-precision processing element (MixPE-A8).
//
// A UINT4 weight w and an INT8 activation x are multiplied without a
// multiplier, following the paper:  w*x = sum_{i=0..3} w[i] * (x << i).
// Each weight bit gates one shifted copy of the sign-extended activation
// (<<0, <<1, <<2, <<3); a two-level adder tree ((<<0 + <<1) + (<<2 + <<3))
// adds them, and the result is added to the partial-sum register. This
// structure (INT4 and INT8 input registers, four shifters, adder tree, psum)
// is the one drawn in the paper's PE figure.
//
// Output-stationary dataflow: the activation register feeds the PE on the
// right, the weight register the PE below, and psum keeps this PE's output.
// The design's own choices: the activation travels with a valid flag and a
// "first" flag; a valid element marked first starts a new group (psum is
// loaded with the product instead of accumulating), so no separate clear
// cycle is needed. Invalid cycles leave psum unchanged.
//
// Timing: inputs are registered on the rising edge; the product of the
// registered operands reaches psum on the following edge (2 cycles from
// input to psum). Active-low synchronous reset clears every register.
module mixpe_a8_pe
  import mixpe_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // activation from the left neighbour
  input  logic signed [7:0]        act_in,
  input  logic                     act_valid_in,
  input  logic                     act_first_in,
  // weight from the upper neighbour
  input  logic        [WBITS-1:0]  w_in,
  // to the right neighbour
  output logic signed [7:0]        act_out,
  output logic                     act_valid_out,
  output logic                     act_first_out,
  // to the lower neighbour
  output logic        [WBITS-1:0]  w_out,
  // stationary partial sum
  output logic signed [PSUM_W-1:0] psum
);

  logic signed [7:0]       x_q;
  logic                    v_q, f_q;
  logic       [WBITS-1:0]  w_q;
  logic signed [11:0]      sh [4];      // gated shifted activations
  logic signed [12:0]      add01, add23;
  logic signed [13:0]      tree;

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

  // shift & gate: bit i of the weight selects x << i
  always_comb begin
    for (int i = 0; i < 4; i++)
      sh[i] = w_q[i] ? (12'(x_q) <<< i) : 12'sd0;
  end

  assign add01 = 13'(sh[0]) + 13'(sh[1]);
  assign add23 = 13'(sh[2]) + 13'(sh[3]);
  assign tree  = 14'(add01) + 14'(add23);

  always_ff @(posedge clk) begin
    if (!rst_n)
      psum <= '0;
    else if (v_q)
      psum <= (f_q ? PSUM_W'(0) : psum) + PSUM_W'(tree);
  end

  assign act_out       = x_q;
  assign act_valid_out = v_q;
  assign act_first_out = f_q;
  assign w_out         = w_q;

endmodule
