// mixpe_array: output-stationary systolic array of MixPE elements.
//
// ROWS x COLS processing elements (4 x 4 in the paper's evaluation). Row r
// receives the activations of output row r at its left edge and passes them
// to the right; column c receives the UINT4 weights of output channel c at its
// top edge and passes them down. PE (r,c) therefore accumulates
//   psum[r][c] = sum_k x[r][k] * w[c][k]
// and keeps it in place (output stationary), as in the paper's array figure.
// PREC selects the element: mixpe_a8_pe (INT8 activations, integer psum) or
// mixpe_a16_pe (FP16 activations, FP32 psum).
//
// Timing: the feeder must skew its inputs, presenting element k of row r at
// cycle k + r and element k of column c at cycle k + c; PE (r,c) then sees the
// matching pair at cycle k + r + c + 1 and its psum holds the group result two
// cycles after its last pair entered. The valid/first flags travel with the
// activations (first marks the first element of a quantization group).
// The paper's figure also prints adder symbols between PEs whose role the text
// does not explain; they are not modelled here.
module mixpe_array
  import mixpe_pkg::*;
#(
  parameter prec_e       PREC = PREC_A8,
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  localparam int unsigned AW  = act_width(PREC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     act_in    [ROWS],
  input  logic              act_valid [ROWS],
  input  logic              act_first [ROWS],
  input  logic [WBITS-1:0]  w_in      [COLS],
  output logic [PSUM_W-1:0] psum      [ROWS][COLS]
);

  // horizontal links: index c is the input of column c, COLS the right edge
  logic [AW-1:0]    h_act   [ROWS][COLS+1];
  logic             h_valid [ROWS][COLS+1];
  logic             h_first [ROWS][COLS+1];
  // vertical links: index r is the input of row r, ROWS the bottom edge
  logic [WBITS-1:0] v_w     [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign h_act[r][0]   = act_in[r];
    assign h_valid[r][0] = act_valid[r];
    assign h_first[r][0] = act_first[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign v_w[0][c] = w_in[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (PREC == PREC_A8) begin : g_a8
        mixpe_a8_pe u_pe (
          .clk, .rst_n,
          .act_in       (h_act[r][c]),
          .act_valid_in (h_valid[r][c]),
          .act_first_in (h_first[r][c]),
          .w_in         (v_w[r][c]),
          .act_out      (h_act[r][c+1]),
          .act_valid_out(h_valid[r][c+1]),
          .act_first_out(h_first[r][c+1]),
          .w_out        (v_w[r+1][c]),
          .psum         (psum[r][c])
        );
      end else begin : g_a16
        mixpe_a16_pe u_pe (
          .clk, .rst_n,
          .act_in       (h_act[r][c]),
          .act_valid_in (h_valid[r][c]),
          .act_first_in (h_first[r][c]),
          .w_in         (v_w[r][c]),
          .act_out      (h_act[r][c+1]),
          .act_valid_out(h_valid[r][c+1]),
          .act_first_out(h_first[r][c+1]),
          .w_out        (v_w[r+1][c]),
          .psum         (psum[r][c])
        );
      end
    end
  end

endmodule
