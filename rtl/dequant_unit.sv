// dequant_unit: dequantization after the per-group mpGEMM (paper Fig. 5 right,
// steps 2 and 3).
//
// For one output element and one quantization group G it computes
//   out = acc + s_G * ( sum_{j in G} Q_wj*x_j  -  z_G * sum_{j in G} x_j )
// i.e. the paper's group-wise rewriting of the dot product: the scale and zero
// point are applied once per group instead of once per weight. psum is the
// array's group dot product, sumx the row's activation sum, s_G an FP16 scale
// and z_G a UINT4 zero point. The zero-point product z*sumx is itself formed
// by shift & add (sum_i z[i]*(sumx << i)), in the spirit of the MixPE element;
// the scale needs one FP32 multiplier per unit, used once per group.
//
// PREC_A8 : psum and sumx are integers; the difference is exact, converted to
//           FP32, then scaled.
// PREC_A16: psum and sumx are FP32; z*sumx uses exponent increments
//           (x*2^i) and FP32 adds; the subtraction rounds once.
// The result is accumulated in FP32 (acc is ignored when first_group is set).
// The arithmetic formats and the one-element-per-cycle organisation are this
// design's own; the paper gives only the equation.
//
// Timing: one element per cycle, fully pipelined with one register stage:
// out/out_idx/out_valid appear on the edge after in_valid.
module dequant_unit
  import mixpe_pkg::*;
#(
  parameter prec_e       PREC  = PREC_A8,
  parameter int unsigned IDX_W = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IDX_W-1:0]  in_idx,       // tag carried to the output
  input  logic [PSUM_W-1:0] psum,
  input  logic [PSUM_W-1:0] sumx,
  input  logic [15:0]       scale,        // FP16
  input  logic [WBITS-1:0]  zero,         // UINT4
  input  logic              first_group,
  input  logic [31:0]       acc,          // FP32 running output
  output logic              out_valid,
  output logic [IDX_W-1:0]  out_idx,
  output logic [31:0]       out           // FP32
);

  logic [31:0] diff_fp, scale_fp, scaled, acc_base, sum_fp;

  if (PREC == PREC_A8) begin : g_int
    logic signed [PSUM_W-1:0] zs, diff;
    always_comb begin
      zs = '0;
      for (int i = 0; i < WBITS; i++)
        if (zero[i]) zs = zs + ($signed(sumx) <<< i);
    end
    assign diff = $signed(psum) - zs;
    int_to_fp32 u_cvt (.a(diff), .y(diff_fp));
  end else begin : g_fp
    logic [31:0] zt [WBITS];
    logic [31:0] z01, z23, zs;
    for (genvar i = 0; i < WBITS; i++) begin : g_zt
      assign zt[i] = zero[i] ? fp32_pow2(sumx, 2'(i)) : 32'd0;
    end
    fp32_add u_z01 (.a(zt[0]), .b(zt[1]), .y(z01));
    fp32_add u_z23 (.a(zt[2]), .b(zt[3]), .y(z23));
    fp32_add u_zs  (.a(z01),   .b(z23),   .y(zs));
    fp32_add u_sub (.a(psum),  .b({~zs[31], zs[30:0]}), .y(diff_fp));
  end

  fp16_pow2_scale u_scale_wide (.x(scale), .sh(2'd0), .y(scale_fp));
  fp32_mul        u_mul        (.a(diff_fp), .b(scale_fp), .y(scaled));
  assign acc_base = first_group ? 32'd0 : acc;
  fp32_add        u_acc        (.a(acc_base), .b(scaled), .y(sum_fp));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_idx <= in_idx;
        out     <= sum_fp;
      end
    end
  end

endmodule
