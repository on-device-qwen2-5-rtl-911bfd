// awq_pe -- one processing element of the MACRO_MAC PE array.
//
// Dequantises one INT4 weight and multiplies it with one input activation:
//   weight_diff       = qweight - zero              (exact, signed -15..15)
//   scaled_activation = activation * fp32(scale)    (FP32 multiply)
//   p_sum             = fp32(weight_diff) * scaled_activation
// so p_sum = (q - z) * s * x, the AWQ-dequantised weight times the
// activation. The scale arrives in FP16 and is widened exactly to FP32.
//
// Interface and timing: purely combinational; the MACRO_MAC registers its
// inputs (the PE array rows) and its outputs (the p_sum bank).
//
// The three operations and their order (zero subtracted from the qweight,
// activation multiplied by the scale, then the two products multiplied) and
// FP32 arithmetic follow the paper. Rounding and subnormal handling are those
// of awq_pkg's FP32 operators.
module awq_pe
  import awq_pkg::*;
(
  input  int4_t qweight,
  input  int4_t zero,
  input  fp16_t scale,
  input  fp32_t activation,
  output fp32_t p_sum
);

  logic signed [4:0] weight_diff;
  fp32_t             scaled_activation;

  always_comb begin
    weight_diff       = $signed({1'b0, qweight}) - $signed({1'b0, zero});
    scaled_activation = fp32_mul(activation, fp16_to_fp32(scale));
    p_sum             = fp32_mul(int5_to_fp32(weight_diff), scaled_activation);
  end

endmodule
