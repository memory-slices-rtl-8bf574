// activation_unit: the f(x) of the aggregation engine, applied to a finished sum.
//
// Combinational.  Four functions, chosen per operation:
//   ACT_NONE      f(x) = x
//   ACT_RELU      f(x) = max(x, 0)                (negative values give +0)
//   ACT_HSIGMOID  f(x) = clamp(x/4 + 1/2, 0, 1)   (piecewise-linear sigmoid)
//   ACT_HTANH     f(x) = clamp(x, -1, 1)          (piecewise-linear tanh)
// x/4 is an exponent decrement (flushed to zero below the normal range), the
// +1/2 uses an fp16 adder, the clamps compare sign and magnitude bits.
//
// The paper says only that the aggregation engine applies "other required
// functions", e.g. activation functions, once the last partial sum has been
// added; LSTMs need sigmoid and tanh.  The piecewise-linear forms are this
// design's choice, made so that f(x) costs one adder and no tables.
module activation_unit
  import ms_pkg::*;
(
  input  act_e  func,
  input  fp16_t x,
  output fp16_t y
);

  fp16_t quarter, hs_sum;
  always_comb begin
    if (x[14:10] == 5'd31)     quarter = x;                        // inf / NaN
    else if (x[14:10] <= 5'd2) quarter = {x[15], 15'd0};
    else                       quarter = {x[15], x[14:10] - 5'd2, x[9:0]};
  end

  fp16_add u_add (.a(quarter), .b(FP16_HALF), .s(hs_sum));

  always_comb begin
    case (func)
      ACT_RELU:     y = x[15] ? FP16_ZERO : x;
      ACT_HSIGMOID: begin
        if (hs_sum[15])                   y = FP16_ZERO;
        else if (hs_sum[14:0] >= 15'h3c00) y = FP16_ONE;
        else                              y = hs_sum;
      end
      ACT_HTANH:    y = (x[14:0] >= 15'h3c00) ? {x[15], 15'h3c00} : x;
      default:      y = x;
    endcase
  end

endmodule
