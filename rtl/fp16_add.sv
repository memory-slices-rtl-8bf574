// fp16_add: combinational binary16 adder.
//
// Used by every level of the row adder trees and by the aggregation engine.
// The smaller operand is aligned with three extra bits (guard, round and a
// sticky bit), the significands are added or subtracted, the result is
// normalised and rounded to nearest even.  Subnormal inputs and results are
// flushed to signed zero, overflow gives infinity, inf - inf and NaN inputs
// give NaN (0x7e00).  An exact zero difference is +0.
//
// The paper names adders and adder trees but not their number format beyond
// 16-bit operands; the format and rounding are this design's choice, matched
// to fp16_mul.
module fp16_add
  import ms_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t s
);

  logic       sa, sb;
  logic [4:0] ea, eb;
  logic [9:0] fa, fb;
  assign {sa, ea, fa} = a;
  assign {sb, eb, fb} = b;

  // operand order: x has the larger magnitude
  logic       sx, sy;
  logic [4:0] ex, ey;
  logic [9:0] fx, fy;
  logic       swap;
  assign swap = {eb, fb} > {ea, fa};
  assign {sx, ex, fx} = swap ? b : a;
  assign {sy, ey, fy} = swap ? a : b;

  logic [4:0]  d;
  logic [13:0] mx, my_full, my;
  logic        st_lost;
  logic [14:0] sum;
  logic [3:0]  lz;
  logic [14:0] norm;
  logic signed [6:0] e_n;
  logic [10:0] mant_r;
  logic signed [6:0] e_r;
  logic        guard, sticky;

  always_comb begin
    d       = ex - ey;
    mx      = {1'b1, fx, 3'b000};
    my_full = {1'b1, fy, 3'b000};
    // alignment shift with sticky collection
    if (d > 5'd13) begin
      my      = 14'd0;
      st_lost = 1'b1;
    end else begin
      my      = my_full >> d;
      st_lost = |(my_full & ((14'd1 << d) - 14'd1));
    end
    my[0] = my[0] | st_lost;

    if (sx == sy) sum = {1'b0, mx} + {1'b0, my};
    else          sum = {1'b0, mx} - {1'b0, my};

    // normalise so that the hidden bit sits at bit 13 of norm[13:0]
    lz   = 4'd0;
    norm = sum;
    e_n  = $signed({2'b00, ex});
    if (sum[14]) begin
      norm = {1'b0, sum[14:2], sum[1] | sum[0]};
      e_n  = e_n + 7'sd1;
    end else begin
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 4'(13 - i);
          break;
        end
      end
      norm = sum << lz;
      e_n  = e_n - $signed({3'b000, lz});
    end

    guard  = norm[2];
    sticky = norm[1] | norm[0];
    mant_r = {1'b0, norm[12:3]} + 11'(guard && (sticky || norm[3]));
    e_r    = mant_r[10] ? e_n + 7'sd1 : e_n;

    if ((ea == 5'd31 && fa != 0) || (eb == 5'd31 && fb != 0))
      s = FP16_NAN;
    else if (ea == 5'd31 && eb == 5'd31)
      s = (sa == sb) ? a : FP16_NAN;
    else if (ea == 5'd31)
      s = a;
    else if (eb == 5'd31)
      s = b;
    else if (ea == 5'd0 && eb == 5'd0)
      s = {sa & sb, 15'd0};
    else if (ea == 5'd0)
      s = b;
    else if (eb == 5'd0)
      s = a;
    else if (sum == 15'd0)
      s = FP16_ZERO;
    else if (e_r >= 7'sd31)
      s = {sx, FP16_INF[14:0]};
    else if (e_r <= 7'sd0)
      s = {sx, 15'd0};
    else
      s = {sx, e_r[4:0], mant_r[9:0]};
  end

endmodule
