// fp16_mul: pipelined binary16 multiplier of a compute unit.
//
// Three register stages give the 3-cycle multiplier latency of the slice's
// compute array: stage 1 registers the 22-bit significand product, the
// exponent sum and the sign; stage 2 normalises and rounds to nearest even;
// stage 3 is the output register.  The whole pipe advances when 'en' is high,
// so the array can be frozen under back-pressure without losing products.
//
// Arithmetic: IEEE binary16 with subnormal inputs and results flushed to
// signed zero, overflow to infinity, and NaN (0x7e00) for 0 x inf or a NaN
// input.  The paper gives the operand width (16 bit) and the latency (3
// cycles); the rounding and the flush-to-zero policy are this design's choice.
module fp16_mul
  import ms_pkg::*;
#(
  parameter int unsigned LATENCY = 3  // fixed by the structure; kept as a documented constant
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  fp16_t a,
  input  fp16_t b,
  output logic  out_valid,
  output fp16_t p
);

  // ---------------------------------------------------------------- stage 1
  logic        sa, sb;
  logic [4:0]  ea, eb;
  logic [9:0]  fa, fb;
  logic        za, zb, ia, ib, na, nb;
  assign {sa, ea, fa} = a;
  assign {sb, eb, fb} = b;
  assign za = (ea == 5'd0);
  assign zb = (eb == 5'd0);
  assign ia = (ea == 5'd31) && (fa == '0);
  assign ib = (eb == 5'd31) && (fb == '0);
  assign na = (ea == 5'd31) && (fa != '0);
  assign nb = (eb == 5'd31) && (fb != '0);

  logic        v1, s1, zero1, inf1, nan1;
  logic [21:0] prod1;
  logic signed [7:0] e1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; s1 <= 1'b0; zero1 <= 1'b0; inf1 <= 1'b0; nan1 <= 1'b0;
      prod1 <= '0; e1 <= '0;
    end else if (en) begin
      v1    <= in_valid;
      s1    <= sa ^ sb;
      nan1  <= na || nb || (ia && zb) || (ib && za);
      inf1  <= ia || ib;
      zero1 <= za || zb;
      prod1 <= {1'b1, fa} * {1'b1, fb};
      e1    <= $signed({3'b000, ea}) + $signed({3'b000, eb}) - 8'sd15;
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic [9:0]  mant_n;
  logic        guard, sticky;
  logic signed [7:0] e_n;
  logic [10:0] mant_r;   // one extra bit for the rounding carry
  logic signed [7:0] e_r;
  fp16_t       res2;

  always_comb begin
    if (prod1[21]) begin
      mant_n = prod1[20:11];
      guard  = prod1[10];
      sticky = |prod1[9:0];
      e_n    = e1 + 8'sd1;
    end else begin
      mant_n = prod1[19:10];
      guard  = prod1[9];
      sticky = |prod1[8:0];
      e_n    = e1;
    end
    mant_r = {1'b0, mant_n} + 11'(guard && (sticky || mant_n[0]));
    e_r    = mant_r[10] ? e_n + 8'sd1 : e_n;
    if (nan1)                  res2 = FP16_NAN;
    else if (inf1)             res2 = {s1, FP16_INF[14:0]};
    else if (zero1)            res2 = {s1, 15'd0};
    else if (e_r >= 8'sd31)    res2 = {s1, FP16_INF[14:0]};
    else if (e_r <= 8'sd0)     res2 = {s1, 15'd0};
    else                       res2 = {s1, e_r[4:0], mant_r[9:0]};
  end

  logic  v2;
  fp16_t r2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; r2 <= '0;
    end else if (en) begin
      v2 <= v1; r2 <= res2;
    end
  end

  // ---------------------------------------------------------------- stage 3
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; p <= '0;
    end else if (en) begin
      out_valid <= v2; p <= r2;
    end
  end

endmodule
