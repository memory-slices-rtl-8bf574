// compute_unit: one processing element of the systolic multiplier array.
//
// Reg A holds the streamed (transient) operand: on a shift it takes the value of
// the unit above (or, in row 0, the word read from memory) and its own value
// moves on to the unit below through a_out.  Reg B holds the preloaded operand
// and is written only during the preload of matrix B.  The cycle after a shift
// that brought a valid operand, the pair (Reg A, Reg B) enters the 3-stage
// fp16 multiplier, so a product is ready three enabled clock edges after
// the edge that shifted its operand in.
// 'en' freezes the unit (registers and multiplier pipe) under back-pressure.
//
// Structure (16-bit Reg A, 16-bit Reg B, fp multiplier, Reg A passed down) is
// as drawn in the paper; 'row_en' (rows past the loaded part of B stay
// silent) and 'clear' (drop stale operands between operations) are this
// design's additions.
module compute_unit
  import ms_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,          // pipeline advance
  input  logic  clear,       // invalidate Reg A
  input  logic  shift,       // load Reg A from a_in
  input  logic  row_en,      // this row takes part in the current operation
  input  fp16_t a_in,
  input  logic  a_in_valid,
  output fp16_t a_out,       // Reg A, to the unit below
  output logic  a_out_valid,
  input  logic  b_wr,        // load Reg B
  input  fp16_t b_in,
  output fp16_t b_out,       // Reg B (observability)
  output logic  prod_valid,
  output fp16_t prod
);

  fp16_t reg_a, reg_b;
  logic  va, fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_a <= '0;
      va    <= 1'b0;
      fire  <= 1'b0;
    end else if (clear) begin
      va    <= 1'b0;
      fire  <= 1'b0;
    end else if (en) begin
      if (shift) begin
        reg_a <= a_in;
        va    <= a_in_valid;
      end
      fire <= shift && a_in_valid && row_en;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    reg_b <= '0;
    else if (b_wr) reg_b <= b_in;
  end

  assign a_out       = reg_a;
  assign a_out_valid = va;
  assign b_out       = reg_b;

  fp16_mul u_mul (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .in_valid (fire),
    .a        (reg_a),
    .b        (reg_b),
    .out_valid(prod_valid),
    .p        (prod)
  );

endmodule
