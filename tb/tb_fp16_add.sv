// tb_fp16_add: checks the binary16 adder against the real-arithmetic reference.
//
// Directed cases cover exact cancellation, zero operands, infinity, overflow
// and rounding ties; then 4000 random pairs of like and unlike signs with
// exponent differences from 0 to beyond the alignment range.
module tb_fp16_add;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  fp16_t a, b, s;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .s(s));

  task automatic check(input fp16_t x, input fp16_t y, input fp16_t exp_s);
    a = x; b = y;
    #1;
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, y, s, exp_s);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3c00, 16'h3c00, 16'h4000);            // 1 + 1 = 2
    check(16'h3c00, 16'hbc00, 16'h0000);            // 1 - 1 = +0
    check(16'h0000, 16'h4500, 16'h4500);            // 0 + 5
    check(16'h4500, 16'h0000, 16'h4500);
    check(16'h7bff, 16'h7bff, 16'h7c00);            // max + max overflows
    check(16'h7c00, 16'h3c00, 16'h7c00);            // inf + 1
    check(16'h7c00, 16'hfc00, 16'h7e00);            // inf - inf
    check(16'h3c00, 16'h1000, 16'h3c00);            // 1 + 2^-11 ties to even (1.0)
    check(16'h3c01, 16'h1000, 16'h3c02);            // tie rounds up to even
    check(16'h3c00, 16'h8001, 16'h3c00);            // subnormal flushed
    for (int i = 0; i < 4000; i++) begin
      fp16_t x, y;
      x = rand_fp16(5, 28);
      y = rand_fp16(5, 28);
      if (i % 4 == 0) y = {~x[15], x[14:10], 10'($urandom)};   // near cancellation
      check(x, y, ref_add(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
