// tb_compute_unit: checks one processing element.
//
// Reg B is loaded once; operands are shifted in with random gaps and random
// freezes ('en' low).  Each product must equal Reg A x Reg B from the reference
// and be on the output after the third enabled edge that follows its shift
// edge (one edge in Reg A, three in the multiplier); a_out must pass Reg A
// on; a shift with an invalid operand or with row_en low must produce nothing;
// 'clear' must drop the valid bit.
module tb_compute_unit;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, clear = 0, shift = 0, row_en = 1, a_in_valid = 0, b_wr = 0;
  fp16_t a_in = 0, b_in = 0, a_out, b_out, prod;
  logic a_out_valid, prod_valid;
  int checks = 0, failures = 0;
  int en_cycles = 0;
  fp16_t exp_q[$];
  int    t_q[$];

  compute_unit dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && en && !clear) begin
    en_cycles++;
    if (prod_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("FAIL spurious product"); end
      else begin
        fp16_t e; int t;
        e = exp_q.pop_front(); t = t_q.pop_front();
        if (prod !== e) begin failures++; $display("FAIL prod %h exp %h", prod, e); end
        if (en_cycles - t != 4) begin failures++; $display("FAIL latency %0d", en_cycles - t); end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t bval;
    repeat (2) @(negedge clk);
    rst_n = 1;
    bval = rand_fp16();
    @(negedge clk); b_wr = 1; b_in = bval;
    @(negedge clk); b_wr = 0; b_in = 0;
    checks++; if (b_out !== bval) begin failures++; $display("FAIL reg B"); end
    for (int i = 0; i < 500; i++) begin
      fp16_t x;
      int kind;
      x = rand_fp16();
      kind = $urandom_range(0, 9);
      @(negedge clk);
      en = ($urandom_range(0, 4) != 0);
      shift = 1; a_in = x;
      a_in_valid = (kind != 0);
      row_en = (kind != 1);
      if (en && a_in_valid && row_en) begin
        exp_q.push_back(ref_mul(x, bval)); t_q.push_back(en_cycles + 1);
      end
      begin
        logic en_s;
        en_s = en;
        @(negedge clk);
        shift = 0; en = 1;
        if (en_s) begin
          checks++;
          if (a_out !== x || a_out_valid !== (kind != 0)) begin
            failures++; $display("FAIL Reg A pass-down %h/%b", a_out, a_out_valid);
          end
        end
      end
    end
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d products missing", exp_q.size()); end
    // clear drops the valid bit
    @(negedge clk); shift = 1; a_in_valid = 1; a_in = 16'h3c00; en = 1;
    @(negedge clk); shift = 0;
    checks++; if (!a_out_valid || a_out !== 16'h3c00) begin failures++; $display("FAIL pass-down"); end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++; if (a_out_valid) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
