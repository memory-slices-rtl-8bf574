// tb_fp16_mul: checks the pipelined binary16 multiplier.
//
// Random operand pairs are issued back to back with random pipeline stalls
// ('en' low); every product must appear exactly three enabled cycles after its
// operands and equal the real-arithmetic reference.  Directed cases cover
// zero, infinity, NaN, overflow and underflow.
module tb_fp16_mul;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0;
  fp16_t a = 0, b = 0;
  logic out_valid;
  fp16_t p;
  int checks = 0, failures = 0;

  fp16_mul dut (.*);

  always #5 clk = ~clk;

  fp16_t exp_q[$];
  int    lat_q[$];
  int    en_cycles = 0;

  // count enabled cycles; compare outputs
  always @(posedge clk) if (rst_n && en) begin
    en_cycles++;
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected product %h", p);
      end else begin
        fp16_t e; int t;
        e = exp_q.pop_front(); t = lat_q.pop_front();
        if (p !== e) begin
          failures++; if (failures < 10) $display("FAIL product %h expected %h", p, e);
        end
        checks++;
        if (en_cycles - t != 3) begin
          failures++; $display("FAIL latency %0d", en_cycles - t);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input fp16_t x, input fp16_t y, input fp16_t e);
    // one operand pair, presented on an enabled cycle
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin en = 0; in_valid = 0; @(negedge clk); end
    en = 1; in_valid = 1; a = x; b = y;
    exp_q.push_back(e); lat_q.push_back(en_cycles + 1);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    issue(16'h3c00, 16'h4000, 16'h4000);   // 1 * 2
    issue(16'h0000, 16'h4000, 16'h0000);   // 0 * 2
    issue(16'h8000, 16'h4000, 16'h8000);   // -0 * 2
    issue(16'h7c00, 16'hc000, 16'hfc00);   // inf * -2
    issue(16'h7c00, 16'h0000, 16'h7e00);   // inf * 0
    issue(16'h7800, 16'h7800, 16'h7c00);   // overflow
    issue(16'h0400, 16'h0400, 16'h0000);   // underflow
    issue(16'h3e00, 16'h3e00, 16'h4080);   // 1.5 * 1.5 = 2.25
    for (int i = 0; i < 3000; i++) begin
      fp16_t x, y;
      x = rand_fp16(2, 29); y = rand_fp16(2, 29);
      issue(x, y, ref_mul(x, y));
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d products missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
