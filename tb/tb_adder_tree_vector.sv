// tb_adder_tree_vector: checks the accumulator (one adder tree per row).
//
// Random product vectors with random row-valid masks and random freezes are
// applied every cycle; each row's sum must equal the reference tree sum
// ((p0+p1)+(p2+p3))+((p4+p5)+(p6+p7)) and leave three enabled cycles later
// together with its index tag.
module tb_adder_tree_vector;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  localparam int ROWS = 4, COLS = 8;

  logic clk = 0, rst_n = 0, en = 1;
  logic [ROWS-1:0] in_valid = '0, out_valid;
  fp16_t [ROWS-1:0][COLS-1:0] in = '0;
  fp16_t [ROWS-1:0] sum;
  logic [IDX_W-1:0] in_n0 = '0, out_n0;

  int checks = 0, failures = 0, en_cycles = 0;
  typedef struct { logic [ROWS-1:0] v; fp16_t s [ROWS]; int n0; int t; } exp_t;
  exp_t q[$];

  adder_tree_vector #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && en) begin
    en_cycles++;
    if (|out_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL spurious"); end
      else begin
        exp_t e;
        e = q.pop_front();
        if (out_valid !== e.v || out_n0 != e.n0 || en_cycles - e.t != 3) begin
          failures++; $display("FAIL valid %b/%b n0 %0d/%0d lat %0d", out_valid, e.v, out_n0, e.n0, en_cycles - e.t);
        end
        for (int r = 0; r < ROWS; r++) if (e.v[r]) begin
          checks++;
          if (sum[r] !== e.s[r]) begin failures++; $display("FAIL row %0d sum %h exp %h", r, sum[r], e.s[r]); end
        end
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 4) != 0);
      in_valid = ROWS'($urandom);
      if (i % 5 == 0) in_valid = '1;
      in_n0 = IDX_W'($urandom);
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) in[r][c] = rand_fp16(10, 20);
      if (en && |in_valid) begin
        exp_t e;
        logic [7:0][15:0] v;
        e.v = in_valid; e.n0 = int'(in_n0); e.t = en_cycles + 1;
        for (int r = 0; r < ROWS; r++) begin
          for (int c = 0; c < COLS; c++) v[c] = in[r][c];
          e.s[r] = ref_tree8(v);
        end
        q.push_back(e);
      end
    end
    @(negedge clk); en = 1; in_valid = '0;
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d vectors missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
