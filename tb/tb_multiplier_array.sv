// tb_multiplier_array: checks the systolic array on a small instance.
//
// A random B (COLS x ROWS) is preloaded, then NA rows of A are streamed with
// random gaps, followed by ROWS-1 draining shifts.  For every product vector
// the testbench checks, row by row, that array row r multiplied the row of A
// that entered r shifts earlier (index prod_n0 - r) with column r of B, element
// by element, and that every expected product appears exactly once.
module tb_multiplier_array;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  localparam int ROWS = 6, COLS = 4, NA = 20;

  logic clk = 0, rst_n = 0, en = 1, clear = 0, shift = 0, a_in_valid = 0, b_wr_en = 0;
  logic [ROWS-1:0] row_en = '1;
  fp16_t [COLS-1:0] a_in = '0, b_wr_data = '0;
  logic [IDX_W-1:0] a_in_n = '0;
  logic [$clog2(ROWS)-1:0] b_wr_row = '0;
  logic [ROWS-1:0] prod_valid;
  fp16_t [ROWS-1:0][COLS-1:0] prod;
  logic [IDX_W-1:0] prod_n0;

  int checks = 0, failures = 0;
  fp16_t A [NA][COLS];
  fp16_t B [COLS][ROWS];
  int seen [NA][ROWS];

  multiplier_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && en) begin
    for (int r = 0; r < ROWS; r++) if (prod_valid[r]) begin
      int n;
      n = int'(prod_n0) - r;
      checks++;
      if (n < 0 || n >= NA) begin failures++; $display("FAIL row %0d bad index %0d", r, n); end
      else begin
        seen[n][r]++;
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (prod[r][c] !== ref_mul(A[n][c], B[c][r])) begin
            failures++; $display("FAIL row %0d col %0d n %0d: %h", r, c, n, prod[r][c]);
          end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NA; n++) for (int c = 0; c < COLS; c++) A[n][c] = rand_fp16();
    for (int c = 0; c < COLS; c++) for (int r = 0; r < ROWS; r++) B[c][r] = rand_fp16();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // preload B, one array row per cycle
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      b_wr_en = 1; b_wr_row = r[$clog2(ROWS)-1:0];
      for (int c = 0; c < COLS; c++) b_wr_data[c] = B[c][r];
    end
    @(negedge clk); b_wr_en = 0;
    // stream A
    for (int n = 0; n < NA + ROWS - 1; n++) begin
      while ($urandom_range(0, 2) == 0) begin
        shift = 0; en = ($urandom_range(0, 1) == 0); @(negedge clk);
      end
      en = 1; shift = 1; a_in_n = n[IDX_W-1:0];
      a_in_valid = (n < NA);
      for (int c = 0; c < COLS; c++) a_in[c] = (n < NA) ? A[n][c] : 16'h0;
      @(negedge clk);
      shift = 0;
    end
    en = 1;
    repeat (8) @(negedge clk);
    for (int n = 0; n < NA; n++) for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (seen[n][r] != 1) begin failures++; $display("FAIL A row %0d array row %0d seen %0d", n, r, seen[n][r]); end
    end
    // row_en masks a row
    row_en = '1; row_en[1] = 1'b0;
    @(negedge clk); shift = 1; a_in_valid = 1; a_in_n = 0;
    for (int c = 0; c < COLS; c++) a_in[c] = A[0][c];
    @(negedge clk); shift = 1; a_in_valid = 0; a_in_n = 1;
    @(negedge clk); shift = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (seen[0][1] != 1 || seen[0][0] != 2 || seen[0][2] != 1) begin
      failures++; $display("FAIL row mask");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
