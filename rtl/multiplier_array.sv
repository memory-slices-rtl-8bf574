// multiplier_array: the ROWS x COLS systolic array of compute units.
//
// Matrix B is preloaded, one array row per cycle (b_wr_row, b_wr_data): array
// row r, column c holds B[c][r], so array row r is paired with column r of B.
// Rows of A are streamed: on 'shift' the word a_in (COLS elements of one row
// of A) enters row 0 and every row's Reg A moves one row down, so array row r
// holds the row of A that entered r shifts earlier.  All rows multiply in
// parallel; the products of row r (three enabled edges after the shift edge) feed the
// adder tree of that row.  The index of the row of A that entered row 0 at a
// shift (a_in_n) travels with the products as prod_n0, so the products of row
// r belong to output element (n = prod_n0 - r, k = r + offset).
//
// Interface timing: shift, a_in, a_in_valid and a_in_n are sampled on an
// enabled clock edge; 'en' low freezes the whole array.  Sizes follow the paper
// (256 rows of 8 multipliers); the row mask and the clear input are this
// design's own.
module multiplier_array
  import ms_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      clear,
  input  logic                      shift,
  input  logic [ROWS-1:0]           row_en,
  input  fp16_t [COLS-1:0]          a_in,
  input  logic                      a_in_valid,
  input  logic [IDX_W-1:0]          a_in_n,
  input  logic                      b_wr_en,
  input  logic [$clog2(ROWS)-1:0]   b_wr_row,
  input  fp16_t [COLS-1:0]          b_wr_data,
  output logic [ROWS-1:0]           prod_valid,
  output fp16_t [ROWS-1:0][COLS-1:0] prod,
  output logic [IDX_W-1:0]          prod_n0
);

  fp16_t [ROWS-1:0][COLS-1:0] a_q;
  logic  [ROWS-1:0][COLS-1:0] va_q;
  logic  [ROWS-1:0][COLS-1:0] pv;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fp16_t a_src;
      logic  v_src;
      if (r == 0) begin : g_top
        assign a_src = a_in[c];
        assign v_src = a_in_valid;
      end else begin : g_below
        assign a_src = a_q[r-1][c];
        assign v_src = va_q[r-1][c];
      end
      compute_unit u_cu (
        .clk        (clk),
        .rst_n      (rst_n),
        .en         (en),
        .clear      (clear),
        .shift      (shift),
        .row_en     (row_en[r]),
        .a_in       (a_src),
        .a_in_valid (v_src),
        .a_out      (a_q[r][c]),
        .a_out_valid(va_q[r][c]),
        .b_wr       (b_wr_en && (b_wr_row == r)),
        .b_in       (b_wr_data[c]),
        .b_out      (),
        .prod_valid (pv[r][c]),
        .prod       (prod[r][c])
      );
    end
    // all units of a row fire together; column 0 speaks for the row
    assign prod_valid[r] = pv[r][0];
  end

  // index of the row of A in array row 0, delayed like the products
  // (one cycle in Reg A, three in the multiplier)
  logic [IDX_W-1:0] n_pipe [4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) n_pipe[i] <= '0;
    end else if (en) begin
      if (shift) n_pipe[0] <= a_in_n;
      for (int i = 1; i < 4; i++) n_pipe[i] <= n_pipe[i-1];
    end
  end
  assign prod_n0 = n_pipe[3];

endmodule
