// adder_tree_vector: the slice's accumulator, one adder tree per array row.
//
// Row r's tree sums the COLS products of array row r; all trees run in
// lockstep, so a vector of up to ROWS sums leaves together, three enabled
// cycles after the products.  Because array row r holds the row of A that
// entered r shifts before row 0's, the ROWS sums of one vector are the
// elements (n0 - r, k0 + r) of the output: a diagonal of C.  The index n0
// travels with the vector.  'en' freezes the trees (back-pressure from the
// network interface).  256 trees of 8 inputs, 3 cycles each, as in the paper.
module adder_tree_vector
  import ms_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [ROWS-1:0]            in_valid,
  input  fp16_t [ROWS-1:0][COLS-1:0] in,
  input  logic [IDX_W-1:0]           in_n0,
  output logic [ROWS-1:0]            out_valid,
  output fp16_t [ROWS-1:0]           sum,
  output logic [IDX_W-1:0]           out_n0
);

  localparam int unsigned LEVELS = $clog2(COLS);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    adder_tree #(.N(COLS)) u_tree (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (en),
      .in_valid (in_valid[r]),
      .in       (in[r]),
      .out_valid(out_valid[r]),
      .sum      (sum[r])
    );
  end

  logic [IDX_W-1:0] n_pipe [LEVELS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LEVELS; i++) n_pipe[i] <= '0;
    end else if (en) begin
      n_pipe[0] <= in_n0;
      for (int i = 1; i < LEVELS; i++) n_pipe[i] <= n_pipe[i-1];
    end
  end
  assign out_n0 = n_pipe[LEVELS-1];

endmodule
