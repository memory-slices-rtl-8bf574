// adder_tree: pipelined binary tree that sums the N products of one array row.
//
// log2(N) levels of fp16 adders, each followed by a register, so for the
// paper's N = 8 the sum is ready three enabled cycles after the products, and
// a new row of products can enter every cycle.  Pairs are added in index
// order: level 1 adds (0,1), (2,3), ...; level 2 adds the level-1 sums the
// same way, and so on.  'en' freezes the pipe.
module adder_tree
  import ms_pkg::*;
#(
  parameter int unsigned N = 8   // power of two
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          in_valid,
  input  fp16_t [N-1:0] in,
  output logic          out_valid,
  output fp16_t         sum
);

  localparam int unsigned LEVELS = $clog2(N);

  // g_lvl[l].q holds the registered sums of level l
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned W = N >> l;
    fp16_t [2*W-1:0] d;    // inputs of this level
    logic            dv;
    fp16_t [W-1:0]   s;
    fp16_t [W-1:0]   q;
    logic            v;
    if (l == 1) begin : g_first
      assign d  = in;
      assign dv = in_valid;
    end else begin : g_next
      assign d  = g_lvl[l-1].q;
      assign dv = g_lvl[l-1].v;
    end
    for (genvar i = 0; i < W; i++) begin : g_add
      fp16_add u_add (.a(d[2*i]), .b(d[2*i+1]), .s(s[i]));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q <= '0;
        v <= 1'b0;
      end else if (en) begin
        q <= s;
        v <= dv;
      end
    end
  end

  assign sum       = g_lvl[LEVELS].q[0];
  assign out_valid = g_lvl[LEVELS].v;

endmodule
