// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// DEPTH entries of WIDTH bits held in a register array with read and write
// pointers.  in_ready is high while an entry is free; out_valid while one is
// held; a push and a pop may happen in the same cycle.  Used for the router's
// input buffers and the sequencer's read-data buffer (sizes are this design's
// choice; the paper gives none).
module sync_fifo #(
  parameter int unsigned WIDTH = 130,
  parameter int unsigned DEPTH = 4    // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

endmodule
