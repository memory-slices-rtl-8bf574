// flit_merge: joins two packet streams into one, a whole packet at a time.
//
// At a packet boundary input 0 has priority; once a head flit has passed, the
// same input keeps the output until its tail flit has passed.  Used where the
// host's injection port shares the local input of router (0, 0) with slice 0.
// This merge point is this design's choice; the paper only says that the host
// reaches the slices through the network.
module flit_merge
  import ms_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in0_valid,
  output logic  in0_ready,
  input  flit_t in0_flit,
  input  logic  in1_valid,
  output logic  in1_ready,
  input  flit_t in1_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);

  logic busy, owner, sel;

  assign sel       = busy ? owner : !in0_valid;
  assign out_valid = sel ? in1_valid : in0_valid;
  assign out_flit  = sel ? in1_flit : in0_flit;
  assign in0_ready = !sel && out_ready;
  assign in1_ready = sel && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= 1'b0;
    end else if (out_valid && out_ready) begin
      busy  <= !out_flit.tail;
      owner <= sel;
    end
  end

endmodule
