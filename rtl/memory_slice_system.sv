// memory_slice_system: a memory system built of NX x NY memory slices.
//
// Every slice sits at one node of the 2D torus interconnection network;
// node y*NX + x is slice (x, y).  The slices' DRAM ports are ports of this
// module (the DRAM itself is outside the design), indexed by node.  The host
// injects configuration, write and start packets at the host port, which
// shares the local input of router (0, 0) with slice 0 at packet granularity.
// Status and activity signals of every slice are brought out for observation.
//
// Size: the paper's system is a 16 x 16 torus (256 slices) of slices with a
// 256 x 8 multiplier array each, over half a million floating-point
// multipliers.  Elaborating it takes about 1 GB of memory per slice in the
// lint tool, so the default torus is 2 x 2 (4 full-size slices, about 4 GB);
// a 4 x 4 torus needs about 15 GB.  NX and NY may be raised to 16 with the
// same RTL.
module memory_slice_system
  import ms_pkg::*;
#(
  parameter int unsigned NX   = 2,   // paper: 16
  parameter int unsigned NY   = 2,   // paper: 16
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host injection port
  input  logic                      host_valid,
  output logic                      host_ready,
  input  flit_t                     host_flit,
  // DRAM ports, one per slice
  output logic  [NX*NY-1:0]         mem_req_valid,
  input  logic  [NX*NY-1:0]         mem_req_ready,
  output logic  [NX*NY-1:0]         mem_req_we,
  output logic  [NX*NY-1:0][MEM_AW-1:0]  mem_req_addr,
  output logic  [NX*NY-1:0][MEM_BEW-1:0] mem_req_be,
  output logic  [NX*NY-1:0][MEM_DW-1:0]  mem_req_wdata,
  input  logic  [NX*NY-1:0]         mem_rsp_valid,
  input  logic  [NX*NY-1:0][MEM_DW-1:0]  mem_rsp_data,
  // status, one per slice
  output logic  [NX*NY-1:0]         seq_busy,
  output logic  [NX*NY-1:0]         seq_done,
  output logic  [NX*NY-1:0]         agg_busy,
  output logic  [NX*NY-1:0][15:0]   agg_count,
  output logic  [NX*NY-1:0]         stall,
  output logic  [NX*NY-1:0]         tx_local,
  output logic  [NX*NY-1:0]         tx_remote
);

  localparam int unsigned N = NX * NY;

  logic  [N-1:0] s_out_valid, s_out_ready, r_in_valid, r_in_ready;
  flit_t [N-1:0] s_out_flit, r_in_flit;
  logic  [N-1:0] r_out_valid, r_out_ready;
  flit_t [N-1:0] r_out_flit;

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int unsigned ME = y * NX + x;
      memory_slice #(.ROWS(ROWS), .COLS(COLS)) u_slice (
        .clk, .rst_n,
        .my_x         (COORD_W'(x)),
        .my_y         (COORD_W'(y)),
        .net_out_valid(s_out_valid[ME]),
        .net_out_ready(s_out_ready[ME]),
        .net_out_flit (s_out_flit[ME]),
        .net_in_valid (r_out_valid[ME]),
        .net_in_ready (r_out_ready[ME]),
        .net_in_flit  (r_out_flit[ME]),
        .mem_req_valid(mem_req_valid[ME]),
        .mem_req_ready(mem_req_ready[ME]),
        .mem_req_we   (mem_req_we[ME]),
        .mem_req_addr (mem_req_addr[ME]),
        .mem_req_be   (mem_req_be[ME]),
        .mem_req_wdata(mem_req_wdata[ME]),
        .mem_rsp_valid(mem_rsp_valid[ME]),
        .mem_rsp_data (mem_rsp_data[ME]),
        .seq_busy     (seq_busy[ME]),
        .seq_done     (seq_done[ME]),
        .agg_busy     (agg_busy[ME]),
        .agg_count  (agg_count[ME]),
        .stall        (stall[ME]),
        .tx_local     (tx_local[ME]),
        .tx_remote    (tx_remote[ME])
      );
      if (ME != 0) begin : g_direct
        assign r_in_valid[ME]  = s_out_valid[ME];
        assign r_in_flit[ME]   = s_out_flit[ME];
        assign s_out_ready[ME] = r_in_ready[ME];
      end
    end
  end

  // host and slice 0 share the local input of router 0
  flit_merge u_host_merge (
    .clk, .rst_n,
    .in0_valid(host_valid),     .in0_ready(host_ready),     .in0_flit(host_flit),
    .in1_valid(s_out_valid[0]), .in1_ready(s_out_ready[0]), .in1_flit(s_out_flit[0]),
    .out_valid(r_in_valid[0]),  .out_ready(r_in_ready[0]),  .out_flit(r_in_flit[0])
  );

  icn_torus #(.NX(NX), .NY(NY)) u_icn (
    .clk, .rst_n,
    .loc_in_valid (r_in_valid),
    .loc_in_ready (r_in_ready),
    .loc_in_flit  (r_in_flit),
    .loc_out_valid(r_out_valid),
    .loc_out_ready(r_out_ready),
    .loc_out_flit (r_out_flit)
  );

endmodule
