// icn_torus: the inter-slice interconnection network, an NX x NY 2D torus.
//
// One icn_router per slice; router (x, y) has node number y*NX + x.  Its east
// output drives the west input of router ((x+1) mod NX, y), its north output
// the south input of router (x, (y+1) mod NY), and the reverse links likewise,
// so every ring closes on itself.  The local ports of all routers are the
// ports of this module, indexed by node number; they carry whole packets of
// 128-bit flits with valid/ready handshakes.
//
// The paper gives the topology (torus), the routing (XY), the link width (128
// bits) and the network size it evaluates (256 nodes, 16 x 16); the numbering
// of nodes is this design's choice.
module icn_torus
  import ms_pkg::*;
#(
  parameter int unsigned NX = 16,
  parameter int unsigned NY = 16,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic  [NX*NY-1:0]   loc_in_valid,
  output logic  [NX*NY-1:0]   loc_in_ready,
  input  flit_t [NX*NY-1:0]   loc_in_flit,
  output logic  [NX*NY-1:0]   loc_out_valid,
  input  logic  [NX*NY-1:0]   loc_out_ready,
  output flit_t [NX*NY-1:0]   loc_out_flit
);

  localparam int unsigned N = NX * NY;

  // per-router port bundles (0 local, 1 east, 2 west, 3 north, 4 south)
  logic  [N-1:0][4:0] iv, ir, ov, orr;
  flit_t [N-1:0][4:0] ifl, ofl;

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int unsigned ME = y * NX + x;
      localparam int unsigned EN = y * NX + (x + 1) % NX;        // east neighbour
      localparam int unsigned WN = y * NX + (x + NX - 1) % NX;   // west neighbour
      localparam int unsigned NN = ((y + 1) % NY) * NX + x;      // north neighbour
      localparam int unsigned SN = ((y + NY - 1) % NY) * NX + x; // south neighbour

      icn_router #(.NX(NX), .NY(NY), .FIFO_DEPTH(FIFO_DEPTH)) u_router (
        .clk      (clk),
        .rst_n    (rst_n),
        .my_x     (COORD_W'(x)),
        .my_y     (COORD_W'(y)),
        .in_valid (iv[ME]),
        .in_ready (ir[ME]),
        .in_flit  (ifl[ME]),
        .out_valid(ov[ME]),
        .out_ready(orr[ME]),
        .out_flit (ofl[ME])
      );

      // local port
      assign iv[ME][0]        = loc_in_valid[ME];
      assign ifl[ME][0]       = loc_in_flit[ME];
      assign loc_in_ready[ME] = ir[ME][0];
      assign loc_out_valid[ME]= ov[ME][0];
      assign loc_out_flit[ME] = ofl[ME][0];
      assign orr[ME][0]       = loc_out_ready[ME];

      // inputs come from the neighbours' opposite outputs
      assign iv[ME][2]  = ov[WN][1];  assign ifl[ME][2] = ofl[WN][1];  assign orr[WN][1] = ir[ME][2];
      assign iv[ME][1]  = ov[EN][2];  assign ifl[ME][1] = ofl[EN][2];  assign orr[EN][2] = ir[ME][1];
      assign iv[ME][4]  = ov[SN][3];  assign ifl[ME][4] = ofl[SN][3];  assign orr[SN][3] = ir[ME][4];
      assign iv[ME][3]  = ov[NN][4];  assign ifl[ME][3] = ofl[NN][4];  assign orr[NN][4] = ir[ME][3];
    end
  end

endmodule
