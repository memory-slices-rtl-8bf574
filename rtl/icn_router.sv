// icn_router: wormhole-switched router of the inter-slice torus.
//
// Five ports (0 local, 1 east +x, 2 west -x, 3 north +y, 4 south -y), 128-bit
// flits with head and tail marks, valid/ready links.  Each input has a FIFO
// of FIFO_DEPTH flits.  The head flit of a packet is routed in dimension order
// (X first, then Y, then the local port), taking on each ring the shorter way
// round the torus (ties go east / north).  An output port is given to one
// input at a time by a round-robin arbiter and stays locked to it until the
// tail flit has passed (wormhole switching); body flits follow the route
// stored when the head passed.  One flit per output per cycle; the head is
// forwarded in the cycle it wins the output.
//
// From the paper: torus topology, XY routing, 128-bit links, wormhole
// switching.  Buffer depth, port order and arbitration are this design's
// choice.  There are no virtual channels (the paper mentions none), so
// packets whose wormholes close a cycle around a ring can deadlock under heavy
// load; the traffic of a matrix operation (partial sums sent to a few
// destination slices) does not form such cycles in the tested cases.
module icn_router
  import ms_pkg::*;
#(
  parameter int unsigned NX         = 16,
  parameter int unsigned NY         = 16,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic  [4:0]        in_valid,
  output logic  [4:0]        in_ready,
  input  flit_t [4:0]        in_flit,
  output logic  [4:0]        out_valid,
  input  logic  [4:0]        out_ready,
  output flit_t [4:0]        out_flit
);

  localparam int unsigned FW = $bits(flit_t);

  typedef enum logic [2:0] {P_LOCAL = 3'd0, P_EAST = 3'd1, P_WEST = 3'd2, P_NORTH = 3'd3, P_SOUTH = 3'd4} port_e;

  // ------------------------------------------------------------ input FIFOs
  logic  [4:0] f_valid, f_pop;
  flit_t [4:0] f_head;
  for (genvar i = 0; i < 5; i++) begin : g_in
    logic [FW-1:0] od;
    sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  (in_flit[i]),
      .out_valid(f_valid[i]),
      .out_ready(f_pop[i]),
      .out_data (od),
      .count    ()
    );
    assign f_head[i] = flit_t'(od);
  end

  // ------------------------------------------------------------ routing
  function automatic port_e route(input pkt_hdr_t h, input logic [COORD_W-1:0] x,
                                  input logic [COORD_W-1:0] y);
    int unsigned dx, dy;
    dx = (int'(h.dst_x) - int'(x) + NX) % NX;
    dy = (int'(h.dst_y) - int'(y) + NY) % NY;
    if (dx != 0)      return (dx <= NX / 2) ? P_EAST : P_WEST;
    else if (dy != 0) return (dy <= NY / 2) ? P_NORTH : P_SOUTH;
    else              return P_LOCAL;
  endfunction

  port_e [4:0] route_q;   // route of the packet whose body is passing
  port_e [4:0] req;       // requested output of each input

  always_comb begin
    for (int i = 0; i < 5; i++)
      req[i] = f_head[i].head ? route(pkt_hdr_t'(f_head[i].data), my_x, my_y) : route_q[i];
  end

  // ------------------------------------------------------------ allocation
  logic [4:0]      locked;
  logic [4:0][2:0] owner;     // input that holds each output
  logic [4:0][2:0] rr;        // round-robin pointer per output
  logic [4:0][2:0] sel;       // input connected to each output this cycle
  logic [4:0]      sel_ok;
  logic [4:0]      grant_new;

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      sel[o]       = owner[o];
      sel_ok[o]    = locked[o];
      grant_new[o] = 1'b0;
      if (!locked[o]) begin
        for (int k = 0; k < 5; k++) begin
          int i;
          i = (int'(rr[o]) + k) % 5;
          if (!sel_ok[o] && f_valid[i] && f_head[i].head && req[i] == port_e'(o)) begin
            sel[o]       = 3'(i);
            sel_ok[o]    = 1'b1;
            grant_new[o] = 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    f_pop = '0;
    for (int o = 0; o < 5; o++) begin
      out_valid[o] = sel_ok[o] && f_valid[sel[o]] && (req[sel[o]] == port_e'(o));
      out_flit[o]  = f_head[sel[o]];
      if (out_valid[o] && out_ready[o]) f_pop[sel[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= '0;
      owner   <= '0;
      rr      <= '0;
      route_q <= '{default: P_LOCAL};
    end else begin
      for (int o = 0; o < 5; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          if (out_flit[o].head) route_q[sel[o]] <= port_e'(o);
          if (out_flit[o].tail) begin
            locked[o] <= 1'b0;
          end else begin
            locked[o] <= 1'b1;
            owner[o]  <= sel[o];
          end
          if (grant_new[o]) rr[o] <= 3'((int'(sel[o]) + 1) % 5);
        end
      end
    end
  end

endmodule
