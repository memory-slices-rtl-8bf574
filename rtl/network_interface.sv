// network_interface: packetizes a slice's results and unpacks arriving packets.
//
// Transmit side.  A result vector leaving the adder trees holds up to ROWS
// sums; row r is output element (n = n0 - r, k = k_base + r), so the vector is
// a diagonal of the output matrix.  The interface takes one vector at a time
// (vec_ready is high only while it is idle; the slice freezes its array while
// a vector waits).  It cuts the vector into runs of consecutive valid rows
// that go to the same slice, looking each run's first column up in the
// destination map (entries: matrix, column range, slice).  A run becomes one
// PSUM packet: a head flit with the index (k0, n0) of the first element and
// the element count, then count/8 rounded up payload flits of eight 16-bit
// sums; the receiver rebuilds element e as (k0 + e, n0 - e).  A column that no
// map entry covers stays in this slice.  A packet addressed to this slice is
// not sent into the network: it is looped straight back to the receive side.
//
// Receive side.  Packets from the router's local output and from the loop-back
// are taken one whole packet at a time (the loop-back has priority at a packet
// boundary).  PSUM payloads are handed to the aggregation engine one element
// per cycle; WRITE payloads go to the PMI as whole-word writes at consecutive
// addresses; a CFG packet writes the PMI table, this interface's destination
// map or a sequencer program word, or starts the sequencer.
//
// From the paper: packetizing, coalescing of elements for one destination
// into one packet, sending only the first index and the count of a diagonal
// run, the local-port shortcut, the partition-to-slice map held in the
// interface, extraction and hand-over to the aggregation unit, configuration
// packets from the host.  Flit formats, the map layout and the one-vector
// holding register are this design's choice.
module network_interface
  import ms_pkg::*;
#(
  parameter int unsigned ROWS = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // result vectors from the adder trees
  input  logic               vec_valid,
  output logic               vec_ready,
  input  logic [ROWS-1:0]    vec_mask,
  input  fp16_t [ROWS-1:0]   vec_val,
  input  logic [IDX_W-1:0]   vec_n0,
  input  logic [MAT_W-1:0]   vec_mat,
  input  logic [IDX_W-1:0]   vec_k_base,
  input  logic               vec_last,
  input  act_e               vec_func,
  // router local port
  output logic               net_out_valid,
  input  logic               net_out_ready,
  output flit_t              net_out_flit,
  input  logic               net_in_valid,
  output logic               net_in_ready,
  input  flit_t              net_in_flit,
  // elements to the aggregation engine
  output logic               agg_valid,
  input  logic               agg_ready,
  output agg_elem_t          agg_elem,
  // host writes to the PMI
  output logic               h_req_valid,
  input  logic               h_req_ready,
  output logic [MEM_AW-1:0]  h_addr,
  output logic [MEM_DW-1:0]  h_wdata,
  // configuration
  output logic               pmi_cfg_we,
  output logic [MAT_W-1:0]   pmi_cfg_index,
  output pmi_entry_t         pmi_cfg_entry,
  output logic               imem_we,
  output logic [$clog2(IMEM_D)-1:0] imem_addr,
  output seq_instr_t         imem_wdata,
  output logic               seq_start,
  output logic [$clog2(IMEM_D)-1:0] seq_start_pc,
  // activity, for statistics
  output logic               tx_local,
  output logic               tx_remote
);

  localparam int unsigned RW = $clog2(ROWS);

  // ============================================================ destination map
  nimap_entry_t map_q [NMAP];
  logic         map_we;
  logic [$clog2(NMAP)-1:0] map_idx;
  nimap_entry_t map_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NMAP; i++) map_q[i] <= '0;
    end else if (map_we) begin
      map_q[map_idx] <= map_wdata;
    end
  end

  // ============================================================ transmit
  typedef enum logic [1:0] {T_IDLE, T_FIND, T_HEAD, T_PAY} tstate_e;
  tstate_e          tstate;
  logic [ROWS-1:0]  mask_q;
  fp16_t [ROWS-1:0] val_q;
  logic [IDX_W-1:0] n0_q, kb_q;
  logic [MAT_W-1:0] mat_q;
  logic             last_q;
  act_e             func_q;
  logic [RW:0]      pos;        // next row to look at
  logic [RW:0]      seg_s, seg_e;
  logic [7:0]       pay_i, pay_n;
  pkt_hdr_t         hdr_q;
  logic             to_self;

  assign vec_ready = (tstate == T_IDLE);

  // first valid row at or after pos; first invalid row after it
  logic [RW:0]  f_s, f_e;
  logic         f_any;
  always_comb begin
    f_any = 1'b0;
    f_s   = (RW+1)'(ROWS);
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (mask_q[r] && (r >= int'(pos))) begin
        f_s   = (RW+1)'(r);
        f_any = 1'b1;
      end
    end
    f_e = (RW+1)'(ROWS);
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (!mask_q[r] && (r > int'(f_s))) f_e = (RW+1)'(r);
    end
  end

  // map lookup for the run's first column
  logic [IDX_W-1:0]   f_k;
  logic               m_hit;
  nimap_entry_t       m_ent;
  logic [RW:0]        run_end;
  always_comb begin
    f_k   = kb_q + IDX_W'(f_s);
    m_hit = 1'b0;
    m_ent = '0;
    for (int i = NMAP - 1; i >= 0; i--) begin
      if (map_q[i].valid && map_q[i].mat == mat_q && f_k >= map_q[i].k_lo && f_k <= map_q[i].k_hi) begin
        m_hit = 1'b1;
        m_ent = map_q[i];
      end
    end
    // a run stops at the end of its map entry; an unmapped (local) run stops
    // where the next mapped column range of the matrix begins
    run_end = f_e;
    if (m_hit && (32'(m_ent.k_hi) - 32'(kb_q) + 1 < 32'(run_end)))
      run_end = (RW+1)'(32'(m_ent.k_hi) - 32'(kb_q) + 1);
    if (!m_hit) begin
      for (int i = 0; i < NMAP; i++) begin
        if (map_q[i].valid && map_q[i].mat == mat_q && map_q[i].k_lo > f_k &&
            (32'(map_q[i].k_lo) - 32'(kb_q) < 32'(run_end)))
          run_end = (RW+1)'(32'(map_q[i].k_lo) - 32'(kb_q));
      end
    end
  end

  // payload flit: elements seg_s + 8*pay_i + j
  logic [FLIT_W-1:0] pay_data;
  always_comb begin
    pay_data = '0;
    for (int j = 0; j < LANES; j++) begin
      int r;
      r = int'(seg_s) + LANES * int'(pay_i) + j;
      if (r < int'(seg_e)) pay_data[FP_W*j +: FP_W] = val_q[r[RW-1:0]];
    end
  end

  // loop-back channel to the receive side
  logic  lb_valid, lb_ready;
  flit_t tx_flit;
  logic  tx_valid, tx_ready;

  always_comb begin
    tx_valid = (tstate == T_HEAD) || (tstate == T_PAY);
    tx_flit.head = (tstate == T_HEAD);
    tx_flit.tail = (tstate == T_PAY) && (pay_i + 8'd1 == pay_n);
    tx_flit.data = (tstate == T_HEAD) ? FLIT_W'(hdr_q) : pay_data;
  end

  assign net_out_valid = tx_valid && !to_self;
  assign net_out_flit  = tx_flit;
  assign lb_valid      = tx_valid && to_self;
  assign tx_ready      = to_self ? lb_ready : net_out_ready;
  assign tx_local      = lb_valid && lb_ready && tx_flit.head;
  assign tx_remote     = net_out_valid && net_out_ready && tx_flit.head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate  <= T_IDLE;
      mask_q  <= '0;
      val_q   <= '0;
      n0_q    <= '0;
      kb_q    <= '0;
      mat_q   <= '0;
      last_q  <= 1'b0;
      func_q  <= ACT_NONE;
      pos     <= '0;
      seg_s   <= '0;
      seg_e   <= '0;
      pay_i   <= '0;
      pay_n   <= '0;
      hdr_q   <= '0;
      to_self <= 1'b0;
    end else begin
      case (tstate)
        T_IDLE: if (vec_valid) begin
          mask_q <= vec_mask;
          val_q  <= vec_val;
          n0_q   <= vec_n0;
          kb_q   <= vec_k_base;
          mat_q  <= vec_mat;
          last_q <= vec_last;
          func_q <= vec_func;
          pos    <= '0;
          tstate <= T_FIND;
        end
        T_FIND: begin
          if (!f_any) begin
            tstate <= T_IDLE;
          end else begin
            pkt_hdr_t h;
            logic [8:0] cnt;
            cnt          = 9'(run_end - f_s);
            h            = '0;
            h.dst_x      = m_hit ? m_ent.dst_x : my_x;
            h.dst_y      = m_hit ? m_ent.dst_y : my_y;
            h.src_x      = my_x;
            h.src_y      = my_y;
            h.ptype      = PKT_PSUM;
            h.len        = 8'((cnt + 9'(LANES - 1)) / 9'(LANES));
            h.mat        = mat_q;
            h.k0         = f_k;
            h.n0         = n0_q - IDX_W'(f_s);
            h.count      = cnt;
            h.last       = last_q;
            h.func       = func_q;
            hdr_q   <= h;
            to_self <= (h.dst_x == my_x) && (h.dst_y == my_y);
            seg_s   <= f_s;
            seg_e   <= run_end;
            pay_n   <= h.len;
            pay_i   <= '0;
            tstate  <= T_HEAD;
          end
        end
        T_HEAD: if (tx_ready) tstate <= T_PAY;
        T_PAY: if (tx_ready) begin
          pay_i <= pay_i + 8'd1;
          if (tx_flit.tail) begin
            pos    <= seg_e;
            tstate <= T_FIND;
          end
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ============================================================ receive
  typedef enum logic [2:0] {R_IDLE, R_PSUM, R_WRITE, R_CFG} rstate_e;
  rstate_e          rstate;
  logic             src_lb;       // current packet comes from the loop-back
  pkt_hdr_t         rh;
  logic [8:0]       e_idx;        // element index within the packet
  logic [2:0]       lane;
  logic [MEM_AW-1:0] waddr;

  logic  in_valid, in_pop;
  flit_t in_flit;
  logic  pick_lb;

  // at a packet boundary take the loop-back first
  assign pick_lb  = (rstate == R_IDLE) ? lb_valid : src_lb;
  assign in_valid = pick_lb ? lb_valid : net_in_valid;
  assign in_flit  = pick_lb ? tx_flit : net_in_flit;
  assign lb_ready     = pick_lb && in_pop;
  assign net_in_ready = !pick_lb && in_pop;

  // element hand-over
  assign agg_valid      = (rstate == R_PSUM) && in_valid;
  assign agg_elem.mat   = rh.mat;
  assign agg_elem.k     = rh.k0 + IDX_W'(e_idx);
  assign agg_elem.n     = rh.n0 - IDX_W'(e_idx);
  assign agg_elem.value = in_flit.data[FP_W*lane +: FP_W];
  assign agg_elem.last  = rh.last;
  assign agg_elem.func  = rh.func;

  assign h_req_valid = (rstate == R_WRITE) && in_valid;
  assign h_addr      = waddr;
  assign h_wdata     = in_flit.data;

  // configuration decode
  pkt_hdr_t in_hdr;
  assign in_hdr = pkt_hdr_t'(in_flit.data);
  logic cfg_fire;
  assign cfg_fire      = (rstate == R_CFG) && in_valid;
  assign pmi_cfg_we    = cfg_fire && (rh.cfg_target == CFG_PMI);
  assign pmi_cfg_index = rh.index[MAT_W-1:0];
  assign pmi_cfg_entry = pmi_entry_t'(in_flit.data[$bits(pmi_entry_t)-1:0]);
  assign map_we        = cfg_fire && (rh.cfg_target == CFG_NIMAP);
  assign map_idx       = rh.index[$clog2(NMAP)-1:0];
  assign map_wdata     = nimap_entry_t'(in_flit.data[$bits(nimap_entry_t)-1:0]);
  assign imem_we       = cfg_fire && (rh.cfg_target == CFG_IMEM);
  assign imem_addr     = rh.index[$clog2(IMEM_D)-1:0];
  assign imem_wdata    = seq_instr_t'(in_flit.data);
  assign seq_start     = cfg_fire && (rh.cfg_target == CFG_START);
  assign seq_start_pc  = rh.index[$clog2(IMEM_D)-1:0];

  always_comb begin
    case (rstate)
      R_IDLE:  in_pop = in_valid;                 // head flit
      R_PSUM:  in_pop = in_valid && agg_ready &&
                        ((lane == 3'(LANES - 1)) || (e_idx + 9'd1 == rh.count));
      R_WRITE: in_pop = in_valid && h_req_ready;
      R_CFG:   in_pop = in_valid;
      default: in_pop = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_IDLE;
      src_lb <= 1'b0;
      rh     <= '0;
      e_idx  <= '0;
      lane   <= '0;
      waddr  <= '0;
    end else begin
      case (rstate)
        R_IDLE: if (in_valid) begin
          src_lb <= pick_lb;
          rh     <= in_hdr;
          e_idx  <= '0;
          lane   <= '0;
          waddr  <= in_hdr.addr[MEM_AW-1:0];
          if (!in_flit.tail) begin
            case (in_hdr.ptype)
              PKT_PSUM:  rstate <= R_PSUM;
              PKT_WRITE: rstate <= R_WRITE;
              default:   rstate <= R_CFG;
            endcase
          end
        end
        R_PSUM: if (in_valid && agg_ready) begin
          e_idx <= e_idx + 9'd1;
          lane  <= lane + 3'd1;
          if (in_pop) begin
            lane <= '0;
            if (in_flit.tail) rstate <= R_IDLE;
          end
        end
        R_WRITE: if (in_pop) begin
          waddr <= waddr + 1'b1;
          if (in_flit.tail) rstate <= R_IDLE;
        end
        R_CFG: if (in_pop) begin
          if (in_flit.tail) rstate <= R_IDLE;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

endmodule
