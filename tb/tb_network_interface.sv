// tb_network_interface: test of the network interface.
//
// Interface of slice (2,1) with 16-row vectors (ROWS = 16).  Map entries
// (written by CFG packets through the network input): output matrix 3,
// columns 0..5 -> slice (0,0); columns 10..13 -> slice (3,3); everything else
// stays local.  Then, concurrently:
//   * 60 result vectors with random masks, k_base, n0, last and func are
//     offered; every valid element must come out exactly once, either in a
//     PSUM packet on the network port addressed to the slice the map names,
//     or through the loop-back to the aggregation port, carrying the right
//     (k, n) = (k_base + r, n0 - r), value and flags; packet headers must have
//     consistent count/len; runs must not cross a map boundary;
//   * the network input delivers 40 PSUM packets (matrix 9) and 10 WRITE
//     packets, whose elements / words must reach the aggregation port / host
//     write port in order.
// Network, aggregation and write ports accept at random.  Also checks CFG
// decoding for PMI, program words and start.  Watchdog 200000 cycles.
`timescale 1ns/1ps
module tb_network_interface;
  import ms_pkg::*;
  import fp16_ref_pkg::*;
  import ms_tb_pkg::*;

  localparam int ROWS = 16, MYX = 2, MYY = 1;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic vec_valid, vec_ready, vec_last;
  logic [ROWS-1:0] vec_mask;
  fp16_t [ROWS-1:0] vec_val;
  logic [IDX_W-1:0] vec_n0, vec_k_base;
  logic [MAT_W-1:0] vec_mat;
  act_e vec_func;
  logic net_out_valid, net_out_ready, net_in_valid, net_in_ready;
  flit_t net_out_flit, net_in_flit;
  logic agg_valid, agg_ready;
  agg_elem_t agg_elem;
  logic h_req_valid, h_req_ready;
  logic [MEM_AW-1:0] h_addr;
  logic [MEM_DW-1:0] h_wdata;
  logic pmi_cfg_we, imem_we, seq_start, tx_local, tx_remote;
  logic [MAT_W-1:0] pmi_cfg_index;
  pmi_entry_t pmi_cfg_entry;
  logic [$clog2(IMEM_D)-1:0] imem_addr, seq_start_pc;
  seq_instr_t imem_wdata;

  network_interface #(.ROWS(ROWS)) dut (.*, .my_x(4'(MYX)), .my_y(4'(MYY)));

  // expected elements: key "mat,k,n" -> {value, last, func, dest}
  typedef struct { logic [15:0] v; logic last; act_e func; int dx; int dy; } ex_t;
  ex_t exp_el [string];
  agg_elem_t rx_q [$];            // elements expected from the network input, in order
  logic [MEM_DW-1:0] wr_q [$];
  logic [MEM_AW-1:0] wa_q [$];
  int n_local_el = 0, n_remote_el = 0, n_rx_el = 0, n_wr = 0, n_pmi = 0, n_imem = 0, n_start = 0;
  bit cfg_phase = 1;

  function automatic string key(input int m, input int k, input int n);
    return $sformatf("%0d,%0d,%0d", m, k, n);
  endfunction

  function automatic void dest(input int k, output int dx, output int dy);
    if (k <= 5) begin dx = 0; dy = 0; end
    else if (k >= 10 && k <= 13) begin dx = 3; dy = 3; end
    else begin dx = MYX; dy = MYY; end
  endfunction

  task automatic net_send(input flit_t f);
    net_in_flit = f; net_in_valid = 1;
    #0.1;
    while (!net_in_ready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    net_in_valid = 0;
  endtask

  // random acceptance
  always @(negedge clk) begin
    net_out_ready <= ($urandom_range(0, 2) != 0);
    agg_ready     <= ($urandom_range(0, 2) != 0);
    h_req_ready   <= ($urandom_range(0, 2) != 0);
  end

  // ------------------------------------------------------------ monitors
  pkt_hdr_t oh;
  int oe;
  always @(posedge clk) if (rst_n) begin
    if (net_out_valid && net_out_ready) begin
      if (net_out_flit.head) begin
        int dx, dy;
        oh = pkt_hdr_t'(net_out_flit.data);
        oe = 0;
        chk(oh.ptype == PKT_PSUM && oh.len == 8'((oh.count + 7) / 8) && oh.count != 0, "out header count/len");
        chk(!(oh.dst_x == 4'(MYX) && oh.dst_y == 4'(MYY)), "own packet sent to the network");
        chk(tx_remote, "tx_remote on head");
        for (int e = 0; e < int'(oh.count); e++) begin
          dest(int'(oh.k0) + e, dx, dy);
          chk(dx == int'(oh.dst_x) && dy == int'(oh.dst_y), "run crosses a map boundary");
        end
      end else begin
        for (int l = 0; l < 8; l++) if (oe < int'(oh.count)) begin
          string s;
          s = key(int'(oh.mat), int'(oh.k0) + oe, int'(oh.n0) - oe);
          if (exp_el.exists(s)) begin
            chk(exp_el[s].v == net_out_flit.data[16*l +: 16] && exp_el[s].last == oh.last && exp_el[s].func == oh.func,
                $sformatf("remote element %s", s));
            exp_el.delete(s);
          end else chk(0, $sformatf("unexpected remote element %s", s));
          n_remote_el++;
          oe++;
        end
      end
    end
    if (agg_valid && agg_ready) begin
      if (agg_elem.mat == 4'd9) begin
        chk(rx_q.size() != 0 && agg_elem == rx_q[0], "element from network input");
        if (rx_q.size() != 0) void'(rx_q.pop_front());
        n_rx_el++;
      end else begin
        string s;
        int dx, dy;
        s = key(int'(agg_elem.mat), int'(agg_elem.k), int'(agg_elem.n));
        dest(int'(agg_elem.k), dx, dy);
        chk(dx == MYX && dy == MYY, $sformatf("element %s looped back but mapped away", s));
        if (exp_el.exists(s)) begin
          chk(exp_el[s].v == agg_elem.value && exp_el[s].last == agg_elem.last && exp_el[s].func == agg_elem.func,
              $sformatf("local element %s", s));
          exp_el.delete(s);
        end else chk(0, $sformatf("unexpected local element %s", s));
        n_local_el++;
      end
    end
    if (h_req_valid && h_req_ready) begin
      chk(wr_q.size() != 0 && h_wdata == wr_q[0] && h_addr == wa_q[0], "host write word/address");
      if (wr_q.size() != 0) begin void'(wr_q.pop_front()); void'(wa_q.pop_front()); end
      n_wr++;
    end
    if (pmi_cfg_we) begin
      chk(pmi_cfg_index == 4'd6 && pmi_cfg_entry == pmi_ent('h1234, 7), "PMI config decode");
      n_pmi++;
    end
    if (imem_we) begin
      chk(imem_addr == 4'd3 && imem_wdata == instr(OP_WAIT, .wait_count(77)), "program word decode");
      n_imem++;
    end
    if (seq_start) begin
      chk(seq_start_pc == 4'd2, "start decode");
      n_start++;
    end
  end

  int vec_done = 0, in_done = 0;
  initial begin
    vec_valid = 0; vec_mask = '0; vec_val = '0; vec_n0 = '0; vec_k_base = '0; vec_mat = '0;
    vec_last = 0; vec_func = ACT_NONE; net_in_valid = 0; net_in_flit = '0;
    net_out_ready = 0; agg_ready = 0; h_req_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // configuration through the network input
    net_send(head_flit(cfg_hdr(MYX, MYY, CFG_NIMAP, 0))); net_send(body_flit(FLIT_W'(map_ent(3, 0, 5, 0, 0)), 1));
    net_send(head_flit(cfg_hdr(MYX, MYY, CFG_NIMAP, 1))); net_send(body_flit(FLIT_W'(map_ent(3, 10, 13, 3, 3)), 1));
    net_send(head_flit(cfg_hdr(MYX, MYY, CFG_PMI, 6)));   net_send(body_flit(FLIT_W'(pmi_ent('h1234, 7)), 1));
    net_send(head_flit(cfg_hdr(MYX, MYY, CFG_IMEM, 3)));  net_send(body_flit(FLIT_W'(instr(OP_WAIT, .wait_count(77))), 1));
    net_send(head_flit(cfg_hdr(MYX, MYY, CFG_START, 2))); net_send(body_flit('0, 1));
    repeat (3) @(negedge clk);
    fork
      begin : vectors
        for (int i = 0; i < 60; i++) begin
          vec_mask   = ROWS'($urandom);
          if (i % 3 == 0) vec_mask = '1;
          for (int r = 0; r < ROWS; r++) vec_val[r] = rand_fp16(12, 16);
          vec_n0     = IDX_W'(100 * (i + 1));
          vec_k_base = IDX_W'($urandom_range(0, 4));
          vec_mat    = 4'd3;
          vec_last   = 1'($urandom);
          vec_func   = act_e'($urandom_range(0, 3));
          vec_valid  = 1;
          #0.1;
          while (!vec_ready) begin @(negedge clk); #0.1; end
          for (int r = 0; r < ROWS; r++) if (vec_mask[r]) begin
            ex_t x;
            x.v = vec_val[r]; x.last = vec_last; x.func = vec_func;
            dest(int'(vec_k_base) + r, x.dx, x.dy);
            exp_el[key(3, int'(vec_k_base) + r, int'(vec_n0) - r)] = x;
          end
          @(negedge clk);
          vec_valid = 0;
          repeat ($urandom_range(0, 6)) @(negedge clk);
        end
        vec_done = 1;
      end
      begin : net_input
        for (int i = 0; i < 50; i++) begin
          if (i % 5 == 4) begin
            pkt_hdr_t h;
            int len;
            len = $urandom_range(1, 4);
            h = write_hdr(MYX, MYY, 'h500 + 16 * i, len);
            net_send(head_flit(h));
            for (int f = 0; f < len; f++) begin
              logic [127:0] w;
              w = {$urandom, $urandom, $urandom, $urandom};
              wr_q.push_back(w); wa_q.push_back(MEM_AW'('h500 + 16 * i + f));
              net_send(body_flit(w, f == len - 1));
            end
          end else begin
            pkt_hdr_t h;
            int cnt;
            logic [127:0] w;
            cnt = $urandom_range(1, 20);
            h = '0;
            h.dst_x = 4'(MYX); h.dst_y = 4'(MYY); h.ptype = PKT_PSUM; h.mat = 4'd9;
            h.k0 = IDX_W'($urandom_range(0, 100)); h.n0 = IDX_W'($urandom_range(50, 200));
            h.count = 9'(cnt); h.len = 8'((cnt + 7) / 8); h.last = 1'($urandom); h.func = act_e'($urandom_range(0, 3));
            net_send(head_flit(h));
            for (int f = 0; f < int'(h.len); f++) begin
              for (int l = 0; l < 8; l++) begin
                w[16*l +: 16] = rand_fp16(12, 16);
                if (8*f + l < cnt) rx_q.push_back('{mat: 4'd9, k: h.k0 + IDX_W'(8*f + l), n: h.n0 - IDX_W'(8*f + l),
                                                   value: w[16*l +: 16], last: h.last, func: h.func});
              end
              net_send(body_flit(w, f == int'(h.len) - 1));
            end
          end
          repeat ($urandom_range(0, 8)) @(negedge clk);
        end
        in_done = 1;
      end
    join
    repeat (400) @(negedge clk);
    chk(exp_el.size() == 0, $sformatf("%0d result elements never came out", exp_el.size()));
    chk(rx_q.size() == 0 && wr_q.size() == 0, "network-input traffic fully delivered");
    chk(n_local_el > 0 && n_remote_el > 0, "both local and remote elements");
    chk(n_pmi == 1 && n_imem == 1 && n_start == 1, "one of each configuration write");
    $display("local=%0d remote=%0d rx=%0d writes=%0d", n_local_el, n_remote_el, n_rx_el, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
