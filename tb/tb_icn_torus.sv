// tb_icn_torus: test of the torus interconnection network.
//
// A 4 x 4 torus (the RTL default is the paper's 16 x 16).  Every node sends
// 25 packets of 1 to 4 flits to random nodes (itself included) and accepts
// flits at random on its local output.  Body flits carry (source, packet
// number, flit number).  Checks: every packet arrives at its destination
// whole, unmixed, and in order per source/destination pair.  A lone
// single-flit packet from node (0,0) to (2,1) in the idle network must take
// hops + 1 cycles (one cycle per router passed; 3 hops here).
// Watchdog 200000 cycles.
`timescale 1ns/1ps
module tb_icn_torus;
  import ms_pkg::*;
  import ms_tb_pkg::*;

  localparam int NX = 4, NY = 4, N = NX * NY, NPKT = 25;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [N-1:0] in_flit, out_flit;

  icn_torus #(.NX(NX), .NY(NY)) dut (
    .clk, .rst_n,
    .loc_in_valid(in_valid), .loc_in_ready(in_ready), .loc_in_flit(in_flit),
    .loc_out_valid(out_valid), .loc_out_ready(out_ready), .loc_out_flit(out_flit)
  );

  int exp_q [N][N][$];
  int exp_len [N][NPKT];
  int sent_pkts = 0, got = 0;
  int cur_src [N], cur_pkt [N], cur_idx [N];
  bit in_pkt [N];
  bit lat_phase = 1;
  initial begin in_valid[0] = 0; in_flit[0] = '0; end

  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      if (i != 0) begin
        in_valid[i] = 0;
        in_flit[i]  = '0;
      end
      wait (!lat_phase);
      @(negedge clk);
      for (int p = 0; p < NPKT; p++) begin
        int d, len;
        pkt_hdr_t h;
        d = $urandom_range(0, N-1);
        len = $urandom_range(0, 3);
        exp_len[i][p] = len;
        exp_q[i][d].push_back(p);
        h = write_hdr(d % NX, d / NX, p, len);
        h.rsvd = 12'(i);
        for (int f = 0; f <= len; f++) begin
          in_flit[i] = (f == 0) ? head_flit(h, len == 0) : body_flit({96'(f), 16'(p), 16'(i)}, f == len);
          in_valid[i] = 1;
          #0.1;
          while (!in_ready[i]) begin @(negedge clk); #0.1; end
          @(negedge clk);
          in_valid[i] = 0;
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
        sent_pkts++;
        repeat ($urandom_range(0, 24)) @(negedge clk);
      end
    end
  end

  always @(negedge clk) out_ready <= lat_phase ? '1 : N'({$urandom, $urandom});
  initial out_ready = '1;

  always @(posedge clk) if (rst_n && !lat_phase) begin
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      flit_t f;
      f = out_flit[o];
      if (f.head) begin
        pkt_hdr_t h;
        h = pkt_hdr_t'(f.data);
        chk(!in_pkt[o], $sformatf("node %0d: head inside a packet", o));
        chk(int'(h.dst_y) * NX + int'(h.dst_x) == o, $sformatf("node %0d: misdelivered", o));
        cur_src[o] = int'(h.rsvd);
        cur_pkt[o] = int'(h.addr);
        chk(exp_q[cur_src[o]][o].size() != 0 && exp_q[cur_src[o]][o][0] == cur_pkt[o],
            $sformatf("node %0d: packet %0d of %0d out of order", o, cur_pkt[o], cur_src[o]));
        if (exp_q[cur_src[o]][o].size() != 0) void'(exp_q[cur_src[o]][o].pop_front());
        got++;
        cur_idx[o] = 0;
        in_pkt[o] = !f.tail;
      end else begin
        cur_idx[o]++;
        chk(in_pkt[o], $sformatf("node %0d: body outside a packet", o));
        chk(f.data[15:0] == 16'(cur_src[o]) && f.data[31:16] == 16'(cur_pkt[o]) && int'(f.data[127:32]) == cur_idx[o],
            $sformatf("node %0d: mixed packet", o));
        chk(f.tail == (cur_idx[o] == exp_len[cur_src[o]][cur_pkt[o]]), $sformatf("node %0d: tail position", o));
        if (f.tail) in_pkt[o] = 0;
      end
    end
  end

  initial begin
    int t;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // lone packet (0,0) -> (2,1): X 2 hops (tie, east), Y 1 hop
    in_flit[0]  = head_flit(write_hdr(2, 1, 0, 0), 1'b1);
    in_valid[0] = 1'b1;
    @(negedge clk);
    in_valid[0] = 1'b0;
    t = 1;
    while (!out_valid[1*NX + 2]) begin @(negedge clk); t++; end
    chk(t == 4, $sformatf("lone packet took %0d cycles, expected 4", t));
    @(negedge clk);
    lat_phase = 0;
    wait (sent_pkts == N * NPKT);
    repeat (200) @(posedge clk);
    chk(got == N * NPKT, $sformatf("received %0d of %0d packets", got, N * NPKT));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog sent=%0d got=%0d", sent_pkts, got);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
