// tb_icn_router: test of one torus router.
//
// Router (1,2) of a 4 x 4 torus.  Each of the five inputs sends 60 packets of
// 1 to 4 flits to random destinations; every output accepts at random.  Body
// flits carry (input, packet number, flit number).  Checks: each packet leaves
// on the port given by dimension-order routing on the shorter way round the
// torus (X first, ties east / north), whole and unmixed with other packets, in
// order per input and output; every packet arrives.  A lone single-flit
// packet into an idle router must leave in the cycle it is written into the
// input FIFO plus one (one cycle of FIFO latency).  Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_icn_router;
  import ms_pkg::*;
  import ms_tb_pkg::*;

  localparam int NX = 4, NY = 4, MYX = 1, MYY = 2, NPKT = 60;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [4:0] in_flit, out_flit;

  icn_router #(.NX(NX), .NY(NY)) dut (
    .clk, .rst_n, .my_x(4'(MYX)), .my_y(4'(MYY)),
    .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit
  );

  function automatic int exp_port(input int dx_, input int dy_);
    int dx, dy;
    dx = (dx_ - MYX + NX) % NX;
    dy = (dy_ - MYY + NY) % NY;
    if (dx != 0) return (dx <= NX/2) ? 1 : 2;
    if (dy != 0) return (dy <= NY/2) ? 3 : 4;
    return 0;
  endfunction

  // expected packet sequence per (input, output)
  int exp_q [5][5][$];     // packet numbers
  int exp_len [5][NPKT];
  int got = 0, sent_pkts = 0;
  int cur_src [5], cur_pkt [5], cur_idx [5];
  bit in_pkt [5];
  bit senders_done = 0;

  for (genvar i = 0; i < 5; i++) begin : g_src
    initial begin
      in_valid[i] = 0;
      in_flit[i]  = '0;
      wait (rst_n);
      @(negedge clk);
      if (i == 0) begin
        // lone packet latency
        int t0;
        in_flit[0] = head_flit(write_hdr(3, 2, 0, 0), 1'b1);
        in_valid[0] = 1;
        @(negedge clk);
        in_valid[0] = 0;
        t0 = 0;
        while (!out_valid[1]) begin @(negedge clk); t0++; end
        chk(t0 == 0, $sformatf("lone packet latency %0d extra cycles", t0));
        @(negedge clk);
      end else repeat (4) @(negedge clk);
      for (int p = 0; p < NPKT; p++) begin
        int x, y, len, o;
        pkt_hdr_t h;
        x = $urandom_range(0, NX-1); y = $urandom_range(0, NY-1);
        len = $urandom_range(0, 3);
        exp_len[i][p] = len;
        o = exp_port(x, y);
        exp_q[i][o].push_back(p);
        h = write_hdr(x, y, p, len);
        h.rsvd = 12'(i);
        for (int f = 0; f <= len; f++) begin
          in_flit[i] = (f == 0) ? head_flit(h, len == 0)
                                : body_flit({96'(f), 16'(p), 16'(i)}, f == len);
          in_valid[i] = ($urandom_range(0, 3) != 0);
          while (!in_valid[i]) begin @(negedge clk); in_valid[i] = ($urandom_range(0, 3) != 0); end
          #0.1;
          while (!in_ready[i]) begin @(negedge clk); #0.1; end
          @(negedge clk);
          in_valid[i] = 0;
        end
        sent_pkts++;
      end
    end
  end

  always @(negedge clk) out_ready <= 5'($urandom);
  initial out_ready = '0;

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      flit_t f;
      f = out_flit[o];
      if (f.head) begin
        pkt_hdr_t h;
        h = pkt_hdr_t'(f.data);
        chk(!in_pkt[o], $sformatf("out %0d: head inside a packet", o));
        chk(exp_port(int'(h.dst_x), int'(h.dst_y)) == o, $sformatf("out %0d: wrong port for (%0d,%0d)", o, h.dst_x, h.dst_y));
        if (h.addr == 0 && h.len == 0 && h.dst_x == 3 && h.rsvd == 0 && exp_q[0][1].size() == 0) begin
          // the lone latency packet
        end else begin
          cur_src[o] = int'(h.rsvd);
          cur_pkt[o] = int'(h.addr);
          chk(exp_q[cur_src[o]][o].size() != 0 && exp_q[cur_src[o]][o][0] == cur_pkt[o],
              $sformatf("out %0d: packet %0d of input %0d out of order", o, cur_pkt[o], cur_src[o]));
          if (exp_q[cur_src[o]][o].size() != 0) void'(exp_q[cur_src[o]][o].pop_front());
          got++;
        end
        cur_idx[o] = 0;
        in_pkt[o] = !f.tail;
      end else begin
        cur_idx[o]++;
        chk(in_pkt[o], $sformatf("out %0d: body flit outside a packet", o));
        chk(f.data[15:0] == 16'(cur_src[o]) && f.data[31:16] == 16'(cur_pkt[o]) && int'(f.data[127:32]) == cur_idx[o],
            $sformatf("out %0d: packet mixed or flits out of order", o));
        chk(f.tail == (cur_idx[o] == exp_len[cur_src[o]][cur_pkt[o]]), $sformatf("out %0d: tail position", o));
        if (f.tail) in_pkt[o] = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent_pkts == 5 * NPKT);
    repeat (50) @(posedge clk);
    chk(got == 5 * NPKT, $sformatf("received %0d of %0d packets", got, 5 * NPKT));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
