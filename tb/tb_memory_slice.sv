// tb_memory_slice: end-to-end test of one memory slice.
//
// A slice with an 8-row array (ROWS = 8, COLS = 8) sits at (0,0) with its
// DRAM replaced by the behavioural dram_model.  The testbench plays the host
// and the rest of the network on the router port:
//   * CFG packets fill the PMI table (A, B^T and C), the destination map
//     (output columns 4..7 belong to slice (1,0)) and the program;
//   * WRITE packets store A (M x 16) in DRAM; B^T (8 x 16) is placed directly;
//   * the program is PRELOAD / STREAM (first 8-wide partition of the
//     reduction dimension) / WAIT / PRELOAD / STREAM (second partition, last,
//     with ReLU) / HALT, started by a CFG START packet.
// Columns 0..3 of C = relu(A x B) are aggregated in this slice's DRAM through
// the loop-back path and checked word by word against a reference; the PSUM
// packets for columns 4..7 leave on the network port, where their headers
// (first index, count) and every partial sum are checked.  The network port
// stalls at random so the array back-pressure path is exercised.  Also checks
// that a stall happened, both local and remote packets were sent, and the
// number of aggregated elements.  Watchdog: 200000 cycles.
`timescale 1ns/1ps
module tb_memory_slice;
  import ms_pkg::*;
  import fp16_ref_pkg::*;
  import ms_tb_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 8;
  localparam int M    = 12;          // rows of A / C
  localparam int KD   = 16;          // reduction dimension (two partitions of 8)
  localparam int KO   = 8;           // columns of C
  localparam int A_BASE = 'h100, B_BASE = 'h400, C_BASE = 'h800;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  logic net_out_valid, net_out_ready, net_in_valid, net_in_ready;
  flit_t net_out_flit, net_in_flit;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [MEM_AW-1:0] mem_req_addr;
  logic [MEM_BEW-1:0] mem_req_be;
  logic [MEM_DW-1:0] mem_req_wdata, mem_rsp_data;
  logic seq_busy, seq_done, agg_busy, stall, tx_local, tx_remote;
  logic [15:0] agg_count;

  memory_slice #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .my_x(4'd0), .my_y(4'd0),
    .net_out_valid, .net_out_ready, .net_out_flit,
    .net_in_valid, .net_in_ready, .net_in_flit,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_be, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data,
    .seq_busy, .seq_done, .agg_busy, .agg_count, .stall, .tx_local, .tx_remote
  );

  dram_model #(.LAT(10), .II(2)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_be(mem_req_be), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  // ------------------------------------------------------------ data
  logic [15:0] A [M][KD];
  logic [15:0] B [KD][KO];
  logic [15:0] P [2][M][KO];     // partial sums per partition
  logic [15:0] C [M][KO];

  // ------------------------------------------------------------ host side
  // Drive after a falling edge, look at ready just before the rising edge.
  task automatic send(input flit_t f);
    net_in_flit  = f;
    net_in_valid = 1'b1;
    #0.1;
    while (!net_in_ready) begin
      @(negedge clk);
      #0.1;
    end
    @(negedge clk);
    net_in_valid = 1'b0;
  endtask

  task automatic send_cfg(input cfg_target_e t, input int index, input logic [FLIT_W-1:0] rec);
    send(head_flit(cfg_hdr(0, 0, t, index)));
    send(body_flit(rec, 1'b1));
  endtask

  // ------------------------------------------------------------ remote receiver
  int n_stall = 0, n_local = 0, n_remote = 0, n_rx_pkts = 0, n_rx_elems = 0;
  int rx_seen [2][M][KO];
  always @(posedge clk) begin
    if (stall) n_stall++;
    if (tx_local) n_local++;
    if (tx_remote) n_remote++;
  end

  initial begin : rx
    pkt_hdr_t h;
    int e, part;
    net_out_ready = 1'b0;
    forever begin
      @(negedge clk);
      net_out_ready = ($urandom_range(0, 3) != 0);
      #0.1;
      if (net_out_valid && net_out_ready) begin
        if (net_out_flit.head) begin
          h = pkt_hdr_t'(net_out_flit.data);
          n_rx_pkts++;
          chk(h.dst_x == 4'd1 && h.dst_y == 4'd0, "remote packet destination");
          chk(h.ptype == PKT_PSUM && h.mat == 4'd2, "remote packet type/matrix");
          chk(h.len == 8'((h.count + 7) / 8), "remote packet length");
          chk(int'(h.k0) >= 4 && int'(h.k0) + int'(h.count) <= KO, "remote run within columns 4..7");
          part = h.last ? 1 : 0;
          e = 0;
        end else begin
          for (int l = 0; l < 8; l++) begin
            if (e < int'(h.count)) begin
              int k, n;
              k = int'(h.k0) + e;
              n = int'(h.n0) - e;
              if (n >= 0 && n < M && k < KO) begin
                chk(net_out_flit.data[16*l +: 16] == P[part][n][k],
                    $sformatf("remote psum p%0d n=%0d k=%0d got %h exp %h", part, n, k,
                              net_out_flit.data[16*l +: 16], P[part][n][k]));
                rx_seen[part][n][k]++;
              end else chk(0, "remote element index out of range");
              n_rx_elems++;
              e++;
            end
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ main
  initial begin : main
    logic [MEM_DW-1:0] w;
    net_in_valid = 0;
    net_in_flit  = '0;
    for (int n = 0; n < M; n++) for (int k = 0; k < KD; k++) A[n][k] = rand_fp16(13, 16);
    for (int k = 0; k < KD; k++) for (int j = 0; j < KO; j++) B[k][j] = rand_fp16(13, 16);
    for (int p = 0; p < 2; p++)
      for (int n = 0; n < M; n++)
        for (int j = 0; j < KO; j++) begin
          logic [7:0][15:0] v;
          for (int c = 0; c < 8; c++) v[c] = ref_mul(A[n][8*p + c], B[8*p + c][j]);
          P[p][n][j] = ref_tree8(v);
        end
    for (int n = 0; n < M; n++)
      for (int j = 0; j < KO; j++) begin
        logic [15:0] s;
        s = ref_add(ref_add(16'h0000, P[0][n][j]), P[1][n][j]);
        C[n][j] = (s[15] && s[14:0] != 0) ? 16'h0000 : s;  // ReLU
        if (s == 16'h8000) C[n][j] = 16'h0000;
      end
    // B^T straight into DRAM: row j = column j of B, two words
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < KO; j++)
      for (int wd = 0; wd < 2; wd++) begin
        for (int c = 0; c < 8; c++) w[16*c +: 16] = B[8*wd + c][j];
        u_mem.poke(MEM_AW'(B_BASE + 2*j + wd), w);
      end
    @(negedge clk);

    // configuration
    send_cfg(CFG_PMI, 0, FLIT_W'(pmi_ent(A_BASE, 2)));
    send_cfg(CFG_PMI, 1, FLIT_W'(pmi_ent(B_BASE, 2)));
    send_cfg(CFG_PMI, 2, FLIT_W'(pmi_ent(C_BASE, 1)));
    send_cfg(CFG_NIMAP, 0, FLIT_W'(map_ent(2, 4, 7, 1, 0)));
    // A through WRITE packets
    send(head_flit(write_hdr(0, 0, A_BASE, 2*M)));
    for (int n = 0; n < M; n++)
      for (int wd = 0; wd < 2; wd++) begin
        for (int c = 0; c < 8; c++) w[16*c +: 16] = A[n][8*wd + c];
        send(body_flit(w, (n == M-1) && (wd == 1)));
      end
    // program
    send_cfg(CFG_IMEM, 0, FLIT_W'(instr(OP_PRELOAD, .mat(1), .row_base(0), .nrows(KO), .col_word(0))));
    send_cfg(CFG_IMEM, 1, FLIT_W'(instr(OP_STREAM, .mat(0), .row_base(0), .nrows(M), .col_word(0),
                                        .out_mat(2), .k_base(0), .nk(KO))));
    send_cfg(CFG_IMEM, 2, FLIT_W'(instr(OP_WAIT, .wait_count(M*4))));
    send_cfg(CFG_IMEM, 3, FLIT_W'(instr(OP_PRELOAD, .mat(1), .row_base(0), .nrows(KO), .col_word(1))));
    send_cfg(CFG_IMEM, 4, FLIT_W'(instr(OP_STREAM, .mat(0), .row_base(0), .nrows(M), .col_word(1),
                                        .out_mat(2), .k_base(0), .nk(KO), .last(1'b1), .func(ACT_RELU))));
    send_cfg(CFG_IMEM, 5, FLIT_W'(instr(OP_HALT)));
    repeat (5) @(negedge clk);
    chk(u_mem.peek(MEM_AW'(A_BASE + 2*M - 1)) == w, "host WRITE reached DRAM");
    send_cfg(CFG_START, 0, '0);

    wait (seq_done);
    while (agg_count < 16'(2*M*4) || agg_busy) @(posedge clk);
    repeat (20) @(posedge clk);

    // local columns 0..3
    for (int n = 0; n < M; n++)
      for (int j = 0; j < 4; j++)
        chk(u_mem.peek16(MEM_AW'(C_BASE + n), j) == C[n][j],
            $sformatf("C[%0d][%0d] got %h exp %h", n, j, u_mem.peek16(MEM_AW'(C_BASE + n), j), C[n][j]));
    // remote columns 4..7 never written here
    for (int n = 0; n < M; n++)
      for (int j = 4; j < 8; j++) chk(u_mem.peek16(MEM_AW'(C_BASE + n), j) == 16'h0000, "remote column untouched");
    for (int p = 0; p < 2; p++)
      for (int n = 0; n < M; n++)
        for (int j = 4; j < 8; j++) chk(rx_seen[p][n][j] == 1, $sformatf("remote psum p%0d n=%0d k=%0d seen %0d", p, n, j, rx_seen[p][n][j]));
    chk(agg_count == 16'(2*M*4), $sformatf("aggregated %0d", agg_count));
    chk(n_stall > 0, "back-pressure stall happened");
    chk(n_local > 0 && n_remote > 0, $sformatf("local %0d remote %0d packets", n_local, n_remote));
    $display("stalls=%0d local=%0d remote=%0d rx_pkts=%0d rx_elems=%0d cycles=%0t", n_stall, n_local, n_remote, n_rx_pkts, n_rx_elems, $time/2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
