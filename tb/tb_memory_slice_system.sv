// tb_memory_slice_system: end-to-end test of the memory system.
//
// A 2 x 2 torus of slices with 8-row arrays (NX = NY = 2, ROWS = 8), each
// slice with a behavioural DRAM.  The testbench is the host: every packet
// enters at the host port and is routed through the torus.
// Workload: C = relu(A x B) with A 12 x 16 and B 16 x 8.  The reduction
// dimension is split into two 8-wide partitions: slice (0,0) multiplies with
// rows 0..7 of B, slice (1,0) with rows 8..15.  C lives in slice (1,0).
//   * slice (0,0): PRELOAD, STREAM (not last), HALT; its destination map sends
//     all of C to (1,0), so its partial sums cross the network (remote);
//   * slice (1,0): PRELOAD, WAIT for the 96 partial sums of slice (0,0),
//     STREAM (last, ReLU), HALT; its own sums are looped back locally.
// Host traffic: CFG packets (PMI tables, map, programs, start), WRITE packets
// storing A in both slices.  B^T is placed directly in the DRAM models.
// Checks: every element of C in slice (1,0)'s DRAM against a reference that
// adds the two partial sums in the same order and rounding; the aggregated
// element counts; and that every mechanism occurred at least once: array
// stall, local loop-back, remote packet, drain, preload, wait, activation,
// host write, configuration write.  Watchdog: 200000 cycles.
`timescale 1ns/1ps
module tb_memory_slice_system;
  import ms_pkg::*;
  import fp16_ref_pkg::*;
  import ms_tb_pkg::*;

  localparam int NX = 2, NY = 2, N = NX * NY;
  localparam int ROWS = 8, COLS = 8;
  localparam int M  = 12;
  localparam int KD = 16;
  localparam int KO = 8;
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

  logic host_valid, host_ready;
  flit_t host_flit;
  logic [N-1:0] mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [N-1:0][MEM_AW-1:0] mem_req_addr;
  logic [N-1:0][MEM_BEW-1:0] mem_req_be;
  logic [N-1:0][MEM_DW-1:0] mem_req_wdata, mem_rsp_data;
  logic [N-1:0] seq_busy, seq_done, agg_busy, stall, tx_local, tx_remote;
  logic [N-1:0][15:0] agg_count;

  memory_slice_system #(.NX(NX), .NY(NY), .ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .host_valid, .host_ready, .host_flit,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_be, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data,
    .seq_busy, .seq_done, .agg_busy, .agg_count, .stall, .tx_local, .tx_remote
  );

  for (genvar i = 0; i < N; i++) begin : g_mem
    dram_model #(.LAT(10), .II(2)) u_mem (
      .clk, .rst_n, .req_valid(mem_req_valid[i]), .req_ready(mem_req_ready[i]), .req_we(mem_req_we[i]),
      .req_addr(mem_req_addr[i]), .req_be(mem_req_be[i]), .req_wdata(mem_req_wdata[i]),
      .rsp_valid(mem_rsp_valid[i]), .rsp_data(mem_rsp_data[i])
    );
  end

  // ------------------------------------------------------------ mechanism counters
  int n_stall = 0, n_local = 0, n_remote = 0, n_drain = 0, n_preload = 0, n_wait = 0;
  int n_act = 0, n_hwrite = 0, n_cfg = 0;
  always @(posedge clk) begin
    n_stall  += $countones(stall);
    n_local  += $countones(tx_local);
    n_remote += $countones(tx_remote);
  end
  for (genvar y = 0; y < NY; y++) begin : g_cy
    for (genvar x = 0; x < NX; x++) begin : g_cx
      always @(posedge clk) begin
        if (dut.g_y[y].g_x[x].u_slice.u_seq.b_wr_en) n_preload++;
        if (dut.g_y[y].g_x[x].u_slice.u_seq.state == 3'd4 && dut.g_y[y].g_x[x].u_slice.u_seq.arr_shift) n_drain++;
        if (dut.g_y[y].g_x[x].u_slice.u_seq.state == 3'd6) n_wait++;
        if (dut.g_y[y].g_x[x].u_slice.u_agg.g_rsp_valid && dut.g_y[y].g_x[x].u_slice.u_agg.e_q.last &&
            dut.g_y[y].g_x[x].u_slice.u_agg.e_q.func != ACT_NONE) n_act++;
        if (dut.g_y[y].g_x[x].u_slice.u_ni.h_req_valid && dut.g_y[y].g_x[x].u_slice.u_ni.h_req_ready) n_hwrite++;
        if (dut.g_y[y].g_x[x].u_slice.u_ni.pmi_cfg_we || dut.g_y[y].g_x[x].u_slice.u_ni.map_we ||
            dut.g_y[y].g_x[x].u_slice.u_ni.imem_we || dut.g_y[y].g_x[x].u_slice.u_ni.seq_start) n_cfg++;
      end
    end
  end

  // ------------------------------------------------------------ data
  logic [15:0] A [M][KD];
  logic [15:0] B [KD][KO];
  logic [15:0] P [2][M][KO];
  logic [15:0] C [M][KO];

  // host port: drive after a falling edge, look at ready before the rising edge
  task automatic send(input flit_t f);
    host_flit  = f;
    host_valid = 1'b1;
    #0.1;
    while (!host_ready) begin
      @(negedge clk);
      #0.1;
    end
    @(negedge clk);
    host_valid = 1'b0;
  endtask

  task automatic send_cfg(input int x, input int y, input cfg_target_e t, input int index,
                          input logic [FLIT_W-1:0] rec);
    send(head_flit(cfg_hdr(x, y, t, index)));
    send(body_flit(rec, 1'b1));
  endtask

  task automatic write_A(input int x, input int y);
    logic [MEM_DW-1:0] w;
    send(head_flit(write_hdr(x, y, A_BASE, 2*M)));
    for (int n = 0; n < M; n++)
      for (int wd = 0; wd < 2; wd++) begin
        for (int c = 0; c < 8; c++) w[16*c +: 16] = A[n][8*wd + c];
        send(body_flit(w, (n == M-1) && (wd == 1)));
      end
  endtask

  task automatic poke_B(input int node);
    logic [MEM_DW-1:0] w;
    for (int j = 0; j < KO; j++)
      for (int wd = 0; wd < 2; wd++) begin
        for (int c = 0; c < 8; c++) w[16*c +: 16] = B[8*wd + c][j];
        case (node)
          0: g_mem[0].u_mem.poke(MEM_AW'(B_BASE + 2*j + wd), w);
          1: g_mem[1].u_mem.poke(MEM_AW'(B_BASE + 2*j + wd), w);
          default: ;
        endcase
      end
  endtask

  function automatic logic [15:0] c_word16(input int n, input int j);
    return g_mem[1].u_mem.peek16(MEM_AW'(C_BASE + n), j);
  endfunction

  initial begin : main
    int t_start, t_end;
    host_valid = 0;
    host_flit  = '0;
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
        C[n][j] = s[15] ? 16'h0000 : s;
      end

    repeat (3) @(posedge clk);
    rst_n = 1;
    poke_B(0);
    poke_B(1);
    @(negedge clk);

    // tables in slices (0,0) and (1,0)
    for (int x = 0; x < 2; x++) begin
      send_cfg(x, 0, CFG_PMI, 0, FLIT_W'(pmi_ent(A_BASE, 2)));
      send_cfg(x, 0, CFG_PMI, 1, FLIT_W'(pmi_ent(B_BASE, 2)));
      send_cfg(x, 0, CFG_PMI, 2, FLIT_W'(pmi_ent(C_BASE, 1)));
      write_A(x, 0);
    end
    send_cfg(0, 0, CFG_NIMAP, 0, FLIT_W'(map_ent(2, 0, KO-1, 1, 0)));
    // programs
    send_cfg(0, 0, CFG_IMEM, 0, FLIT_W'(instr(OP_PRELOAD, .mat(1), .nrows(KO), .col_word(0))));
    send_cfg(0, 0, CFG_IMEM, 1, FLIT_W'(instr(OP_STREAM, .mat(0), .nrows(M), .col_word(0),
                                              .out_mat(2), .k_base(0), .nk(KO))));
    send_cfg(0, 0, CFG_IMEM, 2, FLIT_W'(instr(OP_HALT)));
    send_cfg(1, 0, CFG_IMEM, 0, FLIT_W'(instr(OP_PRELOAD, .mat(1), .nrows(KO), .col_word(1))));
    send_cfg(1, 0, CFG_IMEM, 1, FLIT_W'(instr(OP_WAIT, .wait_count(M*KO))));
    send_cfg(1, 0, CFG_IMEM, 2, FLIT_W'(instr(OP_STREAM, .mat(0), .nrows(M), .col_word(1),
                                              .out_mat(2), .k_base(0), .nk(KO), .last(1'b1), .func(ACT_RELU))));
    send_cfg(1, 0, CFG_IMEM, 3, FLIT_W'(instr(OP_HALT)));
    // start the consumer first: it must wait for the producer's partial sums
    send_cfg(1, 0, CFG_START, 0, '0);
    send_cfg(0, 0, CFG_START, 0, '0);
    t_start = int'($time);

    wait (seq_done[0] && seq_done[1]);
    while (agg_count[1] < 16'(2*M*KO) || agg_busy[1]) @(posedge clk);
    t_end = int'($time);
    repeat (20) @(posedge clk);

    for (int n = 0; n < M; n++)
      for (int j = 0; j < KO; j++)
        chk(c_word16(n, j) == C[n][j], $sformatf("C[%0d][%0d] got %h exp %h", n, j, c_word16(n, j), C[n][j]));
    chk(agg_count[1] == 16'(2*M*KO), $sformatf("slice (1,0) aggregated %0d", agg_count[1]));
    chk(agg_count[0] == 16'd0, "slice (0,0) aggregated nothing");
    chk(!seq_busy[2] && !seq_busy[3], "idle slices stayed idle");
    chk(n_stall   > 0, "mechanism: stall");
    chk(n_local   > 0, "mechanism: local loop-back");
    chk(n_remote  > 0, "mechanism: remote packet");
    chk(n_drain   > 0, "mechanism: drain");
    chk(n_preload == 2*KO, $sformatf("mechanism: preload rows %0d", n_preload));
    chk(n_wait    > 0, "mechanism: wait");
    chk(n_act     == M*KO, $sformatf("mechanism: activation %0d", n_act));
    chk(n_hwrite  == 2*2*M, $sformatf("mechanism: host writes %0d", n_hwrite));
    chk(n_cfg     > 0, "mechanism: configuration");
    $display("stall=%0d local=%0d remote=%0d drain=%0d preload=%0d wait=%0d act=%0d hwrite=%0d cfg=%0d run_cycles=%0d",
             n_stall, n_local, n_remote, n_drain, n_preload, n_wait, n_act, n_hwrite, n_cfg, (t_end - t_start) / 2);
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
