// tb_sequencer: test of the sequencer.
//
// Sequencer with an 8-row array (ROWS = 8).  The testbench answers its reads
// like the PMI (random ready, in-order answers after 3..8 cycles; the word for
// (matrix, row, word) is a known pattern) and toggles 'en' at random, as the
// slice does when a result vector waits.  Program:
//   0 PRELOAD mat 1, rows 4..11, word 2       -> Reg B rows 0..7
//   1 STREAM  mat 0, rows 10..14, word 1, nk 6, out_mat 3, k_base 40, last, HTANH
//   2 WAIT    agg_count >= 30
//   3 STREAM  mat 2, rows 0..2, word 0, nk 1
//   4 HALT
// Checks: the read addresses and order; every Reg B write (row, data); every
// shift: with en high only, A data and row index in order, nrows + nk - 1
// shifts per STREAM (nk - 1 of them empty drain shifts), row enables = nk;
// the output description while a STREAM runs; WAIT holds until agg_count
// reaches the threshold and no read or shift happens meanwhile; the flush
// lasts FLUSH_CYC enabled cycles after the last shift; done after HALT.
// (Sequencer states are read by number: 5 = FLUSH, 6 = WAIT.)
// Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_sequencer;
  import ms_pkg::*;
  import ms_tb_pkg::*;

  localparam int ROWS = 8, COLS = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic imem_we, start, busy, done, rd_valid, rd_ready, rsp_valid, en;
  logic [$clog2(IMEM_D)-1:0] imem_addr, start_pc;
  seq_instr_t imem_wdata;
  logic [15:0] agg_count;
  logic [MAT_W-1:0] rd_mat, out_mat;
  logic [IDX_W-1:0] rd_row, arr_a_n, out_k_base;
  logic [7:0] rd_word;
  logic [MEM_DW-1:0] rsp_data;
  logic arr_clear, arr_shift, arr_a_valid, b_wr_en, out_last;
  logic [ROWS-1:0] arr_row_en;
  fp16_t [COLS-1:0] arr_a, b_wr_data;
  logic [$clog2(ROWS)-1:0] b_wr_row;
  act_e out_func;

  sequencer #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  function automatic logic [127:0] pat(input int m, input int r, input int w);
    return {8{16'(m * 4096 + r * 16 + w)}};
  endfunction

  // PMI read port model
  typedef struct { int t; logic [127:0] d; } rsp_t;
  rsp_t rq [$];
  int cyc = 0;
  typedef struct { int m; int r; int w; } rd_t;
  rd_t reads [$];
  always @(negedge clk) begin
    cyc++;
    rd_ready <= ($urandom_range(0, 3) != 0);
    en       <= ($urandom_range(0, 4) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    rsp_valid <= 0;
    if (rq.size() != 0 && rq[0].t <= cyc) begin
      rsp_t x;
      x = rq.pop_front();
      rsp_valid <= 1;
      rsp_data  <= x.d;
    end
    if (rd_valid && rd_ready) begin
      rq.push_back('{t: cyc + $urandom_range(3, 8), d: pat(int'(rd_mat), int'(rd_row), int'(rd_word))});
      reads.push_back('{m: int'(rd_mat), r: int'(rd_row), w: int'(rd_word)});
    end
  end

  // ------------------------------------------------------------ monitors
  int b_writes = 0, shifts [2], empty_shifts [2], stream_idx = -1, flush_cnt = -1;
  int reads_in_wait = 0, shifts_in_wait = 0;
  logic prev_shift_last = 0;
  always @(posedge clk) if (rst_n) begin
    if (b_wr_en) begin
      chk(int'(b_wr_row) == b_writes && b_wr_data == pat(1, 4 + b_writes, 2), $sformatf("Reg B write %0d", b_writes));
      b_writes++;
    end
    if (arr_clear) stream_idx++;
    if (arr_shift) begin
      int s;
      s = (stream_idx == 1) ? 0 : 1;
      chk(en, "shift with en low");
      if (stream_idx == 1 || stream_idx == 3) begin
        int nr, nk, rb, m, w;
        nr = (s == 0) ? 5 : 3; nk = (s == 0) ? 6 : 1; rb = (s == 0) ? 10 : 0; m = (s == 0) ? 0 : 2; w = (s == 0) ? 1 : 0;
        if (arr_a_valid) begin
          chk(arr_a == pat(m, rb + shifts[s], w) && int'(arr_a_n) == rb + shifts[s],
              $sformatf("A row %0d of stream %0d", shifts[s], s));
        end else empty_shifts[s]++;
        chk(arr_row_en == ROWS'((1 << nk) - 1), "row enables");
        if (s == 0) chk(out_mat == 4'd3 && out_k_base == 16'd40 && out_last && out_func == ACT_HTANH, "output description");
        shifts[s]++;
      end else chk(0, "shift outside a STREAM");
    end
    if (dut.state == 3'd6) begin
      if (rd_valid) reads_in_wait++;
      if (arr_shift) shifts_in_wait++;
    end
    // flush length: enabled cycles in FLUSH after the final shift
    if (dut.state == 3'd5 && en) flush_cnt++;
  end

  initial begin
    int t;
    imem_we = 0; imem_addr = '0; imem_wdata = '0; start = 0; start_pc = '0; agg_count = '0;
    rd_ready = 0; en = 1; rsp_valid = 0; rsp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    begin
      seq_instr_t p [5];
      p[0] = instr(OP_PRELOAD, .mat(1), .row_base(4), .nrows(8), .col_word(2));
      p[1] = instr(OP_STREAM, .mat(0), .row_base(10), .nrows(5), .col_word(1), .out_mat(3), .k_base(40), .nk(6),
                   .last(1'b1), .func(ACT_HTANH));
      p[2] = instr(OP_WAIT, .wait_count(30));
      p[3] = instr(OP_STREAM, .mat(2), .row_base(0), .nrows(3), .col_word(0), .nk(1));
      p[4] = instr(OP_HALT);
      for (int i = 0; i < 5; i++) begin
        imem_we = 1; imem_addr = 4'(i); imem_wdata = p[i];
        @(negedge clk);
      end
      imem_we = 0;
    end
    start = 1; start_pc = 0;
    @(negedge clk);
    start = 0;
    chk(busy, "busy after start");
    // reach the WAIT
    t = 0;
    while (dut.state != 3'd6 && t < 5000) begin @(negedge clk); t++; end
    chk(dut.state == 3'd6, "reached WAIT");
    chk(flush_cnt == 8 - 1 || flush_cnt == 8, $sformatf("flush of %0d enabled cycles", flush_cnt + 1));
    repeat (50) @(negedge clk);
    agg_count = 16'd29;
    repeat (20) @(negedge clk);
    chk(dut.state == 3'd6, "still waiting below threshold");
    agg_count = 16'd30;
    t = 0;
    while (!done && t < 5000) begin @(negedge clk); t++; end
    chk(done && !busy, "done after HALT");
    chk(b_writes == 8, $sformatf("%0d Reg B writes", b_writes));
    chk(shifts[0] == 5 + 6 - 1 && empty_shifts[0] == 5, $sformatf("stream 0: %0d shifts, %0d empty", shifts[0], empty_shifts[0]));
    chk(shifts[1] == 3 && empty_shifts[1] == 0, $sformatf("stream 1: %0d shifts, %0d empty", shifts[1], empty_shifts[1]));
    chk(reads_in_wait == 0 && shifts_in_wait == 0, "nothing happens during WAIT");
    chk(reads.size() == 8 + 5 + 3, $sformatf("%0d reads", reads.size()));
    for (int i = 0; i < reads.size(); i++) begin
      int m, r, w;
      if (i < 8)       begin m = 1; r = 4 + i;       w = 2; end
      else if (i < 13) begin m = 0; r = 10 + i - 8;  w = 1; end
      else             begin m = 2; r = i - 13;      w = 0; end
      chk(reads[i].m == m && reads[i].r == r && reads[i].w == w, $sformatf("read %0d address", i));
    end
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
