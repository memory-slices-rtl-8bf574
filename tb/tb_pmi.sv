// tb_pmi: test of the programmable memory interface.
//
// The PMI drives the behavioural DRAM (latency 10, one request per 2 cycles).
// Three mapping-table entries are programmed: matrix 1 (base 0x1000, stride
// 3), matrix 2 (base 0x2000, stride 2), matrix 5 (base 0x3000, stride 1).
// All three clients then run at the same time on separate regions:
//   * sequencer: 200 word reads of matrix 1 (pre-filled), checked against the
//     address rule base + row*stride + word and the data;
//   * aggregation port: 150 element writes then reads of matrix 2, checking
//     the byte-enable merge (other lanes untouched) and read-back lane select;
//   * host: 100 whole-word writes at physical addresses 0x4000.., checked in
//     the DRAM afterwards.
// Also checks the read latency seen by the sequencer (DRAM latency + 1) when
// the PMI is otherwise idle.  Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_pmi;
  import ms_pkg::*;
  import ms_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic cfg_we;
  logic [MAT_W-1:0] cfg_index;
  pmi_entry_t cfg_entry;
  logic s_req_valid, s_req_ready, s_rsp_valid;
  logic [MAT_W-1:0] s_mat;
  logic [IDX_W-1:0] s_row;
  logic [7:0] s_word;
  logic [MEM_DW-1:0] s_rsp_data;
  logic g_req_valid, g_req_ready, g_we, g_rsp_valid;
  logic [MAT_W-1:0] g_mat;
  logic [IDX_W-1:0] g_row, g_col;
  fp16_t g_wdata, g_rsp_data;
  logic h_req_valid, h_req_ready;
  logic [MEM_AW-1:0] h_addr;
  logic [MEM_DW-1:0] h_wdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [MEM_AW-1:0] mem_req_addr;
  logic [MEM_BEW-1:0] mem_req_be;
  logic [MEM_DW-1:0] mem_req_wdata, mem_rsp_data;

  pmi dut (.*);

  dram_model #(.LAT(10), .II(2)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_be(mem_req_be), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  function automatic logic [127:0] pattern(input int a);
    return {4{32'(a * 32'h9e3779b9 + 1)}};
  endfunction

  logic [127:0] s_exp [$];
  fp16_t g_exp [$];
  int s_done = 0, g_done = 0, h_done = 0, s_rx = 0, g_rx = 0;

  always @(posedge clk) if (rst_n) begin
    if (s_rsp_valid) begin
      chk(s_exp.size() != 0 && s_rsp_data == s_exp[0], "sequencer read data");
      if (s_exp.size() != 0) void'(s_exp.pop_front());
      s_rx++;
    end
    if (g_rsp_valid) begin
      chk(g_exp.size() != 0 && g_rsp_data == g_exp[0], $sformatf("element read got %h", g_rsp_data));
      if (g_exp.size() != 0) void'(g_exp.pop_front());
      g_rx++;
    end
  end

  task automatic cfg(input int idx, input int base, input int stride);
    cfg_we = 1; cfg_index = MAT_W'(idx); cfg_entry = pmi_ent(base, stride);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_index = '0; cfg_entry = '0;
    s_req_valid = 0; s_mat = '0; s_row = '0; s_word = '0;
    g_req_valid = 0; g_we = 0; g_mat = '0; g_row = '0; g_col = '0; g_wdata = '0;
    h_req_valid = 0; h_addr = '0; h_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 'h1000; a < 'h1000 + 3*64; a++) u_mem.poke(MEM_AW'(a), pattern(a));
    @(negedge clk);
    cfg(1, 'h1000, 3);
    cfg(2, 'h2000, 2);
    cfg(5, 'h3000, 1);
    // idle read latency
    begin
      int t;
      s_req_valid = 1; s_mat = 1; s_row = 4; s_word = 2;
      s_exp.push_back(pattern('h1000 + 4*3 + 2));
      #0.1;
      while (!s_req_ready) begin @(negedge clk); #0.1; end
      @(negedge clk);
      s_req_valid = 0;
      t = 1;
      while (s_rx == 0) begin @(negedge clk); t++; end
      chk(t == 11 || t == 12, $sformatf("idle read latency %0d", t));
    end
    fork
      begin : seq_client
        for (int i = 0; i < 200; i++) begin
          int r, w;
          r = $urandom_range(0, 63); w = $urandom_range(0, 2);
          s_req_valid = 1; s_mat = 1; s_row = IDX_W'(r); s_word = 8'(w);
          #0.1;
          while (!s_req_ready) begin @(negedge clk); #0.1; end
          s_exp.push_back(pattern('h1000 + 3*r + w));
          @(negedge clk);
          s_req_valid = 0;
        end
        s_done = 1;
      end
      begin : agg_client
        logic [15:0] shadow [16][16];
        for (int r = 0; r < 16; r++) for (int c = 0; c < 16; c++) shadow[r][c] = 16'h0000;
        for (int i = 0; i < 150; i++) begin
          int r, c;
          r = $urandom_range(0, 15); c = $urandom_range(0, 15);
          shadow[r][c] = 16'($urandom);
          g_req_valid = 1; g_we = 1; g_mat = 2; g_row = IDX_W'(r); g_col = IDX_W'(c); g_wdata = shadow[r][c];
          #0.1;
          while (!g_req_ready) begin @(negedge clk); #0.1; end
          @(negedge clk);
          r = $urandom_range(0, 15); c = $urandom_range(0, 15);
          g_we = 0; g_row = IDX_W'(r); g_col = IDX_W'(c);
          #0.1;
          while (!g_req_ready) begin @(negedge clk); #0.1; end
          g_exp.push_back(shadow[r][c]);
          @(negedge clk);
          g_req_valid = 0;
        end
        g_done = 1;
      end
      begin : host_client
        for (int i = 0; i < 100; i++) begin
          h_req_valid = 1; h_addr = MEM_AW'('h4000 + i); h_wdata = pattern('h4000 + i);
          #0.1;
          while (!h_req_ready) begin @(negedge clk); #0.1; end
          @(negedge clk);
          h_req_valid = 0;
        end
        h_done = 1;
      end
    join
    repeat (40) @(negedge clk);
    chk(s_rx == 201 && s_exp.size() == 0, $sformatf("sequencer responses %0d", s_rx));
    chk(g_rx == 150 && g_exp.size() == 0, $sformatf("element responses %0d", g_rx));
    for (int i = 0; i < 100; i++) chk(u_mem.peek(MEM_AW'('h4000 + i)) == pattern('h4000 + i), $sformatf("host write %0d got %h", i, u_mem.peek(MEM_AW'('h4000 + i))));
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
