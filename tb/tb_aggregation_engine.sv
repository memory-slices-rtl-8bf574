// tb_aggregation_engine: test of the aggregation engine and its activation unit.
//
// The testbench plays the PMI element port: a 4 x 4 x 4 store of fp16 values
// (matrix, row, column) with random ready and a random read latency of 1..6
// cycles.  600 random partial sums (random targets, random last flag and
// function) are offered with random gaps.  Each one must be read, added in
// fp16 and written back; with 'last' the function f(x) is applied to the sum.
// Checks: every write-back value and address against a reference model,
// agg_count after every write, the final store, and that one element takes at
// least the four engine states (read request, wait, write, accept) when the
// memory answers at once.  Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_aggregation_engine;
  import ms_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic in_valid, in_ready, g_req_valid, g_req_ready, g_we, g_rsp_valid, busy;
  agg_elem_t in_elem;
  logic [MAT_W-1:0] g_mat;
  logic [IDX_W-1:0] g_row, g_col;
  fp16_t g_wdata, g_rsp_data;
  logic [15:0] agg_count;

  aggregation_engine dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_elem,
    .g_req_valid, .g_req_ready, .g_we, .g_mat, .g_row, .g_col, .g_wdata,
    .g_rsp_valid, .g_rsp_data, .agg_count, .busy
  );

  function automatic logic [15:0] ref_act(input act_e f, input logic [15:0] x);
    logic [15:0] q, s;
    case (f)
      ACT_RELU:  return x[15] ? 16'h0000 : x;
      ACT_HTANH: return (x[14:0] >= 15'h3c00) ? {x[15], 15'h3c00} : x;
      ACT_HSIGMOID: begin
        q = real_to_fp16(fp16_to_real(x) / 4.0);
        s = ref_add(q, 16'h3800);
        if (s[15]) return 16'h0000;
        if (s[14:0] >= 15'h3c00) return 16'h3c00;
        return s;
      end
      default: return x;
    endcase
  endfunction

  logic [15:0] store [4][4][4];    // DUT-side memory
  logic [15:0] model [4][4][4];    // reference
  agg_elem_t   exp_q [$];
  int          writes = 0, sent = 0;
  bit          fast = 0;

  // PMI element port model
  int lat;
  initial begin
    g_req_ready = 0; g_rsp_valid = 0; g_rsp_data = '0;
    forever begin
      @(negedge clk);
      g_rsp_valid = 0;
      g_req_ready = fast ? 1'b1 : ($urandom_range(0, 2) != 0);
      #0.1;
      if (g_req_valid && g_req_ready) begin
        int m, r, c;
        m = int'(g_mat); r = int'(g_row); c = int'(g_col);
        if (g_we) begin
          agg_elem_t e;
          logic [15:0] v;
          e = exp_q.pop_front();
          chk(int'(e.mat) == m && int'(e.n) == r && int'(e.k) == c, "write-back address");
          v = ref_add(model[m][r][c], e.value);
          if (e.last) v = ref_act(e.func, v);
          chk(g_wdata == v, $sformatf("write-back value got %h exp %h", g_wdata, v));
          model[m][r][c] = v;
          @(posedge clk);
          store[m][r][c] = g_wdata;
          writes++;
          #0.1;
          chk(agg_count == 16'(writes), "agg_count");
        end else begin
          @(negedge clk);
          g_req_ready = 0;
          lat = fast ? 0 : $urandom_range(0, 5);
          repeat (lat) @(negedge clk);
          g_rsp_data  = store[m][r][c];
          g_rsp_valid = 1;
        end
      end
    end
  end

  initial begin
    int t0, t1;
    in_valid = 0; in_elem = '0;
    for (int m = 0; m < 4; m++) for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
      store[m][r][c] = rand_fp16(12, 16);
      model[m][r][c] = store[m][r][c];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 600; i++) begin
      agg_elem_t e;
      e.mat = MAT_W'($urandom_range(0, 3));
      e.n = IDX_W'($urandom_range(0, 3));
      e.k = IDX_W'($urandom_range(0, 3));
      e.value = rand_fp16(12, 16);
      e.last = ($urandom_range(0, 3) == 0);
      e.func = act_e'($urandom_range(0, 3));
      in_elem = e;
      in_valid = 1;
      #0.1;
      while (!in_ready) begin @(negedge clk); #0.1; end
      exp_q.push_back(e);
      @(negedge clk);
      in_valid = 0;
      sent++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (writes < sent) @(negedge clk);
    // timing with an immediately answering memory
    fast = 1;
    repeat (4) @(negedge clk);
    in_elem = '{mat: 0, k: 1, n: 2, value: 16'h3c00, last: 1'b0, func: ACT_NONE};
    in_valid = 1;
    t0 = writes;
    @(negedge clk);
    exp_q.push_back(in_elem);
    in_valid = 0;
    t1 = 0;
    while (writes == t0) begin @(negedge clk); t1++; end
    chk(t1 >= 3 && t1 <= 4, $sformatf("one element took %0d cycles", t1 + 1));
    repeat (5) @(negedge clk);
    for (int m = 0; m < 4; m++) for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++)
      chk(store[m][r][c] == model[m][r][c], "final store");
    chk(!busy && exp_q.size() == 0, "engine idle, nothing outstanding");
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
