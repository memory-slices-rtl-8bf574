// dram_model: behavioural model of a slice's DRAM bank (one HMC vault or HBM
// channel) for simulation only.
//
// Words of 128 bits in a sparse associative array (unwritten words read as
// zero).  A request is accepted at most once every II cycles, which sets the
// bandwidth (16 bytes per II cycles; II = 3 at 2 GHz is about 10 GB/s, the
// per-slice bandwidth of the HMC-based configuration).  Reads are answered in
// order LAT cycles after acceptance; writes honour the byte enables.
// Tasks let a testbench load and inspect the contents directly.
module dram_model
  import ms_pkg::*;
#(
  parameter int unsigned LAT = 10,
  parameter int unsigned II  = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [MEM_AW-1:0]  req_addr,
  input  logic [MEM_BEW-1:0] req_be,
  input  logic [MEM_DW-1:0]  req_wdata,
  output logic               rsp_valid,
  output logic [MEM_DW-1:0]  rsp_data
);

  logic [MEM_DW-1:0] mem [logic [MEM_AW-1:0]];
  int unsigned gap;
  longint unsigned cyc;
  typedef struct { longint unsigned t; logic [MEM_DW-1:0] d; } rsp_t;
  rsp_t q[$];
  int unsigned reads, writes;

  function automatic logic [MEM_DW-1:0] peek(input logic [MEM_AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(input logic [MEM_AW-1:0] a, input logic [MEM_DW-1:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [15:0] peek16(input logic [MEM_AW-1:0] a, input int lane);
    logic [MEM_DW-1:0] w;
    w = peek(a);
    return w[16*lane +: 16];
  endfunction

  assign req_ready = rst_n && (gap >= II - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap       <= II;
      cyc       <= 0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      reads     <= 0;
      writes    <= 0;
    end else begin
      cyc <= cyc + 1;
      gap <= gap + 1;
      if (req_valid && req_ready) begin
        gap <= 0;
        if (req_we) begin
          logic [MEM_DW-1:0] w;
          w = peek(req_addr);
          for (int b = 0; b < MEM_BEW; b++) if (req_be[b]) w[8*b +: 8] = req_wdata[8*b +: 8];
          mem[req_addr] = w;
          writes <= writes + 1;
        end else begin
          q.push_back('{t: cyc + LAT, d: peek(req_addr)});
          reads <= reads + 1;
        end
      end
      rsp_valid <= 1'b0;
      if (q.size() != 0 && q[0].t <= cyc) begin
        rsp_t r;
        r = q.pop_front();
        rsp_valid <= 1'b1;
        rsp_data  <= r.d;
      end
    end
  end

endmodule
