// pmi: programmable memory interface (memory controller) of a slice.
//
// Holds the mapping table that turns abstract matrix indices into physical
// word addresses: element (row, col) of matrix m is lane col%8 of word
//   table[m].base + row * table[m].stride + col/8.
// The table is written by configuration packets (cfg_we).  Three clients share
// the memory port:
//   * the sequencer reads whole 8-element words (rows of A, rows of B^T),
//     addressed by (matrix, row, word);
//   * the aggregation engine reads and writes single 16-bit elements addressed
//     by (matrix, row n, column k); writes use byte enables so the other seven
//     lanes of the word are untouched;
//   * host write packets store whole words at physical addresses.
// A round-robin arbiter picks one request per cycle.  The memory answers reads
// in order; a tag FIFO remembers which client (and lane) each outstanding read
// belongs to, and a read is only issued while the tag FIFO has room.  Read
// data is returned to the client in the cycle it arrives (clients keep room).
//
// The paper specifies the mapping table, its programming by configuration
// packets, the streaming of operands and the fetch/write-back for the
// aggregation engine.  The table layout, the client set, the arbiter and the
// memory handshake are this design's choice.  The duplicated writes the paper
// mentions for convolutions mapped to matrix products are not implemented.
module pmi
  import ms_pkg::*;
#(
  parameter int unsigned TAG_DEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // mapping-table programming
  input  logic               cfg_we,
  input  logic [MAT_W-1:0]   cfg_index,
  input  pmi_entry_t         cfg_entry,
  // client 0: sequencer word reads
  input  logic               s_req_valid,
  output logic               s_req_ready,
  input  logic [MAT_W-1:0]   s_mat,
  input  logic [IDX_W-1:0]   s_row,
  input  logic [7:0]         s_word,
  output logic               s_rsp_valid,
  output logic [MEM_DW-1:0]  s_rsp_data,
  // client 1: aggregation engine element read / write
  input  logic               g_req_valid,
  output logic               g_req_ready,
  input  logic               g_we,
  input  logic [MAT_W-1:0]   g_mat,
  input  logic [IDX_W-1:0]   g_row,
  input  logic [IDX_W-1:0]   g_col,
  input  fp16_t              g_wdata,
  output logic               g_rsp_valid,
  output fp16_t              g_rsp_data,
  // client 2: host word writes
  input  logic               h_req_valid,
  output logic               h_req_ready,
  input  logic [MEM_AW-1:0]  h_addr,
  input  logic [MEM_DW-1:0]  h_wdata,
  // memory port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [MEM_AW-1:0]  mem_req_addr,
  output logic [MEM_BEW-1:0] mem_req_be,
  output logic [MEM_DW-1:0]  mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [MEM_DW-1:0]  mem_rsp_data
);

  pmi_entry_t table_q [NMAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NMAT; i++) table_q[i] <= '0;
    end else if (cfg_we) begin
      table_q[cfg_index] <= cfg_entry;
    end
  end

  function automatic logic [MEM_AW-1:0] word_addr(input pmi_entry_t e, input logic [IDX_W-1:0] row,
                                                 input logic [IDX_W-1:0] word);
    return e.base + MEM_AW'(row * e.stride) + MEM_AW'(word);
  endfunction

  // ------------------------------------------------------------ tag FIFO
  localparam int unsigned TAG_W = 2 + 3;   // client, lane
  logic             tag_push, tag_ready, tag_valid;
  logic [TAG_W-1:0] tag_in, tag_out;

  sync_fifo #(.WIDTH(TAG_W), .DEPTH(TAG_DEPTH)) u_tags (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (tag_push),
    .in_ready (tag_ready),
    .in_data  (tag_in),
    .out_valid(tag_valid),
    .out_ready(mem_rsp_valid),
    .out_data (tag_out),
    .count    ()
  );

  // ------------------------------------------------------------ arbitration
  logic [2:0] want, gnt;
  logic [1:0] rr;
  logic       g_is_read;

  assign g_is_read = !g_we;
  assign want[0]   = s_req_valid && tag_ready;
  assign want[1]   = g_req_valid && (g_we || tag_ready);
  assign want[2]   = h_req_valid;

  always_comb begin
    gnt = '0;
    for (int k = 0; k < 3; k++) begin
      int i;
      i = (int'(rr) + k) % 3;
      if (gnt == '0 && want[i]) gnt[i] = 1'b1;
    end
    if (!mem_req_ready) gnt = '0;
  end

  assign s_req_ready = gnt[0];
  assign g_req_ready = gnt[1];
  assign h_req_ready = gnt[2];

  always_comb begin
    mem_req_valid = |want;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_be    = '1;
    mem_req_wdata = '0;
    tag_in        = '0;
    tag_push      = 1'b0;
    // present the request the arbiter would pick (every branch sets every
    // field, so nothing leaks from a lower-priority client)
    for (int k = 2; k >= 0; k--) begin
      int i;
      i = (int'(rr) + k) % 3;
      if (want[i]) begin
        case (i)
          0: begin
            mem_req_we    = 1'b0;
            mem_req_addr  = word_addr(table_q[s_mat], s_row, IDX_W'(s_word));
            mem_req_be    = '1;
            mem_req_wdata = '0;
            tag_in        = {2'd0, 3'd0};
          end
          1: begin
            mem_req_we    = g_we;
            mem_req_addr  = word_addr(table_q[g_mat], g_row, IDX_W'(g_col >> 3));
            mem_req_be    = MEM_BEW'(2'b11) << (2 * g_col[2:0]);
            mem_req_wdata = {LANES{g_wdata}};
            tag_in        = {2'd1, g_col[2:0]};
          end
          default: begin
            mem_req_we    = 1'b1;
            mem_req_addr  = h_addr;
            mem_req_be    = '1;
            mem_req_wdata = h_wdata;
            tag_in        = {2'd2, 3'd0};
          end
        endcase
      end
    end
    tag_push = (gnt[0]) || (gnt[1] && g_is_read);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (|gnt) begin
      if (gnt[0])      rr <= 2'd1;
      else if (gnt[1]) rr <= 2'd2;
      else             rr <= 2'd0;
    end
  end

  // ------------------------------------------------------------ responses
  assign s_rsp_valid = mem_rsp_valid && tag_valid && (tag_out[4:3] == 2'd0);
  assign s_rsp_data  = mem_rsp_data;
  assign g_rsp_valid = mem_rsp_valid && tag_valid && (tag_out[4:3] == 2'd1);
  assign g_rsp_data  = mem_rsp_data[16*tag_out[2:0] +: 16];

endmodule
