// memory_slice: one memory slice, the building block of the memory system.
//
// Joins the programmable memory interface (PMI), the sequencer, the ROWS x
// COLS systolic multiplier array, the accumulator (one adder tree per row), the
// aggregation engine and the network interface.  The slice's DRAM bank is not
// inside: its port (mem_*) is a port of the slice.  Data flow of one matrix
// product, as numbered in the paper's walk-through:
//   1 the sequencer preloads a partition of B into Reg B and starts streaming
//     A; 2 the PMI reads rows of A and each enters the first array row while
//     the rows below shift down; 3 all multipliers work in parallel; 4 the row
//     adder trees sum each row's products, giving one diagonal of the output;
//   5 the network interface packetizes the diagonal by destination slice
//     (locally looped back if it is this slice); 6 the network carries it;
//   7 the receiving interface unpacks it; 8 the aggregation engine adds each
//     partial sum to the stored value (f(x) on the last one); 9 the PMI fetches
//     and writes back the element.
// Back-pressure: while a result vector waits for the network interface, 'en'
// is low and the whole array, multiplier pipes and trees hold still (the
// registers act as the buffers; there is no output FIFO).
module memory_slice
  import ms_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // router local port
  output logic               net_out_valid,
  input  logic               net_out_ready,
  output flit_t              net_out_flit,
  input  logic               net_in_valid,
  output logic               net_in_ready,
  input  flit_t              net_in_flit,
  // DRAM bank
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [MEM_AW-1:0]  mem_req_addr,
  output logic [MEM_BEW-1:0] mem_req_be,
  output logic [MEM_DW-1:0]  mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [MEM_DW-1:0]  mem_rsp_data,
  // status
  output logic               seq_busy,
  output logic               seq_done,
  output logic               agg_busy,
  output logic [15:0]        agg_count,
  output logic               stall,      // a result vector waits for the network interface
  output logic               tx_local,   // a packet head looped back locally
  output logic               tx_remote   // a packet head sent into the network
);

  // ------------------------------------------------------------ signals
  logic en;

  // sequencer <-> PMI
  logic s_req_valid, s_req_ready, s_rsp_valid;
  logic [MAT_W-1:0] s_mat;
  logic [IDX_W-1:0] s_row;
  logic [7:0] s_word;
  logic [MEM_DW-1:0] s_rsp_data;

  // aggregation <-> PMI
  logic g_req_valid, g_req_ready, g_we, g_rsp_valid;
  logic [MAT_W-1:0] g_mat;
  logic [IDX_W-1:0] g_row, g_col;
  fp16_t g_wdata, g_rsp_data;

  // NI <-> PMI host writes
  logic h_req_valid, h_req_ready;
  logic [MEM_AW-1:0] h_addr;
  logic [MEM_DW-1:0] h_wdata;

  // configuration
  logic pmi_cfg_we, imem_we, seq_start;
  logic [MAT_W-1:0] pmi_cfg_index;
  pmi_entry_t pmi_cfg_entry;
  logic [$clog2(IMEM_D)-1:0] imem_addr, seq_start_pc;
  seq_instr_t imem_wdata;

  // array
  logic arr_clear, arr_shift, arr_a_valid, b_wr_en;
  logic [ROWS-1:0] arr_row_en;
  fp16_t [COLS-1:0] arr_a, b_wr_data;
  logic [IDX_W-1:0] arr_a_n;
  logic [$clog2(ROWS)-1:0] b_wr_row;
  logic [ROWS-1:0] prod_valid;
  fp16_t [ROWS-1:0][COLS-1:0] prod;
  logic [IDX_W-1:0] prod_n0;

  // accumulator -> NI
  logic [ROWS-1:0] acc_valid;
  fp16_t [ROWS-1:0] acc_sum;
  logic [IDX_W-1:0] acc_n0;
  logic vec_ready;
  logic [MAT_W-1:0] out_mat;
  logic [IDX_W-1:0] out_k_base;
  logic out_last;
  act_e out_func;

  // NI -> aggregation
  logic agg_valid, agg_ready;
  agg_elem_t agg_elem;

  assign stall = (|acc_valid) && !vec_ready;
  assign en    = !stall;

  // ------------------------------------------------------------ blocks
  pmi u_pmi (
    .clk, .rst_n,
    .cfg_we(pmi_cfg_we), .cfg_index(pmi_cfg_index), .cfg_entry(pmi_cfg_entry),
    .s_req_valid, .s_req_ready, .s_mat, .s_row, .s_word, .s_rsp_valid, .s_rsp_data,
    .g_req_valid, .g_req_ready, .g_we, .g_mat, .g_row, .g_col, .g_wdata, .g_rsp_valid, .g_rsp_data,
    .h_req_valid, .h_req_ready, .h_addr, .h_wdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_be, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data
  );

  sequencer #(.ROWS(ROWS), .COLS(COLS)) u_seq (
    .clk, .rst_n,
    .imem_we, .imem_addr, .imem_wdata, .start(seq_start), .start_pc(seq_start_pc),
    .busy(seq_busy), .done(seq_done), .agg_count,
    .rd_valid(s_req_valid), .rd_ready(s_req_ready), .rd_mat(s_mat), .rd_row(s_row), .rd_word(s_word),
    .rsp_valid(s_rsp_valid), .rsp_data(s_rsp_data),
    .en, .arr_clear, .arr_shift, .arr_row_en, .arr_a, .arr_a_valid, .arr_a_n,
    .b_wr_en, .b_wr_row, .b_wr_data,
    .out_mat, .out_k_base, .out_last, .out_func
  );

  multiplier_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .en, .clear(arr_clear), .shift(arr_shift), .row_en(arr_row_en),
    .a_in(arr_a), .a_in_valid(arr_a_valid), .a_in_n(arr_a_n),
    .b_wr_en, .b_wr_row, .b_wr_data,
    .prod_valid, .prod, .prod_n0
  );

  adder_tree_vector #(.ROWS(ROWS), .COLS(COLS)) u_acc (
    .clk, .rst_n, .en,
    .in_valid(prod_valid), .in(prod), .in_n0(prod_n0),
    .out_valid(acc_valid), .sum(acc_sum), .out_n0(acc_n0)
  );

  network_interface #(.ROWS(ROWS)) u_ni (
    .clk, .rst_n, .my_x, .my_y,
    .vec_valid(|acc_valid), .vec_ready, .vec_mask(acc_valid), .vec_val(acc_sum), .vec_n0(acc_n0),
    .vec_mat(out_mat), .vec_k_base(out_k_base), .vec_last(out_last), .vec_func(out_func),
    .net_out_valid, .net_out_ready, .net_out_flit, .net_in_valid, .net_in_ready, .net_in_flit,
    .agg_valid, .agg_ready, .agg_elem,
    .h_req_valid, .h_req_ready, .h_addr, .h_wdata,
    .pmi_cfg_we, .pmi_cfg_index, .pmi_cfg_entry,
    .imem_we, .imem_addr, .imem_wdata, .seq_start, .seq_start_pc,
    .tx_local, .tx_remote
  );

  aggregation_engine u_agg (
    .clk, .rst_n,
    .in_valid(agg_valid), .in_ready(agg_ready), .in_elem(agg_elem),
    .g_req_valid, .g_req_ready, .g_we, .g_mat, .g_row, .g_col, .g_wdata, .g_rsp_valid, .g_rsp_data,
    .agg_count, .busy(agg_busy)
  );

endmodule
