// sequencer: programmable state machine that runs a slice's data flow.
//
// A program of up to IMEM_D seq_instr_t words is written by configuration
// packets (imem_we) and started at word 'start_pc' by a start packet.
// Instructions:
//   PRELOAD  read rows row_base .. row_base+nrows-1 (word col_word) of a matrix
//            stored as B^T and write them into Reg B of array rows 0..nrows-1,
//            one row per returned word.
//   STREAM   read rows of A (word col_word) and shift each into the array the
//            moment it arrives; then shift nk-1 empty rows so that the last row
//            of A passes every used array row; then wait until the adder trees
//            are empty.  Array rows >= nk are masked.  The output matrix, the
//            column offset k_base and the last/func flags are held for the
//            network interface while the instruction runs.
//   WAIT     wait until the aggregation engine of this slice has written back
//            at least wait_count partial sums (a dependency on other slices).
//   HALT     stop; 'done' rises.
// Data-driven timing: a shift happens only on a cycle with 'en' high (no
// back-pressure from the network interface) and with a full row of A at hand,
// so the operands of one row always enter together.  Reads are issued ahead,
// at most RBUF_DEPTH words in flight or buffered.
//
// From the paper: a programmable state machine that preloads B, streams A,
// keeps the rows synchronised, moves results from the adder trees to the
// network interface, and tracks dependencies.  The instruction set, the read
// buffer and the drain/flush policy are this design's choice.
module sequencer
  import ms_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 8,
  parameter int unsigned RBUF_DEPTH = 4,
  parameter int unsigned FLUSH_CYC  = 8   // enabled cycles from the last shift until the trees are empty
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // program
  input  logic                    imem_we,
  input  logic [$clog2(IMEM_D)-1:0] imem_addr,
  input  seq_instr_t              imem_wdata,
  input  logic                    start,
  input  logic [$clog2(IMEM_D)-1:0] start_pc,
  output logic                    busy,
  output logic                    done,
  // dependencies
  input  logic [15:0]             agg_count,
  // memory reads through the PMI
  output logic                    rd_valid,
  input  logic                    rd_ready,
  output logic [MAT_W-1:0]        rd_mat,
  output logic [IDX_W-1:0]        rd_row,
  output logic [7:0]              rd_word,
  input  logic                    rsp_valid,
  input  logic [MEM_DW-1:0]       rsp_data,
  // array control
  input  logic                    en,
  output logic                    arr_clear,
  output logic                    arr_shift,
  output logic [ROWS-1:0]         arr_row_en,
  output fp16_t [COLS-1:0]        arr_a,
  output logic                    arr_a_valid,
  output logic [IDX_W-1:0]        arr_a_n,
  output logic                    b_wr_en,
  output logic [$clog2(ROWS)-1:0] b_wr_row,
  output fp16_t [COLS-1:0]        b_wr_data,
  // description of the results now leaving the adder trees
  output logic [MAT_W-1:0]        out_mat,
  output logic [IDX_W-1:0]        out_k_base,
  output logic                    out_last,
  output act_e                    out_func
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_PRELOAD, S_STREAM, S_DRAIN, S_FLUSH, S_WAIT} state_e;

  state_e     state;
  seq_instr_t imem [IMEM_D];
  seq_instr_t ir;
  logic [$clog2(IMEM_D)-1:0] pc;

  logic [IDX_W-1:0] issued, received, shifted;   // rows read, answered, shifted in
  logic [8:0]       drain_left;
  logic [3:0]       flush_left;
  logic [$clog2(RBUF_DEPTH+1):0] inflight;       // read but not yet answered

  // ------------------------------------------------------------ program memory
  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  // ------------------------------------------------------------ read buffer for A
  logic                   rb_push, rb_valid, rb_pop;
  logic [MEM_DW-1:0]      rb_data;
  logic [$clog2(RBUF_DEPTH):0] rb_count;

  sync_fifo #(.WIDTH(MEM_DW), .DEPTH(RBUF_DEPTH)) u_rbuf (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rb_push),
    .in_ready (),
    .in_data  (rsp_data),
    .out_valid(rb_valid),
    .out_ready(rb_pop),
    .out_data (rb_data),
    .count    (rb_count)
  );

  assign rb_push = rsp_valid && (state == S_STREAM);

  // ------------------------------------------------------------ read requests
  logic room;
  assign room     = (32'(inflight) + 32'(rb_count)) < RBUF_DEPTH;
  assign rd_mat   = ir.mat;
  assign rd_row   = ir.row_base + issued;
  assign rd_word  = ir.col_word;
  assign rd_valid = ((state == S_STREAM) && (issued < ir.nrows) && room) ||
                    ((state == S_PRELOAD) && (issued < ir.nrows));

  // ------------------------------------------------------------ array control
  assign arr_shift   = en && (((state == S_STREAM) && rb_valid) || (state == S_DRAIN));
  assign rb_pop      = en && (state == S_STREAM) && rb_valid;
  assign arr_a_valid = (state == S_STREAM);
  assign arr_a       = rb_data;
  assign arr_a_n     = ir.row_base + shifted;
  assign arr_clear   = (state == S_FETCH);

  for (genvar r = 0; r < ROWS; r++) begin : g_rowen
    assign arr_row_en[r] = (r < int'(ir.nk));
  end

  assign b_wr_en   = rsp_valid && (state == S_PRELOAD);
  assign b_wr_row  = received[$clog2(ROWS)-1:0];
  assign b_wr_data = rsp_data;

  assign out_mat    = ir.out_mat;
  assign out_k_base = ir.k_base;
  assign out_last   = ir.last;
  assign out_func   = ir.func;

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pc         <= '0;
      ir         <= '0;
      issued     <= '0;
      received   <= '0;
      shifted    <= '0;
      inflight   <= '0;
      drain_left <= '0;
      flush_left <= '0;
      done       <= 1'b0;
    end else begin
      // outstanding reads
      inflight <= inflight + (rd_valid && rd_ready) - rsp_valid;
      if (rd_valid && rd_ready) issued <= issued + 1'b1;
      if (rsp_valid) received <= received + 1'b1;

      case (state)
        S_IDLE: begin
          if (start) begin
            pc    <= start_pc;
            done  <= 1'b0;
            state <= S_FETCH;
          end
        end
        S_FETCH: begin
          ir       <= imem[pc];
          pc       <= pc + 1'b1;
          issued   <= '0;
          received <= '0;
          shifted  <= '0;
          case (imem[pc].op)
            OP_PRELOAD: state <= S_PRELOAD;
            OP_STREAM:  state <= S_STREAM;
            OP_WAIT:    state <= S_WAIT;
            default: begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          endcase
        end
        S_PRELOAD: begin
          if (ir.nrows == '0 || received + (rsp_valid ? 1 : 0) == ir.nrows) state <= S_FETCH;
        end
        S_STREAM: begin
          if (arr_shift) begin
            shifted <= shifted + 1'b1;
            if (shifted + 1'b1 == ir.nrows) begin
              drain_left <= ir.nk - 9'd1;
              state      <= (ir.nk > 9'd1) ? S_DRAIN : S_FLUSH;
              flush_left <= 4'(FLUSH_CYC);
            end
          end
          if (ir.nrows == '0) state <= S_FETCH;
        end
        S_DRAIN: begin
          if (arr_shift) begin
            shifted    <= shifted + 1'b1;
            drain_left <= drain_left - 1'b1;
            if (drain_left == 9'd1) begin
              state      <= S_FLUSH;
              flush_left <= 4'(FLUSH_CYC);
            end
          end
        end
        S_FLUSH: begin
          if (en) begin
            flush_left <= flush_left - 1'b1;
            if (flush_left == 4'd1) state <= S_FETCH;
          end
        end
        S_WAIT: begin
          if (agg_count >= ir.wait_count) state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
