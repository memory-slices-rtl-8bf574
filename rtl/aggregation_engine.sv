// aggregation_engine: the slice's global accumulator.
//
// Takes one received partial sum at a time (element (k, n) of output matrix
// mat) and performs a read-modify-write through the PMI: it reads the value
// already held in memory for that element, adds the new partial sum with an
// fp16 adder, and writes the result back.  When the partial sum is marked as
// the last one for that element, the activation unit f(x) is applied to the
// total before the write.  agg_count counts the partial sums written back in
// this slice; a sequencer waits on it to honour a dependency (for example,
// until the partial sums of other slices have arrived, or until the inputs of
// the next layer are complete).
// Elements are handled strictly one after another, so two partial sums of the
// same element can never race.  Latency per element: one cycle to accept, the
// memory read latency, one cycle to write.
//
// The read of the stored portion, the addition, f(x) on the last partial sum
// and the write-back are the paper's (with the '+' and 'f(x)' of its
// drawing); the one-at-a-time schedule and the counter are this design's.
module aggregation_engine
  import ms_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  agg_elem_t        in_elem,
  // element access through the PMI
  output logic             g_req_valid,
  input  logic             g_req_ready,
  output logic             g_we,
  output logic [MAT_W-1:0] g_mat,
  output logic [IDX_W-1:0] g_row,
  output logic [IDX_W-1:0] g_col,
  output fp16_t            g_wdata,
  input  logic             g_rsp_valid,
  input  fp16_t            g_rsp_data,
  output logic [15:0]      agg_count,
  output logic             busy
);

  typedef enum logic [1:0] {A_IDLE, A_READ, A_WAIT, A_WRITE} astate_e;
  astate_e   st;
  agg_elem_t e_q;
  fp16_t     sum, act, res_q;

  fp16_add        u_add (.a(g_rsp_data), .b(e_q.value), .s(sum));
  activation_unit u_act (.func(e_q.func), .x(sum), .y(act));

  assign in_ready    = (st == A_IDLE);
  assign g_req_valid = (st == A_READ) || (st == A_WRITE);
  assign g_we        = (st == A_WRITE);
  assign g_mat       = e_q.mat;
  assign g_row       = e_q.n;
  assign g_col       = e_q.k;
  assign g_wdata     = res_q;
  assign busy        = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= A_IDLE;
      e_q         <= '0;
      res_q       <= '0;
      agg_count <= '0;
    end else begin
      case (st)
        A_IDLE:  if (in_valid) begin
          e_q <= in_elem;
          st  <= A_READ;
        end
        A_READ:  if (g_req_ready) st <= A_WAIT;
        A_WAIT:  if (g_rsp_valid) begin
          res_q <= e_q.last ? act : sum;
          st    <= A_WRITE;
        end
        A_WRITE: if (g_req_ready) begin
          agg_count <= agg_count + 16'd1;
          st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

endmodule
