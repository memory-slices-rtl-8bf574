// ms_pkg: types and constants shared by every block of the memory-slice design.
//
// Numbers (binary16), flits, packet headers, sequencer instructions and the
// configuration records that a host writes into a slice are defined here so that
// producer and consumer agree on one layout.
//
// From the paper: 16-bit operands, 128-bit network links, a 2D torus of slices
// with up to 256 nodes (so 4-bit X and Y coordinates), 8 elements per multiplier
// row.  The field layout of headers, instructions and configuration records is
// this design's own choice; the paper only names what they must carry (the
// first index of a run of diagonal elements and its length, a mapping table of
// abstract indices to physical addresses, a program for the sequencer).
package ms_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned FP_W    = 16;             // binary16 operands
  localparam int unsigned FLIT_W  = 128;            // link width
  localparam int unsigned LANES   = FLIT_W / FP_W;  // elements per flit / memory word
  localparam int unsigned MEM_AW  = 26;             // 2^26 x 16 B = 1 GiB per slice
  localparam int unsigned MEM_DW  = 128;            // one memory word = one row of 8 elements
  localparam int unsigned MEM_BEW = MEM_DW / 8;     // byte enables
  localparam int unsigned COORD_W = 4;              // up to 16 x 16 slices
  localparam int unsigned IDX_W   = 16;             // matrix index width
  localparam int unsigned MAT_W   = 4;              // matrix identifiers per slice
  localparam int unsigned NMAT    = 1 << MAT_W;
  localparam int unsigned NMAP    = 8;              // destination-map entries per network interface
  localparam int unsigned IMEM_D  = 16;             // sequencer program words

  typedef logic [FP_W-1:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3c00;
  localparam fp16_t FP16_HALF = 16'h3800;
  localparam fp16_t FP16_INF  = 16'h7c00;
  localparam fp16_t FP16_NAN  = 16'h7e00;

  // ------------------------------------------------------------- activation
  typedef enum logic [1:0] {
    ACT_NONE     = 2'd0,  // identity
    ACT_RELU     = 2'd1,
    ACT_HSIGMOID = 2'd2,  // clamp(x/4 + 1/2, 0, 1)
    ACT_HTANH    = 2'd3   // clamp(x, -1, 1)
  } act_e;

  // ---------------------------------------------------------------- packets
  typedef enum logic [1:0] {
    PKT_PSUM  = 2'd0,  // partial sums of output elements (diagonal run)
    PKT_WRITE = 2'd1,  // host write of whole memory words
    PKT_CFG   = 2'd2   // configuration record
  } pkt_type_e;

  typedef enum logic [1:0] {
    CFG_PMI   = 2'd0,  // PMI mapping-table entry
    CFG_NIMAP = 2'd1,  // network-interface destination-map entry
    CFG_IMEM  = 2'd2,  // sequencer program word
    CFG_START = 2'd3   // start the sequencer at program word 'index'
  } cfg_target_e;

  // Head flit.  Payload flits follow: 8 elements each for PSUM, one memory word
  // each for WRITE, one record for CFG.
  typedef struct packed {
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    pkt_type_e          ptype;
    logic [7:0]         len;        // payload flits
    logic [MAT_W-1:0]   mat;        // PSUM: output matrix
    logic [IDX_W-1:0]   k0;         // PSUM: column of the first element
    logic [IDX_W-1:0]   n0;         // PSUM: row of the first element
    logic [8:0]         count;      // PSUM: elements in the run
    logic               last;       // PSUM: the final partial sum of these elements
    act_e               func;       // PSUM: function applied with the final partial sum
    logic [31:0]        addr;       // WRITE: first physical word address
    logic [7:0]         index;      // CFG: entry / program-word index
    cfg_target_e        cfg_target; // CFG: table written
    logic [11:0]        rsvd;
  } pkt_hdr_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // ------------------------------------------------------- configuration records
  // PMI mapping table: element (r, c) of matrix 'mat' is lane c%8 of word
  // base + r*stride + c/8.
  typedef struct packed {
    logic [MEM_AW-1:0] base;
    logic [15:0]       stride;  // memory words per matrix row
  } pmi_entry_t;

  // Network-interface destination map: output columns k_lo..k_hi of matrix
  // 'mat' live in slice (dst_x, dst_y).
  typedef struct packed {
    logic               valid;
    logic [MAT_W-1:0]   mat;
    logic [IDX_W-1:0]   k_lo;
    logic [IDX_W-1:0]   k_hi;
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
  } nimap_entry_t;

  // ------------------------------------------------------------- sequencer
  typedef enum logic [1:0] {
    OP_PRELOAD = 2'd0,  // load nrows rows of B into Reg B
    OP_STREAM  = 2'd1,  // stream nrows rows of A through the array
    OP_WAIT    = 2'd2,  // wait until wait_count partial sums were written back here
    OP_HALT    = 2'd3
  } seq_op_e;

  typedef struct packed {
    seq_op_e           op;
    logic [MAT_W-1:0]  mat;       // PRELOAD: B (stored transposed); STREAM: A
    logic [IDX_W-1:0]  row_base;  // first matrix row read
    logic [IDX_W-1:0]  nrows;     // rows read
    logic [7:0]        col_word;  // which 8-column word of each row
    logic [MAT_W-1:0]  out_mat;   // STREAM: output matrix
    logic [IDX_W-1:0]  k_base;    // STREAM: output column of array row 0
    logic [8:0]        nk;        // STREAM: array rows in use (B columns loaded)
    logic              last;      // STREAM: these are the final partial sums
    act_e              func;      // STREAM: function applied with the final sums
    logic [15:0]       wait_count;// WAIT
    logic [33:0]       rsvd;
  } seq_instr_t;

  // One output element travelling to the aggregation engine.
  typedef struct packed {
    logic [MAT_W-1:0] mat;
    logic [IDX_W-1:0] k;
    logic [IDX_W-1:0] n;
    fp16_t            value;
    logic             last;
    act_e             func;
  } agg_elem_t;

endpackage
