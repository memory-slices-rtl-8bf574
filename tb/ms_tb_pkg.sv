// ms_tb_pkg: helpers shared by the slice-level testbenches: building head
// flits, configuration records, sequencer instructions.
package ms_tb_pkg;
  import ms_pkg::*;

  function automatic flit_t head_flit(input pkt_hdr_t h, input logic tail = 1'b0);
    flit_t f;
    f.head = 1'b1; f.tail = tail; f.data = FLIT_W'(h);
    return f;
  endfunction

  function automatic flit_t body_flit(input logic [FLIT_W-1:0] d, input logic tail);
    flit_t f;
    f.head = 1'b0; f.tail = tail; f.data = d;
    return f;
  endfunction

  function automatic pkt_hdr_t cfg_hdr(input int x, input int y, input cfg_target_e t, input int index);
    pkt_hdr_t h;
    h = '0;
    h.dst_x = COORD_W'(x); h.dst_y = COORD_W'(y);
    h.ptype = PKT_CFG; h.len = 8'd1; h.cfg_target = t; h.index = 8'(index);
    return h;
  endfunction

  function automatic pkt_hdr_t write_hdr(input int x, input int y, input int addr, input int nwords);
    pkt_hdr_t h;
    h = '0;
    h.dst_x = COORD_W'(x); h.dst_y = COORD_W'(y);
    h.ptype = PKT_WRITE; h.len = 8'(nwords); h.addr = 32'(addr);
    return h;
  endfunction

  function automatic pmi_entry_t pmi_ent(input int base, input int stride);
    pmi_entry_t e;
    e.base = MEM_AW'(base); e.stride = 16'(stride);
    return e;
  endfunction

  function automatic nimap_entry_t map_ent(input int mat, input int k_lo, input int k_hi, input int x, input int y);
    nimap_entry_t e;
    e.valid = 1'b1; e.mat = MAT_W'(mat); e.k_lo = IDX_W'(k_lo); e.k_hi = IDX_W'(k_hi);
    e.dst_x = COORD_W'(x); e.dst_y = COORD_W'(y);
    return e;
  endfunction

  function automatic seq_instr_t instr(input seq_op_e op, input int mat = 0, input int row_base = 0,
                                       input int nrows = 0, input int col_word = 0, input int out_mat = 0,
                                       input int k_base = 0, input int nk = 0, input logic last = 1'b0,
                                       input act_e func = ACT_NONE, input int wait_count = 0);
    seq_instr_t i;
    i = '0;
    i.op = op; i.mat = MAT_W'(mat); i.row_base = IDX_W'(row_base); i.nrows = IDX_W'(nrows);
    i.col_word = 8'(col_word); i.out_mat = MAT_W'(out_mat); i.k_base = IDX_W'(k_base);
    i.nk = 9'(nk); i.last = last; i.func = func; i.wait_count = 16'(wait_count);
    return i;
  endfunction

endpackage
