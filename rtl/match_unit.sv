// match_unit: Match Unit (MatchU). A Dispatch Unit in front of ARRAYS tiles,
// each tile being one non-volatile TCAM array with its Shift Logic and
// MatchCtrl (module match_ctrl).
//
// The match unit stores a contiguous slice of the reference: its array k is
// global array number array_base + k, and the reference is laid out in each
// array row after row, ROWS-1 unique rows per array (the last row repeats the
// next array's first row so that fragmented matches never cross arrays).
// Queries and PMIs come from the search queue; one outcome per search step
// (hit with reference indices, or Missed-Map) leaves through the out_* port.
//
// The default of 83 arrays per match unit is derived, not printed in the
// paper: 108 match units (the balanced configuration, N=108) times 83 arrays
// of 1023 x 341 bases hold 3.13 G bases, enough for a 3.1 G base human
// reference.
//
// The host writes reference rows through wr_* (wr_array selects the tile).
// tol_bits sets the sense threshold of all arrays (a row matches when fewer
// than tol_bits bits mismatch; one base mismatch costs two bits).
module match_unit
  import genvom_pkg::*;
#(
  parameter int ARRAYS    = 83,
  parameter int ROWS      = 1024,
  parameter int ROW_BITS  = 1024,
  parameter int MAX_BASES = 200
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [GARRAY_W-1:0]        array_base,
  input  logic [$clog2(ROW_BITS):0]  tol_bits,
  // reference load
  input  logic                       wr_en,
  input  logic [ARRAY_W-1:0]         wr_array,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [ROW_BITS-1:0]        wr_data,
  // search queue head
  input  logic                       sq_valid,
  output logic                       sq_ready,
  input  sq_kind_t                   sq_kind,
  input  qid_t                       sq_qid,
  input  blen_t                      sq_len,
  input  logic [2*MAX_BASES-1:0]     sq_bases,
  input  step_t                      sq_step,
  input  pmi_t                       sq_pmi,
  input  logic                       sq_empty,
  // step outcome
  output logic                       out_valid,
  input  logic                       out_ready,
  output qid_t                       out_qid,
  output step_t                      out_step,
  output logic                       out_hit,
  output logic                       out_empty,
  output ref_idx_t                   out_start,
  output ref_idx_t                   out_end,
  output logic                       ev_search,
  output logic                       ev_frag_hit,
  output logic                       ev_boundary_hit,
  output logic                       ev_skip
);
  logic                    ld_valid;
  blen_t                   ld_len;
  logic [2*MAX_BASES-1:0]  ld_bases;
  logic [ARRAYS-1:0]       t_req_valid, t_req_ready, t_done, t_hit, t_frag, t_boundary;
  logic [ROW_W-1:0]        t_req_row;
  logic [COL_W-1:0]        t_req_col;
  step_t                   t_req_step;
  ref_idx_t                t_start [ARRAYS];
  ref_idx_t                t_end   [ARRAYS];

  dispatch_unit #(.ARRAYS(ARRAYS), .MAX_BASES(MAX_BASES)) u_dispatch (
    .clk, .rst_n,
    .sq_valid, .sq_ready, .sq_kind, .sq_qid, .sq_len, .sq_bases, .sq_step, .sq_pmi, .sq_empty,
    .ld_valid, .ld_len, .ld_bases,
    .t_req_valid, .t_req_ready, .t_req_row, .t_req_col, .t_req_step,
    .t_done, .t_hit, .t_frag, .t_boundary, .t_start, .t_end,
    .out_valid, .out_ready, .out_qid, .out_step, .out_hit, .out_empty, .out_start, .out_end,
    .ev_search, .ev_frag_hit, .ev_boundary_hit, .ev_skip
  );

  for (genvar k = 0; k < ARRAYS; k++) begin : g_tile
    match_ctrl #(.ROWS(ROWS), .ROW_BITS(ROW_BITS), .MAX_BASES(MAX_BASES)) u_tile (
      .clk, .rst_n,
      .array_no(array_base + GARRAY_W'(k)),
      .wr_en(wr_en && (int'(wr_array) == k)), .wr_row, .wr_data,
      .ld_valid, .ld_len, .ld_bases,
      .tol_bits,
      .req_valid(t_req_valid[k]), .req_ready(t_req_ready[k]),
      .req_row(t_req_row), .req_col(t_req_col), .req_step(t_req_step),
      .done(t_done[k]), .hit(t_hit[k]), .frag_out(t_frag[k]), .boundary_out(t_boundary[k]),
      .ref_start(t_start[k]), .ref_end(t_end[k])
    );
  end

endmodule
