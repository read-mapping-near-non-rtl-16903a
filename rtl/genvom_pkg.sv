// genvom_pkg: types, constants and small functions shared by the read-mapping
// accelerator.
//
// Bases travel through the control path as 2-bit symbols (A=0, C=1, G=2, T=3),
// so that the complement of a base is its bitwise inverse and a seed-long
// prefix is directly an index into the PMI index locator table. Only the TCAM
// side uses the 3-bit code words {111, 100, 010, 001}, in which any two
// different bases differ in exactly two bits; that code set follows the paper,
// the assignment of code words to bases is this design's choice.
//
// A PMI (potential match index) is the <array, row, column> triple of one
// occurrence of a prefix in the reference, packed into 32 bits as the paper
// states. The split 13/10/9 bits is this design's choice: 10 bits address
// 1024 rows, 9 bits address the 341 base columns of a 1024-bit row, and
// 13 bits address up to 8192 arrays inside one match unit.
//
// A query is mapped in up to six search steps: Phase 1 (forward), Phase 2
// (reverse complement) and Phase 3, which splits the query into two halves and
// tries half 1, half 2, then the reverse complements of half 1 and half 2.
// Lint note: a module that imports the package but does not use every
// constant gets UNUSEDPARAM reports for the unused ones; intended.
package genvom_pkg;

  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_t;

  localparam int ARRAY_W = 13;
  localparam int ROW_W   = 10;
  localparam int COL_W   = 9;
  localparam int BLEN_W  = 9;   // base counts and base offsets inside a query
  localparam int REF_W   = 32;  // reference base index
  localparam int QID_W   = 32;  // query identifier carried with every query
  localparam int GARRAY_W = 16; // array number across the whole card

  // Kinds of search queue entries: a query broadcast, one PMI, or the end of
  // the PMI list of one search step.
  typedef enum logic [1:0] {
    SQ_QUERY = 2'd0,
    SQ_PMI   = 2'd1,
    SQ_END   = 2'd2
  } sq_kind_t;

  typedef logic [BLEN_W-1:0] blen_t;
  typedef logic [REF_W-1:0]  ref_idx_t;
  typedef logic [QID_W-1:0]  qid_t;

  typedef struct packed {
    logic [ARRAY_W-1:0] array_no;
    logic [ROW_W-1:0]   row_no;
    logic [COL_W-1:0]   col_no;
  } pmi_t;

  // Search steps of the multi-phase flow, in the order they are tried.
  typedef enum logic [2:0] {
    STEP_FWD   = 3'd0,  // Phase 1
    STEP_RC    = 3'd1,  // Phase 2
    STEP_C1    = 3'd2,  // Phase 3, first half
    STEP_C2    = 3'd3,  // Phase 3, second half
    STEP_C1_RC = 3'd4,  // Phase 3, reverse complement of the first half
    STEP_C2_RC = 3'd5   // Phase 3, reverse complement of the second half
  } step_t;

  localparam step_t LAST_STEP = STEP_C2_RC;

  // Which register (forward or reverse complement), which base offset in it
  // and how many bases a step searches for. The offset is also the distance
  // from the searched window back to the first base of the whole read, so
  // that the read follows the alignment of the window.
  typedef struct packed {
    logic  is_rc;
    blen_t ofs;
    blen_t len;
  } window_t;

  function automatic window_t step_window(step_t step, blen_t qlen);
    blen_t h;
    window_t w;
    h = qlen >> 1;
    unique case (step)
      STEP_FWD:   w = '{is_rc: 1'b0, ofs: '0,       len: qlen};
      STEP_RC:    w = '{is_rc: 1'b1, ofs: '0,       len: qlen};
      STEP_C1:    w = '{is_rc: 1'b0, ofs: '0,       len: h};
      STEP_C2:    w = '{is_rc: 1'b0, ofs: h,        len: qlen - h};
      STEP_C1_RC: w = '{is_rc: 1'b1, ofs: qlen - h, len: h};
      default:    w = '{is_rc: 1'b1, ofs: '0,       len: qlen - h};
    endcase
    return w;
  endfunction

  // 3-bit TCAM code word of a base: any two differ in exactly two bits.
  function automatic logic [2:0] encode3(logic [1:0] b);
    unique case (b)
      2'd0:    return 3'b111;  // A
      2'd1:    return 3'b100;  // C
      2'd2:    return 3'b010;  // G
      default: return 3'b001;  // T
    endcase
  endfunction

  // Watson-Crick complement: A<->T, C<->G.
  function automatic logic [1:0] complement(logic [1:0] b);
    return ~b;
  endfunction

endpackage
