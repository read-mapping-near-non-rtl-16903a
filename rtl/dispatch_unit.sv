// dispatch_unit: Dispatch Unit (DispatchU) of a match unit, the scheduler of
// TCAM searches.
//
// It pops the search queue, which carries three kinds of entries written by
// the filter unit:
//  * SQ_QUERY: a new query; DispatchU broadcasts it to the Shift Logic of all
//    TCAM arrays of the match unit (one cycle, ld_valid).
//  * SQ_PMI: one potential match index <array, row, col> for the current
//    search step; DispatchU sends <row, col, step> to that array's MatchCtrl
//    and waits for its outcome. Once one PMI of a step has matched, the
//    remaining PMIs of the step are dropped without searching.
//  * SQ_END: end of the step's PMI list; DispatchU emits the step outcome
//    (hit or Missed-Map, and the reference indices of the first match).
//
// The paper gives DispatchU's role (collect PMIs, start the targeted search,
// forward indices). Issuing one search at a time in PMI order, and taking the
// first matching PMI as the outcome, are this design's choices: the sense
// amplifiers give a binary match, so matches of one step are not ranked.
//
// Timing: one queue entry is looked at per cycle when idle; a PMI costs the
// tile's search latency plus two cycles; an outcome waits in D_OUT until
// out_ready.
module dispatch_unit
  import genvom_pkg::*;
#(
  parameter int ARRAYS    = 83,
  parameter int MAX_BASES = 200
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // search queue (head entry)
  input  logic                     sq_valid,
  output logic                     sq_ready,
  input  sq_kind_t                 sq_kind,
  input  qid_t                     sq_qid,
  input  blen_t                    sq_len,
  input  logic [2*MAX_BASES-1:0]   sq_bases,
  input  step_t                    sq_step,
  input  pmi_t                     sq_pmi,
  input  logic                     sq_empty,
  // query broadcast to all tiles
  output logic                     ld_valid,
  output blen_t                    ld_len,
  output logic [2*MAX_BASES-1:0]   ld_bases,
  // search requests to tiles
  output logic [ARRAYS-1:0]        t_req_valid,
  input  logic [ARRAYS-1:0]        t_req_ready,
  output logic [ROW_W-1:0]         t_req_row,
  output logic [COL_W-1:0]         t_req_col,
  output step_t                    t_req_step,
  input  logic [ARRAYS-1:0]        t_done,
  input  logic [ARRAYS-1:0]        t_hit,
  input  logic [ARRAYS-1:0]        t_frag,
  input  logic [ARRAYS-1:0]        t_boundary,
  input  ref_idx_t                 t_start [ARRAYS],
  input  ref_idx_t                 t_end   [ARRAYS],
  // step outcome
  output logic                     out_valid,
  input  logic                     out_ready,
  output qid_t                     out_qid,
  output step_t                    out_step,
  output logic                     out_hit,
  output logic                     out_empty,
  output ref_idx_t                 out_start,
  output ref_idx_t                 out_end,
  // one-cycle event flags (for statistics)
  output logic                     ev_search,
  output logic                     ev_frag_hit,
  output logic                     ev_boundary_hit,
  output logic                     ev_skip
);
  localparam int TW = (ARRAYS > 1) ? $clog2(ARRAYS) : 1;

  typedef enum logic [1:0] {D_IDLE, D_ISSUE, D_WAIT, D_OUT} dstate_t;

  dstate_t          state;
  qid_t             qid_q;
  logic             found;
  ref_idx_t         start_q, end_q;
  logic [TW-1:0]    tile;
  logic [ROW_W-1:0] row_q;
  logic [COL_W-1:0] col_q;
  step_t            step_q;

  assign sq_ready   = (state == D_IDLE);
  assign ld_valid   = (state == D_IDLE) && sq_valid && (sq_kind == SQ_QUERY);
  assign ld_len     = sq_len;
  assign ld_bases   = sq_bases;
  assign t_req_row  = row_q;
  assign t_req_col  = col_q;
  assign t_req_step = step_q;

  always_comb begin
    t_req_valid = '0;
    if (state == D_ISSUE) t_req_valid[tile] = 1'b1;
  end

  assign out_valid = (state == D_OUT);
  assign out_qid   = qid_q;
  assign out_hit   = found;
  assign out_start = start_q;
  assign out_end   = end_q;

  assign ev_search       = (state == D_ISSUE) && t_req_ready[tile];
  assign ev_frag_hit     = (state == D_WAIT) && t_done[tile] && t_hit[tile] && t_frag[tile];
  assign ev_boundary_hit = (state == D_WAIT) && t_done[tile] && t_hit[tile] && t_boundary[tile];
  assign ev_skip         = (state == D_IDLE) && sq_valid && (sq_kind == SQ_PMI) && found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= D_IDLE;
      qid_q     <= '0;
      found     <= 1'b0;
      start_q   <= '0;
      end_q     <= '0;
      tile      <= '0;
      row_q     <= '0;
      col_q     <= '0;
      step_q    <= STEP_FWD;
      out_step  <= STEP_FWD;
      out_empty <= 1'b0;
    end else begin
      unique case (state)
        D_IDLE: if (sq_valid) begin
          unique case (sq_kind)
            SQ_QUERY: begin
              qid_q <= sq_qid;
              found <= 1'b0;
            end
            SQ_PMI: if (!found && (int'(sq_pmi.array_no) < ARRAYS)) begin
              tile   <= TW'(sq_pmi.array_no);
              row_q  <= sq_pmi.row_no;
              col_q  <= sq_pmi.col_no;
              step_q <= sq_step;
              state  <= D_ISSUE;
            end
            default: begin  // SQ_END
              out_step  <= sq_step;
              out_empty <= sq_empty;
              state     <= D_OUT;
            end
          endcase
        end
        D_ISSUE: if (t_req_ready[tile]) state <= D_WAIT;
        D_WAIT: if (t_done[tile]) begin
          if (t_hit[tile]) begin
            found   <= 1'b1;
            start_q <= t_start[tile];
            end_q   <= t_end[tile];
          end
          state <= D_IDLE;
        end
        D_OUT: if (out_ready) begin
          found <= 1'b0;
          state <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

endmodule
