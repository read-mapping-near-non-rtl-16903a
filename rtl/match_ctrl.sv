// match_ctrl: Match Unit Controller (MatchCtrl) of one TCAM array, together
// with the array's Shift Logic and the array itself (one tile of a match
// unit).
//
// For each potential match index <row, col> it receives, MatchCtrl has the
// Shift Logic align the searched window of the query with column col, loads
// the query register, and activates row `row` for search. If the window runs
// past the end of the row (a fragmented tail match), a row-j match is followed
// by a second search of row j+1 with the rest of the window; both searches
// must match, each under the same sense threshold. The last row of every array
// holds a copy of the first row of the next array (loaded by the host), so a
// fragment never leaves the array.
//
// On a match MatchCtrl reports the reference indices that delimit the read:
//   position = (array_no * (ROWS-1) + row) * BPR + col   (BPR = ROW_BITS/3)
//   ref_start = position - window offset,  ref_end = ref_start + len - 1
// where the window offset moves a Phase 3 half (or a reverse-complement half)
// back to the start of the whole read, so the read follows the alignment of
// the half that matched. ROWS-1 rows per array are unique reference rows.
//
// Timing: req_valid is taken in IDLE (ready high). A full match takes three
// cycles (align, search, sense) and a fragmented one six; done pulses for one
// cycle with hit, frag and the indices. The paper gives the flow (align,
// activate row, check the next row on a fragment); the cycle split is this
// design's choice.
// Lint note: only some fields of the step window are used here (UNUSEDSIGNAL).
module match_ctrl
  import genvom_pkg::*;
#(
  parameter int ROWS      = 1024,
  parameter int ROW_BITS  = 1024,
  parameter int MAX_BASES = 200
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [GARRAY_W-1:0]         array_no,   // global array number
  // reference load
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [ROW_BITS-1:0]         wr_data,
  // query broadcast
  input  logic                        ld_valid,
  input  blen_t                       ld_len,
  input  logic [2*MAX_BASES-1:0]      ld_bases,
  // sense threshold (bits)
  input  logic [$clog2(ROW_BITS):0]   tol_bits,
  // search request
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [ROW_W-1:0]            req_row,
  input  logic [COL_W-1:0]            req_col,
  input  step_t                       req_step,
  // outcome
  output logic                        done,
  output logic                        hit,
  output logic                        frag_out,
  output logic                        boundary_out,
  output ref_idx_t                    ref_start,
  output ref_idx_t                    ref_end
);
  localparam int BPR = ROW_BITS / 3;
  localparam int RW  = $clog2(ROWS);

  typedef enum logic [2:0] {
    S_IDLE, S_ALIGN1, S_SRCH1, S_SENSE1, S_ALIGN2, S_SRCH2, S_SENSE2
  } state_t;

  state_t             state;
  logic [ROW_W-1:0]   row_q;
  logic [COL_W-1:0]   col_q;
  step_t              step_q;
  logic               part;
  logic [ROW_BITS-1:0] qr_val, qr_care;
  logic               frag;
  window_t            win;
  blen_t              qlen;
  logic               qr_load, search;
  logic [RW-1:0]      search_row;
  logic               m_valid, m_match;
  logic [63:0]        pos;

  shift_logic #(.MAX_BASES(MAX_BASES), .ROW_BITS(ROW_BITS)) u_shl (
    .clk, .rst_n, .ld_valid, .ld_len, .ld_bases,
    .step(step_q), .col(col_q), .part,
    .qr_val, .qr_care, .frag, .win, .query_len(qlen)
  );

  tcam_array #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) u_array (
    .clk, .rst_n, .wr_en, .wr_row, .wr_data,
    .qr_load, .qr_val, .qr_care,
    .search, .search_row, .tol_bits,
    .match_valid(m_valid), .match(m_match)
  );

  assign req_ready  = (state == S_IDLE);
  assign part       = (state == S_ALIGN2);
  assign qr_load    = (state == S_ALIGN1) || (state == S_ALIGN2);
  assign search     = (state == S_SRCH1) || (state == S_SRCH2);
  assign search_row = (state == S_SRCH2) ? RW'(row_q) + 1'b1 : RW'(row_q);

  assign pos = (64'(array_no) * 64'(ROWS - 1) + 64'(row_q)) * 64'(BPR) + 64'(col_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      row_q        <= '0;
      col_q        <= '0;
      step_q       <= STEP_FWD;
      done         <= 1'b0;
      hit          <= 1'b0;
      frag_out     <= 1'b0;
      boundary_out <= 1'b0;
      ref_start    <= '0;
      ref_end      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          row_q  <= req_row;
          col_q  <= req_col;
          step_q <= req_step;
          state  <= S_ALIGN1;
        end
        S_ALIGN1: state <= S_SRCH1;
        S_SRCH1:  state <= S_SENSE1;
        S_SENSE1: if (m_valid) begin
          if (m_match && frag && (int'(row_q) < ROWS - 1)) begin
            state <= S_ALIGN2;
          end else begin
            state        <= S_IDLE;
            done         <= 1'b1;
            hit          <= m_match && !frag;
            frag_out     <= frag;
            boundary_out <= 1'b0;
            ref_start    <= ref_idx_t'(pos - 64'(win.ofs));
            ref_end      <= ref_idx_t'(pos - 64'(win.ofs) + 64'(qlen) - 64'd1);
          end
        end
        S_ALIGN2: state <= S_SRCH2;
        S_SRCH2:  state <= S_SENSE2;
        S_SENSE2: if (m_valid) begin
          state        <= S_IDLE;
          done         <= 1'b1;
          hit          <= m_match;
          frag_out     <= 1'b1;
          boundary_out <= (int'(row_q) == ROWS - 2);
          ref_start    <= ref_idx_t'(pos - 64'(win.ofs));
          ref_end      <= ref_idx_t'(pos - 64'(win.ofs) + 64'(qlen) - 64'd1);
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
