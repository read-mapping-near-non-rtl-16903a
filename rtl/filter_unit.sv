// filter_unit: Filter Unit (FilterU), the search-space pruning stage.
//
// A query taken from the input queue is held in the FilterU query register
// (FilterUQR) while it is processed. For each search step FilterU takes the
// first SEED bases of the searched window (the prefix), reads the PMI index
// locator table (PMITIL) at that prefix and at the next prefix value, and so
// obtains the range [start, end) of PMI table (PMIT) entries holding every
// occurrence of the prefix in this unit's part of the reference. It then reads
// those PMIT entries one by one and pushes each <array, row, col> to the
// search queue, followed by an end-of-list marker. The query itself is pushed
// once, ahead of the Phase 1 PMIs; the match unit derives the reverse
// complement itself, so Phases 2 and 3 only send PMIs.
//
// After the end marker FilterU waits for the card's verdict on the step
// (fb_valid): Missed-Map (fb_missed=1) moves on to the next step (Phase 1
// forward, Phase 2 reverse complement, Phase 3 halves 1 and 2, then their
// reverse complements); a mapping, or a miss in the last step, frees FilterU
// for the next query. An empty PMI range is flagged in the end marker: that is
// a miss detected in FilterU already.
//
// From the paper: the tables, their organisation (PMITIL holds one 32-bit
// PMIT start address per prefix value, the end address being the next
// entry's start; PMIT holds 32-bit <array, row, col> entries), the prefix
// lookup and the Missed-Map feedback. This design's choices: the prefix index
// puts the first base in the most significant position (A=0, C=1, G=2, T=3);
// PMITIL has one extra entry at index 4^SEED so the last prefix has an end
// address; both tables sit in external DRAM behind simple request/response
// read ports with one read in flight.
// Lint note: only the is_rc and ofs fields of the step window are used here
// (UNUSEDSIGNAL).
module filter_unit
  import genvom_pkg::*;
#(
  parameter int SEED      = 14,
  parameter int MAX_BASES = 200
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input queue head
  input  logic                     q_valid,
  output logic                     q_ready,
  input  qid_t                     q_qid,
  input  blen_t                    q_len,
  input  logic [2*MAX_BASES-1:0]   q_bases,
  // PMITIL read port (external DRAM)
  output logic                     tl_req_valid,
  input  logic                     tl_req_ready,
  output logic [2*SEED:0]          tl_req_addr,
  input  logic                     tl_rsp_valid,
  input  logic [31:0]              tl_rsp_data,
  // PMIT read port (external DRAM)
  output logic                     pt_req_valid,
  input  logic                     pt_req_ready,
  output logic [31:0]              pt_req_addr,
  input  logic                     pt_rsp_valid,
  input  pmi_t                     pt_rsp_data,
  // search queue tail
  output logic                     sq_valid,
  input  logic                     sq_ready,
  output sq_kind_t                 sq_kind,
  output qid_t                     sq_qid,
  output blen_t                    sq_len,
  output logic [2*MAX_BASES-1:0]   sq_bases,
  output step_t                    sq_step,
  output pmi_t                     sq_pmi,
  output logic                     sq_empty,
  // verdict on the current step
  input  logic                     fb_valid,
  input  logic                     fb_missed,
  output logic                     busy
);
  typedef enum logic [3:0] {
    F_IDLE, F_SENDQ, F_TL0, F_TL0W, F_TL1, F_TL1W,
    F_PT, F_PTW, F_PUSH, F_END, F_FB
  } fstate_t;

  fstate_t                 state;
  qid_t                    qid_q;
  blen_t                   len_q;
  logic [2*MAX_BASES-1:0]  fwd_q;       // FilterUQR
  logic [2*MAX_BASES-1:0]  rev, rc, src;
  step_t                   step_q;
  window_t                 win;
  logic [2*SEED-1:0]       prefix;
  logic [31:0]             start_q, end_q, cur_q;
  pmi_t                    pmi_q;

  // Reverse complement of the held query, and the prefix of the current step.
  always_comb begin
    for (int i = 0; i < MAX_BASES; i++)
      rev[2*i +: 2] = complement(fwd_q[2*(MAX_BASES-1-i) +: 2]);
    rc  = rev >> (2 * (MAX_BASES - int'(len_q)));
    win = step_window(step_q, len_q);
    src = (win.is_rc ? rc : fwd_q) >> (2 * int'(win.ofs));
    for (int k = 0; k < SEED; k++)
      prefix[2*(SEED-1-k) +: 2] = src[2*k +: 2];
  end

  assign q_ready      = (state == F_IDLE);
  assign busy         = (state != F_IDLE);
  assign tl_req_valid = (state == F_TL0) || (state == F_TL1);
  assign tl_req_addr  = (state == F_TL1) ? {1'b0, prefix} + 1'b1 : {1'b0, prefix};
  assign pt_req_valid = (state == F_PT);
  assign pt_req_addr  = cur_q;

  assign sq_valid = (state == F_SENDQ) || (state == F_PUSH) || (state == F_END);
  assign sq_kind  = (state == F_SENDQ) ? SQ_QUERY : (state == F_PUSH) ? SQ_PMI : SQ_END;
  assign sq_qid   = qid_q;
  assign sq_len   = len_q;
  assign sq_bases = fwd_q;
  assign sq_step  = step_q;
  assign sq_pmi   = pmi_q;
  assign sq_empty = (start_q == end_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= F_IDLE;
      qid_q   <= '0;
      len_q   <= '0;
      fwd_q   <= '0;
      step_q  <= STEP_FWD;
      start_q <= '0;
      end_q   <= '0;
      cur_q   <= '0;
      pmi_q   <= '0;
    end else begin
      unique case (state)
        F_IDLE: if (q_valid) begin
          qid_q  <= q_qid;
          len_q  <= q_len;
          fwd_q  <= q_bases;
          step_q <= STEP_FWD;
          state  <= F_SENDQ;
        end
        F_SENDQ: if (sq_ready) state <= F_TL0;
        F_TL0:   if (tl_req_ready) state <= F_TL0W;
        F_TL0W:  if (tl_rsp_valid) begin
          start_q <= tl_rsp_data;
          state   <= F_TL1;
        end
        F_TL1:   if (tl_req_ready) state <= F_TL1W;
        F_TL1W:  if (tl_rsp_valid) begin
          end_q <= tl_rsp_data;
          cur_q <= start_q;
          state <= (tl_rsp_data == start_q) ? F_END : F_PT;
        end
        F_PT:    if (pt_req_ready) state <= F_PTW;
        F_PTW:   if (pt_rsp_valid) begin
          pmi_q <= pt_rsp_data;
          state <= F_PUSH;
        end
        F_PUSH:  if (sq_ready) begin
          cur_q <= cur_q + 1;
          state <= (cur_q + 1 == end_q) ? F_END : F_PT;
        end
        F_END:   if (sq_ready) state <= F_FB;
        F_FB:    if (fb_valid) begin
          if (fb_missed && (step_q != LAST_STEP)) begin
            step_q <= step_t'(step_q + 1'b1);
            state  <= F_TL0;
          end else begin
            state <= F_IDLE;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
