// genvom_card: top level of the read-mapping accelerator card.
//
// Reads (queries) enter through the input queue. The card holds N_UNITS
// filter unit / match unit pairs; each match unit stores 1/N_UNITS of the
// reference in its TCAM arrays and each filter unit looks up only the PMI
// table bank of its own match unit. Every query is therefore given to all
// filter units at once, each pair searches its own slice, and a join stage
// combines the pairs' verdicts per search step:
//  * some pair matched: the first such pair (lowest index) gives the
//    reference indices; a result record goes to the output queue and all
//    filter units are released (fb_missed=0);
//  * no pair matched: the Missed-Map signal goes back to all filter units,
//    which move on to the next step (Phase 2, then the four Phase 3 halves);
//    after the last step a result record with mapped=0 is written instead.
//
// Per pair: filter_unit -> search queue -> match_unit (DispatchU and TCAM
// tiles). The PMI tables live in external DRAM; each filter unit's two read
// ports are brought out as arrays of ports (tl_* for PMITIL, pt_* for PMIT).
// The host loads the reference through wr_* (unit, array, row, 1024-bit row).
// tol_bits sets the sense threshold of every TCAM array.
//
// From the paper: the queue / FilterU / MatchU pipeline, N pairs with the
// reference and the PMI table split among them, the Missed-Map feedback and
// the phase order. This design's choices: the join stage, lock-step handling
// of one query at a time across all pairs, queue depths, and that the
// lowest-numbered matching pair wins. Defaults are the balanced configuration
// of the paper (N=108, seed L=14); 83 arrays per unit is derived so that the
// card holds a 3.1 G base human reference.
//
// Lint notes: the queue occupancy counts, the filter units' busy flags and the
// match units' event flags are statistics outputs left unconnected here
// (PINCONNECTEMPTY), and the match units' out_empty flag is not needed by the
// join (UNUSEDSIGNAL); rst_n also disables the lock-step assertion
// (SYNCASYNCNET). All intended.
module genvom_card
  import genvom_pkg::*;
#(
  parameter int N_UNITS   = 108,
  parameter int ARRAYS    = 83,
  parameter int ROWS      = 1024,
  parameter int ROW_BITS  = 1024,
  parameter int MAX_BASES = 200,
  parameter int SEED      = 14,
  parameter int IQ_DEPTH  = 16,
  parameter int SQ_DEPTH  = 16,
  parameter int OQ_DEPTH  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(ROW_BITS):0]  tol_bits,
  // queries in
  input  logic                       in_valid,
  output logic                       in_ready,
  input  qid_t                       in_qid,
  input  blen_t                      in_len,
  input  logic [2*MAX_BASES-1:0]     in_bases,
  // mapping results out
  output logic                       res_valid,
  input  logic                       res_ready,
  output qid_t                       res_qid,
  output logic                       res_mapped,
  output step_t                      res_step,
  output ref_idx_t                   res_start,
  output ref_idx_t                   res_end,
  // reference load into the TCAM arrays
  input  logic                       wr_en,
  input  logic [$clog2(N_UNITS)-1:0] wr_unit,
  input  logic [ARRAY_W-1:0]         wr_array,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [ROW_BITS-1:0]        wr_data,
  // PMITIL read ports, one per filter unit
  output logic [N_UNITS-1:0]         tl_req_valid,
  input  logic [N_UNITS-1:0]         tl_req_ready,
  output logic [2*SEED:0]            tl_req_addr [N_UNITS],
  input  logic [N_UNITS-1:0]         tl_rsp_valid,
  input  logic [31:0]                tl_rsp_data [N_UNITS],
  // PMIT read ports, one per filter unit
  output logic [N_UNITS-1:0]         pt_req_valid,
  input  logic [N_UNITS-1:0]         pt_req_ready,
  output logic [31:0]                pt_req_addr [N_UNITS],
  input  logic [N_UNITS-1:0]         pt_rsp_valid,
  input  pmi_t                       pt_rsp_data [N_UNITS]
);
  localparam int QW  = QID_W + BLEN_W + 2*MAX_BASES;
  localparam int SQW = $bits(sq_kind_t) + QID_W + BLEN_W + 2*MAX_BASES + $bits(step_t) + $bits(pmi_t) + 1;
  localparam int OW  = QID_W + 1 + $bits(step_t) + 2*REF_W;

  // ---------------------------------------------------------------- input queue
  logic                    iq_valid, iq_ready;
  logic [QW-1:0]           iq_data;
  qid_t                    iq_qid;
  blen_t                   iq_len;
  logic [2*MAX_BASES-1:0]  iq_bases;
  logic [N_UNITS-1:0]      fu_q_ready;

  genvom_fifo #(.WIDTH(QW), .DEPTH(IQ_DEPTH)) u_input_queue (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data({in_qid, in_len, in_bases}),
    .out_valid(iq_valid), .out_ready(iq_ready), .out_data(iq_data), .count()
  );
  assign {iq_qid, iq_len, iq_bases} = iq_data;
  assign iq_ready = &fu_q_ready;  // all filter units take the query together

  // ---------------------------------------------------------------- pairs
  logic [N_UNITS-1:0] mu_out_valid, mu_out_hit, mu_out_empty;
  qid_t               mu_out_qid   [N_UNITS];
  step_t              mu_out_step  [N_UNITS];
  ref_idx_t           mu_out_start [N_UNITS];
  ref_idx_t           mu_out_end   [N_UNITS];
  logic               join_fire, any_hit;

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    logic                    sq_in_valid, sq_in_ready, sq_out_valid, sq_out_ready;
    sq_kind_t                f_kind, m_kind;
    qid_t                    f_qid, m_qid;
    blen_t                   f_len, m_len;
    logic [2*MAX_BASES-1:0]  f_bases, m_bases;
    step_t                   f_step, m_step;
    pmi_t                    f_pmi, m_pmi;
    logic                    f_empty, m_empty;
    logic [SQW-1:0]          sq_out_data;

    filter_unit #(.SEED(SEED), .MAX_BASES(MAX_BASES)) u_filter (
      .clk, .rst_n,
      .q_valid(iq_valid && iq_ready), .q_ready(fu_q_ready[u]),
      .q_qid(iq_qid), .q_len(iq_len), .q_bases(iq_bases),
      .tl_req_valid(tl_req_valid[u]), .tl_req_ready(tl_req_ready[u]), .tl_req_addr(tl_req_addr[u]),
      .tl_rsp_valid(tl_rsp_valid[u]), .tl_rsp_data(tl_rsp_data[u]),
      .pt_req_valid(pt_req_valid[u]), .pt_req_ready(pt_req_ready[u]), .pt_req_addr(pt_req_addr[u]),
      .pt_rsp_valid(pt_rsp_valid[u]), .pt_rsp_data(pt_rsp_data[u]),
      .sq_valid(sq_in_valid), .sq_ready(sq_in_ready),
      .sq_kind(f_kind), .sq_qid(f_qid), .sq_len(f_len), .sq_bases(f_bases),
      .sq_step(f_step), .sq_pmi(f_pmi), .sq_empty(f_empty),
      .fb_valid(join_fire), .fb_missed(!any_hit), .busy()
    );

    genvom_fifo #(.WIDTH(SQW), .DEPTH(SQ_DEPTH)) u_search_queue (
      .clk, .rst_n,
      .in_valid(sq_in_valid), .in_ready(sq_in_ready),
      .in_data({f_kind, f_qid, f_len, f_bases, f_step, f_pmi, f_empty}),
      .out_valid(sq_out_valid), .out_ready(sq_out_ready), .out_data(sq_out_data), .count()
    );
    assign {m_kind, m_qid, m_len, m_bases, m_step, m_pmi, m_empty} = sq_out_data;

    match_unit #(.ARRAYS(ARRAYS), .ROWS(ROWS), .ROW_BITS(ROW_BITS), .MAX_BASES(MAX_BASES)) u_match (
      .clk, .rst_n,
      .array_base(GARRAY_W'(u * ARRAYS)), .tol_bits,
      .wr_en(wr_en && (int'(wr_unit) == u)), .wr_array, .wr_row, .wr_data,
      .sq_valid(sq_out_valid), .sq_ready(sq_out_ready),
      .sq_kind(m_kind), .sq_qid(m_qid), .sq_len(m_len), .sq_bases(m_bases),
      .sq_step(m_step), .sq_pmi(m_pmi), .sq_empty(m_empty),
      .out_valid(mu_out_valid[u]), .out_ready(join_fire),
      .out_qid(mu_out_qid[u]), .out_step(mu_out_step[u]), .out_hit(mu_out_hit[u]),
      .out_empty(mu_out_empty[u]), .out_start(mu_out_start[u]), .out_end(mu_out_end[u]),
      .ev_search(), .ev_frag_hit(), .ev_boundary_hit(), .ev_skip()
    );
  end

  // ---------------------------------------------------------------- join
  logic       all_valid, need_result, oq_in_ready;
  ref_idx_t   win_start, win_end;
  logic [OW-1:0] oq_data;

  always_comb begin
    any_hit   = 1'b0;
    win_start = '0;
    win_end   = '0;
    for (int u = N_UNITS - 1; u >= 0; u--) begin
      if (mu_out_hit[u]) begin
        any_hit   = 1'b1;
        win_start = mu_out_start[u];
        win_end   = mu_out_end[u];
      end
    end
  end

  assign all_valid   = &mu_out_valid;
  assign need_result = any_hit || (mu_out_step[0] == LAST_STEP);
  assign join_fire   = all_valid && (!need_result || oq_in_ready);

  // ---------------------------------------------------------------- output queue
  logic          oq_valid;
  logic [OW-1:0] oq_out;

  genvom_fifo #(.WIDTH(OW), .DEPTH(OQ_DEPTH)) u_output_queue (
    .clk, .rst_n,
    .in_valid(all_valid && need_result), .in_ready(oq_in_ready),
    .in_data({mu_out_qid[0], any_hit, mu_out_step[0], win_start, win_end}),
    .out_valid(oq_valid), .out_ready(res_ready), .out_data(oq_out), .count()
  );
  assign oq_data   = oq_out;
  assign res_valid = oq_valid;
  assign {res_qid, res_mapped, res_step, res_start, res_end} = oq_data;

  // All pairs work on the same query and step in lock step.
  for (genvar u = 1; u < N_UNITS; u++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      all_valid |-> (mu_out_qid[u] == mu_out_qid[0]) && (mu_out_step[u] == mu_out_step[0]));
  end

endmodule
