// tb_genvom_card: end-to-end test of the card, scaled down (2 pairs of 2
// arrays of 8 x 96 cells, seed 4, reads up to 20 bases, search queues of depth
// 2 so that back-pressure happens).
//
// The test builds a random reference, splits it over the pairs and arrays the
// way the host would (7 unique rows per array, the 8th row repeating the next
// array's first row), writes the TCAMs, and builds each pair's PMI tables
// (PMITIL / PMIT) from its slice. Behavioural DRAM ports answer each filter
// unit with 1-4 cycles of latency. Reads are taken from the reference with a
// chosen target step (the window of that step copied, with 0-2
// substitutions, the rest random) or are fully random.
//
// A reference model in this file runs the mapping algorithm (per step and
// pair: the PMIs of the window's prefix in table order, the first matching
// one wins; the lowest matching pair wins; otherwise the next step) and every
// result record is compared with it, in order. The test counts each mechanism
// and fails if one never happens: mapping in each of the six steps, unmapped
// reads, empty PMI lists, fragmented and array-boundary matches, PMIs dropped
// after a match, a match in the second pair only, Missed-Map feedback, and
// stalls of the input, search and output queues.
module tb_genvom_card;
  import genvom_pkg::*;
  localparam int NU   = 2;
  localparam int A    = 2;
  localparam int ROWS = 8;
  localparam int RB   = 96;
  localparam int BPR  = RB / 3;
  localparam int MB   = 20;
  localparam int SEED = 4;
  localparam int NPFX = 4 ** SEED;
  localparam int UPOS = A * (ROWS - 1) * BPR;   // unique positions per pair
  localparam int GLEN = NU * UPOS + BPR;
  localparam int NQ   = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [$clog2(RB):0] tol_bits;
  logic in_valid, in_ready, res_valid, res_ready, res_mapped, wr_en;
  qid_t in_qid, res_qid;
  blen_t in_len;
  logic [2*MB-1:0] in_bases;
  step_t res_step;
  ref_idx_t res_start, res_end;
  logic [$clog2(NU)-1:0] wr_unit;
  logic [ARRAY_W-1:0] wr_array;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [RB-1:0] wr_data;
  logic [NU-1:0] tl_req_valid, tl_req_ready, tl_rsp_valid;
  logic [2*SEED:0] tl_req_addr [NU];
  logic [31:0] tl_rsp_data [NU];
  logic [NU-1:0] pt_req_valid, pt_req_ready, pt_rsp_valid;
  logic [31:0] pt_req_addr [NU];
  pmi_t pt_rsp_data [NU];

  int checks = 0, failures = 0;
  int g [GLEN];
  int pmitil [NU][NPFX + 1];
  pmi_t pmit [NU][UPOS];
  int pos_of [NU][UPOS];     // global position of each PMIT entry

  // expected results, in order
  bit       e_mapped [$];
  step_t    e_step   [$];
  longint   e_start  [$];
  int       e_len    [$];
  int       e_unit   [$];
  int       q_tab    [NQ][MB];
  int       q_lens   [NQ];

  // mechanism counters
  int n_step_hit [6];
  int n_unmapped = 0, n_empty = 0, n_frag = 0, n_bound = 0, n_skip = 0, n_unit1 = 0;
  int n_missmap = 0, n_iq_stall = 0, n_sq_stall = 0, n_oq_stall = 0;

  genvom_card #(.N_UNITS(NU), .ARRAYS(A), .ROWS(ROWS), .ROW_BITS(RB), .MAX_BASES(MB),
                .SEED(SEED), .IQ_DEPTH(4), .SQ_DEPTH(2), .OQ_DEPTH(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [2:0] code(int b);
    case (b) 0: return 3'b111; 1: return 3'b100; 2: return 3'b010; default: return 3'b001; endcase
  endfunction

  // behavioural DRAM per pair: one read in flight, 1-4 cycles latency
  for (genvar u = 0; u < NU; u++) begin : g_mem
    int tl_wait = 0, pt_wait = 0;
    int tl_a, pt_a;
    assign tl_req_ready[u] = (tl_wait == 0);
    assign pt_req_ready[u] = (pt_wait == 0);
    always_ff @(posedge clk) begin
      tl_rsp_valid[u] <= 1'b0;
      pt_rsp_valid[u] <= 1'b0;
      if (tl_wait == 0 && tl_req_valid[u]) begin tl_wait <= $urandom_range(1, 4); tl_a <= int'(tl_req_addr[u]); end
      else if (tl_wait == 1) begin tl_wait <= 0; tl_rsp_valid[u] <= 1'b1; tl_rsp_data[u] <= pmitil[u][tl_a]; end
      else if (tl_wait > 1) tl_wait <= tl_wait - 1;
      if (pt_wait == 0 && pt_req_valid[u]) begin pt_wait <= $urandom_range(1, 4); pt_a <= int'(pt_req_addr[u]); end
      else if (pt_wait == 1) begin pt_wait <= 0; pt_rsp_valid[u] <= 1'b1; pt_rsp_data[u] <= pmit[u][pt_a]; end
      else if (pt_wait > 1) pt_wait <= pt_wait - 1;
    end
  end

  // event monitors
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_iq_stall++;
    if (res_valid && !res_ready) n_oq_stall++;
    if (dut.join_fire && !dut.any_hit) n_missmap++;
    for (int u = 0; u < NU; u++) begin
      if (u == 0) begin
        if (dut.g_unit[0].sq_in_valid && !dut.g_unit[0].sq_in_ready) n_sq_stall++;
        if (dut.g_unit[0].u_match.ev_frag_hit) n_frag++;
        if (dut.g_unit[0].u_match.ev_boundary_hit) n_bound++;
        if (dut.g_unit[0].u_match.ev_skip) n_skip++;
        if (dut.g_unit[0].sq_in_valid && dut.g_unit[0].sq_in_ready &&
            dut.g_unit[0].f_kind == SQ_END && dut.g_unit[0].f_empty) n_empty++;
      end else begin
        if (dut.g_unit[1].sq_in_valid && !dut.g_unit[1].sq_in_ready) n_sq_stall++;
        if (dut.g_unit[1].u_match.ev_frag_hit) n_frag++;
        if (dut.g_unit[1].u_match.ev_boundary_hit) n_bound++;
        if (dut.g_unit[1].u_match.ev_skip) n_skip++;
        if (dut.g_unit[1].sq_in_valid && dut.g_unit[1].sq_in_ready &&
            dut.g_unit[1].f_kind == SQ_END && dut.g_unit[1].f_empty) n_empty++;
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // window of step s of query q (length len): bases, offset and length
  function automatic void window(int q [MB], int len, int s, output int w [MB], output int ofs, output int wl);
    int h;
    bit rcs;
    h = len / 2;
    case (s)
      0: begin rcs = 0; ofs = 0;       wl = len;     end
      1: begin rcs = 1; ofs = 0;       wl = len;     end
      2: begin rcs = 0; ofs = 0;       wl = h;       end
      3: begin rcs = 0; ofs = h;       wl = len - h; end
      4: begin rcs = 1; ofs = len - h; wl = h;       end
      default: begin rcs = 1; ofs = 0; wl = len - h; end
    endcase
    for (int k = 0; k < MB; k++) w[k] = 0;
    for (int k = 0; k < wl; k++) w[k] = rcs ? 3 - q[len - 1 - (ofs + k)] : q[ofs + k];
  endfunction

  // reference model of one read
  task automatic model(int qi);
    int len, w [MB], ofs, wl, pfx;
    len = q_lens[qi];
    for (int s = 0; s < 6; s++) begin
      window(q_tab[qi], len, s, w, ofs, wl);
      pfx = 0;
      for (int k = 0; k < SEED; k++) pfx = pfx * 4 + w[k];
      for (int u = 0; u < NU; u++) begin
        for (int e = pmitil[u][pfx]; e < pmitil[u][pfx + 1]; e++) begin
          int p, c, m1, m2;
          p = pos_of[u][e];
          c = int'(pmit[u][e].col_no);
          m1 = 0; m2 = 0;
          for (int k = 0; k < wl; k++)
            if (w[k] != g[p + k]) begin if (c + k < BPR) m1++; else m2++; end
          if (2*m1 < int'(tol_bits) && (c + wl <= BPR || 2*m2 < int'(tol_bits))) begin
            e_mapped.push_back(1); e_step.push_back(step_t'(s));
            e_start.push_back(longint'(p - ofs)); e_len.push_back(len); e_unit.push_back(u);
            return;
          end
        end
      end
    end
    e_mapped.push_back(0); e_step.push_back(STEP_C2_RC); e_start.push_back(0); e_len.push_back(len);
    e_unit.push_back(-1);
  endtask

  // result monitor
  initial begin
    int got;
    got = 0;
    res_ready = 0;
    while (got < NQ) begin
      @(negedge clk);
      res_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (res_valid && res_ready) begin
        bit em; step_t es; longint est; int el, eu;
        em = e_mapped.pop_front(); es = e_step.pop_front(); est = e_start.pop_front();
        el = e_len.pop_front(); eu = e_unit.pop_front();
        check(res_qid == qid_t'(got), $sformatf("result order: got %0d expected %0d", res_qid, got));
        check(res_mapped == em && res_step == es,
              $sformatf("read %0d: mapped %0d step %0d, expected %0d %0d", got, res_mapped, res_step, em, es));
        if (em) begin
          check(res_start == ref_idx_t'(est) && res_end == ref_idx_t'(est + el - 1),
                $sformatf("read %0d: indices %0d..%0d expected %0d", got, res_start, res_end, est));
          n_step_hit[int'(es)]++;
          if (eu == 1) n_unit1++;
        end else n_unmapped++;
        got++;
      end
    end
    repeat (5) @(negedge clk);
    for (int s = 0; s < 6; s++) check(n_step_hit[s] > 0, $sformatf("mapping in step %0d", s));
    check(n_unmapped > 0, "unmapped reads");
    check(n_empty > 0, "empty PMI lists");
    check(n_frag > 0, "fragmented matches");
    check(n_bound > 0, "array-boundary matches");
    check(n_skip > 0, "PMIs dropped after a match");
    check(n_unit1 > 0, "match in the second pair only");
    check(n_missmap > 0, "Missed-Map feedback");
    check(n_iq_stall > 0, "input queue stall");
    check(n_sq_stall > 0, "search queue full");
    check(n_oq_stall > 0, "output queue back-pressure");
    $display("hits per step %0d %0d %0d %0d %0d %0d, unmapped %0d", n_step_hit[0], n_step_hit[1],
             n_step_hit[2], n_step_hit[3], n_step_hit[4], n_step_hit[5], n_unmapped);
    $display("empty lists %0d, fragmented %0d, boundary %0d, dropped PMIs %0d, pair-1 wins %0d, Missed-Map %0d",
             n_empty, n_frag, n_bound, n_skip, n_unit1, n_missmap);
    $display("stalls: input %0d, search queues %0d, output %0d", n_iq_stall, n_sq_stall, n_oq_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus
  initial begin
    int cnt [NU][NPFX];
    int fill [NU][NPFX];
    in_valid = 0; in_qid = '0; in_len = '0; in_bases = '0;
    wr_en = 0; wr_unit = '0; wr_array = '0; wr_row = '0; wr_data = '0;
    tol_bits = 3;  // one substituted base per row
    for (int i = 0; i < GLEN; i++) g[i] = $urandom_range(0, 3);
    // PMI tables: every unique position of the pair's slice, grouped by prefix
    for (int u = 0; u < NU; u++) for (int x = 0; x < NPFX; x++) begin cnt[u][x] = 0; fill[u][x] = 0; end
    for (int u = 0; u < NU; u++)
      for (int i = 0; i < UPOS; i++) begin
        int p, x;
        p = u * UPOS + i;
        x = 0;
        for (int k = 0; k < SEED; k++) x = x * 4 + g[p + k];
        cnt[u][x]++;
      end
    for (int u = 0; u < NU; u++) begin
      pmitil[u][0] = 0;
      for (int x = 0; x < NPFX; x++) pmitil[u][x + 1] = pmitil[u][x] + cnt[u][x];
      for (int i = 0; i < UPOS; i++) begin
        int p, x, e;
        p = u * UPOS + i;
        x = 0;
        for (int k = 0; k < SEED; k++) x = x * 4 + g[p + k];
        e = pmitil[u][x] + fill[u][x];
        fill[u][x]++;
        pmit[u][e] = '{array_no: ARRAY_W'(i / ((ROWS - 1) * BPR)),
                       row_no: ROW_W'((i / BPR) % (ROWS - 1)), col_no: COL_W'(i % BPR)};
        pos_of[u][e] = p;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reference load: array k of pair u holds rows of global array u*A+k
    for (int u = 0; u < NU; u++)
      for (int k = 0; k < A; k++)
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          wr_en = 1; wr_unit = ($clog2(NU))'(u); wr_array = ARRAY_W'(k); wr_row = ($clog2(ROWS))'(r);
          wr_data = '0;
          for (int c = 0; c < BPR; c++) wr_data[3*c +: 3] = code(g[((u * A + k) * (ROWS - 1) + r) * BPR + c]);
        end
    @(negedge clk);
    wr_en = 0;
    // reads
    for (int qi = 0; qi < NQ; qi++) begin
      int len, s, w [MB], ofs, wl, p, nmut, guard;
      int q [MB];
      len = $urandom_range(2 * SEED + 2, MB);
      for (int i = 0; i < MB; i++) q[i] = (i < len) ? $urandom_range(0, 3) : 0;
      s = $urandom_range(0, 6);   // 6: random read
      if (s < 6) begin
        window(q, len, s, w, ofs, wl);
        case ($urandom_range(0, 3))
          0: p = $urandom_range(0, NU * UPOS - 1);
          1: p = ($urandom_range(0, NU * A - 1) * (ROWS - 1) + ROWS - 2) * BPR + BPR - $urandom_range(1, wl);
          default: p = $urandom_range(0, NU * UPOS - 1) / BPR * BPR + BPR - $urandom_range(1, wl);
        endcase
        for (int k = 0; k < wl; k++) w[k] = g[p + k];
        nmut = $urandom_range(0, 2);
        for (int m = 0; m < nmut; m++) begin
          int j;
          j = $urandom_range(SEED, wl - 1);
          w[j] = (w[j] + $urandom_range(1, 3)) % 4;
        end
        for (int k = 0; k < wl; k++) begin
          if (s == 0 || s == 2 || s == 3) q[ofs + k] = w[k];
          else q[len - 1 - (ofs + k)] = 3 - w[k];
        end
      end
      q_tab[qi] = q;
      q_lens[qi] = len;
      model(qi);
      @(negedge clk);
      in_valid = 1; in_qid = qid_t'(qi); in_len = blen_t'(len);
      for (int i = 0; i < MB; i++) in_bases[2*i +: 2] = 2'(q[i]);
      guard = 0;
      while (!in_ready && guard < 100000) begin @(negedge clk); guard++; end
      @(posedge clk);
      #1 in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  end
endmodule
