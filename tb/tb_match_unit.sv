// tb_match_unit: self-checking test of a match unit (DispatchU plus 3 TCAM
// tiles of 8 x 96 cells, reads up to 20 bases, global array numbers starting
// at 5). The tiles are written with a random reference slice (7 unique rows
// per array, the last row repeating the next array's first row). Search-queue
// entries are driven directly: a query, then per step a list of PMIs (the true
// position of the step's window mixed with random positions and PMIs naming a
// missing array) and an end marker. The expected outcome (first matching PMI
// in list order, its reference indices, or Missed-Map) is computed here from
// the strings; the outcome port is randomly back-pressured.
module tb_match_unit;
  import genvom_pkg::*;
  localparam int A    = 3;
  localparam int ROWS = 8;
  localparam int RB   = 96;
  localparam int BPR  = RB / 3;
  localparam int MB   = 20;
  localparam int BASE = 5;
  localparam int UPOS = A * (ROWS - 1) * BPR;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GARRAY_W-1:0] array_base;
  logic [$clog2(RB):0] tol_bits;
  logic wr_en;
  logic [ARRAY_W-1:0] wr_array;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [RB-1:0] wr_data;
  logic sq_valid, sq_ready, sq_empty;
  sq_kind_t sq_kind;
  qid_t sq_qid;
  blen_t sq_len;
  logic [2*MB-1:0] sq_bases;
  step_t sq_step;
  pmi_t sq_pmi;
  logic out_valid, out_ready, out_hit, out_empty;
  qid_t out_qid;
  step_t out_step;
  ref_idx_t out_start, out_end;
  logic ev_search, ev_frag_hit, ev_boundary_hit, ev_skip;
  int checks = 0, failures = 0;
  int g [UPOS + BPR];
  int n_search = 0, n_frag = 0, n_skip = 0, n_hit = 0, n_miss = 0;

  match_unit #(.ARRAYS(A), .ROWS(ROWS), .ROW_BITS(RB), .MAX_BASES(MB)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ev_search) n_search++;
    if (ev_frag_hit) n_frag++;
    if (ev_skip) n_skip++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [2:0] code(int b);
    case (b) 0: return 3'b111; 1: return 3'b100; 2: return 3'b010; default: return 3'b001; endcase
  endfunction

  task automatic push(sq_kind_t k, step_t s, pmi_t p, bit e);
    @(negedge clk);
    sq_valid = 1; sq_kind = k; sq_step = s; sq_pmi = p; sq_empty = e;
    #1;
    while (!sq_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 sq_valid = 0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    array_base = GARRAY_W'(BASE);
    tol_bits = 3;
    wr_en = 0; wr_array = '0; wr_row = '0; wr_data = '0;
    sq_valid = 0; sq_kind = SQ_QUERY; sq_qid = '0; sq_len = '0; sq_bases = '0;
    sq_step = STEP_FWD; sq_pmi = '0; sq_empty = 0; out_ready = 0;
    for (int i = 0; i < UPOS + BPR; i++) g[i] = $urandom_range(0, 3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < A; k++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_array = ARRAY_W'(k); wr_row = ($clog2(ROWS))'(r); wr_data = '0;
        for (int c = 0; c < BPR; c++) wr_data[3*c +: 3] = code(g[(k * (ROWS - 1) + r) * BPR + c]);
      end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      int len, h, s, ofs, wl, p, npmi, nmut, lat;
      bit rcs, exp_hit;
      longint exp_start;
      int q [MB];
      int w [MB];
      len = $urandom_range(8, MB);
      h = len / 2;
      for (int i = 0; i < MB; i++) q[i] = (i < len) ? $urandom_range(0, 3) : 0;
      s = $urandom_range(0, 5);
      case (s)
        0: begin rcs = 0; ofs = 0;       wl = len;     end
        1: begin rcs = 1; ofs = 0;       wl = len;     end
        2: begin rcs = 0; ofs = 0;       wl = h;       end
        3: begin rcs = 0; ofs = h;       wl = len - h; end
        4: begin rcs = 1; ofs = len - h; wl = h;       end
        default: begin rcs = 1; ofs = 0; wl = len - h; end
      endcase
      p = (t % 4 == 0) ? $urandom_range(0, UPOS / BPR - 1) * BPR + BPR - $urandom_range(1, wl)
                       : $urandom_range(0, UPOS - 1);
      nmut = $urandom_range(0, 2);
      for (int k = 0; k < wl; k++) w[k] = g[p + k];
      for (int m = 0; m < nmut; m++) begin
        int j;
        j = $urandom_range(0, wl - 1);
        w[j] = (w[j] + $urandom_range(1, 3)) % 4;
      end
      for (int k = 0; k < wl; k++) begin
        if (rcs) q[len - 1 - (ofs + k)] = 3 - w[k];
        else     q[ofs + k] = w[k];
      end
      // the query
      sq_qid = qid_t'(t); sq_len = blen_t'(len);
      for (int i = 0; i < MB; i++) sq_bases[2*i +: 2] = 2'(q[i]);
      push(SQ_QUERY, STEP_FWD, '0, 0);
      // PMI list: random positions, one missing array, and the true one
      npmi = $urandom_range(0, 4);
      exp_hit = 0; exp_start = 0;
      for (int e = 0; e <= npmi; e++) begin
        int pp, m1, m2;
        pmi_t pm;
        if (e == npmi / 2 && t % 7 == 3) begin
          push(SQ_PMI, step_t'(s), '{array_no: ARRAY_W'(A), row_no: '0, col_no: '0}, 0);
        end
        pp = (e == npmi && t % 5 != 0) ? p : $urandom_range(0, UPOS - 1);
        pm = '{array_no: ARRAY_W'(pp / ((ROWS - 1) * BPR)), row_no: ROW_W'((pp / BPR) % (ROWS - 1)),
               col_no: COL_W'(pp % BPR)};
        m1 = 0; m2 = 0;
        for (int k = 0; k < wl; k++)
          if (w[k] != g[pp + k]) begin if (pp % BPR + k < BPR) m1++; else m2++; end
        if (!exp_hit && 2*m1 < int'(tol_bits) && (pp % BPR + wl <= BPR || 2*m2 < int'(tol_bits))) begin
          exp_hit = 1;
          exp_start = longint'(BASE) * (ROWS - 1) * BPR + pp - ofs;
        end
        push(SQ_PMI, step_t'(s), pm, 0);
      end
      push(SQ_END, step_t'(s), '0, 0);
      lat = 0;
      while (!out_valid && lat < 100) begin @(negedge clk); lat++; end
      repeat ($urandom_range(0, 3)) begin @(negedge clk); check(out_valid, "outcome held"); end
      check(out_valid && out_qid == qid_t'(t) && out_step == step_t'(s), "outcome of the step");
      check(out_hit == exp_hit, $sformatf("t%0d: hit %0d expected %0d", t, out_hit, exp_hit));
      if (exp_hit) begin
        check(out_start == ref_idx_t'(exp_start) && out_end == ref_idx_t'(exp_start + len - 1),
              $sformatf("t%0d: indices %0d expected %0d", t, out_start, exp_start));
        n_hit++;
      end else n_miss++;
      @(negedge clk); out_ready = 1;
      @(negedge clk); out_ready = 0;
      check(!out_valid, "outcome taken");
    end
    check(n_hit > 40 && n_miss > 20 && n_frag > 5 && n_skip > 3 && n_search > 300,
          "hits, misses, fragments, dropped PMIs and searches exercised");
    $display("hits %0d misses %0d searches %0d fragmented hits %0d dropped PMIs %0d",
             n_hit, n_miss, n_search, n_frag, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
