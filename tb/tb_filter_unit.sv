// tb_filter_unit: self-checking test of the Filter Unit against behavioural
// PMI tables with random read latency. PMITIL gives, per 3-base prefix, the
// start of its run of PMIT entries (end = next prefix's start). For each query
// the test works out, here, the prefix of every search step (forward, reverse
// complement, halves, reverse-complement halves) and checks the search queue
// stream: the query once, then per step the PMIT entries of that prefix in
// order and an end marker (with the empty flag when the run is empty). The
// Missed-Map feedback is given randomly to move through the steps, and the
// search queue is randomly back-pressured.
module tb_filter_unit;
  import genvom_pkg::*;
  localparam int SEED = 3;
  localparam int MB   = 20;
  localparam int NPFX = 4 ** SEED;

  logic clk = 1'b0, rst_n = 1'b0;
  logic q_valid, q_ready;
  qid_t q_qid;
  blen_t q_len;
  logic [2*MB-1:0] q_bases;
  logic tl_req_valid, tl_req_ready, tl_rsp_valid;
  logic [2*SEED:0] tl_req_addr;
  logic [31:0] tl_rsp_data;
  logic pt_req_valid, pt_req_ready, pt_rsp_valid;
  logic [31:0] pt_req_addr;
  pmi_t pt_rsp_data;
  logic sq_valid, sq_ready, sq_empty;
  sq_kind_t sq_kind;
  qid_t sq_qid;
  blen_t sq_len;
  logic [2*MB-1:0] sq_bases;
  step_t sq_step;
  pmi_t sq_pmi;
  logic fb_valid, fb_missed, busy;
  int checks = 0, failures = 0;

  int pmitil [NPFX + 1];
  pmi_t pmit [$];

  filter_unit #(.SEED(SEED), .MAX_BASES(MB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural DRAM: one request in flight, 1-4 cycles latency
  int tl_wait = 0, pt_wait = 0;
  logic [31:0] tl_a, pt_a;
  assign tl_req_ready = (tl_wait == 0);
  assign pt_req_ready = (pt_wait == 0);
  always_ff @(posedge clk) begin
    tl_rsp_valid <= 1'b0;
    pt_rsp_valid <= 1'b0;
    if (tl_wait == 0 && tl_req_valid) begin tl_wait <= $urandom_range(1, 4); tl_a <= 32'(tl_req_addr); end
    else if (tl_wait == 1) begin tl_wait <= 0; tl_rsp_valid <= 1'b1; tl_rsp_data <= pmitil[tl_a]; end
    else if (tl_wait > 1) tl_wait <= tl_wait - 1;
    if (pt_wait == 0 && pt_req_valid) begin pt_wait <= $urandom_range(1, 4); pt_a <= pt_req_addr; end
    else if (pt_wait == 1) begin pt_wait <= 0; pt_rsp_valid <= 1'b1; pt_rsp_data <= pmit[pt_a]; end
    else if (pt_wait > 1) pt_wait <= pt_wait - 1;
  end

  // receive one search queue entry with random back-pressure
  task automatic pop(output sq_kind_t k, output step_t st, output pmi_t p, output bit e,
                     output qid_t id, output blen_t ln, output logic [2*MB-1:0] b);
    int guard;
    guard = 0;
    forever begin
      @(negedge clk);
      sq_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (sq_valid && sq_ready) begin
        k = sq_kind; st = sq_step; p = sq_pmi; e = sq_empty; id = sq_qid; ln = sq_len; b = sq_bases;
        @(posedge clk);
        #1 sq_ready = 0;
        return;
      end
      guard++;
      if (guard > 1000) begin check(0, "search queue entry timed out"); return; end
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc, n_empty, n_steps, n_pmi;
    n_empty = 0; n_steps = 0; n_pmi = 0;
    q_valid = 0; q_qid = '0; q_len = '0; q_bases = '0; sq_ready = 0; fb_valid = 0; fb_missed = 0;
    // random tables: 0..3 occurrences per prefix, none for every fifth prefix
    acc = 0;
    for (int i = 0; i < NPFX; i++) begin
      int n;
      pmitil[i] = acc;
      n = (i % 5 != 0) ? $urandom_range(0, 3) : 0;
      for (int j = 0; j < n; j++) begin
        pmit.push_back('{array_no: ARRAY_W'($urandom), row_no: ROW_W'($urandom), col_no: COL_W'($urandom)});
        acc++;
      end
    end
    pmitil[NPFX] = acc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len, h, last;
      int q [MB];
      sq_kind_t k; step_t st; pmi_t p; bit e; qid_t id; blen_t ln; logic [2*MB-1:0] b;
      len = $urandom_range(2*SEED, MB);
      h = len / 2;
      for (int i = 0; i < MB; i++) q[i] = (i < len) ? $urandom_range(0, 3) : 0;
      last = $urandom_range(0, 5);  // step at which the card reports a mapping
      @(negedge clk);
      check(q_ready && !busy, "idle before query");
      q_valid = 1; q_qid = qid_t'(t + 77); q_len = blen_t'(len);
      for (int i = 0; i < MB; i++) q_bases[2*i +: 2] = 2'(q[i]);
      @(negedge clk); q_valid = 0;
      pop(k, st, p, e, id, ln, b);
      check(k == SQ_QUERY && id == qid_t'(t + 77) && ln == blen_t'(len) && b == q_bases, "query first");
      for (int s = 0; s <= last; s++) begin
        int ofs, pfx, st0, en0;
        bit rcs;
        case (s)
          0: begin rcs = 0; ofs = 0;       end
          1: begin rcs = 1; ofs = 0;       end
          2: begin rcs = 0; ofs = 0;       end
          3: begin rcs = 0; ofs = h;       end
          4: begin rcs = 1; ofs = len - h; end
          default: begin rcs = 1; ofs = 0; end
        endcase
        pfx = 0;
        for (int k2 = 0; k2 < SEED; k2++) begin
          int j, bse;
          j = ofs + k2;
          bse = rcs ? 3 - q[len - 1 - j] : q[j];
          pfx = pfx * 4 + bse;
        end
        st0 = pmitil[pfx]; en0 = pmitil[pfx + 1];
        for (int a = st0; a < en0; a++) begin
          pop(k, st, p, e, id, ln, b);
          check(k == SQ_PMI && st == step_t'(s) && p == pmit[a],
                $sformatf("query %0d step %0d PMI %0d", t, s, a - st0));
          n_pmi++;
        end
        pop(k, st, p, e, id, ln, b);
        check(k == SQ_END && st == step_t'(s), "end marker of the step");
        check(e == (st0 == en0), "empty flag");
        if (st0 == en0) n_empty++;
        n_steps++;
        // verdict
        repeat ($urandom_range(0, 3)) @(negedge clk);
        @(negedge clk);
        fb_valid = 1; fb_missed = (s != last) || (last == 5 && $urandom_range(0, 1) == 1);
        @(negedge clk);
        fb_valid = 0;
      end
      repeat (2) @(negedge clk);
      check(!busy && q_ready, "released after the verdict");
    end
    check(n_empty > 3 && n_pmi > 30 && n_steps > 60, "empty runs, PMIs and phases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
