// tb_dispatch_unit: self-checking test of the Dispatch Unit with behavioural
// tiles. Each tile answers three cycles after a request; whether it matches
// is a fixed function of the requested row. The test feeds query / PMI / end
// sequences and checks the query broadcast, that each PMI goes to the right
// array, that searching stops after the first match of a step (later PMIs are
// dropped), and the step outcome (qid, step, hit, indices, empty flag).
module tb_dispatch_unit;
  import genvom_pkg::*;
  localparam int A  = 4;
  localparam int MB = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sq_valid, sq_ready, sq_empty;
  sq_kind_t sq_kind;
  qid_t sq_qid;
  blen_t sq_len;
  logic [2*MB-1:0] sq_bases;
  step_t sq_step;
  pmi_t sq_pmi;
  logic ld_valid;
  blen_t ld_len;
  logic [2*MB-1:0] ld_bases;
  logic [A-1:0] t_req_valid, t_req_ready, t_done, t_hit, t_frag, t_boundary;
  logic [ROW_W-1:0] t_req_row;
  logic [COL_W-1:0] t_req_col;
  step_t t_req_step;
  ref_idx_t t_start [A];
  ref_idx_t t_end [A];
  logic out_valid, out_ready, out_hit, out_empty;
  qid_t out_qid;
  step_t out_step;
  ref_idx_t out_start, out_end;
  logic ev_search, ev_frag_hit, ev_boundary_hit, ev_skip;
  int checks = 0, failures = 0;
  int searches = 0, skips = 0, loads = 0;
  int req_log_tile [$];
  int req_log_row [$];

  dispatch_unit #(.ARRAYS(A), .MAX_BASES(MB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural tiles
  for (genvar k = 0; k < A; k++) begin : g_tile
    int cnt;
    logic [ROW_W-1:0] r;
    logic [COL_W-1:0] c;
    assign t_req_ready[k] = (cnt == 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt <= 0; t_done[k] <= 0; t_hit[k] <= 0; t_frag[k] <= 0; t_boundary[k] <= 0;
        t_start[k] <= '0; t_end[k] <= '0; r <= '0; c <= '0;
      end else begin
        t_done[k] <= 1'b0;
        if (cnt == 0 && t_req_valid[k]) begin
          cnt <= 3; r <= t_req_row; c <= t_req_col;
          req_log_tile.push_back(k); req_log_row.push_back(int'(t_req_row));
        end else if (cnt == 1) begin
          cnt <= 0;
          t_done[k]     <= 1'b1;
          t_hit[k]      <= (r % 3 == 0);
          t_frag[k]     <= (c > 20);
          t_boundary[k] <= 1'b0;
          t_start[k]    <= ref_idx_t'(k * 100000 + int'(r) * 100 + int'(c));
          t_end[k]      <= ref_idx_t'(k * 100000 + int'(r) * 100 + int'(c) + 9);
        end else if (cnt > 1) cnt <= cnt - 1;
      end
    end
  end

  always @(posedge clk) begin
    if (ev_search) searches++;
    if (ev_skip) skips++;
    if (ld_valid) loads++;
  end

  task automatic push(sq_kind_t k, int arr, int row, int col, step_t st, bit empty);
    @(negedge clk);
    sq_valid = 1; sq_kind = k; sq_step = st; sq_empty = empty;
    sq_pmi = '{array_no: ARRAY_W'(arr), row_no: ROW_W'(row), col_no: COL_W'(col)};
    @(posedge clk);
    while (!sq_ready) @(posedge clk);
    @(negedge clk);
    sq_valid = 0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total_skips, total_search;
    total_skips = 0; total_search = 0;
    sq_valid = 0; sq_kind = SQ_QUERY; sq_qid = '0; sq_len = '0; sq_bases = '0;
    sq_step = STEP_FWD; sq_pmi = '0; sq_empty = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n, first_hit_tile, first_hit_row, first_hit_col, exp_search, exp_skip, l0;
      int arr [8]; int row [8]; int col [8];
      step_t st;
      bit empty;
      st = step_t'($urandom_range(0, 5));
      sq_qid = qid_t'(1000 + t);
      sq_len = blen_t'($urandom_range(1, MB));
      sq_bases = 16'($urandom);
      l0 = loads;
      push(SQ_QUERY, 0, 0, 0, STEP_FWD, 0);
      @(negedge clk);
      check(loads == l0 + 1, "query broadcast once");
      n = $urandom_range(0, 6);
      empty = (n == 0);
      first_hit_tile = -1; exp_search = 0; exp_skip = 0;
      first_hit_row = 0; first_hit_col = 0;
      req_log_tile.delete(); req_log_row.delete();
      searches = 0; skips = 0;
      for (int i = 0; i < n; i++) begin
        arr[i] = $urandom_range(0, A - 1);
        row[i] = $urandom_range(0, 30);
        col[i] = $urandom_range(0, 40);
        if (first_hit_tile >= 0) exp_skip++;
        else begin
          exp_search++;
          if (row[i] % 3 == 0) begin
            first_hit_tile = arr[i]; first_hit_row = row[i]; first_hit_col = col[i];
          end
        end
        push(SQ_PMI, arr[i], row[i], col[i], st, 0);
      end
      push(SQ_END, 0, 0, 0, st, empty);
      while (!out_valid) @(negedge clk);
      check(out_qid == sq_qid && out_step == st, "outcome qid and step");
      check(out_empty == empty, "empty flag");
      check(out_hit == (first_hit_tile >= 0), "outcome hit");
      if (first_hit_tile >= 0) begin
        check(out_start == ref_idx_t'(first_hit_tile * 100000 + first_hit_row * 100 + first_hit_col),
              "start of first matching PMI");
        check(out_end == out_start + 9, "end of first matching PMI");
      end
      check(searches == exp_search, $sformatf("searches %0d expected %0d", searches, exp_search));
      check(skips == exp_skip, "PMIs dropped after a match");
      for (int i = 0; i < req_log_tile.size(); i++)
        check(req_log_tile[i] == arr[i] && req_log_row[i] == row[i], "PMI routed to its array");
      total_skips += skips; total_search += searches;
      @(negedge clk);
    end
    check(total_skips > 5 && total_search > 30, "skip and search exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
