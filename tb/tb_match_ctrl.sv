// tb_match_ctrl: self-checking test of one TCAM tile (MatchCtrl with its Shift
// Logic and array). The array is loaded with a random reference slice whose
// last row continues into the next array, as the host would load it. Queries
// are built so that the searched window equals a reference substring with
// 0-2 substituted bases; the expected hit, fragment flags, reference indices
// and latency (3 cycles for one row, 6 for a fragmented match) are computed
// here from the strings.
module tb_match_ctrl;
  import genvom_pkg::*;
  localparam int ROWS = 8;
  localparam int RB   = 96;
  localparam int BPR  = RB / 3;
  localparam int MB   = 20;
  localparam int ANO  = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GARRAY_W-1:0] array_no;
  logic wr_en, ld_valid, req_valid, req_ready, done, hit, frag_out, boundary_out;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [RB-1:0] wr_data;
  blen_t ld_len;
  logic [2*MB-1:0] ld_bases;
  logic [$clog2(RB):0] tol_bits;
  logic [ROW_W-1:0] req_row;
  logic [COL_W-1:0] req_col;
  step_t req_step;
  ref_idx_t ref_start, ref_end;
  int checks = 0, failures = 0;
  int refs [ROWS*BPR];

  match_ctrl #(.ROWS(ROWS), .ROW_BITS(RB), .MAX_BASES(MB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [2:0] code(int b);
    case (b) 0: return 3'b111; 1: return 3'b100; 2: return 3'b010; default: return 3'b001; endcase
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_hit, n_miss, n_frag_hit, n_bound;
    n_hit = 0; n_miss = 0; n_frag_hit = 0; n_bound = 0;
    array_no = GARRAY_W'(ANO);
    wr_en = 0; ld_valid = 0; req_valid = 0; wr_row = '0; wr_data = '0;
    ld_len = '0; ld_bases = '0; req_row = '0; req_col = '0; req_step = STEP_FWD;
    tol_bits = 3;  // one base mismatch (2 bits) allowed per row
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < ROWS*BPR; i++) refs[i] = $urandom_range(0, 3);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = r[$clog2(ROWS)-1:0];
      wr_data = '0;
      for (int c = 0; c < BPR; c++) wr_data[3*c +: 3] = code(refs[r*BPR + c]);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int len, h, s, wl, ofs, row, col, m1, m2, nmut, lat, exp_lat;
      bit rcs, exp_hit, fr;
      int q [MB];
      int w [MB];
      longint pos;
      len = $urandom_range(8, MB);
      h = len / 2;
      s = $urandom_range(0, 5);
      case (s)
        0: begin rcs = 0; ofs = 0;       wl = len;     end
        1: begin rcs = 1; ofs = 0;       wl = len;     end
        2: begin rcs = 0; ofs = 0;       wl = h;       end
        3: begin rcs = 0; ofs = h;       wl = len - h; end
        4: begin rcs = 1; ofs = len - h; wl = h;       end
        default: begin rcs = 1; ofs = 0; wl = len - h; end
      endcase
      row = (t % 5 == 0) ? ROWS - 2 : $urandom_range(0, ROWS - 2);
      col = (t % 3 == 0) ? BPR - $urandom_range(1, wl) : $urandom_range(0, BPR - 1);
      // window = reference substring with a few substitutions
      for (int k = 0; k < wl; k++) w[k] = refs[row*BPR + col + k];
      nmut = $urandom_range(0, 2);
      for (int k = 0; k < nmut; k++) begin
        int p;
        p = $urandom_range(0, wl - 1);
        w[p] = (w[p] + $urandom_range(1, 3)) % 4;
      end
      for (int i = 0; i < MB; i++) q[i] = $urandom_range(0, 3);
      for (int k = 0; k < wl; k++) begin
        if (rcs) q[len - 1 - (ofs + k)] = 3 - w[k];
        else     q[ofs + k] = w[k];
      end
      m1 = 0; m2 = 0;
      for (int k = 0; k < wl; k++) begin
        if (w[k] != refs[row*BPR + col + k]) begin
          if (col + k < BPR) m1++; else m2++;
        end
      end
      fr = (col + wl > BPR);
      exp_hit = (2*m1 < int'(tol_bits)) && (!fr || 2*m2 < int'(tol_bits));
      exp_lat = (fr && 2*m1 < int'(tol_bits)) ? 6 : 3;
      pos = (longint'(ANO) * (ROWS - 1) + row) * BPR + col;
      // broadcast the query, then request the search
      @(negedge clk);
      ld_valid = 1; ld_len = blen_t'(len);
      for (int i = 0; i < MB; i++) ld_bases[2*i +: 2] = 2'(q[i]);
      @(negedge clk); ld_valid = 0;
      check(req_ready, "ready when idle");
      req_valid = 1; req_row = ROW_W'(row); req_col = COL_W'(col); req_step = step_t'(s);
      @(negedge clk); req_valid = 0;
      lat = 0;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      check(done, "done arrives");
      check(lat == exp_lat, $sformatf("latency %0d expected %0d", lat, exp_lat));
      check(hit == exp_hit, $sformatf("t%0d step %0d row %0d col %0d m1 %0d m2 %0d frag %0d: hit %0d",
                                       t, s, row, col, m1, m2, fr, hit));
      check(frag_out == fr, "frag flag");
      if (exp_hit) begin
        check(ref_start == ref_idx_t'(pos - ofs), "ref_start");
        check(ref_end == ref_idx_t'(pos - ofs + len - 1), "ref_end");
        check(boundary_out == (fr && row == ROWS - 2), "boundary flag");
        n_hit++;
        if (fr) n_frag_hit++;
        if (fr && row == ROWS - 2) n_bound++;
      end else n_miss++;
    end
    check(n_hit > 50 && n_miss > 20 && n_frag_hit > 10 && n_bound > 2, "all outcomes exercised");
    $display("hits %0d misses %0d fragmented hits %0d boundary hits %0d", n_hit, n_miss, n_frag_hit, n_bound);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
