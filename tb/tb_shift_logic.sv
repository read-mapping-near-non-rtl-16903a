// tb_shift_logic: self-checking test of the Shift Logic. A random query is
// loaded; for every search step (forward, reverse complement, both halves and
// their reverse complements) and many columns, the query register value and
// care mask are compared with a column-by-column placement computed here from
// the query string, including the second part of fragmented matches.
module tb_shift_logic;
  import genvom_pkg::*;
  localparam int MB  = 20;
  localparam int RB  = 96;
  localparam int BPR = RB / 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld_valid, part, frag;
  blen_t ld_len, query_len;
  logic [2*MB-1:0] ld_bases;
  step_t step;
  logic [COL_W-1:0] col;
  logic [RB-1:0] qr_val, qr_care;
  window_t win;
  int checks = 0, failures = 0;
  int q [MB];

  shift_logic #(.MAX_BASES(MB), .ROW_BITS(RB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [2:0] code(int b);
    case (b) 0: return 3'b111; 1: return 3'b100; 2: return 3'b010; default: return 3'b001; endcase
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfrag;
    nfrag = 0;
    ld_valid = 0; ld_len = '0; ld_bases = '0; step = STEP_FWD; col = '0; part = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int len, h;
      len = $urandom_range(10, MB);
      h = len / 2;
      ld_bases = '0;
      for (int i = 0; i < MB; i++) begin
        q[i] = (i < len) ? $urandom_range(0, 3) : 0;
        ld_bases[2*i +: 2] = 2'(q[i]);
      end
      @(negedge clk); ld_valid = 1; ld_len = blen_t'(len);
      @(negedge clk); ld_valid = 0;
      check(query_len == blen_t'(len), "query length held");
      for (int s = 0; s <= 5; s++) begin
        int wl, ofs; bit rcs;
        int w [MB];
        // expected window, built from the query string
        case (s)
          0: begin rcs = 0; ofs = 0;       wl = len;     end
          1: begin rcs = 1; ofs = 0;       wl = len;     end
          2: begin rcs = 0; ofs = 0;       wl = h;       end
          3: begin rcs = 0; ofs = h;       wl = len - h; end
          4: begin rcs = 1; ofs = len - h; wl = h;       end
          default: begin rcs = 1; ofs = 0; wl = len - h; end
        endcase
        for (int k = 0; k < wl; k++) begin
          int j;
          j = ofs + k;
          w[k] = rcs ? (3 - q[len - 1 - j]) : q[j];
        end
        step = step_t'(s);
        for (int c = 0; c < BPR; c += $urandom_range(1, 4)) begin
          col = COL_W'(c);
          for (int p = 0; p < 2; p++) begin
            logic [RB-1:0] ev, ec;
            part = p[0];
            ev = '0; ec = '0;
            for (int cc = 0; cc < BPR; cc++) begin
              int pos;
              pos = (p == 0) ? cc - c : cc + BPR - c;
              if (pos >= 0 && pos < wl) begin
                ev[3*cc +: 3] = code(w[pos]);
                ec[3*cc +: 3] = 3'b111;
              end
            end
            #1;
            if (p == 0 || frag) begin
              check(qr_val == ev && qr_care == ec,
                    $sformatf("step %0d col %0d part %0d placement", s, c, p));
            end
            check(frag == (c + wl > BPR), "fragment flag");
            check(win.len == blen_t'(wl) && win.ofs == blen_t'(ofs) && win.is_rc == rcs, "window");
            if (frag && p == 1) nfrag++;
          end
        end
      end
    end
    check(nfrag > 10, "fragmented placements exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
