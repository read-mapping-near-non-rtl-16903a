// tb_tcam_array: self-checking test of the TCAM array model. Random rows are
// written, random query registers with don't-care bits are loaded, and every
// search is checked against a mismatch count computed here bit by bit: a row
// matches when fewer than tol_bits cared-for bits differ. The match must
// appear exactly one cycle after the search (1 ns search at 1 GHz).
module tb_tcam_array;
  localparam int ROWS = 16;
  localparam int RB   = 96;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, qr_load, search, match_valid, match;
  logic [$clog2(ROWS)-1:0] wr_row, search_row;
  logic [RB-1:0] wr_data, qr_val, qr_care;
  logic [$clog2(RB):0] tol_bits;
  int checks = 0, failures = 0;
  logic [RB-1:0] shadow [ROWS];

  tcam_array #(.ROWS(ROWS), .ROW_BITS(RB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [RB-1:0] rnd();
    logic [RB-1:0] v;
    for (int i = 0; i < RB; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, seen_match, seen_miss;
    wr_en = 0; qr_load = 0; search = 0; wr_row = '0; search_row = '0;
    wr_data = '0; qr_val = '0; qr_care = '0; tol_bits = '0;
    seen_match = 0; seen_miss = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = 1; wr_row = r[$clog2(ROWS)-1:0]; wr_data = rnd(); shadow[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      int r;
      r = $urandom_range(0, ROWS - 1);
      // query = stored row with a few flipped bits and random don't cares
      qr_care = rnd() | rnd();
      qr_val  = shadow[r];
      for (int k = 0; k < $urandom_range(0, 6); k++) qr_val[$urandom_range(0, RB-1)] ^= 1'b1;
      if (t % 7 == 0) qr_val = rnd();
      tol_bits = ($clog2(RB)+1)'($urandom_range(0, 6));
      qr_load = 1;
      @(negedge clk); qr_load = 0;
      search = 1; search_row = r[$clog2(ROWS)-1:0];
      @(negedge clk); search = 0;
      n = 0;
      for (int i = 0; i < RB; i++) if (qr_care[i] && (qr_val[i] != shadow[r][i])) n++;
      check(match_valid, "match_valid one cycle after search");
      check(match == (n < int'(tol_bits)), $sformatf("row %0d: %0d mismatches, tol %0d", r, n, tol_bits));
      if (n < int'(tol_bits)) seen_match++; else seen_miss++;
      @(negedge clk);
      check(!match_valid, "match_valid is a single-cycle pulse");
    end
    check(seen_match > 20 && seen_miss > 20, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
