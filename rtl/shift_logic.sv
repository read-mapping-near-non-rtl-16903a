// shift_logic: the Shift Logic (ShL) of one TCAM array. It keeps the query
// and its reverse complement, and builds the query register contents that
// align the searched bases with a given column of a TCAM row, padding all
// other positions with "don't care" (X).
//
// Following the paper, ShL holds an extra register with the reverse
// complement of the query, filled when the forward query is loaded, so that
// Phase 2 needs no second broadcast of the query. The window of bases to
// search (whole query, reverse complement, or one half of either for Phase 3
// anchoring) comes from genvom_pkg::step_window.
//
// Row layout (this design's choice): base column c of a row occupies row bits
// [3c+2:3c]; a 1024-bit row holds 341 bases and its top bit is unused. The
// first searched base is placed at column col. When the window runs past the
// end of the row (col + len > 341) the match is fragmented: part 0 holds the
// bases that fit into row j, part 1 the remaining bases placed from column 0
// of row j+1 (the paper's fragmented tail match).
//
// Interface and timing: ld_valid captures ld_len and ld_bases (base i at bits
// [2i+1:2i]) at the clock edge; the forward and reverse complement registers
// are valid from the next cycle. qr_val, qr_care and frag are combinational
// functions of the registers and of step, col and part.
module shift_logic
  import genvom_pkg::*;
#(
  parameter int MAX_BASES = 200,
  parameter int ROW_BITS  = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ld_valid,
  input  blen_t                    ld_len,
  input  logic [2*MAX_BASES-1:0]   ld_bases,
  input  step_t                    step,
  input  logic [COL_W-1:0]         col,
  input  logic                     part,
  output logic [ROW_BITS-1:0]      qr_val,
  output logic [ROW_BITS-1:0]      qr_care,
  output logic                     frag,
  output window_t                  win,
  output blen_t                    query_len
);
  localparam int BPR = ROW_BITS / 3;  // bases per row
  localparam int EW  = 3 * BPR;

  logic [2*MAX_BASES-1:0] fwd_q, rc_q, rev, rc_next, src;
  blen_t                  qlen;
  logic [EW-1:0]          enc, mask, val_sh, care_sh;

  // Reverse complement: reverse the whole register, complement every base,
  // then drop the (MAX_BASES - len) unused bases that came first.
  always_comb begin
    for (int i = 0; i < MAX_BASES; i++)
      rev[2*i +: 2] = complement(ld_bases[2*(MAX_BASES-1-i) +: 2]);
    rc_next = rev >> (2 * (MAX_BASES - int'(ld_len)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_q <= '0;
      rc_q  <= '0;
      qlen  <= '0;
    end else if (ld_valid) begin
      fwd_q <= ld_bases;
      rc_q  <= rc_next;
      qlen  <= ld_len;
    end
  end

  assign win       = step_window(step, qlen);
  assign query_len = qlen;
  assign src = (win.is_rc ? rc_q : fwd_q) >> (2 * int'(win.ofs));

  always_comb begin
    enc  = '0;
    mask = '0;
    for (int k = 0; k < MAX_BASES; k++) begin
      if (k < int'(win.len)) begin
        enc[3*k +: 3]  = encode3(src[2*k +: 2]);
        mask[3*k +: 3] = 3'b111;
      end
    end
  end

  assign frag = (int'(col) + int'(win.len)) > BPR;

  always_comb begin
    if (!part) begin
      val_sh  = enc  << (3 * int'(col));
      care_sh = mask << (3 * int'(col));
    end else begin
      val_sh  = enc  >> (3 * (BPR - int'(col)));
      care_sh = mask >> (3 * (BPR - int'(col)));
    end
    qr_val  = ROW_BITS'(val_sh);
    qr_care = ROW_BITS'(care_sh);
  end

endmodule
