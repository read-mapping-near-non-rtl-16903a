// tcam_array: behavioural model of one non-volatile resistive (PCM) TCAM array
// with its query register (QR), one tunable sense amplifier per row and the
// row multiplexer that turns the selected row's sense output into the match
// signal.
//
// The real part is analog: each cell holds D and not-D as high/low resistances
// and the match line of a row sees one low resistance per mismatching bit; a
// voltage-latch sense amplifier, whose threshold is tuned, calls the row a
// match when fewer than t cells mismatch. This model keeps that function
// exactly but without the analog behaviour (no process variation, so no
// overshoot beyond the tolerance): a stored row is compared with the QR, bits
// whose QR care bit is 0 (the paper's X, "search X line") always match, and
// the row matches when the number of mismatching bits is below tol_bits.
//
// Interface and timing:
//  * wr_en/wr_row/wr_data write one row (the host loads the reference once;
//    the array is non-volatile, so nothing is reset).
//  * qr_load writes the QR (value and care mask) in one cycle.
//  * search with search_row activates one row; match_valid and match follow
//    one cycle later (the paper's 1 ns search at 1 GHz). Only the activated
//    row's sense amplifier matters to the multiplexer, so only that row is
//    compared.
module tcam_array #(
  parameter int ROWS     = 1024,
  parameter int ROW_BITS = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // reference load port
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [ROW_BITS-1:0]         wr_data,
  // query register
  input  logic                        qr_load,
  input  logic [ROW_BITS-1:0]         qr_val,
  input  logic [ROW_BITS-1:0]         qr_care,
  // search
  input  logic                        search,
  input  logic [$clog2(ROWS)-1:0]     search_row,
  input  logic [$clog2(ROW_BITS):0]   tol_bits,
  output logic                        match_valid,
  output logic                        match
);
  localparam int CW = $clog2(ROW_BITS) + 1;

  logic [ROW_BITS-1:0] cells [ROWS];
  logic [ROW_BITS-1:0] qr_v, qr_c;
  logic [ROW_BITS-1:0] miss_bits;
  logic [CW-1:0]       n_miss;

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_row] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qr_v <= '0;
      qr_c <= '0;
    end else if (qr_load) begin
      qr_v <= qr_val;
      qr_c <= qr_care;
    end
  end

  // Match line of the activated row: one "low resistance" per mismatching bit.
  assign miss_bits = (cells[search_row] ^ qr_v) & qr_c;

  always_comb begin
    n_miss = '0;
    for (int i = 0; i < ROW_BITS; i++) n_miss = n_miss + CW'(miss_bits[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      match_valid <= 1'b0;
      match       <= 1'b0;
    end else begin
      match_valid <= search;
      if (search) match <= (n_miss < tol_bits);
    end
  end

endmodule
