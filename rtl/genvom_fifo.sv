// genvom_fifo: synchronous first-in first-out queue used for the input queue,
// the search queue and the output queue of the accelerator.
//
// The paper names the three queues and what flows through them (queries;
// queries plus PMIs; match outcomes) but not their depth or handshake. This
// design uses a plain circular buffer with a valid/ready handshake on both
// sides: a word is written when in_valid and in_ready are both high, and read
// when out_valid and out_ready are both high. A write into a full queue is
// refused (in_ready low); the queue can be written and read in the same cycle.
// Data appears at the output one cycle after it was written (registered
// storage, combinational read of the head entry). Depth must be a power of two.
// Lint note: rst_n is both the asynchronous reset of the pointers and the
// disable condition of the occupancy assertion, which the linter reports as a
// net used both synchronously and asynchronously (SYNCASYNCNET); intended.
module genvom_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // A full queue never accepts, an empty one never delivers.
  assert property (@(posedge clk) disable iff (!rst_n) int'(count) <= DEPTH);

endmodule
