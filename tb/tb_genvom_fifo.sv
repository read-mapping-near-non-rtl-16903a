// tb_genvom_fifo: self-checking test of the queue used for the input, search
// and output queues. Random pushes and pops are compared with a reference
// queue; the test also fills the queue to check that a full queue refuses
// writes (back-pressure) and that data comes out in order after one cycle.
module tb_genvom_fifo;
  localparam int W = 24;
  localparam int D = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  genvom_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // fill completely
    for (int i = 0; i < D; i++) begin
      in_valid = 1; in_data = W'(i * 7 + 1);
      @(posedge clk); model.push_back(in_data);
      @(negedge clk);
    end
    check(!in_ready && count == D, "full after DEPTH writes");
    in_data = 'h5a5a; @(posedge clk); @(negedge clk);
    check(count == D, "write into full queue refused");
    in_valid = 0;
    // random traffic
    for (int cyc = 0; cyc < 2000; cyc++) begin
      in_valid  = ($urandom_range(0, 2) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      in_data   = W'($urandom);
      #1;
      if (out_valid) check(model.size() > 0 && out_data == model[0], "head matches model");
      check(out_valid == (model.size() != 0), "out_valid matches occupancy");
      check(in_ready == (model.size() != D), "in_ready matches occupancy");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
