// tb_flit_fifo: self-checking test of the router input queue.
//
// Random writes and reads with random back-pressure are compared against a
// reference queue kept in the testbench. Also checked: the queue holds exactly
// DEPTH flits (in_ready falls after DEPTH writes with no read), is empty after
// reset, and shows a written flit one cycle after the write.
module tb_flit_fifo;
  import mf_pkg::*;
  localparam int unsigned DEPTH = 4;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  int    checks = 0, failures = 0;
  flit_t model [$];

  flit_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid  = 1'b0;
    out_ready = 1'b0;
    in_flit   = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!out_valid && in_ready, "empty after reset");
    // Fill to capacity without reading.
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1'b1;
      in_flit  = '{head: 1'b1, tail: 1'b0, data: 32'(i + 100)};
      @(posedge clk);
      model.push_back(in_flit);
      @(negedge clk);
      check(out_valid, "flit visible one cycle after write");
    end
    in_valid = 1'b0;
    check(!in_ready, "full after DEPTH writes");
    // Drain.
    while (model.size() > 0) begin
      out_ready = 1'b1;
      check(out_valid && out_flit == model[0], "order while draining");
      @(posedge clk);
      void'(model.pop_front());
      @(negedge clk);
    end
    out_ready = 1'b0;
    check(!out_valid, "empty after drain");
    // Random traffic.
    for (int cyc = 0; cyc < 5000; cyc++) begin
      in_valid  = ($urandom_range(0, 2) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      in_flit   = '{head: 1'($urandom), tail: 1'($urandom), data: $urandom};
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready matches fill level");
      check(out_valid == (model.size() > 0), "out_valid matches fill level");
      if (out_valid && model.size() > 0) check(out_flit == model[0], "random order");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_flit);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
