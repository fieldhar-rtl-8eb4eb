// tb_inference_fsm: the FSM drives the real NN architecture controller and
// two engine stand-ins that answer each start with done after a random
// delay. Checks the order of the 14 steps (12 conv starts, then 2 dense
// starts), that only one engine runs at a time, one done per start, and that
// cycles equals the measured start-to-done time. Two inferences are run.
module tb_inference_fsm;
  import har_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic start = 0, done, busy, is_dense, last_step, conv_start, conv_done = 0, dense_start, dense_done = 0;
  logic [3:0] step;
  logic [31:0] cycles;
  conv_desc_t conv;
  dense_desc_t dense;
  inference_fsm dut (.*);
  nn_arch_controller arch (.step, .is_dense, .last_step, .conv, .dense);

  int nconv = 0, ndense = 0, order_bad = 0, running = 0, overlap = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (conv_start) begin
      if (int'(step) != nconv + ndense || ndense != 0) order_bad++;
      nconv++;
      if (running) overlap++;
      running = 1;
      fork begin repeat ($urandom_range(1, 40)) @(posedge clk); conv_done <= 1; @(posedge clk); conv_done <= 0; running = 0; end join_none
    end
    if (dense_start) begin
      if (int'(step) != nconv + ndense || nconv != 12) order_bad++;
      ndense++;
      if (running) overlap++;
      running = 1;
      fork begin repeat ($urandom_range(1, 40)) @(posedge clk); dense_done <= 1; @(posedge clk); dense_done <= 0; running = 0; end join_none
    end
    if (done) ndone++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 2; r++) begin
      automatic int t0, t1;
      nconv = 0; ndense = 0; ndone = 0;
      @(posedge clk); start <= 1; @(posedge clk); start <= 0;
      t0 = $time;
      while (!done) @(posedge clk);
      t1 = $time;
      @(posedge clk);
      check(nconv == 12 && ndense == 2, $sformatf("starts %0d/%0d", nconv, ndense));
      check(order_bad == 0 && overlap == 0, "order / one engine at a time");
      check(ndone == 1 && !busy, "single done");
      check(int'(cycles) == (t1 - t0) / 10, $sformatf("cycles %0d vs %0d", cycles, (t1 - t0) / 10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
