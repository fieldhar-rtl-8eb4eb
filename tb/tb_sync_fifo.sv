// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, full/empty/count and simultaneous push and pop.
module tb_sync_fifo;
  localparam int W = 24, D = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] din = 0, dout;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .full, .pop, .dout, .empty, .count);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [W-1:0] q [$];
  int saw_full = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(empty && !full && count == 0, "reset state");
    for (int i = 0; i < 3000; i++) begin
      bit p, r;
      // phases: fill, drain, mixed
      p = (i < 1000) ? ($urandom % 4 != 0) : (i < 2000) ? ($urandom % 4 == 0) : ($urandom % 2 == 0);
      r = (i < 1000) ? ($urandom % 4 == 0) : (i < 2000) ? ($urandom % 4 != 0) : ($urandom % 2 == 0);
      p = p && !full;
      r = r && !empty;
      if (r) begin
        check(q.size() > 0 && dout == q[0], "head data");
        void'(q.pop_front());
      end
      push <= p; pop <= r;
      din <= W'($urandom);
      #1;
      if (p) q.push_back(din);
      @(posedge clk);
      push <= 0; pop <= 0;
      #1;
      check(int'(count) == q.size(), "count");
      check(full == (q.size() == D) && empty == (q.size() == 0), "flags");
      if (full) saw_full++;
    end
    check(saw_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
