// tb_sensor_controller: with a 5950 Hz clock the periods are 50, 119 and 297
// cycles (119, 50, 20 Hz). Checks that nothing is issued while run is low,
// that all first start pulses and the first frame tick coincide, that every
// later pulse comes exactly one period after the previous one, and that a
// restart realigns all sensors.
module tb_sensor_controller;
  import har_pkg::*;
  localparam int FREQ = 5950;
  logic clk = 0, rst_n = 0, run = 0;
  always #5 clk = ~clk;
  logic [NUM_SENSORS-1:0] start;
  logic frame_tick;
  sensor_controller #(.CLK_FREQ(FREQ)) dut (.clk, .rst_n, .run, .start, .frame_tick);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, last [NUM_SENSORS+1], cnt [NUM_SENSORS+1], bad [NUM_SENSORS+1];
  int per [NUM_SENSORS+1];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int b = 0; b <= NUM_SENSORS; b++) begin
      automatic bit p = (b == NUM_SENSORS) ? frame_tick : start[b];
      if (p) begin
        if (cnt[b] > 0 && cyc - last[b] != per[b]) bad[b]++;
        last[b] <= cyc;
        cnt[b] <= cnt[b] + 1;
      end
    end
  end

  initial begin
    for (int b = 0; b < NUM_SENSORS; b++) per[b] = FREQ / sensor_rate_hz(b);
    per[NUM_SENSORS] = FREQ / 119;
    for (int b = 0; b <= NUM_SENSORS; b++) begin cnt[b] = 0; bad[b] = 0; last[b] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (400) @(posedge clk);
    check(cnt.sum() == 0, "no pulses while stopped");
    run <= 1;
    repeat (3000) @(posedge clk);
    for (int b = 0; b <= NUM_SENSORS; b++) begin
      check(bad[b] == 0, $sformatf("period of %0d", b));
      check(cnt[b] == 1 + (3000 - 2) / per[b], $sformatf("count of %0d: %0d", b, cnt[b]));
    end
    check(per[0] == 50 && per[1] == 119 && per[2] == 297, "periods");
    // restart: all aligned again
    run <= 0;
    repeat (10) @(posedge clk);
    for (int b = 0; b <= NUM_SENSORS; b++) cnt[b] = 0;
    run <= 1;
    @(posedge clk); #1;
    check(start == '1 && frame_tick, "aligned first pulses");
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
