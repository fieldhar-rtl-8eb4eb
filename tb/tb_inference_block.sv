// tb_inference_block: the complete inference block (FSM, architecture
// controller, both engines, weight ROM, feature RAM) on a behavioural
// one-cycle-read sensor data RAM filled with random Q1.10 values. For five
// windows with different start rows the pooled features, the hidden layer
// (read from the feature RAM) and the label are compared with
// har_ref_pkg::infer. The cycle counter must equal the measured start-to-done
// time and stay below the 54,000 cycles (0.54 ms at 100 MHz) of the source
// design's serial schedule.
module tb_inference_block;
  import har_pkg::*;
  import har_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic start = 0, done, busy;
  logic [ROW_W-1:0] row0 = 0;
  logic [3:0] label;
  logic [31:0] cycles;
  logic [SA_W-1:0] s_raddr;
  data_t s_rdata;
  inference_block dut (.*);

  data_t sram [SR_DEPTH];
  always @(posedge clk) s_rdata <= sram[s_raddr];

  initial begin
    int img [SR_DEPTH];
    int feat [NFEAT], hid [HID];
    longint logit [NCLASS];
    int exp_label, cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int w = 0; w < 5; w++) begin
      automatic int r0 = (w * 7 + 3) % WIN;
      foreach (sram[i]) begin
        sram[i] = data_t'($urandom_range(0, 2047));
        img[i] = int'(sram[i]);
      end
      exp_label = infer(img, r0, feat, hid, logit);
      @(posedge clk); row0 <= ROW_W'(r0); start <= 1;
      @(posedge clk); start <= 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      @(posedge clk);
      for (int i = 0; i < NFEAT; i++)
        check(int'(dut.u_fram.mem[FR_CAT + i]) == feat[i], $sformatf("window %0d feature %0d: %0d vs %0d", w, i, dut.u_fram.mem[FR_CAT + i], feat[i]));
      for (int i = 0; i < HID; i++)
        check(int'(dut.u_fram.mem[FR_HID + i]) == hid[i], $sformatf("window %0d hidden %0d", w, i));
      check(int'(label) == exp_label, $sformatf("window %0d label %0d vs %0d", w, label, exp_label));
      check(int'(cycles) == cyc - 1, $sformatf("cycles %0d vs %0d", cycles, cyc - 1));
      check(cycles < 54000, "faster than the serial schedule's 0.54 ms");
      $display("window %0d: label %0d, %0d cycles", w, label, cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
