// tb_fieldhar_full: the whole system at its real parameters (100 MHz clock,
// sampling at 119/50/20/20 Hz, I2C at 400 kHz, SPI at 5 MHz, UART at
// 115200 baud), with the four sensor models and a UART host model.
// After the sensors are configured the host sends 'S'; the first window is
// complete after 20 frames of the fastest sensor (about 168 ms of data), the
// inference on it must agree with har_ref_pkg::infer on the captured sensor
// data RAM image, finish within the 54,000 cycles (0.54 ms) of the source
// design's serial schedule, and its result byte (label + 1) must arrive on
// the UART. Checks also that no sample was dropped or missed at the real
// rates and that no frame was lost.
module tb_fieldhar_full;
  import har_pkg::*;
  import har_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NUM_SENSORS-1:0] scl_low, sda_low, scl_i, sda_i, cs_n, sclk, mosi, miso, cfg_done;
  logic uart_rx, uart_tx, label_valid, running;
  logic [3:0] label;
  logic [31:0] inf_cycles;
  logic [15:0] stall_cnt, lost_frames, drop_total, miss_total, skipped_rows, busy_windows;
  logic data_mode, inf_busy;

  fieldhar_top dut (.*);
  sensor_board_model board (.scl_low, .sda_low, .scl_i, .sda_i, .cs_n, .sclk, .mosi, .miso);
  uart_host_model #(.CLKS_PER_BIT(868)) host (.clk, .tx(uart_tx), .rx(uart_rx));

  longint cyc = 0, t_run = -1, t_win = -1;
  int exp_label = -1, n_inf = 0, got_label = -1;
  int img [SR_DEPTH];
  int feat [NFEAT], hid [HID];
  longint logit [NCLASS];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (running && t_run < 0) t_run <= cyc;
    if (dut.win_ready && t_win < 0) t_win <= cyc;
    if (dut.inf_start) begin
      foreach (img[i]) img[i] = int'(dut.u_sram.mem[i]);
      exp_label = infer(img, int'(dut.inf_row0), feat, hid, logit);
    end
    if (label_valid) begin n_inf++; got_label <= int'(label); end
  end

  initial begin
    repeat (5) @(posedge clk);
    
    board.clear();
    rst_n <= 1;
    wait (cfg_done == '1);
    check(board.configured(), "sensor registers configured");
    host.send(CMD_START);
    wait (n_inf >= 1);
    repeat (2) @(posedge clk);
    $display("window after %0d cycles (%0d us), inference %0d cycles, label %0d",
             t_win - t_run, (t_win - t_run) / 100, inf_cycles, got_label);
    check(got_label == exp_label, $sformatf("label %0d vs reference %0d", got_label, exp_label));
    check(inf_cycles < 54000, "inference within 0.54 ms");
    // 20 rows: first at the start, the 20th 19 frame periods later
    check(t_win - t_run >= 19 * 840336 && t_win - t_run < 19 * 840336 + 2000,
          $sformatf("window time %0d cycles", t_win - t_run));
    repeat (12 * 868) @(posedge clk);
    check(host.got.size() == 1 && int'(host.got[0]) == got_label + 1, "result byte on the UART");
    check(drop_total == 0 && miss_total == 0 && lost_frames == 0, "no sample or frame lost");
    check(board.retries() > 0, "status polling exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (18000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
