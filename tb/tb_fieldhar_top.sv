// tb_fieldhar_top: end-to-end test of the whole system with the four sensor
// models and a UART host model, at shortened time constants (sampling
// periods divided by 500, I2C quarter-bit 2 cycles, SPI half-bit 2 cycles,
// 8 cycles per UART bit) so that several windows fit into a short run.
// Flow: reset and sensor configuration (register values checked in the
// models), 'S' starts acquisition; for every inference the sensor data RAM
// image and start row are captured at the start and the label given at the
// end is compared with har_ref_pkg::infer on that image; the result bytes on
// the UART must be label + 1. Then 'D' switches to sensor-data streaming and
// the first streamed row (20 words, low byte first) is compared with the RAM
// row it was read from; 'E' stops acquisition and no window may follow.
// Every mechanism of the design is counted and the test fails if one never
// happened: data-ready polling retries, zero-order hold of the slow sensors,
// windows, inferences, result bytes, RAM stalls under the inference lock,
// frames lost while a row was pending, rows skipped while streaming, and the
// data stream itself.
module tb_fieldhar_top;
  import har_pkg::*;
  import har_ref_pkg::*;
  localparam int CPB = 8;
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

  fieldhar_top #(.SENSOR_DIV(500), .I2C_QUARTER(2), .SPI_HALF(2), .CLKS_PER_BIT(CPB)) dut (.*);
  sensor_board_model board (.scl_low, .sda_low, .scl_i, .sda_i, .cs_n, .sclk, .mosi, .miso);
  uart_host_model #(.CLKS_PER_BIT(CPB)) host (.clk, .tx(uart_tx), .rx(uart_rx));

  // ---------------------------------------------------------- monitors
  int n_win = 0, n_inf = 0, n_hold = 0, exp_label = -1;
  int img [SR_DEPTH];
  int feat [NFEAT], hid [HID];
  longint logit [NCLASS];
  int labels [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.win_ready) n_win++;
    if (dut.inf_start) begin
      foreach (img[i]) img[i] = int'(dut.u_sram.mem[i]);
      exp_label = infer(img, int'(dut.inf_row0), feat, hid, logit);
    end
    if (label_valid) begin
      n_inf++;
      labels.push_back(int'(label));
      check(int'(label) == exp_label, $sformatf("inference %0d label %0d vs reference %0d", n_inf, label, exp_label));
      check(inf_cycles < 54000, "inference under 54,000 cycles");
    end
    // a slow sensor without a new sample at a frame: its value is held
    if (dut.frame_tick && dut.empty[2]) n_hold++;
  end

  // first streamed row: captured when the interface controller starts it
  longint t_stream = -1;
  data_t stream_row [TOTAL_CH];
  always @(posedge clk)
    if (rst_n && t_stream < 0 && dut.u_ictl.data_mode && int'(dut.u_ictl.ts) == 1) begin
      t_stream = $time;
      for (int c = 0; c < TOTAL_CH; c++)
        stream_row[c] = dut.u_sram.mem[int'(dut.u_ictl.send_row) * TOTAL_CH + c];
    end

  initial begin
    repeat (5) @(posedge clk);
    
    board.clear();
    rst_n <= 1;
    wait (cfg_done == '1);
    check(board.configured(), "sensor registers configured");
    check(!running, "idle until started");
    host.send(CMD_START);
    repeat (10) @(posedge clk);
    check(running, "running after 'S'");
    wait (n_inf >= 2);
    repeat (40 * CPB) @(posedge clk);
    check(host.got.size() == 2, $sformatf("result bytes %0d", host.got.size()));
    for (int i = 0; i < host.got.size() && i < labels.size(); i++)
      check(int'(host.got[i]) == labels[i] + 1, $sformatf("result byte %0d", i));
    // sensor data streaming
    host.send(CMD_DATA);
    wait (t_stream >= 0);
    repeat (45 * 10 * CPB) @(posedge clk);
    begin
      automatic logic [7:0] bytes [$];
      for (int i = 0; i < host.got.size(); i++) if (host.got_t[i] >= t_stream) bytes.push_back(host.got[i]);
      check(bytes.size() >= 2 * TOTAL_CH, $sformatf("streamed bytes %0d", bytes.size()));
      for (int c = 0; c < TOTAL_CH && 2 * c + 1 < bytes.size(); c++)
        check({bytes[2 * c + 1], bytes[2 * c]} == 16'($signed(stream_row[c])), $sformatf("streamed word %0d", c));
    end
    host.send(CMD_STOP);
    repeat (100) @(posedge clk);
    check(!running, "stopped after 'E'");
    begin
      automatic int w = n_win;
      repeat (40000) @(posedge clk);
      check(n_win == w, "no window after stop");
    end
    check(host.bad_stop == 0, "UART stop bits");
    check(drop_total == 0 && miss_total == 0, $sformatf("no drops/misses (%0d/%0d)", drop_total, miss_total));
    // every mechanism must have happened
    $display("mechanisms: retries=%0d holds=%0d windows=%0d inferences=%0d stalls=%0d lost=%0d skipped=%0d cycles=%0d",
             board.retries(), n_hold, n_win, n_inf, stall_cnt, lost_frames, skipped_rows, inf_cycles);
    check(board.retries() > 0, "mechanism: data-ready polling retry");
    check(n_hold > 0, "mechanism: zero-order hold");
    check(n_win >= 2, "mechanism: window ready");
    check(n_inf >= 2, "mechanism: inference");
    check(stall_cnt > 0, "mechanism: RAM stall under lock");
    check(lost_frames > 0, "mechanism: frame lost while a row is pending");
    check(skipped_rows > 0, "mechanism: row skipped while streaming");
    check(t_stream >= 0, "mechanism: data streaming");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
