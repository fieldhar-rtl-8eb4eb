// tb_interface_controller: drives command bytes, window-ready and row-written
// events and an inference stand-in; the UART transmitter is modelled by a
// tx_ready that drops for a random time after each byte, and the sensor data
// RAM by a one-cycle read returning a function of the address. Checks:
// 'S'/'E' control run; a ready window while stopped is ignored; a ready
// window while running locks the RAM and starts inference on win_row0; the
// lock is released at inference done, the label is presented and its ID
// (index + 1) is sent in result mode; a window while busy is counted; in
// data mode ('D') a written row is sent as 20 sign-extended 16-bit words
// (low byte first), a row arriving during sending is skipped and counted,
// and no result byte is sent.
module tb_interface_controller;
  import har_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] rx_data = 0, tx_data;
  logic rx_valid = 0, tx_valid, tx_ready = 1, run, win_ready = 0, lock, row_written = 0;
  logic [ROW_W-1:0] win_row0 = 0, row_idx = 0, inf_row0;
  logic [SA_W-1:0] raddr_b;
  data_t rdata_b;
  logic inf_start, inf_done = 0, label_valid, data_mode;
  logic [3:0] inf_label = 0, label;
  logic [15:0] skipped_rows, busy_windows;
  interface_controller dut (.*);

  function automatic data_t ram_val(int a);
    return data_t'(a * 37 - 5000);
  endfunction
  always @(posedge clk) rdata_b <= ram_val(int'(raddr_b));

  logic [7:0] txq [$];
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      txq.push_back(tx_data);
      tx_ready <= 1'b0;
      fork begin repeat ($urandom_range(2, 12)) @(posedge clk); tx_ready <= 1'b1; end join_none
    end
  end
  int nstart = 0;
  logic [ROW_W-1:0] last_row0;
  always @(posedge clk) if (rst_n && inf_start) begin nstart++; last_row0 <= inf_row0; end

  task automatic cmd(logic [7:0] c);
    @(posedge clk); rx_valid <= 1; rx_data <= c; @(posedge clk); rx_valid <= 0; @(posedge clk);
  endtask
  task automatic pulse_win(int r0);
    @(posedge clk); win_ready <= 1; win_row0 <= ROW_W'(r0); @(posedge clk); win_ready <= 0; repeat (3) @(posedge clk);
  endtask
  task automatic finish_inf(int lab);
    @(posedge clk); inf_done <= 1; inf_label <= 4'(lab); @(posedge clk); inf_done <= 0;
    #1 check(label_valid && label == 4'(lab), "label presented");
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    check(!run && !lock, "idle after reset");
    pulse_win(3);
    check(nstart == 0 && !lock, "window ignored while stopped");
    cmd(CMD_START);
    check(run, "run after S");
    pulse_win(7);
    check(nstart == 1 && last_row0 == 7 && lock, $sformatf("inference started on window, RAM locked: %0d %0d %0d", nstart, last_row0, lock));
    pulse_win(9);
    check(nstart == 1 && busy_windows == 1, "window while busy counted");
    finish_inf(4);
    check(!lock, "lock released");
    repeat (30) @(posedge clk);
    check(txq.size() == 1 && txq[0] == 8'd5, "result byte = index + 1");
    txq.delete();
    // data mode
    cmd(CMD_DATA);
    check(data_mode, "data mode");
    @(posedge clk); row_written <= 1; row_idx <= 5'd13; @(posedge clk); row_written <= 0;
    repeat (5) @(posedge clk);
    row_written <= 1; row_idx <= 5'd14; @(posedge clk); row_written <= 0;
    pulse_win(2);
    finish_inf(9);
    repeat (2000) @(posedge clk);
    check(skipped_rows == 1, $sformatf("skipped rows %0d", skipped_rows));
    check(txq.size() == 2 * TOTAL_CH, $sformatf("data bytes %0d", txq.size()));
    for (int c = 0; c < TOTAL_CH && 2 * c + 1 < txq.size(); c++) begin
      automatic logic [15:0] w = {txq[2 * c + 1], txq[2 * c]};
      check(w == 16'($signed(ram_val(13 * TOTAL_CH + c))), $sformatf("data word %0d: %h", c, w));
    end
    txq.delete();
    cmd(CMD_RES);
    cmd(CMD_STOP);
    check(!run && !data_mode, "stopped, result mode");
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
