// tb_data_stream_controller: the four sensor FIFOs are modelled by queues.
// Before each frame tick every sensor gets 0, 1 or 2 random samples (so the
// hold of a sensor without a new sample and the keeping of the newest of two
// are both exercised). Each row written to the RAM (captured in a shadow
// array) is compared with an independent normalisation of the expected held
// samples. Some frames are stalled by lock (no RAM write may happen while
// lock is high; stall_cnt must count them) and in some of those a second tick
// arrives while the row is pending (lost_frames). win_ready must pulse after
// rows 20 and 40 with win_row0 the oldest row of the window.
module tb_data_stream_controller;
  import har_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic frame_tick = 0, lock = 0;
  logic [NUM_SENSORS-1:0] fifo_empty, fifo_pop;
  logic [SAMPLE_W-1:0] fifo_data [NUM_SENSORS];
  logic ram_we, win_ready, row_written;
  logic [SA_W-1:0] ram_waddr;
  data_t ram_wdata;
  logic [ROW_W-1:0] win_row0, row_idx;
  logic [15:0] stall_cnt, lost_frames;

  data_stream_controller dut (.*);

  logic [SAMPLE_W-1:0] q [NUM_SENSORS][$];
  always_comb
    for (int b = 0; b < NUM_SENSORS; b++) begin
      fifo_empty[b] = (q[b].size() == 0);
      fifo_data[b]  = (q[b].size() == 0) ? '0 : q[b][0];
    end
  always @(posedge clk)
    for (int b = 0; b < NUM_SENSORS; b++)
      if (fifo_pop[b] && q[b].size() != 0) void'(q[b].pop_front());

  data_t shadow [SR_DEPTH];
  int writes_in_lock = 0, wins = 0, rows = 0;
  int win_rows [$];
  always @(posedge clk) if (rst_n) begin
    if (ram_we) begin
      shadow[ram_waddr] <= ram_wdata;
      if (lock) writes_in_lock++;
    end
    if (win_ready) begin wins++; win_rows.push_back(int'(win_row0)); end
    if (row_written) rows++;
  end

  function automatic data_t ref_norm(logic [15:0] raw, int b);
    int v;
    if (b == 1) v = (int'(raw) - 16384) / 16;
    else if (b == 2) v = (int'(raw) - 32768) / 32;
    else v = int'($signed(raw)) / 32;
    // floor division for negative values (arithmetic shift)
    if (b == 1 && int'(raw) - 16384 < 0 && (int'(raw) - 16384) % 16 != 0) v--;
    if (b == 2 && int'(raw) - 32768 < 0 && (int'(raw) - 32768) % 32 != 0) v--;
    if (b != 1 && b != 2 && int'($signed(raw)) < 0 && int'($signed(raw)) % 32 != 0) v--;
    if (v > 1023) v = 1023;
    if (v < -1024) v = -1024;
    return data_t'(v);
  endfunction

  logic [SAMPLE_W-1:0] exp_hold [NUM_SENSORS];
  int exp_stalls = 0, exp_lost = 0, bad_rows = 0;

  initial begin
    for (int b = 0; b < NUM_SENSORS; b++) exp_hold[b] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int fr = 0; fr < 45; fr++) begin
      automatic int rows0 = rows;
      automatic bit stall = (fr % 7 == 3);
      automatic bit lose  = (fr % 14 == 3);
      for (int b = 0; b < NUM_SENSORS; b++) begin
        automatic int n = $urandom_range(0, 2);
        for (int i = 0; i < n; i++) begin
          automatic logic [SAMPLE_W-1:0] s = '0;
          for (int c = 0; c < sensor_ch(b); c++) s[16*c +: 16] = 16'($urandom);
          if (fr == 0 && b == 1) s[15:0] = 16'h0000;     // negative saturation
          if (fr == 0 && b == 2) s[15:0] = 16'hFFFF;     // positive range end
          q[b].push_back(s);
          exp_hold[b] = s;
        end
      end
      if (stall) lock <= 1'b1;
      @(posedge clk); frame_tick <= 1'b1; @(posedge clk); frame_tick <= 1'b0;
      if (stall) begin
        exp_stalls++;
        repeat (30) @(posedge clk);
        check(rows == rows0, "no row while locked");
        if (lose) begin
          frame_tick <= 1'b1; @(posedge clk); frame_tick <= 1'b0;
          exp_lost++;
        end
        repeat (10) @(posedge clk);
        lock <= 1'b0;
      end
      while (rows == rows0) @(posedge clk);
      @(posedge clk);
      begin
        automatic int r = fr % WIN;
        for (int b = 0; b < NUM_SENSORS; b++)
          for (int c = 0; c < sensor_ch(b); c++)
            if (shadow[r * TOTAL_CH + sensor_ch_off(b) + c] != ref_norm(exp_hold[b][16*c +: 16], b)) begin
              bad_rows++;
              $display("row %0d sensor %0d ch %0d: got %0d exp %0d", fr, b, c,
                       shadow[r * TOTAL_CH + sensor_ch_off(b) + c], ref_norm(exp_hold[b][16*c +: 16], b));
            end
      end
      check(bad_rows == 0, $sformatf("row %0d contents", fr));
      check(fifo_empty == '1, "FIFOs drained");
    end
    check(writes_in_lock == 0, "no RAM write under lock");
    check(stall_cnt == 16'(exp_stalls) && exp_stalls > 0, $sformatf("stall_cnt %0d", stall_cnt));
    check(lost_frames == 16'(exp_lost) && exp_lost > 0, $sformatf("lost_frames %0d", lost_frames));
    check(wins == 2, $sformatf("windows %0d", wins));
    check(win_rows.size() == 2 && win_rows[0] == 0 && win_rows[1] == 0, "win_row0 after 20 and 40 rows");
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
