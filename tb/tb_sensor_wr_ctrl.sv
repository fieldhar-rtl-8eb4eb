// tb_sensor_wr_ctrl: two sensor drivers, the motion IMU program over SPI
// (two data bursts, little-endian) and the time-of-flight program over I2C
// (big-endian), each with its peripheral master and a behavioural sensor.
// Checks the configuration writes, the assembled samples (computed from the
// sensor model's formula), status polling, the drop counter with a full
// FIFO and the miss counter for a start during a read.
module tb_sensor_wr_ctrl;
  import har_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- SPI lane (sensor 0)
  logic start0 = 0, push0, full0 = 0, cfg0, busy0, cv0, cr0, dn0, wq0, rv0, cs_n, sclk, mosi, miso;
  logic [SAMPLE_W-1:0] data0;
  cbus_cmd_t cmd0;
  logic [7:0] wd0, rd0;
  logic [15:0] drop0, miss0;
  sensor_wr_ctrl #(.PROG(sensor_prog(0))) dut0 (.clk, .rst_n, .start(start0), .push(push0), .full(full0), .data(data0),
    .cmd_valid(cv0), .cmd(cmd0), .cmd_ready(cr0), .done(dn0), .wr_data(wd0), .wr_req(wq0), .rd_data(rd0), .rd_valid(rv0),
    .cfg_done(cfg0), .busy(busy0), .drop_cnt(drop0), .miss_cnt(miss0));
  spi_master #(.HALF(2)) spi (.clk, .rst_n, .cmd_valid(cv0), .cmd(cmd0), .cmd_ready(cr0), .done(dn0), .wr_data(wd0), .wr_req(wq0),
    .rd_data(rd0), .rd_valid(rv0), .cs_n, .sclk, .mosi, .miso);
  spi_sensor_model #(.STATUS_REG(8'h17), .SEED(3)) imu (.cs_n, .sclk, .mosi, .miso);

  // ---------------- I2C lane (sensor 1)
  logic start1 = 0, push1, full1 = 0, cfg1, busy1, cv1, cr1, dn1, wq1, rv1, nack1, scl_low, sda_low, m_sda_low;
  logic [SAMPLE_W-1:0] data1;
  cbus_cmd_t cmd1;
  logic [7:0] wd1, rd1;
  logic [15:0] drop1, miss1;
  wire scl = !scl_low;
  wire sda = !(sda_low || m_sda_low);
  sensor_wr_ctrl #(.PROG(sensor_prog(1))) dut1 (.clk, .rst_n, .start(start1), .push(push1), .full(full1), .data(data1),
    .cmd_valid(cv1), .cmd(cmd1), .cmd_ready(cr1), .done(dn1), .wr_data(wd1), .wr_req(wq1), .rd_data(rd1), .rd_valid(rv1),
    .cfg_done(cfg1), .busy(busy1), .drop_cnt(drop1), .miss_cnt(miss1));
  i2c_master #(.QUARTER(2), .DEV_ADDR(7'h29)) i2c (.clk, .rst_n, .cmd_valid(cv1), .cmd(cmd1), .cmd_ready(cr1), .done(dn1), .nack(nack1),
    .wr_data(wd1), .wr_req(wq1), .rd_data(rd1), .rd_valid(rv1), .scl_low, .sda_low, .scl_i(scl), .sda_i(sda));
  i2c_sensor_model #(.ADDR(7'h29), .STATUS_REG(8'h13), .SEED(11)) tof (.scl, .sda, .sda_low(m_sda_low));

  function automatic logic [7:0] mb(int k, int a, int seed);
    return 8'((k * 31 + a * 7 + seed) % 256);
  endfunction

  logic [SAMPLE_W-1:0] s0 [$], s1 [$];
  always @(posedge clk) if (rst_n) begin
    if (push0) s0.push_back(data0);
    if (push1) s1.push_back(data1);
  end

  initial begin
    repeat (3) @(posedge clk);
    imu.clear(); tof.clear();
    rst_n <= 1;
    wait (cfg0 && cfg1);
    check(imu.regs[8'h10] == 8'h60 && imu.regs[8'h20] == 8'h60 && imu.nwrites == 2, "IMU configuration");
    check(tof.regs[8'h00] == 8'h02 && tof.nwrites == 1, "ToF configuration");
    for (int n = 0; n < 6; n++) begin
      @(posedge clk);
      start0 <= 1; start1 <= 1;
      @(posedge clk);
      start0 <= 0; start1 <= 0;
      if (n == 2) begin       // a second start during the read is missed
        repeat (5) @(posedge clk);
        start0 <= 1; @(posedge clk); start0 <= 0;
      end
      repeat (2) @(posedge clk);
      while (busy0 || busy1) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    check(s0.size() == 6 && s1.size() == 6, $sformatf("sample counts %0d %0d", s0.size(), s1.size()));
    for (int n = 0; n < 6 && n < s0.size(); n++)
      for (int j = 0; j < 6; j++) begin
        automatic int a = (j < 3) ? 8'h18 + 2 * j : 8'h28 + 2 * (j - 3);
        check(s0[n][16*j +: 16] == {mb(n, a + 1, 3), mb(n, a, 3)}, $sformatf("IMU sample %0d ch %0d: %h vs %h", n, j, s0[n][16*j +: 16], {mb(n, a + 1, 3), mb(n, a, 3)}));
      end
    for (int n = 0; n < 6 && n < s1.size(); n++)
      check(s1[n][15:0] == {mb(n, 8'h1E, 11), mb(n, 8'h1F, 11)} && s1[n][SAMPLE_W-1:16] == '0, $sformatf("ToF sample %0d", n));
    // 6 ready reads; every 4th status read not ready -> 7 or 8 status reads
    check(imu.nready == 6 && imu.nstatus > 6, "IMU status polling");
    check(miss0 == 1 && miss1 == 0, "miss counters");
    // full FIFO: sample dropped
    full0 <= 1;
    @(posedge clk); start0 <= 1; @(posedge clk); start0 <= 0;
    @(posedge clk);
    while (busy0) @(posedge clk);
    repeat (3) @(posedge clk);
    check(drop0 == 1 && s0.size() == 6, "drop on full");
    check(!nack1, "I2C acknowledged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
