// tb_sensor_interface: two complete sensor lanes, the optical spectrum
// sensor over I2C (10 channels, one 20-byte burst) and the magnetometer over
// SPI (3 channels), each against a behavioural sensor. Checks the samples
// popped from the FIFOs (values from the sensor model's formula), the idle
// levels of the unused pins, and that with a full 3-deep FIFO further
// samples are dropped and counted.
module tb_sensor_interface;
  import har_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic start = 0;
  logic [1:0] pop = 0, empty, cfg, scl_low, sda_low, cs_n, sclk, mosi;
  logic [SAMPLE_W-1:0] dout [2];
  logic [15:0] drop [2], miss [2];
  logic m_sda_low, miso;
  wire scl = !scl_low[0];
  wire sda = !(sda_low[0] || m_sda_low);

  sensor_interface #(.SENSOR(2), .DEPTH(3), .I2C_QUARTER(2), .SPI_HALF(2)) opt (
    .clk, .rst_n, .start, .pop(pop[0]), .empty(empty[0]), .dout(dout[0]), .cfg_done(cfg[0]),
    .drop_cnt(drop[0]), .miss_cnt(miss[0]), .scl_low(scl_low[0]), .sda_low(sda_low[0]), .scl_i(scl), .sda_i(sda),
    .cs_n(cs_n[0]), .sclk(sclk[0]), .mosi(mosi[0]), .miso(1'b0));
  sensor_interface #(.SENSOR(3), .DEPTH(3), .I2C_QUARTER(2), .SPI_HALF(2)) mag (
    .clk, .rst_n, .start, .pop(pop[1]), .empty(empty[1]), .dout(dout[1]), .cfg_done(cfg[1]),
    .drop_cnt(drop[1]), .miss_cnt(miss[1]), .scl_low(scl_low[1]), .sda_low(sda_low[1]), .scl_i(1'b1), .sda_i(1'b1),
    .cs_n(cs_n[1]), .sclk(sclk[1]), .mosi(mosi[1]), .miso);
  i2c_sensor_model #(.ADDR(7'h39), .STATUS_REG(8'hA3), .SEED(1)) s_opt (.scl, .sda, .sda_low(m_sda_low));
  spi_sensor_model #(.STATUS_REG(8'h27), .ADDR_MASK(8'h3F), .SEED(2)) s_mag (.cs_n(cs_n[1]), .sclk(sclk[1]), .mosi(mosi[1]), .miso);

  function automatic logic [7:0] mb(int k, int a, int seed);
    return 8'((k * 31 + a * 7 + seed) % 256);
  endfunction

  task automatic sample_once();
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    repeat (4000) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    s_opt.clear(); s_mag.clear();
    rst_n <= 1;
    wait (cfg == 2'b11);
    check(s_opt.regs[8'h80] == 8'h03, "optical configuration");
    check(s_mag.regs[8'h20] == 8'h10 && s_mag.regs[8'h22] == 8'h00, "magnetometer configuration");
    check(cs_n[0] && sclk[0] && !scl_low[1] && !sda_low[1], "unused pins idle");
    for (int n = 0; n < 5; n++) sample_once();
    // FIFOs hold 3 samples (k = 0..2); samples 3 and 4 were dropped
    check(drop[0] == 2 && drop[1] == 2, $sformatf("drops %0d %0d", drop[0], drop[1]));
    for (int n = 0; n < 3; n++) begin
      check(!empty[0] && !empty[1], "FIFO not empty");
      for (int j = 0; j < 10; j++)
        check(dout[0][16*j +: 16] == {mb(n, 8'h95 + 2*j + 1, 1), mb(n, 8'h95 + 2*j, 1)}, $sformatf("optical k=%0d ch %0d", n, j));
      for (int j = 0; j < 3; j++)
        check(dout[1][16*j +: 16] == {mb(n, 8'h28 + 2*j + 1, 2), mb(n, 8'h28 + 2*j, 2)}, $sformatf("mag k=%0d ch %0d", n, j));
      check(dout[1][SAMPLE_W-1:48] == '0, "mag upper bits zero");
      @(posedge clk); pop <= 2'b11; @(posedge clk); pop <= 2'b00; @(posedge clk);
    end
    check(empty == 2'b11, "FIFOs drained");
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
