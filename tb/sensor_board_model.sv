// sensor_board_model: the four sensors of the system as behavioural models,
// wired to the design's pins: lane 0 motion IMU (SPI, status 0x17), lane 1
// time-of-flight ranger (I2C address 0x29, status 0x13), lane 2 optical
// spectrum sensor (I2C 0x39, status 0xA3), lane 3 magnetometer (SPI, status
// 0x27, address bit 6 = auto-increment). Each I2C lane has its own bus with
// pull-ups: a line is low when the design or the sensor pulls it low.
// retries() gives the number of not-ready status reads over all sensors,
// i.e. how often a driver had to poll again.
module sensor_board_model (
  input  logic [3:0] scl_low,
  input  logic [3:0] sda_low,
  output logic [3:0] scl_i,
  output logic [3:0] sda_i,
  input  logic [3:0] cs_n,
  input  logic [3:0] sclk,
  input  logic [3:0] mosi,
  output logic [3:0] miso
);
  logic s1_low, s2_low;
  assign scl_i[0] = 1'b1;
  assign sda_i[0] = 1'b1;
  assign scl_i[3] = 1'b1;
  assign sda_i[3] = 1'b1;
  assign scl_i[1] = !scl_low[1];
  assign sda_i[1] = !(sda_low[1] || s1_low);
  assign scl_i[2] = !scl_low[2];
  assign sda_i[2] = !(sda_low[2] || s2_low);
  assign miso[1] = 1'b0;
  assign miso[2] = 1'b0;

  spi_sensor_model #(.STATUS_REG(8'h17), .ADDR_MASK(8'h7F), .SEED(11)) imu (
    .cs_n(cs_n[0]), .sclk(sclk[0]), .mosi(mosi[0]), .miso(miso[0]));
  i2c_sensor_model #(.ADDR(7'h29), .STATUS_REG(8'h13), .SEED(22)) tof (
    .scl(scl_i[1]), .sda(sda_i[1]), .sda_low(s1_low));
  i2c_sensor_model #(.ADDR(7'h39), .STATUS_REG(8'hA3), .SEED(33)) opt (
    .scl(scl_i[2]), .sda(sda_i[2]), .sda_low(s2_low));
  spi_sensor_model #(.STATUS_REG(8'h27), .ADDR_MASK(8'h3F), .SEED(44)) mag (
    .cs_n(cs_n[3]), .sclk(sclk[3]), .mosi(mosi[3]), .miso(miso[3]));

  function automatic void clear();
    imu.clear(); tof.clear(); opt.clear(); mag.clear();
  endfunction
  function automatic int retries();
    return (imu.nstatus - imu.nready) + (tof.nstatus - tof.nready) +
           (opt.nstatus - opt.nready) + (mag.nstatus - mag.nready);
  endfunction
  function automatic bit configured();
    return imu.regs[8'h10] == 8'h60 && imu.regs[8'h20] == 8'h60 && tof.regs[8'h00] == 8'h02 &&
           opt.regs[8'h80] == 8'h03 && mag.regs[8'h20] == 8'h10 && mag.regs[8'h22] == 8'h00;
  endfunction
endmodule
