// sensor_interface: one lane of the parallel sensor interface.
//
// Three levels, as in the source design: the peripheral driver (an I2C or an
// SPI master, chosen by the sensor's register program), the sensor driver
// (sensor_wr_ctrl) and the data level (a FIFO of DEPTH samples). A start
// pulse from the sensor controller makes the driver read one sample; the
// sample (channel j at bits [16j+:16]) appears at the FIFO head. The pins of
// the bus that is not used are held idle (I2C lines released, SPI chip select
// high), so every lane has the same port list; the input pins of that bus
// are then unused, as are the sample bits above this sensor's channels (the
// FIFO is only as wide as the sensor's channels).
module sensor_interface
  import har_pkg::*;
#(
  parameter int SENSOR  = 0,
  parameter int DEPTH   = WIN,
  parameter int I2C_QUARTER = 62,
  parameter int SPI_HALF    = 10
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                pop,
  output logic                empty,
  output logic [SAMPLE_W-1:0] dout,
  output logic                cfg_done,
  output logic [15:0]         drop_cnt,
  output logic [15:0]         miss_cnt,
  // I2C pins
  output logic                scl_low,
  output logic                sda_low,
  input  logic                scl_i,
  input  logic                sda_i,
  // SPI pins
  output logic                cs_n,
  output logic                sclk,
  output logic                mosi,
  input  logic                miso
);
  localparam sensor_prog_t PROG = sensor_prog(SENSOR);
  localparam int CW = RAW_W * sensor_ch(SENSOR);

  logic       cmd_valid, cmd_ready, done, wr_req, rd_valid, push, full, unused_busy;
  cbus_cmd_t  cmd;
  logic [7:0] wr_data, rd_data;
  logic [SAMPLE_W-1:0] sample;
  logic [CW-1:0] fifo_out;
  logic [$clog2(DEPTH+1)-1:0] unused_count;

  sensor_wr_ctrl #(.PROG(PROG)) u_drv (
    .clk, .rst_n, .start, .push, .full, .data(sample),
    .cmd_valid, .cmd, .cmd_ready, .done,
    .wr_data, .wr_req, .rd_data, .rd_valid,
    .cfg_done, .busy(unused_busy), .drop_cnt, .miss_cnt);

  if (PROG.spi) begin : g_spi
    spi_master #(.HALF(SPI_HALF)) u_spi (
      .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done,
      .wr_data, .wr_req, .rd_data, .rd_valid,
      .cs_n, .sclk, .mosi, .miso);
    assign scl_low = 1'b0;
    assign sda_low = 1'b0;
  end else begin : g_i2c
    logic unused_nack;   // the driver's status polling already catches a silent sensor
    i2c_master #(.QUARTER(I2C_QUARTER), .DEV_ADDR(PROG.dev_addr)) u_i2c (
      .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .nack(unused_nack),
      .wr_data, .wr_req, .rd_data, .rd_valid,
      .scl_low, .sda_low, .scl_i, .sda_i);
    assign cs_n = 1'b1;
    assign sclk = 1'b1;
    assign mosi = 1'b0;
  end

  sync_fifo #(.WIDTH(CW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din(sample[CW-1:0]), .full,
    .pop, .dout(fifo_out), .empty, .count(unused_count));

  assign dout = SAMPLE_W'(fifo_out);
endmodule
