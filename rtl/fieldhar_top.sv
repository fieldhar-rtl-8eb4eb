// fieldhar_top: end-to-end human activity recognition system.
//
// Sensor data acquisition and CNN inference in one clock domain (100 MHz):
//  * four sensor interfaces (motion IMU over SPI, time-of-flight over I2C,
//    optical spectrum over I2C, magnetometer over SPI), each a peripheral
//    master, a sensor driver and a sample FIFO;
//  * the top controller: the sensor controller (synchronised start pulses at
//    each sensor's own rate, frame tick at the fastest rate), the data stream
//    controller (FIFOs -> one row per frame of the sensor data RAM, sliding
//    window ready signal) and the interface controller (UART commands, RAM
//    lock, inference trigger, result or data output);
//  * the sensor data RAM (20 frames x 20 channels, signed 11 bit);
//  * the inference block (serial branched CNN, weight ROM, feature RAM);
//  * the debug UART.
// Pins: each sensor lane has both an I2C pin set (open drain: *_low pulls
// the line low, *_i reads it) and an SPI pin set; the set its sensor does not
// use is held idle (constant outputs: SCL/SDA released on the two SPI lanes,
// CS high, SCLK high and MOSI low on the two I2C lanes). label/label_valid
// give every prediction (class 0..9); the status outputs count stalls, lost
// frames, dropped and missed samples, skipped streamed rows and windows that
// came while inference was busy.
// Parameters default to the real system; SENSOR_DIV divides all sampling
// periods and the bus/UART timing parameters can be shortened, for
// simulation only.
module fieldhar_top
  import har_pkg::*;
#(
  parameter int    SENSOR_DIV   = 1,
  parameter int    I2C_QUARTER  = 62,
  parameter int    SPI_HALF     = 10,
  parameter int    CLKS_PER_BIT = 868,
  parameter int    STEP         = WIN,
  parameter string WEIGHT_FILE  = ""
)(
  input  logic                   clk,
  input  logic                   rst_n,
  // sensor pins
  output logic [NUM_SENSORS-1:0] scl_low,
  output logic [NUM_SENSORS-1:0] sda_low,
  input  logic [NUM_SENSORS-1:0] scl_i,
  input  logic [NUM_SENSORS-1:0] sda_i,
  output logic [NUM_SENSORS-1:0] cs_n,
  output logic [NUM_SENSORS-1:0] sclk,
  output logic [NUM_SENSORS-1:0] mosi,
  input  logic [NUM_SENSORS-1:0] miso,
  // host UART
  input  logic                   uart_rx,
  output logic                   uart_tx,
  // results and status
  output logic [3:0]             label,
  output logic                   label_valid,
  output logic                   running,
  output logic [NUM_SENSORS-1:0] cfg_done,
  output logic [31:0]            inf_cycles,
  output logic [15:0]            stall_cnt,
  output logic [15:0]            lost_frames,
  output logic [15:0]            drop_total,
  output logic [15:0]            miss_total,
  output logic                   data_mode,
  output logic                   inf_busy,
  output logic [15:0]            skipped_rows,
  output logic [15:0]            busy_windows
);
  logic [NUM_SENSORS-1:0] start, pop, empty;
  logic [SAMPLE_W-1:0]    fifo_data [NUM_SENSORS];
  logic [15:0]            drop_cnt [NUM_SENSORS];
  logic [15:0]            miss_cnt [NUM_SENSORS];
  logic                   frame_tick, run, lock;

  for (genvar b = 0; b < NUM_SENSORS; b++) begin : g_sensor
    sensor_interface #(.SENSOR(b), .I2C_QUARTER(I2C_QUARTER), .SPI_HALF(SPI_HALF)) u_si (
      .clk, .rst_n, .start(start[b]), .pop(pop[b]), .empty(empty[b]), .dout(fifo_data[b]),
      .cfg_done(cfg_done[b]), .drop_cnt(drop_cnt[b]), .miss_cnt(miss_cnt[b]),
      .scl_low(scl_low[b]), .sda_low(sda_low[b]), .scl_i(scl_i[b]), .sda_i(sda_i[b]),
      .cs_n(cs_n[b]), .sclk(sclk[b]), .mosi(mosi[b]), .miso(miso[b]));
  end

  always_comb begin
    drop_total = '0;
    miss_total = '0;
    for (int b = 0; b < NUM_SENSORS; b++) begin
      drop_total = drop_total + drop_cnt[b];
      miss_total = miss_total + miss_cnt[b];
    end
  end

  sensor_controller #(.DIV(SENSOR_DIV)) u_sctl (.clk, .rst_n, .run, .start, .frame_tick);

  logic             ram_we, win_ready, row_written;
  logic [SA_W-1:0]  ram_waddr, raddr_a, raddr_b;
  data_t            ram_wdata, rdata_a, rdata_b;
  logic [ROW_W-1:0] win_row0, row_idx, inf_row0;

  data_stream_controller #(.STEP(STEP)) u_dsc (
    .clk, .rst_n, .frame_tick, .fifo_empty(empty), .fifo_data, .fifo_pop(pop), .lock,
    .ram_we, .ram_waddr, .ram_wdata, .win_ready, .win_row0, .row_written, .row_idx,
    .stall_cnt, .lost_frames);

  sensor_data_ram u_sram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .raddr_a, .rdata_a, .raddr_b, .rdata_b);

  logic [7:0] rx_data, tx_data;
  logic       rx_valid, tx_valid, tx_ready;
  uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .rx(uart_rx), .rx_data, .rx_valid, .tx(uart_tx), .tx_data, .tx_valid, .tx_ready);

  logic       inf_start, inf_done;
  logic [3:0] inf_label;

  interface_controller u_ictl (
    .clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .run, .win_ready, .win_row0, .lock, .row_written, .row_idx, .raddr_b, .rdata_b,
    .inf_start, .inf_row0, .inf_done, .inf_label,
    .label, .label_valid, .data_mode, .skipped_rows, .busy_windows);

  inference_block #(.WEIGHT_FILE(WEIGHT_FILE)) u_inf (
    .clk, .rst_n, .start(inf_start), .row0(inf_row0), .done(inf_done), .busy(inf_busy),
    .label(inf_label), .cycles(inf_cycles), .s_raddr(raddr_a), .s_rdata(rdata_a));

  assign running = run;
endmodule
