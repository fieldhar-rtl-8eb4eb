// har_pkg: shared types and constants of the heterogeneous-sensor HAR system.
//
// The system reads four sensor streams (Set D of the modality study: motion
// IMU, time-of-flight range, optical spectrum, magnetometer), keeps a sliding
// window of WIN frames in a sensor data RAM and classifies it with a quantised
// branched CNN: per sensor three 1-D convolution layers (F filters, kernel K)
// and a global max pool, then the 4*F concatenated features go through two
// dense layers (HID hidden units, NCLASS outputs) and an arg-max.
//
// What follows the source design: four modalities, their channel counts and
// native rates, window of 20 frames at the fastest rate, signed 11-bit data
// and weights, no bias, ReLU folded into requantisation, arg-max instead of
// softmax, serial branch schedule, 100 MHz clock.
// What is this design's own choice: F=4, K=3, HID=16 (inferred from the
// published parameter count of 1040 weights), the register programs of the
// sensors, the normalisation constants, the memory layouts, the bus speeds,
// the UART command codes and the placeholder weights in weight_init().
package har_pkg;

  // ---------------------------------------------------------------- system
  localparam int CLK_HZ      = 100_000_000;
  localparam int NUM_SENSORS = 4;
  localparam int RAW_W       = 16;            // raw sensor value width
  localparam int MAX_CH      = 10;            // largest channel count
  localparam int SAMPLE_W    = MAX_CH * RAW_W;
  localparam int TOTAL_CH    = 20;            // 6 + 1 + 10 + 3

  // ---------------------------------------------------------------- network
  localparam int DW       = 11;               // signed data / weight width
  localparam int ACC_W    = 32;
  localparam int WIN      = 20;               // frames per window
  localparam int K        = 3;                // kernel size
  localparam int F        = 4;                // filters per conv layer
  localparam int NLAYERS  = 3;                // conv layers per branch
  localparam int HID      = 16;               // hidden dense units
  localparam int NCLASS   = 10;               // activities
  localparam int NFEAT    = NUM_SENSORS * F;  // concatenated features
  localparam int LANES    = 8;                // dense-layer multipliers
  localparam int QSHIFT   = 10;               // Q1.10 x Q1.10 -> Q1.10
  localparam int NUM_STEPS = NUM_SENSORS * NLAYERS + 2;

  localparam int W_DEPTH  = 1040;             // weights in the ROM
  localparam int WA_W     = 11;               // weight address width

  // feature RAM layout
  localparam int FR_BANK0  = 0;
  localparam int FR_BANK1  = (WIN - K + 1) * F;           // 72
  localparam int FR_CAT    = 2 * FR_BANK1;                // 144
  localparam int FR_HID    = FR_CAT + NFEAT;              // 160
  localparam int FR_OUT    = FR_HID + HID;                // 176
  localparam int FR_DEPTH  = 192;
  localparam int FA_W      = 8;

  localparam int SR_DEPTH  = WIN * TOTAL_CH;              // 400
  localparam int SA_W      = 9;
  localparam int ROW_W     = 5;

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef enum logic [1:0] {POOL_NONE = 2'd0, POOL_KERNEL = 2'd1, POOL_GLOBAL = 2'd2} pool_t;

  // descriptor of one convolution layer pass
  typedef struct packed {
    logic            from_sensor;  // 1: read sensor data RAM, 0: feature RAM
    logic [4:0]      ch_off;       // first column in the sensor data RAM
    logic [4:0]      cin;          // input channels
    logic [4:0]      tout;         // output time steps
    logic [FA_W-1:0] src_base;     // feature RAM source base
    logic [FA_W-1:0] dst_base;     // feature RAM destination base
    logic [WA_W-1:0] w_base;       // first weight
    pool_t           pool;
    logic [4:0]      shift;
  } conv_desc_t;

  typedef struct packed {
    logic [5:0]      nin;
    logic [5:0]      nout;
    logic [FA_W-1:0] src_base;
    logic [FA_W-1:0] dst_base;
    logic [WA_W-1:0] w_base;
    logic            last;         // no ReLU, arg-max
    logic [4:0]      shift;
  } dense_desc_t;

  // ---------------------------------------------------------------- sensors
  // Branch order: 0 motion IMU (acc+gyro), 1 ToF, 2 optical spectrum,
  // 3 magnetometer.
  function automatic int sensor_ch(int b);
    case (b)
      0: return 6;
      1: return 1;
      2: return 10;
      default: return 3;
    endcase
  endfunction

  function automatic int sensor_ch_off(int b);
    int o = 0;
    for (int i = 0; i < b; i++) o += sensor_ch(i);
    return o;
  endfunction

  function automatic int sensor_rate_hz(int b);
    case (b)
      0: return 119;
      1: return 50;
      default: return 20;
    endcase
  endfunction

  // first weight of branch b, conv layer l (layer 0: cin = sensor_ch)
  function automatic int conv_w_base(int b, int l);
    int o = 0;
    for (int i = 0; i < b; i++) o += K * F * (sensor_ch(i) + 2 * F);
    if (l >= 1) o += K * F * sensor_ch(b);
    if (l >= 2) o += K * F * F;
    return o;
  endfunction
  localparam int DENSE1_W = conv_w_base(NUM_SENSORS, 0);   // 624
  localparam int DENSE2_W = DENSE1_W + NFEAT * HID;          // 880

  // per-sensor normalisation of a raw value to signed Q1.10:
  // sat((raw - offset) >>> shift)
  function automatic int norm_shift(int b);
    case (b)
      1: return 4;        // ToF range, unsigned millimetres
      2: return 5;        // spectral counts
      default: return 5;  // IMU two's complement
    endcase
  endfunction
  function automatic int norm_offset(int b);
    case (b)
      1: return 16384;
      2: return 32768;
      default: return 0;
    endcase
  endfunction
  function automatic logic norm_unsigned(int b);
    return (b == 1 || b == 2);
  endfunction

  // command on the CBus between a sensor driver and its peripheral master
  typedef struct packed {
    logic       write;
    logic [7:0] reg_addr;
    logic [4:0] len;       // bytes, 1..31
  } cbus_cmd_t;

  // register program of a sensor (the "package file" of a sensor driver)
  typedef struct packed {
    logic            spi;          // 1: SPI, 0: I2C
    logic [6:0]      dev_addr;     // I2C address
    logic [1:0]      n_cfg;        // configuration writes, 0..3
    logic [2:0][7:0] cfg_reg;
    logic [2:0][7:0] cfg_val;
    logic [7:0]      status_reg;
    logic [7:0]      drdy_mask;
    logic [1:0]      n_burst;      // data bursts, 1..2
    logic [1:0][7:0] burst_reg;
    logic [1:0][4:0] burst_len;
    logic            big_endian;
    logic [3:0]      n_ch;
  } sensor_prog_t;

  function automatic sensor_prog_t sensor_prog(int b);
    sensor_prog_t p;
    p = '0;
    case (b)
      0: begin // LSM9DS1 accelerometer + gyroscope, SPI
        p.spi = 1'b1;
        p.n_cfg = 2'd2;
        p.cfg_reg[0] = 8'h10; p.cfg_val[0] = 8'h60;  // CTRL_REG1_G: 119 Hz
        p.cfg_reg[1] = 8'h20; p.cfg_val[1] = 8'h60;  // CTRL_REG6_XL: 119 Hz
        p.status_reg = 8'h17; p.drdy_mask = 8'h03;
        p.n_burst = 2'd2;
        p.burst_reg[0] = 8'h18; p.burst_len[0] = 5'd6; // gyro X..Z
        p.burst_reg[1] = 8'h28; p.burst_len[1] = 5'd6; // accel X..Z
        p.n_ch = 4'd6;
      end
      1: begin // VL53L0X time of flight, I2C
        p.dev_addr = 7'h29;
        p.n_cfg = 2'd1;
        p.cfg_reg[0] = 8'h00; p.cfg_val[0] = 8'h02;  // SYSRANGE_START: back-to-back
        p.status_reg = 8'h13; p.drdy_mask = 8'h07;
        p.n_burst = 2'd1;
        p.burst_reg[0] = 8'h1E; p.burst_len[0] = 5'd2; // range, mm
        p.big_endian = 1'b1;
        p.n_ch = 4'd1;
      end
      2: begin // spectral sensor, I2C
        p.dev_addr = 7'h39;
        p.n_cfg = 2'd1;
        p.cfg_reg[0] = 8'h80; p.cfg_val[0] = 8'h03;  // ENABLE: PON | SP_EN
        p.status_reg = 8'hA3; p.drdy_mask = 8'h40;
        p.n_burst = 2'd1;
        p.burst_reg[0] = 8'h95; p.burst_len[0] = 5'd20;
        p.n_ch = 4'd10;
      end
      default: begin // LSM9DS1 magnetometer, SPI (bit 6 = auto increment)
        p.spi = 1'b1;
        p.n_cfg = 2'd2;
        p.cfg_reg[0] = 8'h20; p.cfg_val[0] = 8'h10;  // CTRL_REG1_M: 20 Hz
        p.cfg_reg[1] = 8'h22; p.cfg_val[1] = 8'h00;  // CTRL_REG3_M: continuous
        p.status_reg = 8'h27; p.drdy_mask = 8'h08;
        p.n_burst = 2'd1;
        p.burst_reg[0] = 8'h68; p.burst_len[0] = 5'd6;
        p.n_ch = 4'd3;
      end
    endcase
    return p;
  endfunction

  // ---------------------------------------------------------------- weights
  // Placeholder weights: the trained integer weights are not published.
  // w(i) = ((i * 2654435761 + 12345) >> 13) mod 257 - 128, a fixed pseudo
  // random value in [-128, 128], i.e. |w| <= 0.125 in Q1.10.
  function automatic data_t weight_init(int i);
    logic [31:0] h;
    h = 32'(i) * 32'd2654435761 + 32'd12345;
    return data_t'(int'(h >> 13) % 257 - 128);
  endfunction

  // UART command codes
  localparam logic [7:0] CMD_START = 8'h53;  // 'S'
  localparam logic [7:0] CMD_STOP  = 8'h45;  // 'E'
  localparam logic [7:0] CMD_RES   = 8'h52;  // 'R'  send results
  localparam logic [7:0] CMD_DATA  = 8'h44;  // 'D'  send sensor data

endpackage
