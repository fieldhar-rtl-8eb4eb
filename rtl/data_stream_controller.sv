// data_stream_controller: merges the sensor FIFOs into the sensor data RAM.
//
// The sensors run at different rates (119, 50, 20 and 20 Hz). On every frame
// tick (the rate of the fastest sensor) this controller drains every FIFO,
// keeping the newest sample of each sensor (a sensor without a new sample
// keeps its previous one: zero-order hold), normalises each channel to signed
// Q1.10 (sat((raw - offset) >>> shift), per sensor, from har_pkg) and writes
// one row of TOTAL_CH values into the ring of WIN rows of the sensor data
// RAM, one value per cycle. Once WIN rows are held, win_ready pulses every
// STEP rows with win_row0, the oldest row of the window; window size and step
// are therefore independent of the FIFOs.
// While lock is high (inference reading the RAM) a row is not written: the
// controller waits with the FIFOs untouched (they keep buffering) and writes
// the row when the lock is released (stall_cnt counts these waits). A frame
// tick that comes while a row is still pending is counted in lost_frames.
// Timing: a row takes (cycles to drain) + TOTAL_CH + 1 cycles after the tick.
// Merging the FIFOs into one RAM with a sliding window follows the source
// design; the hold-based resampling, the normalisation form and the lock are
// this design's choices.
module data_stream_controller
  import har_pkg::*;
#(
  parameter int STEP = WIN
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   frame_tick,
  input  logic [NUM_SENSORS-1:0] fifo_empty,
  input  logic [SAMPLE_W-1:0]    fifo_data [NUM_SENSORS],
  output logic [NUM_SENSORS-1:0] fifo_pop,
  input  logic                   lock,
  output logic                   ram_we,
  output logic [SA_W-1:0]        ram_waddr,
  output data_t                  ram_wdata,
  output logic                   win_ready,
  output logic [ROW_W-1:0]       win_row0,
  output logic                   row_written,
  output logic [ROW_W-1:0]       row_idx,
  output logic [15:0]            stall_cnt,
  output logic [15:0]            lost_frames
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_COLLECT, S_WRITE} st_t;
  st_t st;
  logic [SAMPLE_W-1:0] hold [NUM_SENSORS];
  logic [4:0]          j;
  logic [ROW_W-1:0]    wr_row;
  logic [5:0]          filled, since;

  // channel j -> normalised value of its sensor's held sample
  function automatic data_t norm(logic [RAW_W-1:0] raw, int b);
    int v;
    v = norm_unsigned(b) ? int'({1'b0, raw}) - norm_offset(b) : int'($signed(raw));
    v = v >>> norm_shift(b);
    if (v > 1023) v = 1023;
    if (v < -1024) v = -1024;
    return data_t'(v);
  endfunction

  // every channel normalised in parallel; the row writer walks them with j
  data_t chv [TOTAL_CH];
  for (genvar b = 0; b < NUM_SENSORS; b++) begin : g_norm_s
    for (genvar c = 0; c < sensor_ch(b); c++) begin : g_norm_c
      assign chv[sensor_ch_off(b) + c] = norm(hold[b][RAW_W*c +: RAW_W], b);
    end
  end
  data_t val;
  assign val = chv[j];

  always_comb begin
    fifo_pop = '0;
    if (st == S_COLLECT) fifo_pop = ~fifo_empty;
  end

  assign ram_wdata = val;
  assign ram_waddr = SA_W'(wr_row) * SA_W'(TOTAL_CH) + SA_W'(j);
  assign ram_we    = (st == S_WRITE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; j <= '0; wr_row <= '0; filled <= '0; since <= '0;
      win_ready <= 1'b0; win_row0 <= '0; row_written <= 1'b0; row_idx <= '0;
      stall_cnt <= '0; lost_frames <= '0;
      for (int b = 0; b < NUM_SENSORS; b++) hold[b] <= '0;
    end else begin
      win_ready <= 1'b0;
      row_written <= 1'b0;
      if (frame_tick && st != S_IDLE) lost_frames <= lost_frames + 16'd1;
      for (int b = 0; b < NUM_SENSORS; b++)
        if (fifo_pop[b]) hold[b] <= fifo_data[b];
      unique case (st)
        S_IDLE: if (frame_tick) begin
          if (lock) begin st <= S_WAIT; stall_cnt <= stall_cnt + 16'd1; end
          else st <= S_COLLECT;
        end
        S_WAIT: if (!lock) st <= S_COLLECT;
        S_COLLECT: if (fifo_empty == '1) begin st <= S_WRITE; j <= '0; end
        S_WRITE: begin
          if (j == 5'(TOTAL_CH - 1)) begin
            st <= S_IDLE;
            j <= '0;
            row_written <= 1'b1;
            row_idx <= wr_row;
            wr_row <= (wr_row == ROW_W'(WIN - 1)) ? '0 : wr_row + 1'b1;
            if (filled != 6'(WIN)) filled <= filled + 6'd1;
            if ((filled >= 6'(WIN - 1)) && (since >= 6'(STEP - 1))) begin
              win_ready <= 1'b1;
              win_row0 <= (wr_row == ROW_W'(WIN - 1)) ? '0 : wr_row + 1'b1;
              since <= '0;
            end else since <= since + 6'd1;
          end else j <= j + 5'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
