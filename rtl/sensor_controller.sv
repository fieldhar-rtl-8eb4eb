// sensor_controller: time base of the data acquisition.
//
// Gives each sensor interface a start pulse at that sensor's own sampling
// rate (PERIOD(b) = CLK_HZ / rate(b) clock cycles) and gives the data stream
// controller a frame tick at the rate of the fastest sensor. All counters are
// cleared together when run rises, so the first start pulses of all sensors
// and the first frame tick fall on the same cycle (the cycle after run rises)
// and the sensors stay in a fixed phase relation from then on: this is how
// the reads of the different sensors are kept simultaneous. While run is low
// no pulses are issued.
// Sampling every sensor at its native rate follows the source design; the
// counter scheme is this design's choice. DIV scales all periods down for
// simulation (DIV = 1 in the real system).
module sensor_controller
  import har_pkg::*;
#(
  parameter int CLK_FREQ = CLK_HZ,
  parameter int DIV      = 1
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   run,
  output logic [NUM_SENSORS-1:0] start,
  output logic                   frame_tick
);
  function automatic int period(int b);
    return CLK_FREQ / DIV / sensor_rate_hz(b);
  endfunction
  localparam int FRAME_P = period(0);   // sensor 0 is the fastest
  localparam int CW = $clog2(period(NUM_SENSORS-1) + 1) + 1;

  logic [CW-1:0] cnt [NUM_SENSORS];
  logic [CW-1:0] fcnt;
  logic          run_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q <= 1'b0; fcnt <= '0; start <= '0; frame_tick <= 1'b0;
      for (int b = 0; b < NUM_SENSORS; b++) cnt[b] <= '0;
    end else begin
      run_q <= run;
      start <= '0;
      frame_tick <= 1'b0;
      if (run && !run_q) begin
        for (int b = 0; b < NUM_SENSORS; b++) cnt[b] <= '0;
        fcnt <= '0;
        start <= '1;
        frame_tick <= 1'b1;
      end else if (run) begin
        for (int b = 0; b < NUM_SENSORS; b++) begin
          if (cnt[b] == CW'(period(b) - 1)) begin
            cnt[b] <= '0;
            start[b] <= 1'b1;
          end else cnt[b] <= cnt[b] + 1'b1;
        end
        if (fcnt == CW'(FRAME_P - 1)) begin
          fcnt <= '0;
          frame_tick <= 1'b1;
        end else fcnt <= fcnt + 1'b1;
      end
    end
  end
endmodule
