// sensor_data_ram: the window buffer of the system.
//
// DEPTH words of signed DW-bit data (default WIN rows x TOTAL_CH channels =
// 20 x 20 = 400 words of 11 bit), written by the data stream controller
// (word address = row * TOTAL_CH + channel) and read through two independent
// synchronous ports: port A by the inference block, port B by the interface
// controller for streaming sensor data over UART. Read data appears one
// cycle after the address. Contents are not reset.
// The memory itself is named in the source design; the second read port is
// this design's choice.
module sensor_data_ram
  import har_pkg::*;
#(
  parameter int DEPTH = SR_DEPTH,
  parameter int AW    = SA_W
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr_a,
  output data_t         rdata_a,
  input  logic [AW-1:0] raddr_b,
  output data_t         rdata_b
);
  data_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end
endmodule
