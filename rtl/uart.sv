// uart: 8N1 serial port of the system's debug/host interface.
//
// Transmitter: tx_valid with tx_ready high loads tx_data; the frame (start
// bit 0, eight data bits LSB first, stop bit 1) is shifted out with
// CLKS_PER_BIT cycles per bit; tx_ready is low while a frame is sent.
// Receiver: rx is synchronised with two flip-flops; a falling edge starts a
// frame, each bit is sampled in its middle, and rx_valid pulses for one cycle
// with rx_data after the stop bit was sampled high (a frame with a low stop
// bit is dropped).
// Only the existence of a UART is taken from the source design; the frame
// format and the rate (115200 baud at 100 MHz) are this design's choices.
module uart #(
  parameter int CLKS_PER_BIT = 868
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] rx_data,
  output logic       rx_valid,
  output logic       tx,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  // ------------------------------------------------------------- transmit
  logic [CW-1:0] tcnt;
  logic [3:0]    tbit;
  logic [9:0]    tsh;
  logic          tbusy;
  assign tx_ready = !tbusy;
  assign tx = tbusy ? tsh[0] : 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tbusy <= 1'b0; tcnt <= '0; tbit <= '0; tsh <= '1;
    end else if (!tbusy) begin
      if (tx_valid) begin
        tbusy <= 1'b1; tsh <= {1'b1, tx_data, 1'b0}; tcnt <= '0; tbit <= '0;
      end
    end else if (tcnt == CW'(CLKS_PER_BIT - 1)) begin
      tcnt <= '0;
      tsh <= {1'b1, tsh[9:1]};
      if (tbit == 4'd9) tbusy <= 1'b0;
      tbit <= tbit + 4'd1;
    end else tcnt <= tcnt + 1'b1;
  end

  // -------------------------------------------------------------- receive
  logic          r1, r2;
  logic [CW-1:0] rcnt;
  logic [3:0]    rbit;
  logic [7:0]    rsh;
  logic          rbusy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r1 <= 1'b1; r2 <= 1'b1; rbusy <= 1'b0; rcnt <= '0; rbit <= '0; rsh <= '0;
      rx_data <= '0; rx_valid <= 1'b0;
    end else begin
      r1 <= rx; r2 <= r1;
      rx_valid <= 1'b0;
      if (!rbusy) begin
        if (!r2) begin rbusy <= 1'b1; rcnt <= '0; rbit <= '0; end
      end else begin
        // first sample half a bit after the edge, then every bit
        if (rcnt == CW'((rbit == 0) ? CLKS_PER_BIT / 2 - 1 : CLKS_PER_BIT - 1)) begin
          rcnt <= '0;
          rbit <= rbit + 4'd1;
          if (rbit == 4'd0) begin
            if (r2) rbusy <= 1'b0;               // glitch, not a start bit
          end else if (rbit <= 4'd8) begin
            rsh <= {r2, rsh[7:1]};
          end else begin
            rbusy <= 1'b0;
            if (r2) begin rx_data <= rsh; rx_valid <= 1'b1; end
          end
        end else rcnt <= rcnt + 1'b1;
      end
    end
  end
endmodule
