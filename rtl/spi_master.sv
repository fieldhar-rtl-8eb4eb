// spi_master: SPI register-access master of one sensor interface (mode 3).
//
// A CBus command (write flag, register address, byte count) selects the
// sensor with cs_n, sends the address byte {read, reg[6:0]} and then either
// writes len bytes taken from the IntBus (wr_req pulses when wr_data has been
// taken) or reads len bytes (rd_valid pulses with each byte).
// SCLK idles high; MOSI changes on the falling edge and MISO is sampled on
// the rising edge, each half period lasting HALF clock cycles. cs_n is held
// low for HALF cycles before the first and after the last edge, and high for
// HALF cycles after the transaction; done then pulses for one cycle.
// Mode 3 and the read flag in bit 7 follow the LSM9DS1 data sheet; the clock
// rate is this design's choice.
module spi_master
  import har_pkg::*;
#(
  parameter int HALF = 10
)(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  input  cbus_cmd_t cmd,
  output logic      cmd_ready,
  output logic      done,
  input  logic [7:0] wr_data,
  output logic      wr_req,
  output logic [7:0] rd_data,
  output logic      rd_valid,
  output logic      cs_n,
  output logic      sclk,
  output logic      mosi,
  input  logic      miso
);
  typedef enum logic [2:0] {S_IDLE, S_LEAD, S_LOW, S_HIGH, S_TRAIL, S_GAP} st_t;
  st_t st;
  localparam int HW = $clog2(HALF + 1);
  logic [HW-1:0] hcnt;
  logic [2:0]    bitn;
  logic [5:0]    bytes;      // byte index, 0 = address byte
  logic [7:0]    tx, rx;
  logic          c_write;        // latched command (the register address
  logic [4:0]    c_len;          // goes straight into the shift register)
  wire tick = (hcnt == HW'(HALF - 1));

  assign cmd_ready = (st == S_IDLE);
  assign sclk = (st != S_LOW);
  assign cs_n = (st == S_IDLE) || (st == S_GAP);
  assign mosi = tx[7];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; hcnt <= '0; bitn <= '0; bytes <= '0; tx <= '0; rx <= '0; c_write <= 1'b0; c_len <= '0;
      done <= 1'b0; wr_req <= 1'b0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      done <= 1'b0; wr_req <= 1'b0; rd_valid <= 1'b0;
      if (st == S_IDLE) begin
        hcnt <= '0;
        if (cmd_valid) begin
          c_write <= cmd.write; c_len <= cmd.len; st <= S_LEAD; bitn <= '0; bytes <= '0;
          tx <= {~cmd.write, cmd.reg_addr[6:0]};
        end
      end else begin
        hcnt <= tick ? '0 : hcnt + 1'b1;
        if (tick) begin
          unique case (st)
            S_LEAD: st <= S_LOW;
            S_LOW: begin
              st <= S_HIGH;
              rx <= {rx[6:0], miso};          // rising edge
            end
            S_HIGH: begin
              if (bitn == 3'd7) begin
                bitn <= '0;
                if (bytes != 0 && !c_write) begin rd_data <= rx; rd_valid <= 1'b1; end
                if (bytes == 6'(c_len)) st <= S_TRAIL;
                else begin
                  st <= S_LOW;
                  if (c_write) begin tx <= wr_data; wr_req <= 1'b1; end
                  else tx <= 8'h00;
                end
                bytes <= bytes + 6'd1;
              end else begin
                bitn <= bitn + 3'd1;
                st <= S_LOW;
                tx <= {tx[6:0], 1'b0};          // falling edge
              end
            end
            S_TRAIL: st <= S_GAP;
            S_GAP: begin st <= S_IDLE; done <= 1'b1; end
            default: st <= S_IDLE;
          endcase
        end
      end
    end
  end
endmodule
