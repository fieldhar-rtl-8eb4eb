// i2c_master: I2C register-access master of one sensor interface.
//
// A command on the CBus (write flag, register address, byte count) runs one
// complete register transaction on open-drain SDA/SCL:
//   write: START, addr+W, reg, data x len, STOP
//   read : START, addr+W, reg, repeated START, addr+R, data x len, STOP
// (ACK after every read byte but the last, which gets a NACK).
// Bytes move over the IntBus: wr_req pulses when wr_data has been taken (the
// driver then presents the next byte), rd_valid pulses with each read byte.
// Every symbol (START, repeated START, STOP, data bit) lasts four QUARTER-
// cycle phases; SDA is sampled at the end of the second SCL-high phase.
// done pulses one cycle after STOP; nack reports a missing acknowledge of the
// last transaction (the transaction still runs to its STOP).
// The protocol is standard I2C; speed (400 kHz), absence of clock stretching
// and the CBus/IntBus signal sets are this design's choices.
module i2c_master
  import har_pkg::*;
#(
  parameter int QUARTER = 62,           // clock cycles per quarter bit
  parameter logic [6:0] DEV_ADDR = 7'h29
)(
  input  logic      clk,
  input  logic      rst_n,
  // CBus
  input  logic      cmd_valid,
  input  cbus_cmd_t cmd,
  output logic      cmd_ready,
  output logic      done,
  output logic      nack,
  // IntBus
  input  logic [7:0] wr_data,
  output logic      wr_req,
  output logic [7:0] rd_data,
  output logic      rd_valid,
  // pins (open drain: *_low pulls the line low)
  output logic      scl_low,
  output logic      sda_low,
  input  logic      scl_i,
  input  logic      sda_i
);
  typedef enum logic [3:0] {S_IDLE, S_START, S_ADDR_W, S_REG, S_WDATA, S_RSTART,
                            S_ADDR_R, S_RDATA, S_STOP} st_t;
  st_t st;

  localparam int QW = $clog2(QUARTER + 1);
  logic [QW-1:0] qcnt;
  logic [1:0]    phase;
  logic [3:0]    bitn;       // 0..7 data, 8 ack
  logic [7:0]    sh;
  logic [4:0]    cnt;
  cbus_cmd_t     c;
  logic          tick;
  logic          scl_line_unused;

  assign tick = (qcnt == QW'(QUARTER - 1));
  assign cmd_ready = (st == S_IDLE);
  assign scl_line_unused = scl_i;   // no clock stretching

  wire is_byte = (st == S_ADDR_W) || (st == S_REG) || (st == S_WDATA) ||
                 (st == S_ADDR_R) || (st == S_RDATA);
  wire is_rx   = (st == S_RDATA);
  wire sym_end = tick && (phase == 2'd3);
  wire byte_end = sym_end && (bitn == 4'd8);

  // line levels requested (1 = released/high)
  logic scl_hi, sda_hi;
  always_comb begin
    scl_hi = 1'b1;
    sda_hi = 1'b1;
    unique case (st)
      S_IDLE:   begin scl_hi = 1'b1; sda_hi = 1'b1; end
      S_START:  begin scl_hi = (phase != 2'd3); sda_hi = (phase == 2'd0); end
      S_RSTART: begin scl_hi = (phase == 2'd1) || (phase == 2'd2); sda_hi = (phase != 2'd3) && (phase != 2'd2) ? 1'b1 : 1'b0; end
      S_STOP:   begin scl_hi = (phase != 2'd0); sda_hi = (phase >= 2'd2); end
      default: begin
        scl_hi = (phase == 2'd1) || (phase == 2'd2);
        if (bitn == 4'd8) sda_hi = is_rx ? (cnt == c.len - 5'd1) : 1'b1; // ACK/NACK or release
        else              sda_hi = is_rx ? 1'b1 : sh[7];
      end
    endcase
  end
  assign scl_low = ~scl_hi;
  assign sda_low = ~sda_hi;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; qcnt <= '0; phase <= '0; bitn <= '0; sh <= '0; cnt <= '0;
      c <= '0; done <= 1'b0; nack <= 1'b0; wr_req <= 1'b0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      done <= 1'b0; wr_req <= 1'b0; rd_valid <= 1'b0;
      if (st == S_IDLE) begin
        qcnt <= '0; phase <= '0; bitn <= '0;
        if (cmd_valid) begin
          c <= cmd; st <= S_START; nack <= 1'b0; cnt <= '0;
        end
      end else begin
        qcnt <= tick ? '0 : qcnt + 1'b1;
        if (tick) phase <= phase + 2'd1;
        // sample SDA at the end of the second high phase
        if (tick && phase == 2'd2 && is_byte) begin
          if (bitn == 4'd8) begin
            if (!is_rx && sda_i) nack <= 1'b1;
          end else if (is_rx) begin
            sh <= {sh[6:0], sda_i};
          end
        end
        if (sym_end && is_byte && bitn != 4'd8) begin
          bitn <= bitn + 4'd1;
          if (!is_rx) sh <= {sh[6:0], 1'b0};
        end
        if (sym_end) begin
          unique case (st)
            S_START:  begin st <= S_ADDR_W; sh <= {DEV_ADDR, 1'b0}; bitn <= '0; end
            S_RSTART: begin st <= S_ADDR_R; sh <= {DEV_ADDR, 1'b1}; bitn <= '0; end
            S_STOP:   begin st <= S_IDLE; done <= 1'b1; end
            default: ;
          endcase
        end
        if (byte_end) begin
          bitn <= '0;
          unique case (st)
            S_ADDR_W: begin st <= S_REG; sh <= c.reg_addr; end
            S_REG: begin
              if (c.write) begin st <= S_WDATA; sh <= wr_data; wr_req <= 1'b1; end
              else st <= S_RSTART;
            end
            S_WDATA: begin
              if (cnt == c.len - 5'd1) st <= S_STOP;
              else begin sh <= wr_data; wr_req <= 1'b1; end
              cnt <= cnt + 5'd1;
            end
            S_ADDR_R: begin st <= S_RDATA; sh <= '0; end
            S_RDATA: begin
              rd_data <= sh; rd_valid <= 1'b1;
              if (cnt == c.len - 5'd1) st <= S_STOP;
              cnt <= cnt + 5'd1;
            end
            default: ;
          endcase
        end
      end
    end
  end
endmodule
