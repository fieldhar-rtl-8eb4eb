// i2c_sensor_model: behavioural I2C sensor for simulation (not synthesizable).
//
// Answers device address ADDR with a 256-byte register space: writes are
// recorded in regs[] and counted in nwrites; the register address
// auto-increments after every data byte. Reading STATUS_REG returns 8'hFF
// (data ready) except on every fourth status read (first byte of a read
// transaction; a burst running over the status address reads plain data), which returns 8'h00 so
// that drivers have to poll again. Every ready status read makes a new
// sample k (k = 0, 1, ...) current; reading any other register a then gives
// the byte (k*31 + a*7 + SEED) mod 256. The model drives SDA low only while
// SCL is low, acknowledges its address and every written byte and sends
// read bytes MSB first until the master answers with a NACK.
module i2c_sensor_model #(
  parameter logic [6:0] ADDR = 7'h29,
  parameter logic [7:0] STATUS_REG = 8'h13,
  parameter int SEED = 0
)(
  input  logic scl,
  input  logic sda,
  output logic sda_low
);
  logic [7:0] regs [256];
  int nwrites = 0, nstatus = 0, nready = 0, nstarts = 0, nstops = 0;
  int k = -1;
  typedef enum {P_IDLE, P_ADDR, P_REG, P_WDATA, P_READ} ph_t;
  ph_t ph = P_IDLE;
  logic [7:0] sh = 0, tx = 0, ptr = 0;
  int bitn = 0;
  logic mack = 0;
  bit   first_rd = 0;        // next read byte is the first of its transaction

  initial sda_low = 1'b0;

  // clear(): back to the power-on state (call while the design is in reset,
  // so that bus activity before reset is not counted)
  function automatic void clear();
    foreach (regs[i]) regs[i] = 8'h00;
    nwrites = 0; nstatus = 0; nready = 0; nstarts = 0; nstops = 0; k = -1;
    ph = P_IDLE; sh = 0; tx = 0; ptr = 0; bitn = 0; mack = 0; first_rd = 0;
    sda_low = 1'b0;
  endfunction

  function automatic logic [7:0] rd_byte(logic [7:0] a, bit first);
    if (a == STATUS_REG && first) begin
      nstatus++;
      if (nstatus % 4 == 0) return 8'h00;
      k++;
      nready++;
      return 8'hFF;
    end
    return 8'((k * 31 + int'(a) * 7 + SEED) % 256);
  endfunction

  always @(negedge sda) if (scl) begin ph = P_ADDR; bitn = -1; sda_low = 1'b0; nstarts++; end
  always @(posedge sda) if (scl) begin ph = P_IDLE; sda_low = 1'b0; nstops++; end

  always @(posedge scl) begin
    if (ph != P_IDLE) begin
      if (bitn < 8) begin
        if (ph != P_READ) sh = {sh[6:0], sda};
      end else if (ph == P_READ) mack = !sda;
    end
  end

  always @(negedge scl) begin
    if (ph != P_IDLE) begin
      if (bitn < 7) begin
        bitn++;
        if (ph == P_READ) sda_low = !tx[7 - bitn];
      end else if (bitn == 7) begin
        bitn = 8;
        if (ph == P_READ) sda_low = 1'b0;              // release for master ACK
        else begin
          unique case (ph)
            P_ADDR: if (sh[7:1] == ADDR) begin
                      sda_low = 1'b1;
                      ph = sh[0] ? P_READ : P_REG;
                      first_rd = 1'b1;
                      mack = 1'b1;
                    end else ph = P_IDLE;
            P_REG:  begin sda_low = 1'b1; ptr = sh; ph = P_WDATA; end
            P_WDATA: begin sda_low = 1'b1; regs[ptr] = sh; ptr++; nwrites++; end
            default: ;
          endcase
        end
      end else begin
        bitn = 0;
        sda_low = 1'b0;
        if (ph == P_READ) begin
          if (mack) begin tx = rd_byte(ptr, first_rd); first_rd = 1'b0; ptr++; sda_low = !tx[7]; end
          else ph = P_IDLE;
        end
      end
    end
  end
endmodule
