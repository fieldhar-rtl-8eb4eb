// spi_sensor_model: behavioural SPI (mode 3) sensor for simulation.
//
// The first byte after cs_n falls is {read, address}; the address is masked
// with ADDR_MASK (0x3F when bit 6 is the device's auto-increment flag) and
// auto-increments over the following bytes. Written bytes go to regs[] and
// are counted in nwrites. Reading STATUS_REG (first byte of a transaction)
// returns 8'hFF except on every
// fourth status read (8'h00); each ready status read makes sample k current,
// and any other register a reads as (k*31 + a*7 + SEED) mod 256. MOSI is
// sampled on rising SCLK edges, MISO changes on falling edges.
module spi_sensor_model #(
  parameter logic [7:0] STATUS_REG = 8'h17,
  parameter logic [7:0] ADDR_MASK  = 8'h7F,
  parameter int SEED = 0
)(
  input  logic cs_n,
  input  logic sclk,
  input  logic mosi,
  output logic miso
);
  logic [7:0] regs [256];
  int nwrites = 0, nstatus = 0, nready = 0, ntrans = 0;
  int k = -1;
  int nb = 0;
  logic rd = 0;
  logic [7:0] addr = 0, sh = 0, tx = 0;

  initial miso = 1'b0;

  // clear(): back to the power-on state (call while the design is in reset,
  // so that bus activity before reset is not counted)
  function automatic void clear();
    foreach (regs[i]) regs[i] = 8'h00;
    nwrites = 0; nstatus = 0; nready = 0; ntrans = 0; k = -1;
    nb = 0; rd = 0; addr = 0; sh = 0; tx = 0;
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

  always @(negedge cs_n) begin nb = 0; rd = 0; ntrans++; end

  always @(negedge sclk) if (!cs_n) begin
    if (nb >= 8 && rd) begin
      if (nb % 8 == 0) tx = rd_byte(8'(addr + 8'(nb / 8 - 1)), nb == 8);
      miso = tx[7 - nb % 8];
    end
  end

  always @(posedge sclk) if (!cs_n) begin
    sh = {sh[6:0], mosi};
    nb++;
    if (nb % 8 == 0) begin
      if (nb == 8) begin rd = sh[7]; addr = sh & ADDR_MASK; end
      else if (!rd) begin regs[8'(addr + 8'(nb / 8 - 2))] = sh; nwrites++; end
    end
  end
endmodule
