// tb_spi_master: register writes and burst reads through the SPI master
// against a behavioural mode-3 sensor; checks written registers, read bytes,
// chip-select framing and the transaction length in half periods.
module tb_spi_master;
  import har_pkg::*;
  localparam int H = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, done, wr_req, rd_valid, cs_n, sclk, mosi, miso;
  cbus_cmd_t cmd = '0;
  logic [7:0] wr_data, rd_data;

  spi_master #(.HALF(H)) dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .wr_data, .wr_req,
    .rd_data, .rd_valid, .cs_n, .sclk, .mosi, .miso);
  spi_sensor_model #(.STATUS_REG(8'h27), .ADDR_MASK(8'h3F), .SEED(9)) sensor (.cs_n, .sclk, .mosi, .miso);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] wbytes [4];
  int wi = 0;
  logic wi_clr = 0;
  always @(posedge clk) if (wi_clr) wi <= 0; else if (rst_n && wr_req) wi <= wi + 1;
  assign wr_data = wbytes[wi];
  logic [7:0] got [$];
  always @(posedge clk) if (rst_n && rd_valid) got.push_back(rd_data);
  int edges = 0;
  always @(posedge sclk) if (rst_n && !cs_n) edges++;

  task automatic txn(bit write, logic [7:0] r, int len, output int cyc);
    int c0;
    @(posedge clk);
    cmd <= '{write: write, reg_addr: r, len: 5'(len)};
    cmd_valid <= 1;
    c0 = $time / 10;
    @(posedge clk);
    cmd_valid <= 0;
    while (!done) @(posedge clk);
    cyc = $time / 10 - c0;
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    sensor.clear();
    rst_n <= 1;
    repeat (2) @(posedge clk);
    check(cs_n && sclk, "idle levels");
    wbytes[0] = 8'h10; wbytes[1] = 8'h00;
    txn(1, 8'h20, 2, cyc);
    check(sensor.regs[8'h20] == 8'h10 && sensor.regs[8'h21] == 8'h00, "write 2 bytes");
    check(sensor.nwrites == 2, "write count");
    check(edges == 24, $sformatf("clock edges %0d", edges));
    // 3 bytes * 16 half periods + lead + trail + gap
    check(cyc >= (3 * 16 + 3) * H && cyc <= (3 * 16 + 3) * H + 3, $sformatf("write length %0d", cyc));
    got.delete();
    txn(0, 8'h27, 1, cyc);
    check(got.size() == 1 && got[0] == 8'hFF, "status read");
    got.delete();
    txn(0, 8'h68, 6, cyc);      // bit 6: auto increment flag, masked by the model
    check(got.size() == 6, "burst count");
    for (int i = 0; i < 6 && i < got.size(); i++)
      check(got[i] == 8'((0 * 31 + (8'h28 + i) * 7 + 9) % 256), $sformatf("burst byte %0d = %h", i, got[i]));
    check(sensor.ntrans == 3, "cs framing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
