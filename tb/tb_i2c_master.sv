// tb_i2c_master: register writes and reads through the I2C master against a
// behavioural sensor; checks written registers, read bytes (from the model's
// formula), ACK status and the transaction length in quarter-bit phases.
module tb_i2c_master;
  import har_pkg::*;
  localparam int Q = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, done, nack, wr_req, rd_valid, scl_low, sda_low, m_sda_low;
  cbus_cmd_t cmd = '0;
  logic [7:0] wr_data, rd_data;
  wire scl = !scl_low;
  wire sda = !(sda_low || m_sda_low);

  i2c_master #(.QUARTER(Q), .DEV_ADDR(7'h39)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done, .nack, .wr_data, .wr_req,
    .rd_data, .rd_valid, .scl_low, .sda_low, .scl_i(scl), .sda_i(sda));
  i2c_sensor_model #(.ADDR(7'h39), .STATUS_REG(8'hA3), .SEED(5)) sensor (.scl, .sda, .sda_low(m_sda_low));

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
    int cyc, exp_sym, stops0, starts0;
    repeat (3) @(posedge clk);
    sensor.clear();
    rst_n <= 1;
    @(posedge clk);
    stops0 = sensor.nstops; starts0 = sensor.nstarts;
    // single-byte write
    wbytes[0] = 8'h5A;
    txn(1, 8'h80, 1, cyc);
    check(sensor.regs[8'h80] == 8'h5A, "single write");
    check(!nack, "ack on write");
    exp_sym = 1 + 3 * 9 + 1;
    check(cyc >= exp_sym * 4 * Q && cyc <= exp_sym * 4 * Q + 3, $sformatf("write length %0d", cyc));
    // multi-byte write
    wi_clr <= 1; @(posedge clk); wi_clr <= 0;
    wbytes[0] = 8'h11; wbytes[1] = 8'h22; wbytes[2] = 8'h33;
    txn(1, 8'h40, 3, cyc);
    check(sensor.regs[8'h40] == 8'h11 && sensor.regs[8'h41] == 8'h22 && sensor.regs[8'h42] == 8'h33, "multi write");
    check(sensor.nwrites == 4, "write count");
    // status read (ready)
    got.delete();
    txn(0, 8'hA3, 1, cyc);
    check(got.size() == 1 && got[0] == 8'hFF, "status read");
    exp_sym = 1 + 2 * 9 + 1 + 9 + 9 + 1;
    check(cyc >= exp_sym * 4 * Q && cyc <= exp_sym * 4 * Q + 3, $sformatf("read length %0d", cyc));
    // burst read of 5 bytes, sample k = 0
    got.delete();
    txn(0, 8'h95, 5, cyc);
    check(got.size() == 5, "burst byte count");
    for (int i = 0; i < 5 && i < got.size(); i++)
      check(got[i] == 8'((0 * 31 + (8'h95 + i) * 7 + 5) % 256), $sformatf("burst byte %0d = %h", i, got[i]));
    check(!nack, "no nack");
    check(sensor.nstops - stops0 == 4 && sensor.nstarts - starts0 == 6, $sformatf("start/stop count %0d %0d", sensor.nstarts, sensor.nstops));
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
