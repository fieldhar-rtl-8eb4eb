// tb_sensor_data_ram: random writes and reads on both read ports against a
// shadow array; read data must appear exactly one cycle after the address,
// also when reading the word being written (old data), and both ports are
// independent.
module tb_sensor_data_ram;
  import har_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [SA_W-1:0] waddr = 0, ra = 0, rb = 0;
  data_t wdata = 0, rdata_a, rdata_b;
  sensor_data_ram dut (.clk, .we, .waddr, .wdata, .raddr_a(ra), .rdata_a, .raddr_b(rb), .rdata_b);
  data_t shadow [SR_DEPTH];
  initial begin
    for (int i = 0; i < SR_DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = SA_W'(i); wdata = data_t'($urandom); shadow[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      automatic data_t ea, eb;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = SA_W'($urandom_range(0, SR_DEPTH - 1)); wdata = data_t'($urandom);
      ra = SA_W'($urandom_range(0, SR_DEPTH - 1));
      rb = (n % 5 == 0) ? waddr : SA_W'($urandom_range(0, SR_DEPTH - 1));
      ea = shadow[ra]; eb = shadow[rb];
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks += 2;
      if (rdata_a !== ea) begin failures++; $display("FAIL: port a addr %0d", ra); end
      if (rdata_b !== eb) begin failures++; $display("FAIL: port b addr %0d", rb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
