// tb_feature_ram: random writes and reads against a shadow array; read data
// must appear one cycle after the address (old data on a same-address write).
module tb_feature_ram;
  import har_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [FA_W-1:0] waddr = 0, raddr = 0;
  data_t wdata = 0, rdata;
  feature_ram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  data_t shadow [FR_DEPTH];
  initial begin
    for (int i = 0; i < FR_DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = FA_W'(i); wdata = data_t'($urandom); shadow[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      automatic data_t e;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = FA_W'($urandom_range(0, FR_DEPTH - 1)); wdata = data_t'($urandom);
      raddr = (n % 4 == 0) ? waddr : FA_W'($urandom_range(0, FR_DEPTH - 1));
      e = shadow[raddr];
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks++;
      if (rdata !== e) begin failures++; $display("FAIL: addr %0d", raddr); end
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
