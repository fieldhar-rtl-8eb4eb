// tb_weight_rom: reads all W_DEPTH words in random order and compares them
// with the placeholder formula, recomputed here from its definition
// ((i * 2654435761 + 12345) >> 13 mod 257 - 128, 32-bit arithmetic); data
// must appear one cycle after the address.
module tb_weight_rom;
  import har_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [WA_W-1:0] addr = 0;
  data_t data;
  weight_rom dut (.clk, .addr, .data);
  function automatic int expw(int i);
    longint h = (longint'(i) * 64'd2654435761 + 64'd12345) & 64'hFFFF_FFFF;
    return int'((h >> 13) % 257) - 128;
  endfunction
  int order [W_DEPTH];
  int lo = 0, hi = 0;
  initial begin
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[i]) begin
      @(negedge clk); addr = WA_W'(order[i]);
      @(posedge clk); #1;
      checks++;
      if (int'(data) != expw(order[i])) begin
        failures++; $display("FAIL: w[%0d] = %0d, expected %0d", order[i], data, expw(order[i]));
      end
      if (data < -100) lo++;
      if (data > 100) hi++;
    end
    checks++;
    if (lo == 0 || hi == 0) begin failures++; $display("FAIL: weights not spread"); end
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
