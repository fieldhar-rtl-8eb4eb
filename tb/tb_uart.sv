// tb_uart: the transmitter is looped back into the receiver (CLKS_PER_BIT =
// 16 for speed). 200 random bytes are sent back to back; each must be
// received unchanged, and the line must hold every bit for exactly
// CLKS_PER_BIT cycles (start bit low, 8 data bits LSB first, stop bit high),
// which the testbench decodes independently from the tx pin. tx_ready must
// be low while a byte is being sent.
module tb_uart;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic tx, rx_valid, tx_valid = 0, tx_ready;
  logic [7:0] rx_data, tx_data = 0;
  uart #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx(tx), .rx_data, .rx_valid, .tx, .tx_data, .tx_valid, .tx_ready);

  logic [7:0] sent [$], got [$], line [$];
  always @(posedge clk) if (rst_n && rx_valid) got.push_back(rx_data);

  // independent line decoder: sample in the middle of each bit
  initial begin
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      if (tx == 1'b0) begin
        automatic logic [7:0] b;
        for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
        repeat (CPB) @(posedge clk);
        if (tx !== 1'b1) begin failures++; $display("FAIL: stop bit"); end
        line.push_back(b);
      end
    end
  end

  int busy_bad = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      automatic logic [7:0] b = 8'($urandom);
      while (!tx_ready) @(posedge clk);
      tx_valid <= 1'b1; tx_data <= b; sent.push_back(b);
      @(posedge clk); tx_valid <= 1'b0;
      repeat (CPB * 5) begin @(posedge clk); if (tx_ready) busy_bad++; end
    end
    repeat (CPB * 12) @(posedge clk);
    check(busy_bad == 0, "tx_ready low during a frame");
    check(got.size() == 200, $sformatf("received %0d", got.size()));
    check(line.size() == 200, $sformatf("decoded %0d", line.size()));
    for (int n = 0; n < 200 && n < got.size() && n < line.size(); n++) begin
      check(got[n] == sent[n], $sformatf("rx byte %0d", n));
      check(line[n] == sent[n], $sformatf("line byte %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200 * CPB * 12 + 10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
