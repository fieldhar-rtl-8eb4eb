// uart_host_model: behavioural host side of the UART link for the system
// testbenches. send() drives one 8N1 byte onto rx (the design's receive
// pin); everything the design sends on tx is decoded by sampling each bit in
// its middle and queued in got[] together with the time of its start bit
// (got_t[]). bad_stop counts frames whose stop bit was not high.
module uart_host_model #(
  parameter int CLKS_PER_BIT = 868
)(
  input  logic clk,
  input  logic tx,
  output logic rx
);
  logic [7:0] got [$];
  longint     got_t [$];
  int         bad_stop = 0;

  initial rx = 1'b1;

  task automatic send(logic [7:0] b);
    rx = 1'b0;
    repeat (CLKS_PER_BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CLKS_PER_BIT) @(posedge clk); end
    rx = 1'b1;
    repeat (CLKS_PER_BIT) @(posedge clk);
  endtask

  initial begin
    forever begin
      longint t0;
      logic [7:0] b;
      @(negedge tx);
      t0 = $time;
      repeat (CLKS_PER_BIT / 2) @(posedge clk);
      if (tx == 1'b0) begin
        for (int i = 0; i < 8; i++) begin repeat (CLKS_PER_BIT) @(posedge clk); b[i] = tx; end
        repeat (CLKS_PER_BIT) @(posedge clk);
        if (tx !== 1'b1) bad_stop++;
        got.push_back(b);
        got_t.push_back(t0);
      end
    end
  end
endmodule
