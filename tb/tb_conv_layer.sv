// tb_conv_layer: the conv engine with the real weight ROM and behavioural
// one-cycle-read sensor data and feature memories. Three passes, each
// compared word by word with har_ref_pkg::conv:
//  1. first layer of the optical branch (10 channels from channel offset 7)
//     read from the sensor RAM with the window starting at row 13, so the
//     row index wraps; no pooling, 18 outputs;
//  2. a 4-channel feature-RAM input with kernel max pooling (5 results from
//     16 outputs);
//  3. a 4-channel input with global max pooling (one result of 14 outputs).
// Random inputs over the full 11-bit range make the ReLU and the saturation
// happen. Also checks that nothing is written outside the expected words and
// that each pass takes exactly the documented number of cycles.
module tb_conv_layer;
  import har_pkg::*;
  import har_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic start = 0, done, busy, f_we;
  conv_desc_t desc = '0;
  logic [ROW_W-1:0] row0 = 0;
  logic [WA_W-1:0] w_addr;
  logic [FA_W-1:0] f_raddr, f_waddr;
  logic [SA_W-1:0] s_raddr;
  data_t w_data, f_rdata, f_wdata, s_rdata;
  conv_layer dut (.*);
  weight_rom rom (.clk, .addr(w_addr), .data(w_data));

  data_t sram [SR_DEPTH];
  data_t fram [FR_DEPTH];
  int nwrites = 0;
  always @(posedge clk) begin
    s_rdata <= sram[s_raddr];
    f_rdata <= fram[f_raddr];
    if (f_we) begin fram[f_waddr] <= f_wdata; nwrites++; end
  end

  function automatic int pass_cycles(int cin, int tout, pool_t pool);
    int n = 3;
    for (int t = 0; t < tout; t++) begin
      bit wr = (pool == POOL_NONE) || (pool == POOL_KERNEL && t % K == K - 1) ||
               (pool == POOL_GLOBAL && t == tout - 1);
      n += cin * (K * F + 2) + (wr ? 2 + F : 3);
    end
    return n;
  endfunction

  task automatic run(conv_desc_t d, int r0, output int cyc);
    @(posedge clk); desc <= d; row0 <= ROW_W'(r0); start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
  endtask

  initial begin
    mat_t x, y;
    int cyc, tin, n0;
    data_t fram0 [FR_DEPTH];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    foreach (sram[i]) sram[i] = data_t'($urandom_range(0, 2047));
    foreach (fram[i]) fram[i] = data_t'($urandom_range(0, 2047));
    // ---- pass 1: sensor input, window wraps
    fram0 = fram;
    foreach (x[t, c]) x[t][c] = 0;
    for (int t = 0; t < WIN; t++)
      for (int c = 0; c < 10; c++) x[t][c] = int'(sram[((13 + t) % WIN) * TOTAL_CH + 7 + c]);
    y = conv(x, WIN, 10, conv_w_base(2, 0));
    n0 = nwrites;
    run('{from_sensor: 1'b1, ch_off: 5'd7, cin: 5'd10, tout: 5'd18, src_base: '0, dst_base: 8'd0,
          w_base: 11'(conv_w_base(2, 0)), pool: POOL_NONE, shift: 5'(QSHIFT)}, 13, cyc);
    check(nwrites - n0 == 18 * F, $sformatf("pass 1 writes %0d", nwrites - n0));
    for (int t = 0; t < 18; t++)
      for (int f = 0; f < F; f++)
        check(int'(fram[t * F + f]) == y[t][f], $sformatf("pass 1 y[%0d][%0d] %0d vs %0d", t, f, fram[t * F + f], y[t][f]));
    for (int i = 18 * F; i < FR_DEPTH; i++) check(fram[i] == fram0[i], "pass 1 no stray write");
    check(cyc == pass_cycles(10, 18, POOL_NONE), $sformatf("pass 1 cycles %0d vs %0d", cyc, pass_cycles(10, 18, POOL_NONE)));
    // ---- pass 2: feature input (72..135, 16+2 steps x 4 ch), kernel pooling
    tin = 18;
    for (int t = 0; t < tin; t++) for (int c = 0; c < F; c++) x[t][c] = int'(fram[72 + t * F + c]);
    y = conv(x, tin, F, 100);
    fram0 = fram;
    n0 = nwrites;
    run('{from_sensor: 1'b0, ch_off: 5'd0, cin: 5'(F), tout: 5'd16, src_base: 8'd72, dst_base: 8'd150,
          w_base: 11'd100, pool: POOL_KERNEL, shift: 5'(QSHIFT)}, 0, cyc);
    check(nwrites - n0 == 5 * F, $sformatf("pass 2 writes %0d", nwrites - n0));
    for (int g = 0; g < 5; g++)
      for (int f = 0; f < F; f++) begin
        automatic int m = y[3 * g][f];
        for (int k = 1; k < K; k++) if (y[3 * g + k][f] > m) m = y[3 * g + k][f];
        check(int'(fram[150 + g * F + f]) == m, $sformatf("pass 2 pool %0d/%0d", g, f));
      end
    for (int i = 0; i < FR_DEPTH; i++) if (i < 150 || i >= 170) check(fram[i] == fram0[i], "pass 2 no stray write");
    check(cyc == pass_cycles(F, 16, POOL_KERNEL), $sformatf("pass 2 cycles %0d vs %0d", cyc, pass_cycles(F, 16, POOL_KERNEL)));
    // ---- pass 3: global pooling
    foreach (fram[i]) if (i < 64) fram[i] = data_t'($urandom_range(0, 2047));
    tin = 16;
    for (int t = 0; t < tin; t++) for (int c = 0; c < F; c++) x[t][c] = int'(fram[t * F + c]);
    y = conv(x, tin, F, 900);
    n0 = nwrites;
    run('{from_sensor: 1'b0, ch_off: 5'd0, cin: 5'(F), tout: 5'd14, src_base: 8'd0, dst_base: 8'd180,
          w_base: 11'd900, pool: POOL_GLOBAL, shift: 5'(QSHIFT)}, 0, cyc);
    check(nwrites - n0 == F, $sformatf("pass 3 writes %0d", nwrites - n0));
    for (int f = 0; f < F; f++) begin
      automatic int m = y[0][f];
      for (int t = 1; t < 14; t++) if (y[t][f] > m) m = y[t][f];
      check(int'(fram[180 + f]) == m, $sformatf("pass 3 global max %0d: %0d vs %0d", f, fram[180 + f], m));
    end
    check(cyc == pass_cycles(F, 14, POOL_GLOBAL), $sformatf("pass 3 cycles %0d vs %0d", cyc, pass_cycles(F, 14, POOL_GLOBAL)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
