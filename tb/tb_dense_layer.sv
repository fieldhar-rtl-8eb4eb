// tb_dense_layer: the dense engine with the real weight ROM and a
// behavioural one-cycle-read feature memory. Runs dense 16->16 (ReLU) and
// 16->10 (last: arg-max), and an odd 13->5 layer so that the zero padding of
// the last lane group is exercised; results are compared with a direct
// computation, the label with the first maximum of the accumulators, and
// every pass must take nout * (ceil(nin/8) * 10 + 1) + 3 cycles. A last
// layer with two equal maxima (all-zero input) must report index 0.
module tb_dense_layer;
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
  dense_desc_t desc = '0;
  logic [3:0] label;
  logic [WA_W-1:0] w_addr;
  logic [FA_W-1:0] f_raddr, f_waddr;
  data_t w_data, f_rdata, f_wdata;
  dense_layer dut (.*);
  weight_rom rom (.clk, .addr(w_addr), .data(w_data));

  data_t fram [FR_DEPTH];
  int nwrites = 0;
  always @(posedge clk) begin
    f_rdata <= fram[f_raddr];
    if (f_we) begin fram[f_waddr] <= f_wdata; nwrites++; end
  end

  task automatic run_check(int nin, int nout, int src, int dst, int wb, bit last, string name);
    int cyc = 1, n0 = nwrites, best = 0;
    longint acc [32];
    for (int o = 0; o < nout; o++) begin
      acc[o] = 0;
      for (int i = 0; i < nin; i++) acc[o] += longint'(fram[src + i]) * weight_init(wb + o * nin + i);
      if (acc[o] > acc[best]) best = o;
    end
    @(posedge clk);
    desc <= '{nin: 6'(nin), nout: 6'(nout), src_base: 8'(src), dst_base: 8'(dst), w_base: 11'(wb),
              last: last, shift: 5'(QSHIFT)};
    start <= 1;
    @(posedge clk); start <= 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    check(nwrites - n0 == nout, $sformatf("%s writes", name));
    for (int o = 0; o < nout; o++)
      check(int'(fram[dst + o]) == q(acc[o], QSHIFT, !last), $sformatf("%s out %0d: %0d vs %0d", name, o, fram[dst + o], q(acc[o], QSHIFT, !last)));
    if (last) check(int'(label) == best, $sformatf("%s label %0d vs %0d", name, label, best));
    check(cyc == nout * (((nin + 7) / 8) * 10 + 1) + 3, $sformatf("%s cycles %0d", name, cyc));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 4; r++) begin
      foreach (fram[i]) fram[i] = data_t'($urandom_range(0, 1023));   // non-negative like ReLU outputs
      run_check(NFEAT, HID, FR_CAT, FR_HID, DENSE1_W, 1'b0, "dense1");
      run_check(HID, NCLASS, FR_HID, FR_OUT, DENSE2_W, 1'b1, "dense2");
      run_check(13, 5, 3, 100, 37, 1'b1, "odd");
    end
    for (int i = 0; i < 16; i++) fram[FR_HID + i] = '0;
    run_check(HID, NCLASS, FR_HID, FR_OUT, DENSE2_W, 1'b1, "tie");
    check(label == 0, "tie keeps index 0");
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
