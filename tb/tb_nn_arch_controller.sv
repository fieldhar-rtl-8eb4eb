// tb_nn_arch_controller: walks all 14 steps and checks the descriptors
// against the network written out by hand here: per branch three conv layers
// (input channels 6/1/10/3 then 4, 4; outputs 18, 16, 14 steps; global max
// pooling after the third), then dense 16->16 and 16->10 (last). The weight
// regions must tile 0..1039 without gaps or overlap, and no conv step may
// write a feature-RAM region that it reads.
module tb_nn_arch_controller;
  import har_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [3:0] step;
  logic is_dense, last_step;
  conv_desc_t conv;
  dense_desc_t dense;
  nn_arch_controller dut (.step, .is_dense, .last_step, .conv, .dense);

  int chs [4] = '{6, 1, 10, 3};
  int offs [4] = '{0, 6, 7, 17};
  initial begin
    automatic int wnext = 0;
    for (int s = 0; s < 14; s++) begin
      step = 4'(s);
      #1;
      check(last_step == (s == 13), $sformatf("last_step %0d", s));
      if (s < 12) begin
        automatic int b = s / 3, l = s % 3;
        automatic int cin = (l == 0) ? chs[b] : 4;
        automatic int tin = 20 - 2 * l;
        check(!is_dense, $sformatf("step %0d conv", s));
        check(conv.from_sensor == (l == 0), "from_sensor");
        check(l != 0 || conv.ch_off == 5'(offs[b]), "channel offset");
        check(conv.cin == 5'(cin), $sformatf("cin step %0d", s));
        check(conv.tout == 5'(18 - 2 * l), $sformatf("tout step %0d", s));
        check(conv.pool == ((l == 2) ? POOL_GLOBAL : POOL_NONE), "pooling");
        check(int'(conv.w_base) == wnext, $sformatf("w_base step %0d: %0d vs %0d", s, conv.w_base, wnext));
        wnext += 3 * 4 * cin;
        if (l != 0) begin
          // read region [src, src + tin*cin) and write region must not overlap
          automatic int rs = conv.src_base, re = conv.src_base + tin * cin;
          automatic int ws = conv.dst_base, we = conv.dst_base + ((l == 2) ? 4 : (18 - 2 * l) * 4);
          check(we <= rs || ws >= re, $sformatf("overlap step %0d", s));
          check(re <= FR_DEPTH && we <= FR_DEPTH, "in range");
        end
        if (l == 2) check(conv.dst_base == 8'(144 + 4 * b), "concatenation slot");
      end else begin
        check(is_dense, $sformatf("step %0d dense", s));
        check(int'(dense.w_base) == wnext, $sformatf("dense w_base %0d", dense.w_base));
        check(dense.nin == 16 && dense.nout == ((s == 12) ? 16 : 10), "dense sizes");
        check(dense.last == (s == 13), "dense last");
        check(s != 12 || dense.src_base == 8'd144, "dense1 reads concatenation");
        check(s != 13 || dense.src_base == 8'(FR_HID), "dense2 reads hidden");
        wnext += int'(dense.nin) * int'(dense.nout);
      end
    end
    check(wnext == 1040 && W_DEPTH == 1040, $sformatf("total weights %0d", wnext));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
