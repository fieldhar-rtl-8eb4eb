// nn_arch_controller: the network architecture of the inference block.
//
// For each layer step of the feature-fusion network it gives the descriptor
// that configures the shared conv or dense layer hardware. Steps 0..11 are
// the conv layers in branch order (step = 3*branch + layer):
//   layer 0: reads the branch's sensor_ch columns of the sensor data RAM,
//            WIN-K+1 outputs, writes feature bank 0;
//   layer 1: reads bank 0 (F channels), WIN-2(K-1) outputs, writes bank 1;
//   layer 2: reads bank 1, WIN-3(K-1) outputs, global max pooling, writes
//            the branch's F features at FR_CAT + F*branch (concatenation).
// Step 12 is dense layer 1 (NFEAT -> HID, ReLU) and step 13 dense layer 2
// (HID -> NCLASS, no ReLU, arg-max). Purely combinational.
// The layer sequence follows the source design; sizes and addresses are the
// ones chosen in har_pkg.
module nn_arch_controller
  import har_pkg::*;
(
  input  logic [3:0]  step,
  output logic        is_dense,
  output logic        last_step,
  output conv_desc_t  conv,
  output dense_desc_t dense
);
  always_comb begin
    conv = '0;
    dense = '0;
    is_dense = (int'(step) >= NUM_SENSORS * NLAYERS);
    last_step = (int'(step) == NUM_STEPS - 1);
    for (int b = 0; b < NUM_SENSORS; b++) begin
      for (int l = 0; l < NLAYERS; l++) begin
        if (int'(step) == b * NLAYERS + l) begin
          conv.from_sensor = (l == 0);
          conv.ch_off   = 5'(sensor_ch_off(b));
          conv.cin      = 5'((l == 0) ? sensor_ch(b) : F);
          conv.tout     = 5'(WIN - (l + 1) * (K - 1));
          conv.src_base = FA_W'((l == 2) ? FR_BANK1 : FR_BANK0);
          conv.dst_base = FA_W'((l == 0) ? FR_BANK0 : (l == 1) ? FR_BANK1 : FR_CAT + F * b);
          conv.w_base   = WA_W'(conv_w_base(b, l));
          conv.pool     = (l == NLAYERS - 1) ? POOL_GLOBAL : POOL_NONE;
          conv.shift    = 5'(QSHIFT);
        end
      end
    end
    if (int'(step) == NUM_SENSORS * NLAYERS) begin
      dense.nin = 6'(NFEAT); dense.nout = 6'(HID);
      dense.src_base = FA_W'(FR_CAT); dense.dst_base = FA_W'(FR_HID);
      dense.w_base = WA_W'(DENSE1_W); dense.last = 1'b0; dense.shift = 5'(QSHIFT);
    end else begin
      dense.nin = 6'(HID); dense.nout = 6'(NCLASS);
      dense.src_base = FA_W'(FR_HID); dense.dst_base = FA_W'(FR_OUT);
      dense.w_base = WA_W'(DENSE2_W); dense.last = 1'b1; dense.shift = 5'(QSHIFT);
    end
  end
endmodule
