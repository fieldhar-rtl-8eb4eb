// inference_block: the neural network inference module.
//
// Runs the quantised branched CNN on one window of the sensor data RAM:
// per sensor branch three convolution layers and a global max pool, the
// branch features concatenated in the feature RAM, then two dense layers and
// an arg-max. Contents: the inference state machine (sequencing), the NN
// architecture controller (layer descriptors), one convolution layer engine
// and one dense layer engine (used for every step in turn: serial schedule),
// the weight ROM and the feature RAM. The ROM and the feature RAM ports are
// multiplexed to whichever engine is running. s_raddr/s_rdata connect to the
// sensor data RAM (one-cycle read latency), row0 names the oldest row of the
// window. start -> done takes a fixed number of cycles (about 14,900 with the
// default network); label (0..9) is valid from done on.
// The set of sub-blocks follows the source design's block diagram; the serial
// schedule is its chosen configuration for this application.
module inference_block
  import har_pkg::*;
#(
  parameter string WEIGHT_FILE = ""
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ROW_W-1:0] row0,
  output logic             done,
  output logic             busy,
  output logic [3:0]       label,
  output logic [31:0]      cycles,
  output logic [SA_W-1:0]  s_raddr,
  input  data_t            s_rdata
);
  logic [3:0]  step;
  logic        is_dense, last_step;
  conv_desc_t  cdesc;
  dense_desc_t ddesc;
  logic        conv_start, conv_done, conv_busy, dense_start, dense_done, dense_busy;
  logic [WA_W-1:0] c_waddr, d_waddr, w_addr;
  data_t       w_data;
  logic [FA_W-1:0] c_fraddr, d_fraddr, c_fwaddr, d_fwaddr, f_raddr, f_waddr;
  logic        c_fwe, d_fwe, f_we;
  data_t       c_fwdata, d_fwdata, f_wdata, f_rdata;

  inference_fsm u_fsm (
    .clk, .rst_n, .start, .done, .busy, .step, .is_dense, .last_step,
    .conv_start, .conv_done, .dense_start, .dense_done, .cycles);

  nn_arch_controller u_arch (.step, .is_dense, .last_step, .conv(cdesc), .dense(ddesc));

  conv_layer u_conv (
    .clk, .rst_n, .start(conv_start), .desc(cdesc), .row0, .done(conv_done), .busy(conv_busy),
    .w_addr(c_waddr), .w_data, .f_raddr(c_fraddr), .f_rdata,
    .f_we(c_fwe), .f_waddr(c_fwaddr), .f_wdata(c_fwdata), .s_raddr, .s_rdata);

  dense_layer u_dense (
    .clk, .rst_n, .start(dense_start), .desc(ddesc), .done(dense_done), .busy(dense_busy), .label,
    .w_addr(d_waddr), .w_data, .f_raddr(d_fraddr), .f_rdata,
    .f_we(d_fwe), .f_waddr(d_fwaddr), .f_wdata(d_fwdata));

  // the engine that runs owns the memories
  assign w_addr  = dense_busy ? d_waddr  : c_waddr;
  assign f_raddr = dense_busy ? d_fraddr : c_fraddr;
  assign f_we    = c_fwe | d_fwe;
  assign f_waddr = dense_busy ? d_fwaddr : c_fwaddr;
  assign f_wdata = dense_busy ? d_fwdata : c_fwdata;

  weight_rom #(.INIT_FILE(WEIGHT_FILE)) u_rom (.clk, .addr(w_addr), .data(w_data));
  feature_ram u_fram (.clk, .we(f_we), .waddr(f_waddr), .wdata(f_wdata), .raddr(f_raddr), .rdata(f_rdata));

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(conv_busy && dense_busy));
endmodule
