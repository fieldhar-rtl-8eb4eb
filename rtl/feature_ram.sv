// feature_ram: activation memory of the inference block.
//
// DEPTH words of signed DW-bit activations with one write port and one
// synchronous read port (data one cycle after the address). Layout (har_pkg):
// two ping-pong banks of (WIN-K+1)*F words for the conv layers of a branch,
// NFEAT words of concatenated branch features, HID hidden values and NCLASS
// logits. Writing each branch's pooled features to consecutive addresses is
// what realises the concatenation of the branches. Contents are not reset.
module feature_ram
  import har_pkg::*;
#(
  parameter int DEPTH = FR_DEPTH,
  parameter int AW    = FA_W
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr,
  output data_t         rdata
);
  data_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
