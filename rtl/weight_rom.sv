// weight_rom: the model parameters of the inference block.
//
// DEPTH signed DW-bit weights (1040 for the four-branch network: conv layers
// of each branch in branch order, then dense layer 1, then dense layer 2; the
// bias terms are removed by tensor normalisation, so there are none), read
// through one synchronous port: data one cycle after the address.
// Weight layout per conv layer: index (c*K + k)*F + f for input channel c,
// tap k, filter f; per dense layer: o*nin + i.
// The trained integer weights are not published, so the ROM is loaded from
// INIT_FILE with $readmemh when a file name is given, and otherwise filled
// with the fixed pseudo-random pattern har_pkg::weight_init (formula there).
module weight_rom
  import har_pkg::*;
#(
  parameter int    DEPTH     = W_DEPTH,
  parameter int    AW        = WA_W,
  parameter string INIT_FILE = ""
)(
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output data_t         data
);
  data_t mem [DEPTH];
  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
    else for (int i = 0; i < DEPTH; i++) mem[i] = weight_init(i);
  end
  always_ff @(posedge clk) data <= mem[addr];
endmodule
