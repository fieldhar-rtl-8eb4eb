// sync_fifo: data-level FIFO of one sensor interface.
//
// Holds up to DEPTH complete sensor samples, one per entry, between the
// sensor driver (push side) and the data stream controller (pop side). The
// depth corresponds to the number of time steps of the window (20), as in
// the source design. The head entry is visible on dout while empty is low
// (first-word fall-through); pop removes it. A push into a full FIFO and a
// pop from an empty one are ignored (the driver checks full, the reader
// checks empty); an assertion flags either. Push and pop may happen in the
// same cycle. Circular buffer with read and write pointers and a counter.
module sync_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 20
)(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  output logic                       full,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
