// inference_fsm: the inference state machine of the inference block.
//
// On start it walks the layer steps 0..NUM_STEPS-1 one after another (the
// serial schedule: the feature branches are computed one by one, then the
// two dense layers). For each step it pulses conv_start or dense_start,
// according to is_dense from the NN architecture controller, and waits for
// the matching done. After the last step done pulses for one cycle; the
// label from the dense layer is valid from then on. cycles counts the clock
// cycles of the last inference (start to done).
// The serial schedule is the one the source design chose for its
// application; the handshake is this design's choice.
module inference_fsm
  import har_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  output logic        busy,
  output logic [3:0]  step,
  input  logic        is_dense,
  input  logic        last_step,
  output logic        conv_start,
  input  logic        conv_done,
  output logic        dense_start,
  input  logic        dense_done,
  output logic [31:0] cycles
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} st_t;
  st_t st;
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; step <= '0; done <= 1'b0; conv_start <= 1'b0; dense_start <= 1'b0;
      cycles <= '0;
    end else begin
      done <= 1'b0; conv_start <= 1'b0; dense_start <= 1'b0;
      if (st != S_IDLE) cycles <= cycles + 32'd1;
      unique case (st)
        S_IDLE: if (start) begin step <= '0; st <= S_ISSUE; cycles <= 32'd1; end
        S_ISSUE: begin
          if (is_dense) dense_start <= 1'b1; else conv_start <= 1'b1;
          st <= S_WAIT;
        end
        S_WAIT: if ((is_dense && dense_done) || (!is_dense && conv_done)) begin
          if (last_step) begin st <= S_IDLE; done <= 1'b1; end
          else begin step <= step + 4'd1; st <= S_ISSUE; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
