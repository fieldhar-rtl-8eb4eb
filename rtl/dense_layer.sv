// dense_layer: the fully connected layer engine of the inference block.
//
// One start runs one layer described by desc: y[o] = sum_i x[i] * w[o][i]
// (no bias) for o = 0..nout-1, reading x from the feature RAM at src_base + i
// and w from the weight ROM at w_base + o*nin + i. The inputs are taken in
// groups of LANES: the weight and feature read state machines fill LANES
// weight and data registers (one word per cycle each, in parallel), then the
// MAC adds the LANES products to the accumulator; inputs past nin count as
// zero. After the last group the accumulator passes a register and the Q
// stage (arithmetic shift by desc.shift, ReLU unless desc.last, saturation to
// signed DW bits) and is written to the feature RAM at dst_base + o.
// For the last layer (desc.last) the arg-max of the accumulator values is
// tracked instead of a softmax and given on label when done pulses (ties keep
// the lower index).
// Timing: nout * (ceil(nin/LANES) * (LANES+2) + 1) + 3 cycles from the start
// pulse to the done pulse (339 for dense 16->16, 213 for 16->10).
// The read state machines, MAC, Q and the arg-max replacing softmax follow
// the source design; LANES = 8 is inferred from its multiplier count, and the
// loop order and Q arithmetic are this design's choices.
module dense_layer
  import har_pkg::*;
#(
  parameter int NL = LANES
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  dense_desc_t     desc,
  output logic            done,
  output logic            busy,
  output logic [3:0]      label,
  output logic [WA_W-1:0] w_addr,
  input  data_t           w_data,
  output logic [FA_W-1:0] f_raddr,
  input  data_t           f_rdata,
  output logic            f_we,
  output logic [FA_W-1:0] f_waddr,
  output data_t           f_wdata
);
  localparam int LW = (NL > 1) ? $clog2(NL) : 1;
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAC, S_OUT, S_DONE} st_t;
  st_t st;
  dense_desc_t d;
  logic [5:0] o, gi;
  logic [4:0] ld;
  data_t dreg [NL];
  data_t wreg [NL];
  acc_t  acc, best;

  assign busy = (st != S_IDLE);
  assign w_addr  = d.w_base + WA_W'(WA_W'(o) * WA_W'(d.nin)) + WA_W'(gi) + WA_W'(ld);
  assign f_raddr = d.src_base + FA_W'(gi) + FA_W'(ld);

  acc_t mac_sum;
  always_comb begin
    mac_sum = acc;
    for (int l = 0; l < NL; l++) mac_sum = mac_sum + acc_t'(dreg[l]) * acc_t'(wreg[l]);
  end

  function automatic data_t quant(acc_t a, logic [4:0] sh, logic relu);
    acc_t v;
    v = a >>> sh;
    if (relu && v < 0) v = 0;
    if (v > acc_t'((1 << (DW - 1)) - 1)) v = acc_t'((1 << (DW - 1)) - 1);
    if (v < -acc_t'(1 << (DW - 1)))     v = -acc_t'(1 << (DW - 1));
    return data_t'(v);
  endfunction

  assign f_we    = (st == S_OUT);
  assign f_waddr = d.dst_base + FA_W'(o);
  assign f_wdata = quant(acc, d.shift, !d.last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; d <= '0; o <= '0; gi <= '0; ld <= '0; acc <= '0; best <= '0;
      label <= '0; done <= 1'b0;
      for (int l = 0; l < NL; l++) begin dreg[l] <= '0; wreg[l] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          d <= desc; o <= '0; gi <= '0; ld <= '0; acc <= '0; st <= S_LOAD;
        end
        S_LOAD: begin
          if (ld != 0) begin
            if (gi + 6'(ld) - 6'd1 < d.nin) begin
              wreg[LW'(ld - 5'd1)] <= w_data;
              dreg[LW'(ld - 5'd1)] <= f_rdata;
            end else begin
              wreg[LW'(ld - 5'd1)] <= '0;
              dreg[LW'(ld - 5'd1)] <= '0;
            end
          end
          if (ld == 5'(NL)) begin ld <= '0; st <= S_MAC; end
          else ld <= ld + 5'd1;
        end
        S_MAC: begin
          acc <= mac_sum;
          if (gi + 6'(NL) >= d.nin) begin gi <= '0; st <= S_OUT; end
          else begin gi <= gi + 6'(NL); st <= S_LOAD; end
        end
        S_OUT: begin
          if (d.last && (o == 0 || acc > best)) begin best <= acc; label <= 4'(o); end
          acc <= '0;
          if (o == d.nout - 6'd1) st <= S_DONE;
          else begin o <= o + 6'd1; st <= S_LOAD; end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
