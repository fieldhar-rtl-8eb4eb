// conv_layer: the convolution layer engine of the inference block.
//
// One start runs one layer pass described by desc (from the NN architecture
// controller): a 1-D 'valid' convolution with stride 1 over the time axis,
// y[t][f] = sum_c sum_k x[t+k][c] * w[c][k][f], for t = 0..tout-1.
// The K kernel taps and the F output channels are computed in parallel
// (K*F multipliers in the MAC); input channels and time steps are walked
// sequentially, so the time of a layer grows linearly with its input
// channels. For each (t, c):
//   LOAD  the weight read state machine fetches the K*F weights of channel c
//         from the weight ROM into the weight input registers (one per cycle)
//         while the feature read state machine fetches the K inputs
//         x[t..t+K-1][c] into the data registers, either from the sensor data
//         RAM (first layer; rows counted from row0 modulo WIN) or from the
//         feature RAM (word base + t*cin + c);
//   MAC   all K*F products are added into the F accumulators.
// After the last channel the accumulators pass the Q stage (arithmetic shift
// by desc.shift, ReLU, saturation to signed DW bits) into a register. The
// Maxpool_En multiplexer then either passes the F results straight to the
// shift-out stage S (no pooling) or through the comparators M: kernel max
// pooling over K consecutive outputs (stride K) or global max pooling over
// all tout outputs. S writes the F selected values to the feature RAM one
// per cycle at dst_base + C*F + f, C being the output counter.
// Timing per output step: cin*(K*F+2) + 3 cycles, or cin*(K*F+2) + 2 + F
// when the step writes a result; done pulses two cycles after the last
// write, so a pass takes that sum over all steps plus 3 cycles from start.
// Structure (read state machines, MAC, Q, M/S multiplexer, counter C) follows
// the source design's block diagram; the loop order, the one-word-per-cycle
// memory ports and the Q arithmetic are this design's choices.
module conv_layer
  import har_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  conv_desc_t       desc,
  input  logic [ROW_W-1:0] row0,
  output logic             done,
  output logic             busy,
  // weight ROM
  output logic [WA_W-1:0]  w_addr,
  input  data_t            w_data,
  // feature RAM
  output logic [FA_W-1:0]  f_raddr,
  input  data_t            f_rdata,
  output logic             f_we,
  output logic [FA_W-1:0]  f_waddr,
  output data_t            f_wdata,
  // sensor data RAM
  output logic [SA_W-1:0]  s_raddr,
  input  data_t            s_rdata
);
  localparam int KF = K * F;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAC, S_QUANT, S_POOL, S_SHIFT, S_DONE} st_t;
  st_t st;
  conv_desc_t d;
  logic [ROW_W-1:0] r0;
  logic [4:0] t, c;
  logic [4:0] ld;                 // load cycle 0..KF
  logic [$clog2(F)-1:0] fo;       // shift-out index
  logic [4:0] oc;                 // output counter C
  logic [1:0] kk;                 // position inside a pooling window
  data_t dreg [K];                // data (D) registers
  data_t wreg [KF];               // weight (W) registers
  acc_t  acc [F];
  data_t q [F], mx [F];
  logic  wr_out;                  // the pooling stage has a result to write

  assign busy = (st != S_IDLE);

  // ---------------------------------------------------------- read addresses
  logic [5:0] row_sum;
  logic [ROW_W-1:0] row;
  always_comb begin
    row_sum = 6'(r0) + 6'(t) + 6'(ld);
    row = (row_sum >= 6'(WIN)) ? ROW_W'(row_sum - 6'(WIN)) : ROW_W'(row_sum);
  end
  assign s_raddr = SA_W'(row) * SA_W'(TOTAL_CH) + SA_W'(d.ch_off) + SA_W'(c);
  assign f_raddr = d.src_base + FA_W'((FA_W'(t) + FA_W'(ld)) * FA_W'(d.cin)) + FA_W'(c);
  assign w_addr  = d.w_base + WA_W'(WA_W'(c) * WA_W'(KF)) + WA_W'(ld);
  wire data_t x_in = d.from_sensor ? s_rdata : f_rdata;

  // --------------------------------------------------------------------- MAC
  acc_t mac_sum [F];
  always_comb begin
    for (int f = 0; f < F; f++) begin
      mac_sum[f] = acc[f];
      for (int k = 0; k < K; k++)
        mac_sum[f] = mac_sum[f] + acc_t'(dreg[k]) * acc_t'(wreg[k*F + f]);
    end
  end

  // ----------------------------------------------------------------- Q stage
  function automatic data_t quant(acc_t a, logic [4:0] sh);
    acc_t v;
    v = a >>> sh;
    if (v < 0) v = 0;                                   // ReLU
    if (v > acc_t'((1 << (DW - 1)) - 1)) v = acc_t'((1 << (DW - 1)) - 1);
    return data_t'(v);
  endfunction

  // ------------------------------------------------------- output selection
  data_t sel [F];
  always_comb
    for (int f = 0; f < F; f++) sel[f] = (d.pool == POOL_NONE) ? q[f] : mx[f];
  assign f_we    = (st == S_SHIFT) && wr_out;
  assign f_waddr = d.dst_base + FA_W'(FA_W'(oc) * FA_W'(F)) + FA_W'(fo);
  assign f_wdata = sel[fo];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; d <= '0; r0 <= '0; t <= '0; c <= '0; ld <= '0; fo <= '0;
      oc <= '0; kk <= '0; done <= 1'b0; wr_out <= 1'b0;
      for (int k = 0; k < K; k++) dreg[k] <= '0;
      for (int i = 0; i < KF; i++) wreg[i] <= '0;
      for (int f = 0; f < F; f++) begin acc[f] <= '0; q[f] <= '0; mx[f] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          d <= desc; r0 <= row0; t <= '0; c <= '0; ld <= '0; oc <= '0; kk <= '0;
          for (int f = 0; f < F; f++) acc[f] <= '0;
          st <= S_LOAD;
        end
        S_LOAD: begin
          // data requested at ld-1 arrive now
          if (ld != 0) begin
            wreg[$clog2(KF)'(ld - 5'd1)] <= w_data;
            if (ld <= 5'(K)) dreg[$clog2(K)'(ld - 5'd1)] <= x_in;
          end
          if (ld == 5'(KF)) begin ld <= '0; st <= S_MAC; end
          else ld <= ld + 5'd1;
        end
        S_MAC: begin
          for (int f = 0; f < F; f++) acc[f] <= mac_sum[f];
          if (c == d.cin - 5'd1) begin c <= '0; st <= S_QUANT; end
          else begin c <= c + 5'd1; st <= S_LOAD; end
        end
        S_QUANT: begin
          for (int f = 0; f < F; f++) begin q[f] <= quant(acc[f], d.shift); acc[f] <= '0; end
          st <= S_POOL;
        end
        S_POOL: begin
          unique case (d.pool)
            POOL_NONE: wr_out <= 1'b1;
            POOL_KERNEL: begin
              for (int f = 0; f < F; f++) mx[f] <= (kk == 0 || q[f] > mx[f]) ? q[f] : mx[f];
              wr_out <= (kk == 2'(K - 1));
              kk <= (kk == 2'(K - 1)) ? '0 : kk + 2'd1;
            end
            default: begin // global
              for (int f = 0; f < F; f++) mx[f] <= (t == 0 || q[f] > mx[f]) ? q[f] : mx[f];
              wr_out <= (t == d.tout - 5'd1);
            end
          endcase
          fo <= '0;
          st <= S_SHIFT;
        end
        S_SHIFT: begin
          // writes only when wr_out; otherwise passes straight on
          if (!wr_out || fo == ($clog2(F))'(F - 1)) begin
            if (wr_out) oc <= oc + 5'd1;
            fo <= '0;
            if (t == d.tout - 5'd1) st <= S_DONE;
            else begin t <= t + 5'd1; st <= S_LOAD; end
          end else fo <= fo + 1'b1;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
