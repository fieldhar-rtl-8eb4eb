// sensor_wr_ctrl: sensor driver level of one sensor interface (Sensor W/R
// Controller).
//
// Two state machines, as in the source design:
//  * the transaction machine runs one register transaction (single- or
//    multi-byte read or write) on the peripheral master over the CBus
//    (command, ready, done) and collects read bytes from the IntBus;
//  * the register machine walks the sensor's register program (PROG, from
//    har_pkg::sensor_prog): after reset it writes the configuration
//    registers, then waits for start. On each start it reads the status
//    register until the data-ready bits are set (at most MAX_POLL reads),
//    reads one or two data bursts, assembles the channels into a sample
//    (16 bit per channel, channel j at bits [16j+:16]) and pushes it into the
//    FIFO.
// A start that arrives while a read is still running, or a sample that never
// became ready, is counted in miss_cnt; a sample that meets a full FIFO is
// dropped and counted in drop_cnt.
// The split into two machines, the Push/Full/Data/Start ports and the
// CBus/IntBus names follow the source design; the status polling and the
// counters are this design's choices.
module sensor_wr_ctrl
  import har_pkg::*;
#(
  parameter sensor_prog_t PROG = sensor_prog(0),
  parameter int MAX_POLL = 8
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                push,
  input  logic                full,
  output logic [SAMPLE_W-1:0] data,
  // CBus
  output logic                cmd_valid,
  output cbus_cmd_t           cmd,
  input  logic                cmd_ready,
  input  logic                done,
  // IntBus
  output logic [7:0]          wr_data,
  input  logic                wr_req,
  input  logic [7:0]          rd_data,
  input  logic                rd_valid,
  // status
  output logic                cfg_done,
  output logic                busy,
  output logic [15:0]         drop_cnt,
  output logic [15:0]         miss_cnt
);
  // ---------------------------------------------- transaction state machine
  typedef enum logic [1:0] {T_IDLE, T_CMD, T_WAIT} tst_t;
  tst_t tst;
  logic       txn_go, txn_done, txn_to_buf;
  cbus_cmd_t  txn_cmd;
  logic [7:0] txn_wbyte;
  logic [7:0] last_byte;
  logic [4:0] bptr;                      // next byte slot of the sample
  logic [2*MAX_CH-1:0][7:0] sbuf;

  assign cmd       = txn_cmd;
  assign cmd_valid = (tst == T_CMD);
  assign wr_data   = txn_wbyte;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tst <= T_IDLE; txn_done <= 1'b0; last_byte <= '0; sbuf <= '0;
    end else begin
      txn_done <= 1'b0;
      unique case (tst)
        T_IDLE: if (txn_go) tst <= T_CMD;
        T_CMD:  if (cmd_ready) tst <= T_WAIT;
        T_WAIT: if (done) begin tst <= T_IDLE; txn_done <= 1'b1; end
        default: tst <= T_IDLE;
      endcase
      if (rd_valid) begin
        last_byte <= rd_data;
        if (txn_to_buf) sbuf[bptr] <= rd_data;
      end
    end
  end

  // ------------------------------------------------- register state machine
  typedef enum logic [2:0] {R_CFG, R_CFG_W, R_IDLE, R_STAT, R_STAT_W, R_BURST,
                            R_BURST_W, R_PUSH} rst_t;
  rst_t rs;
  logic [1:0] idx;
  logic [$clog2(MAX_POLL+1)-1:0] polls;

  assign busy = (rs != R_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rs <= (PROG.n_cfg == 0) ? R_IDLE : R_CFG;
      cfg_done <= (PROG.n_cfg == 0);
      idx <= '0; polls <= '0; txn_go <= 1'b0; txn_to_buf <= 1'b0;
      txn_cmd <= '0; txn_wbyte <= '0; bptr <= '0; push <= 1'b0;
      drop_cnt <= '0; miss_cnt <= '0;
    end else begin
      txn_go <= 1'b0;
      push <= 1'b0;
      if (start && rs != R_IDLE) miss_cnt <= miss_cnt + 16'd1;
      if (rd_valid && txn_to_buf) bptr <= bptr + 5'd1;
      unique case (rs)
        R_CFG: begin
          txn_cmd <= '{write: 1'b1, reg_addr: PROG.cfg_reg[idx], len: 5'd1};
          txn_wbyte <= PROG.cfg_val[idx];
          txn_to_buf <= 1'b0;
          txn_go <= 1'b1;
          rs <= R_CFG_W;
        end
        R_CFG_W: if (txn_done) begin
          if (idx == PROG.n_cfg - 2'd1) begin rs <= R_IDLE; cfg_done <= 1'b1; idx <= '0; end
          else begin idx <= idx + 2'd1; rs <= R_CFG; end
        end
        R_IDLE: if (start) begin rs <= R_STAT; polls <= '0; end
        R_STAT: begin
          txn_cmd <= '{write: 1'b0, reg_addr: PROG.status_reg, len: 5'd1};
          txn_to_buf <= 1'b0;
          txn_go <= 1'b1;
          polls <= polls + 1'b1;
          rs <= R_STAT_W;
        end
        R_STAT_W: if (txn_done) begin
          if ((last_byte & PROG.drdy_mask) != 8'h00) begin
            rs <= R_BURST; idx <= '0; bptr <= '0;
          end else if (polls == MAX_POLL[$bits(polls)-1:0]) begin
            rs <= R_IDLE; miss_cnt <= miss_cnt + 16'd1;
          end else rs <= R_STAT;
        end
        R_BURST: begin
          txn_cmd <= '{write: 1'b0, reg_addr: PROG.burst_reg[idx[0]], len: PROG.burst_len[idx[0]]};
          txn_to_buf <= 1'b1;
          txn_go <= 1'b1;
          rs <= R_BURST_W;
        end
        R_BURST_W: if (txn_done) begin
          if (idx == 2'(PROG.n_burst) - 2'd1) rs <= R_PUSH;
          else begin idx <= idx + 2'd1; rs <= R_BURST; end
        end
        R_PUSH: begin
          txn_to_buf <= 1'b0;
          idx <= '0;
          if (full) drop_cnt <= drop_cnt + 16'd1;
          else push <= 1'b1;
          rs <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // sample assembly
  always_comb begin
    data = '0;
    for (int j = 0; j < MAX_CH; j++) begin
      if (j < int'(PROG.n_ch))
        data[RAW_W*j +: RAW_W] = PROG.big_endian ? {sbuf[2*j], sbuf[2*j+1]}
                                                 : {sbuf[2*j+1], sbuf[2*j]};
    end
  end

  logic unused_wr_req;
  assign unused_wr_req = wr_req;   // one configuration byte per write

  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));
endmodule
