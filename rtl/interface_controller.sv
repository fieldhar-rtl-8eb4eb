// interface_controller: host interface and inference trigger of the system.
//
// Commands arrive as single UART bytes: 'S' starts acquisition (run = 1),
// 'E' stops it, 'R' selects result reporting, 'D' selects sensor-data
// streaming. When the data stream controller reports a ready window while
// run is high and the inference block is idle, the controller locks the
// sensor data RAM, starts inference on that window and releases the lock when
// inference is done; label/label_valid then carry the arg-max class index
// (0..9). In result mode the activity ID (index + 1, i.e. 1..10) is sent as
// one byte. In data mode every newly written RAM row is sent as TOTAL_CH
// 16-bit values (sign-extended, low byte first), read through the RAM's
// second port; a row that comes while the previous one is still being sent
// is skipped and counted. A ready window that comes while inference is busy
// is counted in busy_windows (it cannot happen while the lock holds rows
// back, but is checked).
// That this block takes start/stop commands, triggers inference on the RAM
// ready signal and sends results or sensor data over the UART follows the
// source design; the command codes, the byte formats and the lock are this
// design's choices.
module interface_controller
  import har_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // UART
  input  logic [7:0]       rx_data,
  input  logic             rx_valid,
  output logic [7:0]       tx_data,
  output logic             tx_valid,
  input  logic             tx_ready,
  // acquisition
  output logic             run,
  input  logic             win_ready,
  input  logic [ROW_W-1:0] win_row0,
  output logic             lock,
  input  logic             row_written,
  input  logic [ROW_W-1:0] row_idx,
  output logic [SA_W-1:0]  raddr_b,
  input  data_t            rdata_b,
  // inference block
  output logic             inf_start,
  output logic [ROW_W-1:0] inf_row0,
  input  logic             inf_done,
  input  logic [3:0]       inf_label,
  // results
  output logic [3:0]       label,
  output logic             label_valid,
  output logic             data_mode,
  output logic [15:0]      skipped_rows,
  output logic [15:0]      busy_windows
);
  typedef enum logic [2:0] {T_IDLE, T_RD, T_LATCH, T_LO, T_HI} tst_t;
  tst_t ts;
  logic             busy;         // inference running
  logic             pend_res, pend_row;
  logic [ROW_W-1:0] row, send_row;
  logic [4:0]       ch;
  data_t            word;

  assign raddr_b = SA_W'(send_row) * SA_W'(TOTAL_CH) + SA_W'(ch);

  always_comb begin
    tx_valid = 1'b0;
    tx_data  = 8'h00;
    unique case (ts)
      T_IDLE: if (pend_res && tx_ready) begin tx_valid = 1'b1; tx_data = 8'(label) + 8'd1; end
      T_LO:   if (tx_ready) begin tx_valid = 1'b1; tx_data = word[7:0]; end
      T_HI:   if (tx_ready) begin tx_valid = 1'b1; tx_data = {{(16-DW){word[DW-1]}}, word[DW-1:8]}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; data_mode <= 1'b0; lock <= 1'b0; busy <= 1'b0;
      inf_start <= 1'b0; inf_row0 <= '0; label <= '0; label_valid <= 1'b0;
      pend_res <= 1'b0; pend_row <= 1'b0; row <= '0; send_row <= '0; ch <= '0; word <= '0;
      ts <= T_IDLE; skipped_rows <= '0; busy_windows <= '0;
    end else begin
      inf_start <= 1'b0;
      label_valid <= 1'b0;
      // commands
      if (rx_valid) begin
        unique case (rx_data)
          CMD_START: run <= 1'b1;
          CMD_STOP:  run <= 1'b0;
          CMD_RES:   data_mode <= 1'b0;
          CMD_DATA:  data_mode <= 1'b1;
          default: ;
        endcase
      end
      // inference trigger
      if (win_ready && run) begin
        if (busy) busy_windows <= busy_windows + 16'd1;
        else begin
          busy <= 1'b1; lock <= 1'b1; inf_start <= 1'b1; inf_row0 <= win_row0;
        end
      end
      if (inf_done && busy) begin
        busy <= 1'b0; lock <= 1'b0;
        label <= inf_label; label_valid <= 1'b1;
        if (!data_mode) pend_res <= 1'b1;
      end
      // data rows
      if (row_written && data_mode && run) begin
        if (pend_row || ts != T_IDLE) skipped_rows <= skipped_rows + 16'd1;
        else begin pend_row <= 1'b1; row <= row_idx; end
      end
      // transmit
      unique case (ts)
        T_IDLE: begin
          if (pend_res) begin
            if (tx_ready) pend_res <= 1'b0;
          end else if (pend_row) begin
            pend_row <= 1'b0; send_row <= row; ch <= '0; ts <= T_RD;
          end
        end
        T_RD:    ts <= T_LATCH;
        T_LATCH: begin word <= rdata_b; ts <= T_LO; end
        T_LO:    if (tx_ready) ts <= T_HI;
        T_HI:    if (tx_ready) begin
          if (ch == 5'(TOTAL_CH - 1)) ts <= T_IDLE;
          else begin ch <= ch + 5'd1; ts <= T_RD; end
        end
        default: ts <= T_IDLE;
      endcase
    end
  end
endmodule
