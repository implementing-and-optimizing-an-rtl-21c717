// sdhc_cmd: the command channel of the SD host controller.
//
// On start_i the module sends one 48-bit command frame on the CMD line: start bit 0,
// transmission bit 1, the 6-bit index, the 32-bit argument, CRC7 over those 40 bits and end bit
// 1, MSB first, each bit changing with the SD clock's falling edge (fall_i). It then releases the
// line and, unless the command has no response, waits up to 64 SD clocks for the card's start bit
// and shifts in a 48-bit or 136-bit response on rising edges (rise_i). The checks are those of
// the SD protocol: end bit must be 1, CRC7 (over bits 47..8 of a 48-bit frame, over the 120-bit
// payload 127..8 of a 136-bit frame) when crc_check is set, returned index when index_check is
// set, and a timeout when no start bit comes. done_o pulses once per command, with err_o and
// resp_o valid in the same cycle; resp_o is laid out as the SDHCI response registers want it:
// frame bits 39..8 in [31:0] for 48-bit responses, frame bits 127..8 in [119:0] for R2.
// done_o is also the command-completion notification the data logic uses to synchronise with
// the command channel.
//
// Timing: a command occupies 48 SD clocks on the line; a new frame starts no earlier than
// 8 SD clocks after the previous frame (or response) ended, as the SD bus requires.
//
// Following the paper: a separate command block, independent of the data channel, notifying the
// data block on completion. The frame format, CRC7 and the 64-clock response timeout follow the
// SD physical layer specification; the 8-clock gap enforcement is this design's choice of where
// that bus rule is kept.
module sdhc_cmd
  import sdhc_pkg::*;
#(
  parameter int unsigned RSP_TIMEOUT = 64,  // SD clocks to wait for a response start bit
  parameter int unsigned CMD_GAP     = 8    // SD clocks between frames
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          srst_i,     // software reset of the command channel
  input  logic          rise_i,
  input  logic          fall_i,
  input  logic          start_i,
  input  sd_cmd_t       cmd_i,
  input  logic          cmd_in_i,   // CMD line as seen at the pin
  output logic          cmd_o,
  output logic          cmd_oe_o,
  output logic          busy_o,
  output logic          done_o,
  output cmd_err_t      err_o,
  output logic [127:0]  resp_o
);

  typedef enum logic [2:0] {S_IDLE, S_SEND, S_WAIT, S_RECV, S_FINISH} state_e;

  state_e        state_q;
  sd_cmd_t       cmd_q;
  logic [39:0]   tx_q;
  logic [135:0]  rx_q;
  logic [6:0]    crc_q;
  logic [7:0]    cnt_q;       // bit counter / timeout counter
  logic [3:0]    gap_q;       // SD clocks since the last frame ended (saturating)
  logic          gap_ok;
  logic [7:0]    rsp_len;
  logic          rsp_long;

  assign gap_ok   = (gap_q >= 4'(CMD_GAP));
  assign rsp_long = (cmd_q.rsp_type == RSP_136);
  assign rsp_len  = rsp_long ? 8'd136 : 8'd48;
  assign busy_o   = (state_q != S_IDLE);

  // Result decode, valid in S_FINISH.
  logic [6:0] rx_crc;
  logic       rx_end;
  logic [5:0] rx_index;
  assign rx_crc   = rx_q[7:1];
  assign rx_end   = rx_q[0];
  assign rx_index = rx_q[45:40];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      cmd_q    <= '0;
      tx_q     <= '0;
      rx_q     <= '0;
      crc_q    <= '0;
      cnt_q    <= '0;
      gap_q    <= 4'(CMD_GAP);
      cmd_o    <= 1'b1;
      cmd_oe_o <= 1'b0;
      done_o   <= 1'b0;
      err_o    <= '0;
      resp_o   <= '0;
    end else if (srst_i) begin
      state_q  <= S_IDLE;
      cmd_o    <= 1'b1;
      cmd_oe_o <= 1'b0;
      done_o   <= 1'b0;
      err_o    <= '0;
      resp_o   <= '0;
      gap_q    <= 4'(CMD_GAP);
    end else begin
      done_o <= 1'b0;
      if (rise_i && !gap_ok && (state_q == S_IDLE || state_q == S_SEND)) gap_q <= gap_q + 4'd1;
      unique case (state_q)
        S_IDLE: begin
          if (start_i) begin
            cmd_q   <= cmd_i;
            tx_q    <= {2'b01, cmd_i.index, cmd_i.arg};
            crc_q   <= '0;
            cnt_q   <= '0;
            state_q <= S_SEND;
          end
        end
        S_SEND: begin
          if (fall_i && (cnt_q != 0 || gap_ok)) begin
            cnt_q <= cnt_q + 8'd1;
            if (cnt_q < 8'd40) begin
              cmd_oe_o <= 1'b1;
              cmd_o    <= tx_q[39];
              crc_q    <= crc7_step(crc_q, tx_q[39]);
              tx_q     <= {tx_q[38:0], 1'b0};
            end else if (cnt_q < 8'd47) begin
              cmd_o <= crc_q[6];
              crc_q <= {crc_q[5:0], 1'b0};
            end else if (cnt_q == 8'd47) begin
              cmd_o <= 1'b1;                  // end bit
            end else begin                    // end bit has been sampled: release the line
              cmd_oe_o <= 1'b0;
              cnt_q    <= '0;
              gap_q    <= '0;
              if (cmd_q.rsp_type == RSP_NONE) begin
                state_q <= S_FINISH;
              end else begin
                state_q <= S_WAIT;
              end
            end
          end
        end
        S_WAIT: begin
          if (rise_i) begin
            if (!cmd_in_i) begin
              rx_q    <= '0;
              crc_q   <= '0;                  // CRC7 of a leading 0 bit is 0
              cnt_q   <= 8'd1;
              state_q <= S_RECV;
            end else if (cnt_q == 8'(RSP_TIMEOUT - 1)) begin
              state_q <= S_FINISH;
              cnt_q   <= 8'hFF;               // marks timeout
            end else begin
              cnt_q <= cnt_q + 8'd1;
            end
          end
        end
        S_RECV: begin
          if (rise_i) begin
            rx_q  <= {rx_q[134:0], cmd_in_i};
            cnt_q <= cnt_q + 8'd1;
            if (( rsp_long && cnt_q >= 8'd8 && cnt_q < 8'd128) ||
                (!rsp_long && cnt_q < 8'd40))
              crc_q <= crc7_step(crc_q, cmd_in_i);
            if (cnt_q == rsp_len - 8'd1) begin
              state_q <= S_FINISH;
              gap_q   <= '0;
            end
          end
        end
        S_FINISH: begin
          done_o  <= 1'b1;
          state_q <= S_IDLE;
          if (cmd_q.rsp_type == RSP_NONE) begin
            err_o  <= '0;
            resp_o <= '0;
          end else if (cnt_q == 8'hFF) begin
            err_o  <= '{timeout: 1'b1, default: 1'b0};
            resp_o <= '0;
          end else begin
            err_o.timeout <= 1'b0;
            err_o.end_bit <= !rx_end;
            err_o.crc     <= cmd_q.crc_check && (crc_q != rx_crc);
            err_o.index   <= cmd_q.index_check && !rsp_long && (rx_index != cmd_q.index);
            resp_o        <= rsp_long ? {8'h00, rx_q[127:8]} : {96'h0, rx_q[39:8]};
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
