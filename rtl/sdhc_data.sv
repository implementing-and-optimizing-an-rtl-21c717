// sdhc_data: the data channel of the SD host controller, with its SRAM block buffer.
//
// A transfer is armed by start_i (a command with data was issued) with the setup in cfg_i:
// block size in bytes, number of blocks (one, block_count, or unbounded), direction, bus width
// (1 or 4 DAT lines) and data timeout. The buffer is a FIFO of 32-bit words in SRAM (sdhc_fifo);
// the first byte on the bus is bits [7:0] of a buffer word, and each block starts a new word.
//
// Read (card to host): from start_i on, the logic watches DAT0 for a start bit, shifts in the
// block on rising SD clock edges (4-bit bus: upper nibble of each byte first; 1-bit bus: MSB
// first), runs one CRC16 per used line, checks the 16 CRC bits and the end bit, and counts the
// block as ready for the host. The host pops words through host_rd_i. Before each further block,
// if the buffer has no room for a whole block, clk_stop_o holds the SD clock low, which pauses the
// card until the host has read enough; this is the controller's flow control during reads. The
// transfer completes once all blocks are received and read out.
//
// Write (host to card): the host pushes words through host_wr_i. After the command's response
// (cmd_done_i) and once a whole block is in the buffer, the logic waits two SD clocks, then drives
// start bit, data, per-line CRC16 and end bit on falling edges, releases the lines, reads the
// card's CRC status token on DAT0 (010 = accepted) and waits while the card holds DAT0 low (busy).
// For a command with busy response but no data (R1b), the logic only waits out the busy phase.
//
// Auto CMD12: on a counted multi-block transfer with cfg_i.auto_cmd12, acmd12_req_o pulses when
// the last block has been received (read) or the card's busy after the last block has ended
// (write). The register file then sends CMD12. The transfer completes only after its response
// (cmd_done_i) and after DAT0 shows no busy, so software sees one transfer-complete event for
// data and stop command together.
//
// Block gap: while gap_stop_i is set, a multi-block transfer is held after its current block at
// the point where the next block would start: a read keeps the SD clock stopped (clk_stop_o) in
// front of the next start bit, a write does not send the next block. gap_event_o pulses once when
// the hold begins; clearing gap_stop_i resumes the transfer. The first block is never held.
//
// Status: buf_rd_en_o / buf_wr_en_o are the SDHCI Buffer Read/Write Enable bits (a whole block
// can be read / written); they drop for one cycle after each block so that every block raises a
// fresh buffer-ready interrupt. xfer_done_o, block_done_o and the error pulses feed the interrupt
// status register. The data timeout counts 2^(13+n) system clocks of waiting for the card.
//
// Following the paper: data channel separate from the command channel, synchronised by the
// command-completion notification, with an SRAM buffer and SD clock stopping when the buffer
// fills during reads. The bus framing, CRC16, CRC status and busy follow the SD physical layer
// specification. This design's choices: buffer of two 512-byte blocks, block-level flow control,
// the timeout counted in system clocks, block sizes handled in whole 32-bit words per block, the
// block-gap hold point (SDHCI stop at block gap, without read wait).
module sdhc_data
  import sdhc_pkg::*;
#(
  parameter int unsigned BUF_WORDS = 256,
  localparam int unsigned AW = $clog2(BUF_WORDS)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        srst_i,        // software reset of the data channel
  // SD clock
  input  logic        rise_i,
  input  logic        fall_i,
  output logic        clk_stop_o,
  // control
  input  logic        start_i,
  input  xfer_cfg_t   cfg_i,
  input  logic        cmd_done_i,    // command completion notification
  input  logic        cmd_fail_i,    // the completed command had an error
  input  logic        cmd_busy_i,    // the completed command has a busy (R1b) response
  // host side of the buffer
  input  logic        host_wr_i,
  input  logic [31:0] host_wdata_i,
  input  logic        host_rd_i,
  output logic [31:0] host_rdata_o,
  output logic        host_rvalid_o,
  output logic        host_rd_avail_o, // a block (or the rest of one) can be read
  // status
  output logic        busy_o,        // DAT channel in use (Command Inhibit DAT)
  output logic        dat_active_o,
  output logic        rd_active_o,
  output logic        wr_active_o,
  output logic        buf_rd_en_o,
  output logic        buf_wr_en_o,
  output logic        block_done_o,
  output logic        xfer_done_o,
  output logic        err_timeout_o,
  output logic        err_crc_o,
  output logic        err_end_o,
  output logic        acmd12_req_o,    // last block done: send Auto CMD12 now
  input  logic        gap_stop_i,      // Stop At Block Gap Request
  output logic        gap_event_o,     // transfer has stopped at a block gap
  // DAT lines
  input  logic [3:0]  dat_i,
  output logic [3:0]  dat_o,
  output logic [3:0]  dat_oe_o
);

  typedef enum logic [3:0] {
    S_IDLE, S_RD_START, S_RD_DATA, S_RD_CRC, S_RD_END, S_RD_DRAIN,
    S_WR_CMD, S_WR_BLOCK, S_WR_NWR, S_WR_DATA, S_WR_CRC, S_WR_END,
    S_WR_STATUS, S_BUSY, S_ACMD
  } state_e;

  state_e          state_q;
  xfer_cfg_t       cfg_q;
  logic [15:0]     blocks_left_q;    // SD-side blocks still to move (unbounded: not counted)
  logic            unbounded_q;
  logic            acmd_wait_q;      // read: Auto CMD12 requested, its response still owed
  logic            first_blk_q;      // no block of this transfer finished yet (no gap so far)
  logic            gap_hold;         // held at a block gap on request
  logic            gap_seen_q;
  logic [11:0]     byte_q;           // byte within the block
  logic [2:0]      sub_q;            // bit (1-bit bus) or nibble (4-bit bus) within the byte
  logic [4:0]      cnt_q;            // CRC / status / gap bit counter
  logic [3:0][15:0] crc_q;
  logic [7:0]      shift_q;          // byte being received
  logic [31:0]     word_q;           // word being assembled
  logic            push_q;
  logic [31:0]     push_data_q;
  logic [2:0]      status_q;
  logic [27:0]     tmo_q;
  logic [27:0]     tmo_limit;

  // Host-side block accounting.
  logic [AW:0]     host_wcnt_q;      // words of the current block moved by the host
  logic [AW:0]     blocks_full_q;    // read: received, not yet read; write: written, not yet sent
  logic [15:0]     host_blocks_q;    // write: blocks the host has written
  logic            host_blk_edge_q;  // host just finished a block

  logic [AW:0]     wpb;              // words per block
  logic [AW:0]     level, free;
  logic            fifo_push, fifo_pop, fifo_flush;
  logic [31:0]     fifo_rdata;
  logic            fifo_rvalid;
  logic            wide;
  logic            last_byte, last_sub;
  logic            sd_blk_done, host_blk_done;
  logic            tx_pop;
  logic            tx_blk_taken;    // a written block leaves the "full" count as its transmission starts
  logic            wr_pending_q;    // a write transfer (not an R1b busy wait) is under way

  assign wide      = cfg_q.wide_bus;
  assign wpb       = (AW+1)'((cfg_q.block_size + 12'd3) >> 2);
  assign free      = (AW+1)'(BUF_WORDS) - level;
  assign last_byte = (byte_q == cfg_q.block_size - 12'd1);
  assign last_sub  = wide ? (sub_q == 3'd1) : (sub_q == 3'd7);
  assign tmo_limit = 28'(1) << (5'd13 + {1'b0, cfg_q.timeout_exp});

  // ---------------- buffer ----------------
  logic host_can_rd, host_can_wr;
  assign host_can_rd = cfg_q.read && (host_wcnt_q != '0 || blocks_full_q != '0);
  assign host_can_wr = !cfg_q.read && state_q != S_IDLE &&
                       (host_wcnt_q != '0 ||
                        (free >= wpb && (unbounded_q || host_blocks_q < cfg_q.block_count)));

  assign fifo_flush = srst_i || (start_i && state_q == S_IDLE);
  assign fifo_push  = push_q || (host_wr_i && host_can_wr);
  assign fifo_pop   = (host_rd_i && host_can_rd && fifo_rvalid) || tx_pop;
  assign host_rdata_o  = fifo_rdata;
  assign host_rvalid_o = fifo_rvalid && host_can_rd;
  assign host_rd_avail_o = host_can_rd;
  assign buf_rd_en_o   = host_can_rd && !host_blk_edge_q;
  assign buf_wr_en_o   = host_can_wr && !host_blk_edge_q;

  logic host_move;
  assign host_move     = cfg_q.read ? (host_rd_i && host_can_rd && fifo_rvalid)
                                    : (host_wr_i && host_can_wr);
  assign host_blk_done = host_move && (host_wcnt_q == wpb - 1'b1);

  sdhc_fifo #(.DEPTH(BUF_WORDS)) i_fifo (
    .clk_i, .rst_ni,
    .flush_i  (fifo_flush),
    .push_i   (fifo_push),
    .wdata_i  (push_q ? push_data_q : host_wdata_i),
    .pop_i    (fifo_pop),
    .rdata_o  (fifo_rdata),
    .rvalid_o (fifo_rvalid),
    .level_o  (level)
  );

  // ---------------- transmit byte selection ----------------
  logic [7:0]  tx_byte;
  logic [3:0]  tx_bits;                 // value for dat_o[3:0] (1-bit bus uses bit 0)
  assign tx_byte = fifo_rdata[8*byte_q[1:0] +: 8];
  assign tx_bits = wide ? (sub_q[0] ? tx_byte[3:0] : tx_byte[7:4])
                        : {3'b111, tx_byte[3'd7 - sub_q]};
  assign tx_pop  = (state_q == S_WR_DATA) && fall_i && last_sub &&
                   (byte_q[1:0] == 2'd3 || last_byte);

  // Received bits on this rising edge.
  logic [3:0] rx_bits;
  assign rx_bits = wide ? dat_i : {3'b000, dat_i[0]};
  // The word being assembled with the byte completed by this rising edge.
  logic [7:0]  rx_byte;
  logic [31:0] rx_word;
  always_comb begin
    rx_byte = wide ? {shift_q[3:0], rx_bits} : {shift_q[6:0], rx_bits[0]};
    rx_word = word_q;
    rx_word[8*byte_q[1:0] +: 8] = rx_byte;
  end
  logic [3:0] used;
  assign used = wide ? 4'hF : 4'h1;

  // ---------------- status ----------------
  assign busy_o       = (state_q != S_IDLE);
  assign rd_active_o  = (state_q inside {S_RD_START, S_RD_DATA, S_RD_CRC, S_RD_END, S_RD_DRAIN});
  assign wr_active_o  = (state_q inside {S_WR_CMD, S_WR_BLOCK, S_WR_NWR, S_WR_DATA, S_WR_CRC,
                                         S_WR_END, S_WR_STATUS});
  assign dat_active_o = busy_o && (state_q != S_RD_DRAIN);
  assign gap_hold     = gap_stop_i && (!first_blk_q || block_done_o);
  assign clk_stop_o   = (state_q == S_RD_START) && ((free < wpb) || gap_hold);

  logic waiting;   // states in which the card owes us something
  assign waiting = (state_q inside {S_RD_START, S_WR_STATUS, S_BUSY}) && !clk_stop_o;

  assign sd_blk_done  = block_done_o;
  assign tx_blk_taken = (state_q == S_WR_BLOCK) && (blocks_full_q != '0) && !gap_hold;

  // Block gap: between two blocks of a transfer the logic holds (reads: SD clock stopped before
  // the next start bit; writes: next block not started) while Stop At Block Gap Request is set,
  // and reports that once with gap_event_o.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      first_blk_q <= 1'b1;
      gap_seen_q  <= 1'b0;
      gap_event_o <= 1'b0;
    end else begin
      if (state_q == S_IDLE) first_blk_q <= 1'b1;
      else if (block_done_o) first_blk_q <= 1'b0;
      gap_event_o <= 1'b0;
      if (gap_hold && (state_q inside {S_RD_START, S_WR_BLOCK})) begin
        if (!gap_seen_q) gap_event_o <= 1'b1;
        gap_seen_q <= 1'b1;
      end else begin
        gap_seen_q <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) wr_pending_q <= 1'b0;
    else if (srst_i) wr_pending_q <= 1'b0;
    else if (state_q == S_IDLE) wr_pending_q <= start_i && !cfg_i.read;
    else if (state_q == S_ACMD) wr_pending_q <= 1'b0;
  end

  // ---------------- main state machine ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= S_IDLE;
      cfg_q          <= '0;
      blocks_left_q  <= '0;
      unbounded_q    <= 1'b0;
      byte_q         <= '0;
      sub_q          <= '0;
      cnt_q          <= '0;
      crc_q          <= '0;
      shift_q        <= '0;
      word_q         <= '0;
      push_q         <= 1'b0;
      push_data_q    <= '0;
      status_q       <= '0;
      tmo_q          <= '0;
      dat_o          <= 4'hF;
      dat_oe_o       <= 4'h0;
      block_done_o   <= 1'b0;
      xfer_done_o    <= 1'b0;
      err_timeout_o  <= 1'b0;
      err_crc_o      <= 1'b0;
      err_end_o      <= 1'b0;
      acmd12_req_o   <= 1'b0;
      acmd_wait_q    <= 1'b0;
    end else if (srst_i) begin
      state_q       <= S_IDLE;
      push_q        <= 1'b0;
      dat_o         <= 4'hF;
      dat_oe_o      <= 4'h0;
      block_done_o  <= 1'b0;
      xfer_done_o   <= 1'b0;
      err_timeout_o <= 1'b0;
      err_crc_o     <= 1'b0;
      err_end_o     <= 1'b0;
      acmd12_req_o  <= 1'b0;
      acmd_wait_q   <= 1'b0;
    end else begin
      acmd12_req_o  <= 1'b0;
      if (cmd_done_i) acmd_wait_q <= 1'b0;
      push_q        <= 1'b0;
      block_done_o  <= 1'b0;
      xfer_done_o   <= 1'b0;
      err_timeout_o <= 1'b0;
      err_crc_o     <= 1'b0;
      err_end_o     <= 1'b0;

      // data timeout
      if (waiting) begin
        if (tmo_q == tmo_limit - 28'd1) begin
          err_timeout_o <= 1'b1;
          state_q       <= S_IDLE;
          dat_oe_o      <= 4'h0;
        end
        tmo_q <= tmo_q + 28'd1;
      end else begin
        tmo_q <= '0;
      end

      unique case (state_q)
        S_IDLE: begin
          if (start_i) begin
            cfg_q         <= cfg_i;
            unbounded_q   <= cfg_i.multi_block && !cfg_i.block_count_en;
            blocks_left_q <= cfg_i.multi_block ? cfg_i.block_count : 16'd1;
            state_q       <= cfg_i.read ? S_RD_START : S_WR_CMD;
          end else if (cmd_done_i && cmd_busy_i && !cmd_fail_i) begin
            cnt_q   <= '0;
            state_q <= S_BUSY;
          end
        end

        // ----- read -----
        S_RD_START: begin
          if (cmd_done_i && cmd_fail_i) begin
            state_q <= S_IDLE;
          end else if (rise_i && !dat_i[0]) begin
            byte_q    <= '0;
            sub_q     <= '0;
            crc_q     <= '0;
            word_q    <= '0;
            state_q   <= S_RD_DATA;
          end
        end
        S_RD_DATA: begin
          if (rise_i) begin
            for (int l = 0; l < 4; l++) crc_q[l] <= crc16_step(crc_q[l], rx_bits[l]);
            shift_q <= wide ? {shift_q[3:0], rx_bits} : {shift_q[6:0], rx_bits[0]};
            sub_q   <= sub_q + 3'd1;
            if (last_sub) begin
              word_q <= rx_word;
              sub_q  <= '0;
              byte_q <= byte_q + 12'd1;
              if (byte_q[1:0] == 2'd3 || last_byte) begin
                push_q      <= 1'b1;
                push_data_q <= rx_word;
                word_q      <= '0;
              end
              if (last_byte) begin
                cnt_q   <= '0;
                state_q <= S_RD_CRC;
              end
            end
          end
        end
        S_RD_CRC: begin
          // Feeding the received CRC through the generator leaves zero when it matches.
          if (rise_i) begin
            for (int l = 0; l < 4; l++) crc_q[l] <= crc16_step(crc_q[l], rx_bits[l]);
            cnt_q <= cnt_q + 5'd1;
            if (cnt_q == 5'd15) state_q <= S_RD_END;
          end
        end
        S_RD_END: begin
          if (rise_i) begin
            if ((crc_q[0] != '0) || (wide && (crc_q[1] != '0 || crc_q[2] != '0 ||
                                              crc_q[3] != '0))) begin
              err_crc_o <= 1'b1;
              state_q   <= S_IDLE;
            end else if ((dat_i & used) != used) begin
              err_end_o <= 1'b1;
              state_q   <= S_IDLE;
            end else begin
              block_done_o  <= 1'b1;
              blocks_left_q <= blocks_left_q - 16'd1;
              if (!unbounded_q && blocks_left_q == 16'd1) begin
                state_q <= S_RD_DRAIN;
                if (cfg_q.auto_cmd12) begin
                  acmd12_req_o <= 1'b1;
                  acmd_wait_q  <= 1'b1;
                end
              end else begin
                state_q <= S_RD_START;
              end
            end
          end
        end
        S_RD_DRAIN: begin
          if (blocks_full_q == '0 && host_wcnt_q == '0 && !push_q && !block_done_o &&
              !acmd_wait_q) begin
            if (cfg_q.auto_cmd12) begin       // wait out the busy of the stop command
              cnt_q   <= '0;
              state_q <= S_BUSY;
            end else begin
              xfer_done_o <= 1'b1;
              state_q     <= S_IDLE;
            end
          end
        end

        // ----- write -----
        S_WR_CMD: begin
          if (cmd_done_i) state_q <= cmd_fail_i ? S_IDLE : S_WR_BLOCK;
        end
        S_WR_BLOCK: begin
          if (blocks_full_q != '0 && !gap_hold) begin
            cnt_q   <= '0;
            state_q <= S_WR_NWR;
          end
        end
        S_WR_NWR: begin
          if (fall_i) begin
            cnt_q <= cnt_q + 5'd1;
            if (cnt_q == 5'd2) begin
              dat_oe_o <= used;
              dat_o    <= 4'h0;            // start bit
              byte_q   <= '0;
              sub_q    <= '0;
              crc_q    <= '0;
              state_q  <= S_WR_DATA;
            end
          end
        end
        S_WR_DATA: begin
          if (fall_i) begin
            dat_o <= tx_bits;
            for (int l = 0; l < 4; l++) crc_q[l] <= crc16_step(crc_q[l], tx_bits[l]);
            sub_q <= sub_q + 3'd1;
            if (last_sub) begin
              sub_q  <= '0;
              byte_q <= byte_q + 12'd1;
              if (last_byte) begin
                cnt_q   <= '0;
                state_q <= S_WR_CRC;
              end
            end
          end
        end
        S_WR_CRC: begin
          if (fall_i) begin
            for (int l = 0; l < 4; l++) begin
              dat_o[l]  <= crc_q[l][15];
              crc_q[l]  <= {crc_q[l][14:0], 1'b0};
            end
            cnt_q <= cnt_q + 5'd1;
            if (cnt_q == 5'd15) state_q <= S_WR_END;
          end
        end
        S_WR_END: begin
          if (fall_i) begin
            cnt_q <= cnt_q + 5'd1;
            if (cnt_q == 5'd16) begin
              dat_o <= 4'hF;               // end bit
            end else begin
              dat_oe_o <= 4'h0;            // release, card answers with CRC status
              cnt_q    <= '0;
              status_q <= '0;
              state_q  <= S_WR_STATUS;
            end
          end
        end
        S_WR_STATUS: begin
          if (rise_i) begin
            if (cnt_q == 5'd0) begin
              if (!dat_i[0]) cnt_q <= 5'd1;   // start bit of the token
            end else if (cnt_q < 5'd4) begin
              status_q <= {status_q[1:0], dat_i[0]};
              cnt_q    <= cnt_q + 5'd1;
            end else begin                     // token end bit
              if (status_q != 3'b010) begin
                err_crc_o <= 1'b1;
                state_q   <= S_IDLE;
              end else if (!dat_i[0]) begin
                err_end_o <= 1'b1;
                state_q   <= S_IDLE;
              end else begin
                cnt_q   <= '0;
                state_q <= S_BUSY;
              end
            end
          end
        end
        S_BUSY: begin
          // Give the card two clocks to pull DAT0 low, then wait for it to let go.
          if (rise_i) begin
            if (cnt_q < 5'd2) begin
              cnt_q <= cnt_q + 5'd1;
            end else if (dat_i[0]) begin
              if (!wr_pending_q) begin          // R1b busy of a command without data
                xfer_done_o <= 1'b1;
                state_q     <= S_IDLE;
              end else begin
                block_done_o  <= 1'b1;
                blocks_left_q <= blocks_left_q - 16'd1;
                if (!unbounded_q && blocks_left_q == 16'd1) begin
                  if (cfg_q.auto_cmd12) begin
                    acmd12_req_o <= 1'b1;
                    state_q      <= S_ACMD;
                  end else begin
                    xfer_done_o <= 1'b1;
                    state_q     <= S_IDLE;
                  end
                end else begin
                  state_q <= S_WR_BLOCK;
                end
              end
            end
          end
        end
        S_ACMD: begin
          // Auto CMD12 after a write: its R1b busy ends the transfer.
          if (cmd_done_i) begin
            cnt_q   <= '0;
            state_q <= S_BUSY;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- host-side block accounting ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      host_wcnt_q     <= '0;
      blocks_full_q   <= '0;
      host_blocks_q   <= '0;
      host_blk_edge_q <= 1'b0;
    end else if (fifo_flush) begin
      host_wcnt_q     <= '0;
      blocks_full_q   <= '0;
      host_blocks_q   <= '0;
      host_blk_edge_q <= 1'b0;
    end else begin
      host_blk_edge_q <= host_blk_done;
      if (host_move) host_wcnt_q <= host_blk_done ? '0 : host_wcnt_q + 1'b1;
      if (host_blk_done && !cfg_q.read) host_blocks_q <= host_blocks_q + 16'd1;
      // read: card side fills, host side empties; write: the other way round
      if (cfg_q.read) begin
        blocks_full_q <= blocks_full_q + (AW+1)'(sd_blk_done) - (AW+1)'(host_blk_done);
      end else begin
        blocks_full_q <= blocks_full_q + (AW+1)'(host_blk_done) - (AW+1)'(tx_blk_taken);
      end
    end
  end

endmodule
