// sdhc_regs: the SDHCI 1.0 register file of the SD host controller.
//
// Decodes 32-bit register accesses (sdhc_pkg::reg_req_t; the request is held until
// reg_rsp_o.ready, which comes one cycle after the request, or later for a buffer data port read
// that waits for the buffer head word) into the standard SDHCI register map:
//   00 SDMA address (storage only, no DMA)  04 block size / block count
//   08 argument                             0C transfer mode / command (writing byte 3 issues it)
//   10..1C response                         20 buffer data port (read pops, write pushes)
//   24 present state                        28 host / power / block gap / wakeup control
//   2C clock control / timeout / software reset (self-clearing)
//   30 normal / error interrupt status (write 1 to clear)
//   34 status enables  38 signal enables    3C Auto CMD12 error status
//   40 capabilities    48 max current       FC slot interrupt status / version (1.0)
// Interrupt status bits are set by controller events only when their status enable bit is set;
// irq_o is high while any status bit with its signal enable set is high. Buffer read/write
// ready are set on the rising edge of the data logic's Buffer Read/Write Enable. The block count
// decrements after each block of a multi-block transfer with block count enabled.
//
// Auto CMD12: when the transfer mode asks for it on a counted multi-block transfer, the data
// logic raises acmd12_req_i after the last block; the register file then sends CMD12 (argument
// 0, R1b, CRC and index checked) as soon as the command channel is idle. Until its response has
// arrived, Command Inhibit (CMD) stays set and software commands are ignored. Its response goes
// to RESP[127:96] only, it raises no command-complete, and its errors set the Auto CMD12 error
// status register (bit 1 timeout, 2 CRC, 3 end bit, 4 index) and error interrupt bit 8.
//
// Block gap: Stop At Block Gap Request (0x28 bit 16) drives gap_stop_o; the data logic's
// gap_event_i sets the Block Gap Event interrupt status bit. Continue Request (bit 17) is not
// stored and reads 0; clearing bit 16 is what resumes the transfer.
//
// Following the paper: the controller is programmed through memory-mapped registers laid out as
// the SDHCI standard, version 1.0, prescribes. The register and bit positions are the standard's.
// This design's choices: capabilities announce a 50 MHz base and timeout clock (SYS_CLK_MHZ), 512-byte
// maximum block, 3.3 V only, no DMA, high speed or suspend/resume; read wait, interrupt at block
// gap and wakeup control are stored but have no effect; a command write is ignored while Command Inhibit (CMD) is set;
// "Auto CMD12 not executed" (bit 0) is never set, since the command is always sent.
// host_wdata_o is the register bus write data passed straight on: a write to the Buffer Data
// Port pushes it into the buffer in the same cycle as host_wr_o.
module sdhc_regs
  import sdhc_pkg::*;
#(
  parameter int unsigned SYS_CLK_MHZ = 50
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  reg_req_t      reg_req_i,
  output reg_rsp_t      reg_rsp_o,
  output logic          irq_o,
  // command logic
  output logic          cmd_start_o,
  output sd_cmd_t       cmd_o,
  output logic          cmd_srst_o,
  input  logic          cmd_busy_i,
  input  logic          cmd_done_i,
  input  cmd_err_t      cmd_err_i,
  input  logic [127:0]  cmd_resp_i,
  // data logic
  output logic          dat_start_o,
  output xfer_cfg_t     xfer_cfg_o,
  output logic          dat_srst_o,
  output logic          host_wr_o,
  output logic [31:0]   host_wdata_o,
  output logic          host_rd_o,
  input  logic [31:0]   host_rdata_i,
  input  logic          host_rvalid_i,
  input  logic          host_rd_avail_i,
  input  logic          dat_busy_i,
  input  logic          dat_active_i,
  input  logic          rd_active_i,
  input  logic          wr_active_i,
  input  logic          buf_rd_en_i,
  input  logic          buf_wr_en_i,
  input  logic          block_done_i,
  input  logic          xfer_done_i,
  input  logic          dat_err_timeout_i,
  input  logic          dat_err_crc_i,
  input  logic          dat_err_end_i,
  input  logic          acmd12_req_i,     // data logic: send Auto CMD12 now
  output logic          gap_stop_o,       // Stop At Block Gap Request
  input  logic          gap_event_i,      // data logic stopped at a block gap
  // clock divider
  output logic          clk_en_o,
  output logic [7:0]    clk_div_o,
  // pins and slot
  input  logic          card_present_i,
  input  logic          write_prot_i,
  input  logic [3:0]    dat_level_i,
  input  logic          cmd_level_i,
  output logic          led_o,
  output logic          bus_power_o
);

  // ---------------- storage ----------------
  logic [31:0] sdma_q, arg_q;
  logic [14:0] blk_size_q;
  logic [15:0] blk_cnt_q;
  logic [5:0]  xfer_mode_q;     // bits 0 DMA, 1 block count en, 2 auto CMD12, 4 read, 5 multi
  logic [13:0] cmd_q;           // command register bits [13:0]
  logic [127:0] resp_q;
  logic [2:0]  host_ctrl_q;
  logic [3:0]  pwr_ctrl_q;
  logic [3:0]  gap_ctrl_q;
  logic [2:0]  wakeup_q;
  logic        int_clk_en_q, int_clk_stable_q, sd_clk_en_q;
  logic [7:0]  freq_sel_q;
  logic [3:0]  timeout_q;
  logic [14:0] nint_q;          // normal interrupt status, bit 15 is derived
  logic [15:0] eint_q;
  logic [15:0] nint_sts_en_q, eint_sts_en_q, nint_sig_en_q, eint_sig_en_q;
  logic        cmd_uses_dat_q, cmd_done_d_q;
  logic        buf_rd_en_d_q, buf_wr_en_d_q;
  logic [1:0]  cd_sync_q;
  logic        cd_d_q;
  logic        rsp_ready_q;
  logic [31:0] rsp_rdata_q;
  logic        srst_all;
  // Auto CMD12: requested, on the CMD line, command outputs show it, its error status
  logic        acmd_pend_q, acmd_act_q, auto_sel_q;
  logic [4:0]  acmd_err_q;      // 0 not executed, 1 timeout, 2 CRC, 3 end bit, 4 index

  localparam logic [31:0] CAPS = {
    5'b0,               // [31:27]
    1'b0, 1'b0, 1'b1,   // [26] 1.8 V, [25] 3.0 V, [24] 3.3 V
    1'b0,               // [23] suspend/resume
    1'b0,               // [22] DMA
    1'b0,               // [21] high speed
    3'b0,               // [20:18]
    2'b00,              // [17:16] max block length 512
    2'b0,               // [15:14]
    6'(SYS_CLK_MHZ),    // [13:8] base clock for SD clock, MHz
    1'b1,               // [7] timeout clock unit MHz
    1'b0,               // [6]
    6'(SYS_CLK_MHZ)     // [5:0] timeout clock frequency
  };
  localparam logic [31:0] MAX_CURRENT = 32'h0000_0000;

  // ---------------- derived status ----------------
  logic        inhibit_cmd, inhibit_dat;
  logic [15:0] nint_full;
  logic [31:0] present;
  assign inhibit_cmd = cmd_busy_i || cmd_start_o || acmd_pend_q || acmd_act_q;
  assign inhibit_dat = dat_busy_i || cmd_uses_dat_q;
  assign nint_full   = {(eint_q != '0), nint_q};
  assign present = {7'b0, cmd_level_i, dat_level_i, write_prot_i, cd_sync_q[1], 1'b1,
                    cd_sync_q[1], 4'b0, buf_rd_en_i, buf_wr_en_i, rd_active_i, wr_active_i,
                    5'b0, dat_active_i, inhibit_dat, inhibit_cmd};
  assign irq_o = ((nint_full & nint_sig_en_q) != '0) || ((eint_q & eint_sig_en_q) != '0);

  // ---------------- outputs to the channels ----------------
  // While the last command was the automatic one, the command outputs describe CMD12 (R1b).
  assign cmd_o = auto_sel_q ?
                 '{index: 6'd12, arg: 32'h0, rsp_type: RSP_48_BUSY, crc_check: 1'b1,
                   index_check: 1'b1, data_present: 1'b0} :
                 '{index:        cmd_q[13:8],
                   arg:          arg_q,
                   rsp_type:     rsp_type_e'(cmd_q[1:0]),
                   crc_check:    cmd_q[3],
                   index_check:  cmd_q[4],
                   data_present: cmd_q[5]};
  assign xfer_cfg_o = '{block_size:     blk_size_q[11:0],
                        block_count:    blk_cnt_q,
                        block_count_en: xfer_mode_q[1],
                        multi_block:    xfer_mode_q[5],
                        auto_cmd12:     xfer_mode_q[2] && xfer_mode_q[5] && xfer_mode_q[1],
                        read:           xfer_mode_q[4],
                        wide_bus:       host_ctrl_q[1],
                        timeout_exp:    timeout_q};
  assign clk_en_o    = int_clk_en_q && sd_clk_en_q;
  assign gap_stop_o  = gap_ctrl_q[0];
  assign clk_div_o   = freq_sel_q;
  assign led_o       = host_ctrl_q[0];
  assign bus_power_o = pwr_ctrl_q[0];

  // ---------------- access decode ----------------
  logic        acc, acc_wr, acc_rd;
  logic [7:0]  a;
  logic [31:0] wd;
  logic [3:0]  be;
  logic        buf_rd_wait;
  assign a      = {reg_req_i.addr[7:2], 2'b00};
  assign wd     = reg_req_i.wdata;
  assign be     = reg_req_i.wstrb;
  // a buffer read with data owed but the head word not yet fetched waits
  assign buf_rd_wait = !reg_req_i.write && a == REG_BUF_DATA && host_rd_avail_i && !host_rvalid_i;
  assign acc    = reg_req_i.valid && !rsp_ready_q && !buf_rd_wait;
  assign acc_wr = acc && reg_req_i.write;
  assign acc_rd = acc && !reg_req_i.write;

  assign host_rd_o    = acc_rd && a == REG_BUF_DATA && host_rd_avail_i;
  assign host_wr_o    = acc_wr && a == REG_BUF_DATA && (be != '0);
  assign host_wdata_o = wd;

  logic cmd_write;
  assign cmd_write   = acc_wr && a == REG_XFER_CMD && be[3] && !inhibit_cmd;
  assign srst_all    = acc_wr && a == REG_CLK_CTRL && be[3] && wd[24];
  assign cmd_srst_o  = acc_wr && a == REG_CLK_CTRL && be[3] && (wd[24] || wd[25]);
  assign dat_srst_o  = acc_wr && a == REG_CLK_CTRL && be[3] && (wd[24] || wd[26]);

  // Byte-enable merge.
  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] strb);
    for (int i = 0; i < 4; i++) if (strb[i]) old[8*i +: 8] = nw[8*i +: 8];
    return old;
  endfunction

  logic [31:0] rdata;
  always_comb begin
    unique case (a)
      REG_SDMA_ADDR:   rdata = sdma_q;
      REG_BLK:         rdata = {blk_cnt_q, 1'b0, blk_size_q};
      REG_ARG:         rdata = arg_q;
      REG_XFER_CMD:    rdata = {2'b0, cmd_q, 10'b0, xfer_mode_q};
      REG_RESP0:       rdata = resp_q[31:0];
      REG_RESP1:       rdata = resp_q[63:32];
      REG_RESP2:       rdata = resp_q[95:64];
      REG_RESP3:       rdata = resp_q[127:96];
      REG_BUF_DATA:    rdata = host_rd_avail_i ? host_rdata_i : 32'h0;
      REG_PRESENT:     rdata = present;
      REG_HOST_CTRL:   rdata = {5'b0, wakeup_q, 4'b0, gap_ctrl_q, 4'b0, pwr_ctrl_q,
                                5'b0, host_ctrl_q};
      REG_CLK_CTRL:    rdata = {8'b0, 4'b0, timeout_q, freq_sel_q, 5'b0, sd_clk_en_q,
                                int_clk_stable_q, int_clk_en_q};
      REG_INT_STATUS:  rdata = {eint_q, nint_full};
      REG_INT_STS_EN:  rdata = {eint_sts_en_q, nint_sts_en_q};
      REG_INT_SIG_EN:  rdata = {eint_sig_en_q, nint_sig_en_q};
      REG_ACMD12_ERR:  rdata = {27'h0, acmd_err_q};
      REG_CAPS:        rdata = CAPS;
      REG_MAX_CURRENT: rdata = MAX_CURRENT;
      REG_VERSION:     rdata = {16'h0000, 15'b0, irq_o};
      default:         rdata = 32'h0;
    endcase
  end

  assign reg_rsp_o = '{ready: rsp_ready_q, rdata: rsp_rdata_q};

  // ---------------- events ----------------
  logic [14:0] nint_set;
  logic [15:0] eint_set;
  logic        cmd_err_any;
  assign cmd_err_any = cmd_err_i.timeout || cmd_err_i.crc || cmd_err_i.end_bit || cmd_err_i.index;
  always_comb begin
    nint_set = '0;
    eint_set = '0;
    nint_set[INT_CMD_COMPLETE]  = cmd_done_i && !cmd_err_any && !acmd_act_q;
    nint_set[INT_XFER_COMPLETE] = xfer_done_i;
    nint_set[INT_BLOCK_GAP]     = gap_event_i;
    nint_set[INT_BUF_WR_READY]  = buf_wr_en_i && !buf_wr_en_d_q;
    nint_set[INT_BUF_RD_READY]  = buf_rd_en_i && !buf_rd_en_d_q;
    nint_set[INT_CARD_INSERT]   = cd_sync_q[1] && !cd_d_q;
    nint_set[INT_CARD_REMOVE]   = !cd_sync_q[1] && cd_d_q;
    eint_set[ERR_CMD_TIMEOUT]   = cmd_done_i && !acmd_act_q && cmd_err_i.timeout;
    eint_set[ERR_CMD_CRC]       = cmd_done_i && !acmd_act_q && cmd_err_i.crc;
    eint_set[ERR_CMD_END_BIT]   = cmd_done_i && !acmd_act_q && cmd_err_i.end_bit;
    eint_set[ERR_CMD_INDEX]     = cmd_done_i && !acmd_act_q && cmd_err_i.index;
    eint_set[ERR_AUTO_CMD12]    = cmd_done_i && acmd_act_q && cmd_err_any;
    eint_set[ERR_DATA_TIMEOUT]  = dat_err_timeout_i;
    eint_set[ERR_DATA_CRC]      = dat_err_crc_i;
    eint_set[ERR_DATA_END_BIT]  = dat_err_end_i;
  end

  // Register words with the written bytes merged in (used only on a write to that offset).
  logic [31:0] int_clr, blk_m, xc_m, hc_m, cc_m;
  always_comb begin
    int_clr = (acc_wr && a == REG_INT_STATUS) ? merge(32'h0, wd, be) : 32'h0;
    blk_m   = merge({blk_cnt_q, 1'b0, blk_size_q}, wd, be);
    xc_m    = merge({2'b0, cmd_q, 10'b0, xfer_mode_q}, wd, be);
    hc_m    = merge({5'b0, wakeup_q, 4'b0, gap_ctrl_q, 4'b0, pwr_ctrl_q, 5'b0, host_ctrl_q}, wd, be);
    cc_m    = merge({12'b0, timeout_q, freq_sel_q, 5'b0, sd_clk_en_q, 1'b0, int_clk_en_q}, wd, be);
  end

  // ---------------- state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cd_sync_q <= '0;
      cd_d_q    <= 1'b0;
    end else begin
      cd_sync_q <= {cd_sync_q[0], card_present_i};
      cd_d_q    <= cd_sync_q[1];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_ready_q <= 1'b0;
      rsp_rdata_q <= '0;
    end else begin
      rsp_ready_q <= acc;
      if (acc_rd) rsp_rdata_q <= rdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sdma_q <= '0; arg_q <= '0; blk_size_q <= '0; blk_cnt_q <= '0; xfer_mode_q <= '0;
      cmd_q <= '0; resp_q <= '0; host_ctrl_q <= '0; pwr_ctrl_q <= '0; gap_ctrl_q <= '0;
      wakeup_q <= '0; int_clk_en_q <= 1'b0; int_clk_stable_q <= 1'b0; sd_clk_en_q <= 1'b0;
      freq_sel_q <= '0; timeout_q <= '0; nint_q <= '0; eint_q <= '0;
      nint_sts_en_q <= '0; eint_sts_en_q <= '0; nint_sig_en_q <= '0; eint_sig_en_q <= '0;
      cmd_uses_dat_q <= 1'b0; cmd_done_d_q <= 1'b0; cmd_start_o <= 1'b0; dat_start_o <= 1'b0;
      buf_rd_en_d_q <= 1'b0; buf_wr_en_d_q <= 1'b0;
      acmd_pend_q <= 1'b0; acmd_act_q <= 1'b0; auto_sel_q <= 1'b0; acmd_err_q <= '0;
    end else if (srst_all) begin
      sdma_q <= '0; arg_q <= '0; blk_size_q <= '0; blk_cnt_q <= '0; xfer_mode_q <= '0;
      cmd_q <= '0; resp_q <= '0; host_ctrl_q <= '0; pwr_ctrl_q <= '0; gap_ctrl_q <= '0;
      wakeup_q <= '0; int_clk_en_q <= 1'b0; int_clk_stable_q <= 1'b0; sd_clk_en_q <= 1'b0;
      freq_sel_q <= '0; timeout_q <= '0; nint_q <= '0; eint_q <= '0;
      nint_sts_en_q <= '0; eint_sts_en_q <= '0; nint_sig_en_q <= '0; eint_sig_en_q <= '0;
      cmd_uses_dat_q <= 1'b0; cmd_done_d_q <= 1'b0; cmd_start_o <= 1'b0; dat_start_o <= 1'b0;
      buf_rd_en_d_q <= 1'b0; buf_wr_en_d_q <= 1'b0;
      acmd_pend_q <= 1'b0; acmd_act_q <= 1'b0; auto_sel_q <= 1'b0; acmd_err_q <= '0;
    end else begin
      cmd_start_o      <= 1'b0;
      dat_start_o      <= 1'b0;
      cmd_done_d_q     <= cmd_done_i;
      buf_rd_en_d_q    <= buf_rd_en_i;
      buf_wr_en_d_q    <= buf_wr_en_i;
      int_clk_stable_q <= int_clk_en_q;
      if (cmd_done_d_q || cmd_srst_o) cmd_uses_dat_q <= 1'b0;
      // Auto CMD12's response goes to the upper response word only.
      if (cmd_done_i) begin
        if (acmd_act_q) resp_q[127:96] <= cmd_resp_i[31:0];
        else resp_q <= cmd_resp_i;
      end

      // Auto CMD12: issued as soon as the command channel is free.
      if (acmd12_req_i) acmd_pend_q <= 1'b1;
      if (acmd_pend_q && !cmd_busy_i && !cmd_start_o) begin
        cmd_start_o <= 1'b1;
        auto_sel_q  <= 1'b1;
        acmd_act_q  <= 1'b1;
        acmd_pend_q <= 1'b0;
      end
      if (cmd_done_i && acmd_act_q) begin
        acmd_act_q <= 1'b0;
        acmd_err_q <= {cmd_err_i.index, cmd_err_i.end_bit, cmd_err_i.crc, cmd_err_i.timeout, 1'b0};
      end
      if (cmd_srst_o || dat_srst_o) begin
        acmd_pend_q <= 1'b0;
        acmd_act_q  <= 1'b0;
      end
      if (block_done_i && xfer_mode_q[5] && xfer_mode_q[1]) blk_cnt_q <= blk_cnt_q - 16'd1;

      // interrupt status: set by events (when enabled), cleared by writing 1
      nint_q <= (nint_q & ~int_clr[14:0])  | (nint_set & nint_sts_en_q[14:0]);
      eint_q <= (eint_q & ~int_clr[31:16]) | (eint_set & eint_sts_en_q);

      if (acc_wr) begin
        unique case (a)
          REG_SDMA_ADDR: sdma_q <= merge(sdma_q, wd, be);
          REG_BLK: begin
            blk_size_q <= blk_m[14:0];
            if (be[3:2] != '0) blk_cnt_q <= blk_m[31:16];
          end
          REG_ARG: arg_q <= merge(arg_q, wd, be);
          REG_XFER_CMD: begin
            if (!inhibit_cmd) begin
              xfer_mode_q <= {xc_m[5:4], 1'b0, xc_m[2:0]};
              cmd_q       <= xc_m[29:16];
            end
            if (cmd_write) begin
              auto_sel_q     <= 1'b0;
              cmd_start_o    <= 1'b1;
              dat_start_o    <= xc_m[21];
              cmd_uses_dat_q <= xc_m[21] || (xc_m[17:16] == 2'b11);
            end
          end
          REG_HOST_CTRL: begin
            host_ctrl_q <= hc_m[2:0];
            pwr_ctrl_q  <= hc_m[11:8];
            gap_ctrl_q  <= hc_m[19:16] & 4'b1101;   // Continue Request reads back 0
            wakeup_q    <= hc_m[26:24];
          end
          REG_CLK_CTRL: begin
            int_clk_en_q <= cc_m[0];
            sd_clk_en_q  <= cc_m[2];
            freq_sel_q   <= cc_m[15:8];
            timeout_q    <= cc_m[19:16];
          end
          REG_INT_STS_EN: {eint_sts_en_q, nint_sts_en_q} <=
                            merge({eint_sts_en_q, nint_sts_en_q}, wd, be);
          REG_INT_SIG_EN: {eint_sig_en_q, nint_sig_en_q} <=
                            merge({eint_sig_en_q, nint_sig_en_q}, wd, be);
          default: ;
        endcase
      end
    end
  end

endmodule
