// sdhc_top: SD host controller with an SDHCI 1.0 register interface and an AXI4 port.
//
// The controller follows the structure of the SD bus: the command channel (sdhc_cmd) and the
// data channel (sdhc_data, with its SRAM buffer) are separate blocks that run independently and
// meet only through the command-completion notification. The SD clock comes from a programmable
// integer divider of the system clock (sdhc_clk_div), which the data channel can stop when its
// buffer fills during a read. Software drives all three through the SDHCI register file
// (sdhc_regs), which is reached over an AXI4 subordinate port (sdhc_axi) meant to sit directly on
// the SoC's main crossbar.
//
// Interface: one system clock and an active-low asynchronous reset; the AXI4 port (structs of
// sdhc_pkg); a level interrupt; the SD bus pins as separate input, output and output-enable
// signals (CMD and DAT need external pull-ups and tri-state pads); card-detect and
// write-protect inputs; LED and bus-power outputs from the host and power control registers.
// Everything runs on clk_i; the SD clock pin is a register toggled at the divided rate, outputs
// to the card change with its falling edge and inputs are sampled at its rising edge.
//
// Following the paper: the block structure (register file, clock divider, data logic with SRAM,
// command logic), the command-to-data notification, the clock stop by the data logic and the AXI
// attachment. The 50 MHz system clock matches the operating point the paper evaluates. The
// register file also links to the data channel for the SDHCI Auto CMD12 request and the stop at
// block gap request and event; these follow the SDHCI standard, not details printed in the paper.
module sdhc_top
  import sdhc_pkg::*;
#(
  parameter int unsigned SYS_CLK_MHZ = 50,
  parameter int unsigned BUF_WORDS   = 256
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axi_req_t   axi_req_i,
  output axi_rsp_t   axi_rsp_o,
  output logic       irq_o,
  output logic       sd_clk_o,
  output logic       sd_cmd_o,
  output logic       sd_cmd_oe_o,
  input  logic       sd_cmd_i,
  output logic [3:0] sd_dat_o,
  output logic [3:0] sd_dat_oe_o,
  input  logic [3:0] sd_dat_i,
  input  logic       sd_cd_i,     // card present
  input  logic       sd_wp_i,     // write protect switch
  output logic       sd_led_o,
  output logic       sd_pwr_o
);

  reg_req_t     reg_req;
  reg_rsp_t     reg_rsp;
  logic         cmd_start, cmd_srst, cmd_busy, cmd_done;
  sd_cmd_t      cmd;
  cmd_err_t     cmd_err;
  logic [127:0] cmd_resp;
  logic         dat_start, dat_srst;
  xfer_cfg_t    xfer_cfg;
  logic         host_wr, host_rd, host_rvalid, host_rd_avail;
  logic [31:0]  host_wdata, host_rdata;
  logic         dat_busy, dat_active, rd_active, wr_active, buf_rd_en, buf_wr_en;
  logic         block_done, xfer_done, err_tmo, err_crc, err_end, acmd12_req;
  logic         gap_stop, gap_event;
  logic         clk_en, clk_stop, sd_rise, sd_fall;
  logic [7:0]   clk_div;
  logic         cmd_fail;

  assign cmd_fail = cmd_err.timeout || cmd_err.crc || cmd_err.end_bit || cmd_err.index;

  sdhc_axi i_axi (
    .clk_i, .rst_ni,
    .axi_req_i, .axi_rsp_o,
    .reg_req_o (reg_req),
    .reg_rsp_i (reg_rsp)
  );

  sdhc_regs #(.SYS_CLK_MHZ(SYS_CLK_MHZ)) i_regs (
    .clk_i, .rst_ni,
    .reg_req_i        (reg_req),
    .reg_rsp_o        (reg_rsp),
    .irq_o,
    .cmd_start_o      (cmd_start),
    .cmd_o            (cmd),
    .cmd_srst_o       (cmd_srst),
    .cmd_busy_i       (cmd_busy),
    .cmd_done_i       (cmd_done),
    .cmd_err_i        (cmd_err),
    .cmd_resp_i       (cmd_resp),
    .dat_start_o      (dat_start),
    .xfer_cfg_o       (xfer_cfg),
    .dat_srst_o       (dat_srst),
    .host_wr_o        (host_wr),
    .host_wdata_o     (host_wdata),
    .host_rd_o        (host_rd),
    .host_rdata_i     (host_rdata),
    .host_rvalid_i    (host_rvalid),
    .host_rd_avail_i  (host_rd_avail),
    .dat_busy_i       (dat_busy),
    .dat_active_i     (dat_active),
    .rd_active_i      (rd_active),
    .wr_active_i      (wr_active),
    .buf_rd_en_i      (buf_rd_en),
    .buf_wr_en_i      (buf_wr_en),
    .block_done_i     (block_done),
    .xfer_done_i      (xfer_done),
    .dat_err_timeout_i(err_tmo),
    .dat_err_crc_i    (err_crc),
    .dat_err_end_i    (err_end),
    .acmd12_req_i     (acmd12_req),
    .gap_stop_o       (gap_stop),
    .gap_event_i      (gap_event),
    .clk_en_o         (clk_en),
    .clk_div_o        (clk_div),
    .card_present_i   (sd_cd_i),
    .write_prot_i     (sd_wp_i),
    .dat_level_i      (sd_dat_i),
    .cmd_level_i      (sd_cmd_i),
    .led_o            (sd_led_o),
    .bus_power_o      (sd_pwr_o)
  );

  sdhc_clk_div i_clk_div (
    .clk_i, .rst_ni,
    .en_i      (clk_en),
    .div_i     (clk_div),
    .stop_i    (clk_stop),
    .sd_clk_o,
    .rise_o    (sd_rise),
    .fall_o    (sd_fall)
  );

  sdhc_cmd i_cmd (
    .clk_i, .rst_ni,
    .srst_i   (cmd_srst),
    .rise_i   (sd_rise),
    .fall_i   (sd_fall),
    .start_i  (cmd_start),
    .cmd_i    (cmd),
    .cmd_in_i (sd_cmd_i),
    .cmd_o    (sd_cmd_o),
    .cmd_oe_o (sd_cmd_oe_o),
    .busy_o   (cmd_busy),
    .done_o   (cmd_done),
    .err_o    (cmd_err),
    .resp_o   (cmd_resp)
  );

  sdhc_data #(.BUF_WORDS(BUF_WORDS)) i_data (
    .clk_i, .rst_ni,
    .srst_i          (dat_srst),
    .rise_i          (sd_rise),
    .fall_i          (sd_fall),
    .clk_stop_o      (clk_stop),
    .start_i         (dat_start),
    .cfg_i           (xfer_cfg),
    .cmd_done_i      (cmd_done),
    .cmd_fail_i      (cmd_fail),
    .cmd_busy_i      (cmd.rsp_type == RSP_48_BUSY),
    .host_wr_i       (host_wr),
    .host_wdata_i    (host_wdata),
    .host_rd_i       (host_rd),
    .host_rdata_o    (host_rdata),
    .host_rvalid_o   (host_rvalid),
    .host_rd_avail_o (host_rd_avail),
    .busy_o          (dat_busy),
    .dat_active_o    (dat_active),
    .rd_active_o     (rd_active),
    .wr_active_o     (wr_active),
    .buf_rd_en_o     (buf_rd_en),
    .buf_wr_en_o     (buf_wr_en),
    .block_done_o    (block_done),
    .xfer_done_o     (xfer_done),
    .err_timeout_o   (err_tmo),
    .err_crc_o       (err_crc),
    .err_end_o       (err_end),
    .acmd12_req_o    (acmd12_req),
    .gap_stop_i      (gap_stop),
    .gap_event_o     (gap_event),
    .dat_i           (sd_dat_i),
    .dat_o           (sd_dat_o),
    .dat_oe_o        (sd_dat_oe_o)
  );

endmodule
