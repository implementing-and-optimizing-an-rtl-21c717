// tb_sdhc_top: end-to-end test of the SD host controller at its default parameters.
//
// A behavioural SD card sits on the SD bus; the test plays the driver through the AXI port:
// clock setup (25 MHz SD clock from the 50 MHz system clock), card bring-up (CMD0, CMD8, ACMD41,
// CMD2, CMD3, CMD7 with busy, ACMD6 to a 4-bit bus), a single-block write and read-back, a
// 16-block multi-block read and write with block count (the throughput workload: 16 blocks of
// 512 bytes), a slow reader that makes the controller stop the SD clock, a corrupted read block
// (data CRC error), a command without answer (command timeout), a bad CMD index response check,
// a 3-block write and read that the controller ends itself with Auto CMD12, and a 3-block read
// stopped at the block gap after its first block and then continued.
// Data is compared with the card's memory and register values with those the card model sends.
// The bus time of one 4-bit read block is checked against the SD framing: start bit, 1024 data
// nibbles, 16 CRC clocks and the end bit, 2083 system cycles from start bit to block-done strobe.
// Each mechanism is counted and must have happened at least once.
module tb_sdhc_top;
  import sdhc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = !clk;       // 50 MHz

  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  logic irq, sd_clk, host_cmd, host_cmd_oe, card_cmd, card_cmd_oe, cmd_line;
  logic [3:0] host_dat, host_dat_oe, card_dat, card_dat_oe, dat_line;
  logic led, pwr, corrupt = 1'b0;

  // open-drain style bus with pull-ups
  assign cmd_line = host_cmd_oe ? host_cmd : (card_cmd_oe ? card_cmd : 1'b1);
  for (genvar l = 0; l < 4; l++) begin : g_dat
    assign dat_line[l] = host_dat_oe[l] ? host_dat[l] : (card_dat_oe[l] ? card_dat[l] : 1'b1);
  end

  sdhc_top dut (
    .clk_i(clk), .rst_ni(rst_n), .axi_req_i(axi_req), .axi_rsp_o(axi_rsp), .irq_o(irq),
    .sd_clk_o(sd_clk), .sd_cmd_o(host_cmd), .sd_cmd_oe_o(host_cmd_oe), .sd_cmd_i(cmd_line),
    .sd_dat_o(host_dat), .sd_dat_oe_o(host_dat_oe), .sd_dat_i(dat_line),
    .sd_cd_i(1'b1), .sd_wp_i(1'b0), .sd_led_o(led), .sd_pwr_o(pwr)
  );

  sd_card_model #(.MEM_BLOCKS(16)) card (
    .sd_clk(sd_clk), .cmd_i(cmd_line), .cmd_o(card_cmd), .cmd_oe(card_cmd_oe),
    .dat_i(dat_line), .dat_o(card_dat), .dat_oe(card_dat_oe), .corrupt_i(corrupt)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- AXI manager ----------------
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic axi_write32(input logic [7:0] addr, input logic [31:0] data);
    @(negedge clk);
    axi_req.aw       = '{id: 8'h3, addr: 48'h0300_0000 | 48'(addr), len: 8'd0, size: 3'd2,
                         burst: 2'b01};
    axi_req.aw_valid = 1'b1;
    axi_req.w        = '{data: {data, data}, strb: addr[2] ? 8'hF0 : 8'h0F, last: 1'b1};
    axi_req.w_valid  = 1'b1;
    axi_req.b_ready  = 1'b1;
    do @(posedge clk); while (!axi_rsp.aw_ready);
    @(negedge clk) axi_req.aw_valid = 1'b0;
    while (!axi_rsp.w_ready) @(negedge clk);
    @(negedge clk) axi_req.w_valid = 1'b0;
    while (!axi_rsp.b_valid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axi_read32(input logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    axi_req.ar       = '{id: 8'h5, addr: 48'h0300_0000 | 48'(addr), len: 8'd0, size: 3'd2,
                         burst: 2'b01};
    axi_req.ar_valid = 1'b1;
    axi_req.r_ready  = 1'b1;
    do @(posedge clk); while (!axi_rsp.ar_ready);
    @(negedge clk) axi_req.ar_valid = 1'b0;
    while (!axi_rsp.r_valid) @(negedge clk);
    data = addr[2] ? axi_rsp.r.data[63:32] : axi_rsp.r.data[31:0];
    @(negedge clk);
  endtask

  // ---------------- driver helpers ----------------
  logic [31:0] rd;
  int n_cmd = 0, n_busy = 0, n_stop_cycles = 0, n_crc_err = 0, n_cmd_tmo = 0, n_idx_err = 0;
  int n_irq = 0, n_multi = 0, n_wide = 0, n_gap = 0;

  always @(posedge clk) if (dut.i_data.clk_stop_o && rst_n) n_stop_cycles++;
  always @(posedge clk) if (irq && rst_n) n_irq++;

  task automatic wait_status(input int bitpos, input int max_polls = 100000);
    int k = 0;
    do begin
      axi_read32(REG_INT_STATUS, rd);
      k++;
    end while (!rd[bitpos] && !rd[15] && k < max_polls);
  endtask

  // issue a command; returns normal|error interrupt status after it completed and clears it
  task automatic send_cmd(input int idx, input logic [31:0] arg, input logic [1:0] rsp,
                          input bit crc_chk, input bit idx_chk, input bit data,
                          input logic [15:0] xfer_mode, output logic [31:0] sts);
    do axi_read32(REG_PRESENT, rd); while (rd[0]);
    axi_write32(REG_ARG, arg);
    axi_write32(REG_XFER_CMD, {2'b0, 6'(idx), 2'b00, data, idx_chk, crc_chk, 1'b0, rsp, xfer_mode});
    wait_status(INT_CMD_COMPLETE);
    sts = rd;
    axi_write32(REG_INT_STATUS, rd & 32'hFFFF_0001);
    n_cmd++;
  endtask

  task automatic cmd_ok(input int idx, input logic [31:0] arg, input logic [1:0] rsp,
                        input bit chk, input string what);
    logic [31:0] s;
    send_cmd(idx, arg, rsp, chk, chk, 1'b0, 16'h0, s);
    check(s[0] && s[31:16] == 0, $sformatf("%s (status %08x)", what, s));
    if (rsp == 2'b11) begin
      wait_status(INT_XFER_COMPLETE);
      check(rd[1], {what, " busy end"});
      axi_write32(REG_INT_STATUS, 32'h2);
      n_busy++;
    end
  endtask

  logic [7:0] expect_mem [16*512];

  // With auto12 set, multi-block transfers ask the controller to send CMD12 itself.
  bit auto12 = 1'b0;
  int n_auto12 = 0;
  int cmds0;
  logic [31:0] resp0_data_cmd;

  // after a transfer with Auto CMD12: exactly one more command reached the card, its R1 is in
  // RESP3, RESP0 still holds the data command's response, no command-complete was raised
  task automatic check_auto12(input logic [31:0] xfer_sts, input string what);
    check(card.cmds_seen == cmds0 + 1, {what, ": card received the automatic CMD12"});
    check(!xfer_sts[0], {what, ": no command-complete for the automatic CMD12"});
    axi_read32(REG_RESP3, rd);
    check(rd == 32'h0000_0B00, {what, ": CMD12 card status in RESP3"});
    axi_read32(REG_RESP0, rd);
    check(rd == resp0_data_cmd, {what, ": RESP0 keeps the data command's response"});
    axi_read32(REG_ACMD12_ERR, rd);
    check(rd == 32'h0, {what, ": Auto CMD12 error status clear"});
    n_auto12++;
  endtask

  task automatic write_blocks(input int start_blk, input int nblk, input int seed);
    logic [31:0] s;
    logic [31:0] s_done;
    int t0, t1;
    axi_write32(REG_BLK, {16'(nblk), 16'd512});
    send_cmd(nblk > 1 ? 25 : 24, 32'(start_blk), 2'b10, 1'b1, 1'b1, 1'b1,
             nblk > 1 ? (auto12 ? 16'h0026 : 16'h0022) : 16'h0000, s);
    check(s[0] && s[31:16] == 0, "write command");
    cmds0 = card.cmds_seen;
    axi_read32(REG_RESP0, resp0_data_cmd);
    t0 = cyc;
    for (int b = 0; b < nblk; b++) begin
      wait_status(INT_BUF_WR_READY);
      axi_write32(REG_INT_STATUS, 32'h10);
      for (int w = 0; w < 128; w++) begin
        logic [31:0] v;
        v = 32'($urandom(seed * 1000 + b * 128 + w));
        for (int k = 0; k < 4; k++) expect_mem[((start_blk + b) % 16) * 512 + w * 4 + k] = v[8*k +: 8];
        axi_write32(REG_BUF_DATA, v);
      end
    end
    wait_status(INT_XFER_COMPLETE);
    s_done = rd;
    t1 = cyc;
    check(rd[1] && rd[31:16] == 0, "write transfer complete");
    axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);
    if (nblk > 1 && auto12) begin
      check_auto12(s_done, "write");
    end else if (nblk > 1) begin
      cmd_ok(12, 0, 2'b11, 1'b1, "CMD12 after write");
      n_multi++;
      $display("write %0d blocks: %0d cycles, %0d kB/s at 50 MHz", nblk, t1 - t0,
               (nblk * 512 * 50_000) / (t1 - t0));
      check((nblk * 512 * 50_000) / (t1 - t0) > 11_000, "multi-block write throughput");
    end
    for (int b = 0; b < nblk; b++)
      for (int i = 0; i < 512; i++)
        if (card.mem[((start_blk + b) % 16) * 512 + i] != expect_mem[((start_blk + b) % 16) * 512 + i]) begin
          check(0, $sformatf("card memory block %0d byte %0d", start_blk + b, i));
          return;
        end
    check(1, "card memory after write");
  endtask

  task automatic read_blocks(input int start_blk, input int nblk, input int slow);
    logic [31:0] s;
    logic [31:0] s_done;
    int t0, t1, bad;
    bad = 0;
    axi_write32(REG_BLK, {16'(nblk), 16'd512});
    send_cmd(nblk > 1 ? 18 : 17, 32'(start_blk), 2'b10, 1'b1, 1'b1, 1'b1,
             nblk > 1 ? (auto12 ? 16'h0036 : 16'h0032) : 16'h0010, s);
    check(s[0] && s[31:16] == 0, "read command");
    cmds0 = card.cmds_seen;
    axi_read32(REG_RESP0, resp0_data_cmd);
    t0 = cyc;
    for (int b = 0; b < nblk; b++) begin
      wait_status(INT_BUF_RD_READY);
      axi_write32(REG_INT_STATUS, 32'h20);
      for (int w = 0; w < 128; w++) begin
        logic [31:0] e;
        axi_read32(REG_BUF_DATA, rd);
        for (int k = 0; k < 4; k++) e[8*k +: 8] = card.mem[((start_blk + b) % 16) * 512 + w * 4 + k];
        if (rd != e) bad++;
        if (slow != 0) repeat (slow) @(posedge clk);
      end
    end
    wait_status(INT_XFER_COMPLETE);
    s_done = rd;
    t1 = cyc;
    check(rd[1] && rd[31:16] == 0, "read transfer complete");
    check(bad == 0, $sformatf("read data (%0d bad words)", bad));
    axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);
    if (nblk > 1 && auto12) begin
      check_auto12(s_done, "read");
    end else if (nblk > 1) begin
      cmd_ok(12, 0, 2'b11, 1'b1, "CMD12 after read");
      n_multi++;
      $display("read %0d blocks: %0d cycles, %0d kB/s at 50 MHz", nblk, t1 - t0,
               (nblk * 512 * 50_000) / (t1 - t0));
      if (slow == 0) check((nblk * 512 * 50_000) / (t1 - t0) > 11_000, "multi-block read throughput");
    end
  endtask

  // bus time of one 4-bit block: from sampling the start bit to the block-done pulse, which
  // comes one cycle after sampling the end bit: (1024 + 16 + 1) SD clocks * 2 + 1 = 2083 cycles
  int blk_t0 = 0, blk_len = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.i_data.state_q == dut.i_data.S_RD_START && dut.sd_rise && !dat_line[0]) blk_t0 <= cyc;
    if (dut.i_data.block_done_o && dut.i_data.cfg_q.read && blk_len == 0) blk_len <= cyc - blk_t0;
  end

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] s;
    axi_req = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    axi_read32(REG_VERSION, rd);
    check(rd[31:16] == 16'h0000, "version 1.0");
    axi_read32(REG_CAPS, rd);
    check(rd[13:8] == 6'd50 && rd[24], "capabilities");
    axi_read32(REG_PRESENT, rd);
    check(rd[16] && rd[18], "card inserted");

    axi_write32(REG_INT_STS_EN, 32'hFFFF_FFFF);
    axi_write32(REG_INT_SIG_EN, 32'h0000_0002);      // transfer complete raises the interrupt
    axi_read32(REG_INT_STATUS, rd);
    axi_write32(REG_INT_STATUS, rd);                 // clear card insertion
    axi_write32(REG_HOST_CTRL, 32'h0000_0F00);       // bus power 3.3 V
    check(pwr, "bus power pin");
    axi_write32(REG_CLK_CTRL, 32'h000E_0101);        // internal clock, divider 1 -> 25 MHz
    do axi_read32(REG_CLK_CTRL, rd); while (!rd[1]);
    axi_write32(REG_CLK_CTRL, 32'h000E_0105);        // SD clock on
    repeat (200) @(posedge clk);                     // >= 74 SD clocks of initialisation

    // ----- bring-up -----
    send_cmd(0, 0, 2'b00, 0, 0, 0, 0, s);
    check(s[0], "CMD0 complete");
    cmd_ok(8, 32'h1AA, 2'b10, 1'b1, "CMD8");
    axi_read32(REG_RESP0, rd);
    check(rd == 32'h1AA, "CMD8 echo");
    cmd_ok(55, 0, 2'b10, 1'b1, "CMD55");
    cmd_ok(41, 32'h40FF_8000, 2'b10, 1'b0, "ACMD41");
    axi_read32(REG_RESP0, rd);
    check(rd == 32'hC0FF_8000, "OCR");
    cmd_ok(2, 0, 2'b01, 1'b0, "CMD2");
    begin
      logic [127:0] r;
      axi_read32(REG_RESP0, r[31:0]);
      axi_read32(REG_RESP1, r[63:32]);
      axi_read32(REG_RESP2, r[95:64]);
      axi_read32(REG_RESP3, r[127:96]);
      check(r == {8'h00, card.cid[127:8]}, "CID in response registers");
    end
    send_cmd(2, 0, 2'b01, 1'b1, 1'b0, 1'b0, 16'h0, s);
    check(s[0] && s[31:16] == 0, "R2 with CRC check");
    cmd_ok(3, 0, 2'b10, 1'b1, "CMD3");
    axi_read32(REG_RESP0, rd);
    check(rd[31:16] == 16'h1234, "RCA");
    cmd_ok(7, 32'h1234_0000, 2'b11, 1'b1, "CMD7 (busy)");
    check(n_irq > 0, "interrupt line on transfer complete");
    cmd_ok(55, 32'h1234_0000, 2'b10, 1'b1, "CMD55");
    cmd_ok(6, 32'h2, 2'b10, 1'b1, "ACMD6");
    check(card.wide, "card in 4-bit mode");
    axi_write32(REG_HOST_CTRL, 32'h0000_0F02);       // 4-bit data
    n_wide++;
    cmd_ok(16, 512, 2'b10, 1'b1, "CMD16");

    // ----- single block write and read -----
    write_blocks(2, 1, 1);
    read_blocks(2, 1, 0);
    check(blk_len == 2083, $sformatf("4-bit block bus time %0d cycles", blk_len));

    // ----- the 16-block workload -----
    write_blocks(0, 16, 2);
    read_blocks(0, 16, 0);
    check(card.bad_dat_crc == 0, "card saw good write CRCs");

    // ----- slow reader: the controller must stop the SD clock -----
    begin
      int stop0;
      stop0 = n_stop_cycles;
      read_blocks(4, 4, 40);
      check(n_stop_cycles > stop0, "SD clock stopped while buffer full");
    end

    // ----- Auto CMD12: the controller stops multi-block transfers itself -----
    auto12 = 1'b1;
    write_blocks(5, 3, 3);
    read_blocks(5, 3, 0);
    auto12 = 1'b0;

    // ----- stop at block gap: 3-block read held after its first block, then continued -----
    begin
      int bad, stop0;
      bad = 0;
      axi_write32(REG_BLK, {16'd3, 16'd512});
      axi_write32(REG_HOST_CTRL, 32'h0001_0F02);     // stop at block gap request
      send_cmd(18, 8, 2'b10, 1'b1, 1'b1, 1'b1, 16'h0036, s);
      check(s[0] && s[31:16] == 0, "read command before block gap");
      wait_status(INT_BLOCK_GAP);
      check(rd[INT_BLOCK_GAP] && rd[INT_BUF_RD_READY], "block gap event after the first block");
      axi_write32(REG_INT_STATUS, 32'h24);
      stop0 = n_stop_cycles;
      repeat (400) @(posedge clk);
      check(n_stop_cycles - stop0 >= 399, $sformatf("SD clock held at the gap (%0d of 400 cycles)", n_stop_cycles - stop0));
      for (int b = 0; b < 3; b++) begin
        if (b > 0) begin
          wait_status(INT_BUF_RD_READY);
          axi_write32(REG_INT_STATUS, 32'h20);
        end
        for (int w = 0; w < 128; w++) begin
          logic [31:0] e;
          axi_read32(REG_BUF_DATA, rd);
          for (int k = 0; k < 4; k++) e[8*k +: 8] = card.mem[(8 + b) * 512 + w * 4 + k];
          if (rd != e) bad++;
        end
        if (b == 0) begin
          stop0 = n_stop_cycles;
          repeat (200) @(posedge clk);
          check(n_stop_cycles - stop0 >= 199, "still held with the buffer empty");
          axi_write32(REG_HOST_CTRL, 32'h0002_0F02); // continue request
        end
      end
      wait_status(INT_XFER_COMPLETE);
      check(rd[1] && rd[31:16] == 0, "transfer complete after the block gap");
      check(bad == 0, $sformatf("data across the block gap (%0d bad words)", bad));
      axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);
      n_gap++;
    end

    // ----- data CRC error -----
    corrupt = 1'b1;
    axi_write32(REG_BLK, {16'd1, 16'd512});
    send_cmd(17, 3, 2'b10, 1'b1, 1'b1, 1'b1, 16'h0010, s);
    corrupt = 1'b0;
    wait_status(INT_XFER_COMPLETE);
    check(rd[16 + ERR_DATA_CRC] && rd[15], "data CRC error reported");
    if (rd[16 + ERR_DATA_CRC]) n_crc_err++;
    axi_write32(REG_CLK_CTRL, 32'h040E_0105);        // reset DAT
    axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);
    axi_read32(REG_PRESENT, rd);
    check(!rd[1] && !rd[11], "DAT reset clears inhibit and buffer");

    // ----- command timeout: CMD0 never answers -----
    send_cmd(0, 0, 2'b10, 1'b1, 1'b1, 1'b0, 16'h0, s);
    check(s[16 + ERR_CMD_TIMEOUT] && !s[0], "command timeout");
    if (s[16 + ERR_CMD_TIMEOUT]) n_cmd_tmo++;
    axi_write32(REG_CLK_CTRL, 32'h020E_0105);        // reset CMD
    axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);

    // ----- index check: ACMD41's R3 carries index 0x3F -----
    cmd_ok(55, 32'h1234_0000, 2'b10, 1'b1, "CMD55");
    send_cmd(41, 0, 2'b10, 1'b0, 1'b1, 1'b0, 16'h0, s);
    check(s[16 + ERR_CMD_INDEX], "command index error");
    if (s[16 + ERR_CMD_INDEX]) n_idx_err++;
    axi_write32(REG_INT_STATUS, 32'hFFFF_FFFF);

    check(card.bad_cmd_crc == 0, "card saw good command CRCs");
    check(n_busy > 0, "mechanism: R1b busy wait");
    check(n_multi > 0, "mechanism: multi-block transfer");
    check(n_wide > 0, "mechanism: 4-bit bus");
    check(n_auto12 >= 2, "mechanism: Auto CMD12 after write and read");
    check(n_gap > 0, "mechanism: stop at block gap");
    $display("commands %0d, busy waits %0d, multi-block %0d, clock-stop cycles %0d, data CRC errors %0d, cmd timeouts %0d, index errors %0d, irq cycles %0d, auto CMD12 %0d, block gaps %0d",
             n_cmd, n_busy, n_multi, n_stop_cycles, n_crc_err, n_cmd_tmo, n_idx_err, n_irq, n_auto12, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
